// hats_ref_pkg: bit-exact software reference of the CWTS classifier for the
// testbenches. It keeps, per cell of the frame, the ring of stored events,
// the partial sums and the event counts, and applies to each event the same
// arithmetic the hardware specifies: linear kernel 2^F - ((dt*RECIP) >> 32),
// products truncated by F bits, every sum wrapped to TOTAL_W bits.
package hats_ref_pkg;
  import hats_pkg::*;

  typedef struct {
    int unsigned lx, ly, pol;
    longint unsigned t;   // low TSM_W bits of the timestamp
  } ref_entry_t;

  class hats_ref;
    int unsigned     m, n, k, rho, depth, classes, total_w, frac;
    longint unsigned delta_t, tau, recip;
    int unsigned     cells_y, cells;
    ref_entry_t      mem   [][$];   // per global cell, oldest first
    longint          psum  [][];
    int unsigned     count [];
    longint          weight[][][][]; // [cell][pol][class][bin]
    int unsigned     overflows, expired, decayed;

    function new(int unsigned m, int unsigned n, int unsigned k, int unsigned rho,
                 int unsigned depth, int unsigned classes, int unsigned total_w,
                 longint unsigned delta_t, longint unsigned tau);
      this.m = m; this.n = n; this.k = k; this.rho = rho; this.depth = depth;
      this.classes = classes; this.total_w = total_w; this.frac = total_w - INT_W;
      this.delta_t = delta_t; this.tau = tau;
      this.recip = tau_recip(tau, frac);
      cells_y = n / k;
      cells   = (m / k) * cells_y;
      mem   = new[cells];
      psum  = new[cells];
      count = new[cells];
      weight = new[cells];
      foreach (psum[c]) begin
        psum[c] = new[classes];
        weight[c] = new[2];
        foreach (weight[c][p]) begin
          weight[c][p] = new[classes];
          foreach (weight[c][p][q]) weight[c][p][q] = new[(2*rho+1)*(2*rho+1)];
        end
      end
      treset();
      overflows = 0; expired = 0; decayed = 0;
    endfunction

    // wrap a value to total_w bits, signed
    function longint wrap(longint v);
      longint mask = (longint'(1) << total_w) - 1;
      longint u = v & mask;
      if (u >= (longint'(1) << (total_w - 1))) u -= (longint'(1) << total_w);
      return u;
    endfunction

    function void treset();
      foreach (mem[c]) mem[c].delete();
      foreach (psum[c]) begin
        count[c] = 0;
        foreach (psum[c][q]) psum[c][q] = 0;
      end
    endfunction

    function int cell_of(int unsigned x, int unsigned y);
      if (x >= (m / k) * k || y >= cells_y * k) return -1;
      return (x / k) * cells_y + (y / k);
    endfunction

    function longint kernel(longint unsigned dt);
      longint unsigned corr;
      if (dt >= tau) return 0;
      corr = (dt * recip) >> 32;
      return wrap((longint'(1) << frac) - longint'(corr));
    endfunction

    function void event_in(int unsigned x, int unsigned y, int unsigned pol,
                           longint unsigned t);
      int c;
      longint ts [];
      int unsigned w = 2*rho + 1;
      int unsigned lx, ly;
      longint unsigned tm, dt;
      ref_entry_t e;
      c = cell_of(x, y);
      if (c < 0) return;
      lx = x % k; ly = y % k;
      tm = t & ((64'd1 << TSM_W) - 1);
      ts = new[w*w];
      foreach (ts[b]) ts[b] = 0;
      foreach (mem[c][i]) begin
        int dx, dy;
        e  = mem[c][i];
        dx = int'(e.lx) - int'(lx);
        dy = int'(e.ly) - int'(ly);
        if (e.pol != pol || dx > int'(rho) || dx < -int'(rho) ||
            dy > int'(rho) || dy < -int'(rho)) continue;
        dt = (tm - e.t) & ((64'd1 << TSM_W) - 1);
        if (dt > delta_t) begin expired++; continue; end
        if (kernel(dt) != (longint'(1) << frac)) decayed++;
        ts[(dy + rho) * w + (dx + rho)] = wrap(ts[(dy + rho) * w + (dx + rho)] + kernel(dt));
      end
      for (int q = 0; q < classes; q++) begin
        longint s = 0;
        foreach (ts[b]) s = wrap(s + wrap((ts[b] * weight[c][pol][q][b]) >>> frac));
        psum[c][q] = wrap(psum[c][q] + s);
      end
      count[c]++;
      e.lx = lx; e.ly = ly; e.pol = pol; e.t = tm;
      if (mem[c].size() == depth) begin
        void'(mem[c].pop_front());
        overflows++;
      end
      mem[c].push_back(e);
    endfunction
  endclass
endpackage
