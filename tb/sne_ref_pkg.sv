// sne_ref_pkg: reference model of SNE's LIF layer used by the SNE testbenches.
//
// lif_ref models the neurons of one output channel over a rectangular region
// (origin xb, yb, size rw x rh) directly as a 2-D map, without clusters or
// time multiplexing. A spike (x, y, c) updates the neurons (x+1-kx, y+1-ky)
// for kx, ky in 0..2 inside the region with weight w[c*9 + 3*ky + kx]; the
// update applies the decay LUT for the elapsed time, adds the weight with
// 8-bit saturation and fires (and clears) at v >= thr. Fired spikes are
// appended to a queue of 32-bit event words.
package sne_ref_pkg;
  import sne_pkg::*;

  class lif_ref;
    int xb, yb, rw, rh, oc;
    int thr;
    int lut [16];
    int wt [2304];
    int v [int];
    int t [int];
    int now;
    int updates;

    function new(int xb_, int yb_, int rw_, int rh_, int oc_);
      xb = xb_; yb = yb_; rw = rw_; rh = rh_; oc = oc_;
      now = 0; updates = 0;
    endfunction

    function void clear();
      v.delete(); t.delete();
    endfunction

    function void time_ev(int ts);
      now = ts;
    endfunction

    function void spike(int x, int y, int c, ref logic [31:0] q [$]);
      for (int k = 0; k < 9; k++) begin
        int xo, yo, key, vv, dt, w;
        xo = x + 1 - (k % 3);
        yo = y + 1 - (k / 3);
        if (xo < xb || xo >= xb + rw || yo < yb || yo >= yb + rh) continue;
        key = yo * 1024 + xo;
        vv = v.exists(key) ? v[key] : 0;
        dt = (now - (t.exists(key) ? t[key] : 0)) & 16'hFFFF;
        if (dt > 16) vv = 0;
        else if (dt > 0) vv = (vv * lut[dt - 1]) >>> 8;
        w = wt[c * 9 + k];
        if (w > 7) w -= 16;
        vv += w;
        if (vv > 127) vv = 127;
        if (vv < -128) vv = -128;
        updates++;
        t[key] = now & 16'hFFFF;
        if (vv >= thr) begin
          q.push_back(mk_spike(8'(xo), 8'(yo), 8'(oc)));
          vv = 0;
        end
        v[key] = vv;
      end
    endfunction
  endclass
endpackage
