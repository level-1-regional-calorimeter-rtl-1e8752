// rct_tb_pkg: reference models shared by the card and crate testbenches.
// They restate the trigger rules independently of the RTL: tower lookup with
// the default (linear) tables, region sum with tau and MIP bits, and the
// electron finder on a 6x6 window.
package rct_tb_pkg;
  import rct_pkg::*;

  function automatic eg_tower_t m_eg(int e, int h, bit fg, int he_shift);
    eg_tower_t t;
    t.et   = (e > 127) ? 7'd127 : 7'(e);
    t.veto = fg || ((h << he_shift) > e);
    return t;
  endfunction

  // region of 16 towers, default tables
  function automatic region_t m_region(int e [16], int h [16], bit hq [16], int tau_thr);
    region_t r; int s, ne, nh; bit m;
    s = 0; ne = 0; nh = 0; m = 0;
    for (int k = 0; k < 16; k++) begin
      s += e[k] + h[k];
      if (e[k] > tau_thr) ne++;
      if (h[k] > tau_thr) nh++;
      m |= hq[k];
    end
    r.ovf = (s > 1023);
    r.et  = (s > 1023) ? 10'd1023 : 10'(s);
    r.tau = (ne > 2) || (nh > 2);
    r.mip = m;
    return r;
  endfunction

  // best isolated / non-isolated of a 6x6 window; returns ET only
  function automatic void m_eiso(eg_tower_t w [6][6], int iso_thr, output int bi, output int bn);
    bi = 0; bn = 0;
    for (int i = 1; i < 5; i++)
      for (int j = 1; j < 5; j++) begin
        int nn, e, ring; bit nv;
        nn = w[i-1][j].et;
        if (w[i+1][j].et > nn) nn = w[i+1][j].et;
        if (w[i][j-1].et > nn) nn = w[i][j-1].et;
        if (w[i][j+1].et > nn) nn = w[i][j+1].et;
        e = w[i][j].et + nn; if (e > 127) e = 127;
        ring = 0; nv = 0;
        for (int a = i-1; a <= i+1; a++)
          for (int b = j-1; b <= j+1; b++)
            if (a != i || b != j) begin ring += w[a][b].et; nv |= w[a][b].veto; end
        ring -= nn;
        if (w[i][j].et > 0 && !w[i][j].veto) begin
          if (!nv && ring <= iso_thr) begin if (e > bi) bi = e; end
          else if (e > bn) bn = e;
        end
      end
  endfunction
endpackage
