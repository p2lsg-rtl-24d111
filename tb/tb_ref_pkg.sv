// tb_ref_pkg -- reference arithmetic for the P2LSG testbenches.
//
// vdc_ref() computes the base-2^log2b Van der Corput value of an index
// arithmetically, not by wiring: the index is split into G = ceil(w/log2b)
// base-B digits d_k, the radical inverse sum_k d_k B^-(k+1) is formed as
// the integer num = sum_k d_k B^(G-1-k) over B^G, and it is scaled to w
// bits with a floor: (num * 2^w) / B^G. The SC models below use it to
// predict the exact ones counts of the engines.
package tb_ref_pkg;

  function automatic longint unsigned vdc_ref(longint unsigned idx, int w, int log2b);
    longint unsigned b, num, bg;
    int g;
    b   = 64'd1 << log2b;
    g   = (w + log2b - 1) / log2b;
    num = 0;
    bg  = 1;
    for (int k = 0; k < g; k++) begin
      num = num * b + (idx % b);
      idx = idx / b;
      bg  = bg * b;
    end
    return (num * (64'd1 << w)) / bg;
  endfunction

  // ones count of the SC bilinear interpolator over one full period
  function automatic int bilinear_count(int p11, int p12, int p21, int p22,
                                        int u, int v, int w, int ld, int lu, int lv);
    int pix [4];
    int cnt;
    pix = '{p11, p12, p21, p22};
    cnt = 0;
    for (longint unsigned c = 0; c < (64'd1 << w); c++) begin
      int su, sv;
      su = (u > vdc_ref(c, w, lu)) ? 1 : 0;
      sv = (v > vdc_ref(c, w, lv)) ? 1 : 0;
      if (pix[su*2 + sv] > vdc_ref(c, w, ld)) cnt++;
    end
    return cnt;
  endfunction

  // ones count of the SC scene merger over one full period
  function automatic int merge_count(int bg, int fg, int alpha, int w, int ld, int ls);
    int cnt;
    cnt = 0;
    for (longint unsigned c = 0; c < (64'd1 << w); c++) begin
      int x;
      x = (alpha > vdc_ref(c, w, ls)) ? fg : bg;
      if (x > vdc_ref(c, w, ld)) cnt++;
    end
    return cnt;
  endfunction

endpackage
