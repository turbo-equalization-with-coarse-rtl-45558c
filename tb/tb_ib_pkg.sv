// tb_ib_pkg: test content and reference models shared by the testbenches.
//
// tbl_val() defines the test tables: a hashed, pseudo-random but fully
// deterministic entry for every (table, run, address). Such tables carry no
// information-theoretic meaning; they make every wrong address, wrong
// operand order or wrong timing visible as a wrong output.
//
// ref_window() is a sequential reference (full or symmetric half tables) of one equalizer window: a plain
// forward loop, a plain backward loop and the final lookups, written without
// any of the pipelining of the hardware.
package tb_ib_pkg;

  import ib_eq_pkg::*;

  function automatic int unsigned tbl_val(input int unsigned sel,
                                          input int unsigned run,
                                          input int unsigned addr,
                                          input int unsigned out_w);
    int unsigned h;
    h = addr * 32'h9E3779B1;
    h = h ^ (sel * 32'h85EBCA77) ^ (run * 32'hC2B2AE3D) ^ 32'h27D4EB2F;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    h = h * 32'h297A2D39;
    h = h ^ (h >> 15);
    return h & ((32'd1 << out_w) - 1);
  endfunction

  // Forward/backward/final lookups with the table address convention of
  // the hardware: {first input, second input}.
  function automatic int unsigned lk(input int unsigned sel, input int unsigned run,
                                     input int unsigned hi, input int unsigned lo,
                                     input int unsigned lo_w, input int unsigned out_w);
    return tbl_val(sel, run, (hi << lo_w) | lo, out_w);
  endfunction

  // Same lookup on a symmetric half table whose cell a holds
  // tbl_val(sel, run, a): y[0]=0 reads cell y>>1, y[0]=1 reads the inverted
  // cell ~(y>>1) and inverts the result.
  function automatic int unsigned lk_sym(input int unsigned sel, input int unsigned run,
                                         input int unsigned hi, input int unsigned lo,
                                         input int unsigned lo_w, input int unsigned out_w,
                                         input int unsigned in_w);
    int unsigned y, half_mask, out_mask;
    y         = (hi << lo_w) | lo;
    half_mask = (32'd1 << (in_w - 1)) - 1;
    out_mask  = (32'd1 << out_w) - 1;
    if ((y & 1) == 0) return tbl_val(sel, run, y >> 1, out_w);
    return (~tbl_val(sel, run, (~(y >> 1)) & half_mask, out_w)) & out_mask;
  endfunction

  function automatic int unsigned lk2(input bit sym, input int unsigned sel, input int unsigned run,
                                      input int unsigned hi, input int unsigned hi_w,
                                      input int unsigned lo, input int unsigned lo_w,
                                      input int unsigned out_w);
    if (sym) return lk_sym(sel, run, hi, lo, lo_w, out_w, hi_w + lo_w);
    return lk(sel, run, hi, lo, lo_w, out_w);
  endfunction

  // One window: tr/td have nb+2*no entries, te gets nb entries.
  function automatic void ref_window(
      input  int unsigned run, wa, wr, wd, we, nb, no, alpha0, beta0,
      input  int unsigned tr[], td[],
      output int unsigned te[],
      input  bit sym = 1'b0);
    int nw, nu, p, q;
    int unsigned a, b, zb;
    int unsigned z[], bo[];
    nw = nb + 2*no;
    nu = no + nb;
    z  = new[nu];
    bo = new[nu];
    te = new[nb];
    a = alpha0;
    for (int f = 0; f < nu; f++) begin
      z[f] = lk2(sym, TBL_F1, run, a, wa, tr[f], wr, wa);
      a    = lk2(sym, TBL_F2, run, z[f], wa, td[f], wd, wa);
    end
    b = beta0;
    for (int u = 0; u < nu; u++) begin
      p     = nw - 1 - u;
      zb    = lk2(sym, TBL_B1, run, b, wa, td[p], wd, wa);
      b     = lk2(sym, TBL_B2, run, zb, wa, tr[p], wr, wa);
      bo[u] = b;
    end
    for (int i = 0; i < nb; i++) begin
      p     = no + i;
      q     = nw - 2 - p;
      te[i] = lk2(sym, TBL_E, run, z[p], wa, bo[q], wa, we);
    end
  endfunction

endpackage
