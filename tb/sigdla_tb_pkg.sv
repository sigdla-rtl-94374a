// sigdla_tb_pkg: reference arithmetic shared by the SigDLA testbenches.
// ref_dot computes, from whole two's-complement elements, the dot product one PE must
// produce for one activation word and one weight word at the given bitwidth codes
// (0/1/2 = 4/8/16 bits): 16/(na*nw) element pairs from the low end of each word.
package sigdla_tb_pkg;
  function automatic longint ref_elem(logic [63:0] x, int k, int nn);
    longint v;
    v = longint'((x >> (4 * nn * k)) & ((64'd1 << (4 * nn)) - 1));
    if (v >= (longint'(1) << (4 * nn - 1))) v -= (longint'(1) << (4 * nn));
    return v;
  endfunction

  function automatic int ref_nibs(logic [1:0] bw);
    return (bw == 0) ? 1 : (bw == 1) ? 2 : 4;
  endfunction

  function automatic longint ref_dot(logic [63:0] a, logic [63:0] w, logic [1:0] dbw, logic [1:0] wbw);
    int na, nw, np;
    longint s = 0;
    na = ref_nibs(dbw); nw = ref_nibs(wbw); np = 16 / (na * nw);
    for (int k = 0; k < np; k++) s += ref_elem(a, k, na) * ref_elem(w, k, nw);
    return s;
  endfunction
endpackage
