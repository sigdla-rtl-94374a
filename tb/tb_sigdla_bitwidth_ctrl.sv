// tb_sigdla_bitwidth_ctrl: checks the multiplier mapping for all nine width pairs.
// Known shifts (8x8: 0,4,4,8 as in the 8-bit decomposition; 16x16: 24 at most) are
// checked directly. Then, for random words, the dot product rebuilt from the mapping
// (nibbles picked, signed per flag, multiplied and shifted here) must equal a dot product
// of whole elements computed here.
module tb_sigdla_bitwidth_ctrl;
  import sigdla_pkg::*;
  logic [1:0] dbw, wbw;
  mul_map_t map [N_MUL];
  int checks = 0, failures = 0;

  sigdla_bitwidth_ctrl dut (.data_bw(dbw), .weight_bw(wbw), .map(map));

  function automatic longint elem(logic [63:0] x, int k, int nn);
    longint v;
    v = longint'((x >> (4 * nn * k)) & ((64'd1 << (4 * nn)) - 1));
    if (v >= (longint'(1) << (4 * nn - 1))) v -= (longint'(1) << (4 * nn));
    return v;
  endfunction

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s dbw=%0d wbw=%0d", what, dbw, wbw); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    dbw = 1; wbw = 1; #1;
    check(map[0].shamt == 0 && map[1].shamt == 1 && map[2].shamt == 1 && map[3].shamt == 2, "8x8 shifts");
    dbw = 2; wbw = 2; #1;
    begin
      int mx;
      mx = 0;
      for (int m = 0; m < N_MUL; m++) if (int'(map[m].shamt) > mx) mx = map[m].shamt;
      check(mx == 6, "16x16 max shift 24");
    end
    for (int d = 0; d < 3; d++)
      for (int w = 0; w < 3; w++)
        for (int t = 0; t < 50; t++) begin
          logic [63:0] A, W;
          longint got, exp;
          int na, nw, np;
          dbw = 2'(d); wbw = 2'(w);
          A = {$urandom, $urandom}; W = {$urandom, $urandom};
          #1;
          na = 1 << d; nw = 1 << w; np = 16 / (na * nw);
          exp = 0;
          for (int k = 0; k < np; k++) exp += elem(A, k, na) * elem(W, k, nw);
          got = 0;
          for (int m = 0; m < N_MUL; m++) begin
            longint an, wn;
            an = longint'(A[4*map[m].a_idx +: 4]);
            wn = longint'(W[4*map[m].w_idx +: 4]);
            if (map[m].a_sgn && an >= 8) an -= 16;
            if (map[m].w_sgn && wn >= 8) wn -= 16;
            got += (an * wn) <<< (4 * map[m].shamt);
          end
          check(got == exp, "rebuilt dot product");
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
