// tb_sigdla_input_map: random selects and words; every multiplier must receive the
// activation and weight nibble its select names.
module tb_sigdla_input_map;
  import sigdla_pkg::*;
  logic [63:0] act, wgt;
  mul_map_t map [N_MUL];
  logic [3:0] a_nib [N_MUL], w_nib [N_MUL];
  int checks = 0, failures = 0;

  sigdla_input_map dut (.act(act), .wgt(wgt), .map(map), .a_nib(a_nib), .w_nib(w_nib));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      act = {$urandom, $urandom}; wgt = {$urandom, $urandom};
      for (int m = 0; m < N_MUL; m++) map[m] = mul_map_t'($urandom);
      #1;
      for (int m = 0; m < N_MUL; m++) begin
        checks++;
        if (a_nib[m] != 4'((act >> (4 * int'(map[m].a_idx))) & 64'hf) ||
            w_nib[m] != 4'((wgt >> (4 * int'(map[m].w_idx))) & 64'hf)) begin
          failures++;
          $display("FAIL m=%0d", m);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
