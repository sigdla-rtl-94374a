// tb_sigdla_shifter: random signed products and shift codes; each output must be the
// product times 16^code, computed here.
module tb_sigdla_shifter;
  import sigdla_pkg::*;
  logic signed [PROD_W-1:0] prod [N_MUL];
  logic [2:0] shamt [N_MUL];
  logic signed [PSUM_W-1:0] sh [N_MUL];
  int checks = 0, failures = 0;

  sigdla_shifter dut (.prod(prod), .shamt(shamt), .shifted(sh));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 200; t++) begin
      for (int m = 0; m < N_MUL; m++) begin
        prod[m]  = PROD_W'($urandom_range(0, 1023));
        shamt[m] = 3'($urandom_range(0, 6));
      end
      #1;
      for (int m = 0; m < N_MUL; m++) begin
        longint e;
        e = longint'(prod[m]) * (longint'(1) << (4 * shamt[m]));
        checks++;
        if (longint'(sh[m]) != e) begin
          failures++;
          $display("FAIL m=%0d prod=%0d sh=%0d got=%0d exp=%0d", m, prod[m], shamt[m], sh[m], e);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
