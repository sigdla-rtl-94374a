// tb_sigdla_mul4: exhaustive check of the 4-bit multiplier cell.
// Every nibble pair under all four sign settings is compared with an integer product
// computed here from the sign-extended (or zero-extended) nibbles.
module tb_sigdla_mul4;
  import sigdla_pkg::*;
  logic [3:0] a, w;
  logic as, ws;
  logic signed [PROD_W-1:0] p;
  int checks = 0, failures = 0;

  sigdla_mul4 dut (.a(a), .w(w), .a_signed(as), .w_signed(ws), .p(p));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < 4; s++)
      for (int i = 0; i < 16; i++)
        for (int j = 0; j < 16; j++) begin
          int ea, ew;
          a = 4'(i); w = 4'(j); as = s[0]; ws = s[1];
          ea = (as && i >= 8) ? i - 16 : i;
          ew = (ws && j >= 8) ? j - 16 : j;
          #1;
          checks++;
          if (int'(p) != ea * ew) begin
            failures++;
            $display("FAIL a=%0d w=%0d as=%0d ws=%0d p=%0d exp=%0d", i, j, as, ws, p, ea * ew);
          end
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
