// tb_sigdla_pe: checks one processing element in all nine data/weight width pairs.
// The worked 8-bit example 0x43 x 0xA9 (67 x -87 as two's complement) is checked first;
// then random words, each result compared with a dot product of whole elements computed
// in the testbench, and the one-cycle latency is checked on every result.
module tb_sigdla_pe;
  import sigdla_pkg::*;
  import sigdla_tb_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [63:0] act, wgt;
  logic [1:0] dbw, wbw;
  logic signed [PSUM_W-1:0] psum;
  int checks = 0, failures = 0;

  sigdla_pe dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .act(act), .wgt(wgt),
                 .data_bw(dbw), .weight_bw(wbw), .out_valid(out_valid), .psum(psum));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic apply(logic [63:0] a, logic [63:0] w, logic [1:0] d, logic [1:0] ww, longint exp);
    @(negedge clk);
    act = a; wgt = w; dbw = d; wbw = ww; in_valid = 1;
    @(negedge clk);
    in_valid = 0;
    checks++;
    if (!out_valid || longint'(psum) != exp) begin
      failures++;
      $display("FAIL d=%0d w=%0d a=%h w=%h got=%0d exp=%0d v=%0d", d, ww, a, w, psum, exp, out_valid);
    end
    @(negedge clk);
    checks++;
    if (out_valid) begin failures++; $display("FAIL valid held"); end
  endtask

  initial begin
    act = 0; wgt = 0; dbw = 0; wbw = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    apply(64'h43, 64'hA9, 2'd1, 2'd1, -5829);
    apply(64'h43, 64'h69, 2'd1, 2'd1, 67 * 105);
    apply(64'h7fff, 64'h8000, 2'd2, 2'd2, 32767 * -32768);
    for (int d = 0; d < 3; d++)
      for (int w = 0; w < 3; w++)
        for (int t = 0; t < 40; t++) begin
          logic [63:0] a, ww;
          a = {$urandom, $urandom}; ww = {$urandom, $urandom};
          apply(a, ww, 2'(d), 2'(w), ref_dot(a, ww, 2'(d), 2'(w)));
        end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
