// tb_sigdla_compute_array: eight PEs with a shared activation and eight different weight
// words; every PE's result is compared with the reference dot product, back to back
// (one operation per cycle) so that the pipeline is exercised at full rate.
module tb_sigdla_compute_array;
  import sigdla_pkg::*;
  import sigdla_tb_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, out_valid;
  logic [63:0] act, wgt [N_PE];
  logic [1:0] dbw, wbw;
  logic signed [PSUM_W-1:0] psum [N_PE];
  longint exp_q [$];
  int checks = 0, failures = 0, seen = 0;

  sigdla_compute_array dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .act(act), .wgt(wgt),
                            .data_bw(dbw), .weight_bw(wbw), .out_valid(out_valid), .psum(psum));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) if (rst_n && out_valid) begin
    seen++;
    for (int k = 0; k < N_PE; k++) begin
      longint e;
      e = exp_q.pop_front();
      checks++;
      if (longint'(psum[k]) != e) begin failures++; $display("FAIL pe=%0d got=%0d exp=%0d", k, psum[k], e); end
    end
  end

  initial begin
    act = 0; dbw = 0; wbw = 0;
    for (int k = 0; k < N_PE; k++) wgt[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int d = 0; d < 3; d++)
      for (int w = 0; w < 3; w++)
        for (int t = 0; t < 20; t++) begin
          @(negedge clk);
          in_valid = 1; dbw = 2'(d); wbw = 2'(w);
          act = {$urandom, $urandom};
          for (int k = 0; k < N_PE; k++) begin
            wgt[k] = {$urandom, $urandom};
            exp_q.push_back(ref_dot(act, wgt[k], 2'(d), 2'(w)));
          end
        end
    @(negedge clk) in_valid = 0;
    repeat (3) @(negedge clk);
    checks++;
    if (seen != 180) begin failures++; $display("FAIL results %0d", seen); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
