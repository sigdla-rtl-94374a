// tb_sigdla_accumulator: runs of random partial sums of random length (with idle gaps)
// are accumulated; after each run out_valid must pulse once, one cycle after the last
// partial sum, with the sums computed here.
module tb_sigdla_accumulator;
  import sigdla_pkg::*;
  logic clk = 0, rst_n = 0, in_valid = 0, first = 0, last = 0, out_valid;
  logic signed [PSUM_W-1:0] psum [N_PE];
  logic signed [ACC_W-1:0] acc [N_PE];
  int checks = 0, failures = 0;

  sigdla_accumulator dut (.clk(clk), .rst_n(rst_n), .in_valid(in_valid), .first(first), .last(last),
                          .psum(psum), .out_valid(out_valid), .acc(acc));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < N_PE; k++) psum[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 40; r++) begin
      longint e [N_PE];
      int n;
      n = $urandom_range(1, 12);
      for (int k = 0; k < N_PE; k++) e[k] = 0;
      for (int s = 0; s < n; s++) begin
        @(negedge clk);
        checks++;
        if (out_valid) begin failures++; $display("FAIL early valid"); end
        in_valid = ($urandom_range(0, 3) != 0);
        first = (s == 0); last = (s == n - 1);
        if (!in_valid) begin s--; first = 0; last = 0; continue; end
        for (int k = 0; k < N_PE; k++) begin
          longint v;
          v = longint'($urandom) - 64'sd2147483648;
          psum[k] = PSUM_W'(v);
          e[k] += v;
        end
      end
      @(negedge clk);
      in_valid = 0; first = 0; last = 0;
      checks++;
      if (!out_valid) begin failures++; $display("FAIL no valid run %0d", r); end
      for (int k = 0; k < N_PE; k++) begin
        checks++;
        if (longint'(acc[k]) != e[k]) begin failures++; $display("FAIL run=%0d k=%0d got=%0d exp=%0d", r, k, acc[k], e[k]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
