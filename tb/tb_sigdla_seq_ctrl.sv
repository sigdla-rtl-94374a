// tb_sigdla_seq_ctrl: one run of 5 steps. Checks the activation and weight addresses
// issued in each of the 5 cycles after run (act_base+s, wgt_base+8s), that arr_valid
// follows one cycle and acc_valid/first/last two cycles after each read, and that busy
// holds until acc_done.
module tb_sigdla_seq_ctrl;
  import sigdla_pkg::*;
  logic clk = 0, rst_n = 0, run = 0, acc_done = 0;
  logic [MEM_AW-1:0] act_base, wgt_base, act_addr, wgt_addr;
  logic [15:0] steps;
  logic busy, act_re, wgt_re, arr_valid, acc_valid, acc_first, acc_last;
  int checks = 0, failures = 0;

  sigdla_seq_ctrl dut (.clk(clk), .rst_n(rst_n), .run(run), .act_base(act_base), .wgt_base(wgt_base),
    .steps(steps), .acc_done(acc_done), .busy(busy), .act_re(act_re), .act_addr(act_addr), .wgt_re(wgt_re),
    .wgt_addr(wgt_addr), .arr_valid(arr_valid), .acc_valid(acc_valid), .acc_first(acc_first), .acc_last(acc_last));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  initial begin
    act_base = 15'd300; wgt_base = 15'd1000; steps = 16'd5;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      int n = (r == 0) ? 5 : 1;
      steps = 16'(n);
      @(negedge clk); run = 1;
      @(negedge clk); run = 0;
      for (int c = 0; c < n + 2; c++) begin
        chk(busy, "busy");
        chk(act_re == (c < n) && wgt_re == (c < n), $sformatf("read enable c=%0d", c));
        if (c < n) chk(act_addr == act_base + MEM_AW'(c) && wgt_addr == wgt_base + MEM_AW'(8 * c), $sformatf("addr c=%0d", c));
        chk(arr_valid == (c >= 1 && c <= n), $sformatf("arr_valid c=%0d", c));
        chk(acc_valid == (c >= 2 && c <= n + 1), $sformatf("acc_valid c=%0d", c));
        chk(acc_first == (c == 2), $sformatf("first c=%0d", c));
        chk(acc_last == (c == n + 1), $sformatf("last c=%0d", c));
        @(negedge clk);
      end
      repeat (3) begin chk(busy, "busy until acc_done"); @(negedge clk); end
      acc_done = 1;
      @(negedge clk); acc_done = 0;
      chk(!busy, "idle after acc_done");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
