// tb_sigdla_dpu: data padding unit. The worked example (ctrl-padding 0x10010 at 8-bit
// turns ...0a09 into ...0a10) is checked first, then random masks, values and words at
// all three widths against a padding model computed here, with the two-cycle latency.
module tb_sigdla_dpu;
  import sigdla_pkg::*;
  import sigdla_fig6_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, in_valid = 0, out_valid;
  logic [31:0] cfg = 0;
  logic [1:0] dbw = 1;
  logic [63:0] in_word = 0, out_word;
  int checks = 0, failures = 0;

  sigdla_dpu dut (.clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg(cfg), .data_bw(dbw), .in_valid(in_valid),
    .in_word(in_word), .out_valid(out_valid), .out_word(out_word));

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  function automatic logic [63:0] ref_pad(logic [63:0] x, logic [15:0] pos, logic [15:0] val, int bw);
    int ew = (bw == 0) ? 4 : (bw == 1) ? 8 : 16;
    logic [63:0] r = x;
    for (int e = 0; e < 64 / ew; e++)
      if (pos[e]) for (int b = 0; b < ew; b++) r[e * ew + b] = val[b];
    return r;
  endfunction

  task automatic run(logic [31:0] c, int bw, logic [63:0] x);
    logic [63:0] exp;
    @(negedge clk); cfg_we = 1; cfg = c; dbw = 2'(bw);
    @(negedge clk); cfg_we = 0; in_valid = 1; in_word = x;
    exp = ref_pad(x, c[31:16], c[15:0], bw);
    @(negedge clk); in_valid = 0;
    chk(!out_valid, "not valid after 1 cycle");
    @(negedge clk);
    chk(out_valid && out_word == exp, $sformatf("bw=%0d cfg=%h x=%h got=%h exp=%h", bw, c, x, out_word, exp));
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(PAD, 1, SHUFFLED);
    chk(out_word == PADDED, "worked example 0a09 -> 0a10");
    run(32'h0000_1234, 0, SHUFFLED);
    chk(out_word == SHUFFLED, "zero mask passes through");
    for (int t = 0; t < 150; t++) run($urandom, t % 3, {$urandom, $urandom});
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
