// tb_sigdla_dsu: data shuffling unit. The worked example's sixteen ctrl-shuffling entries
// (0x0, 0x101, ..., 0x1f3f) on its four words must give 302f_2625_1413_0a09 two cycles
// after start; cfg_ready must follow the finish-flag. Then random configurations and
// random buffers are checked against a nibble gather computed here.
module tb_sigdla_dsu;
  import sigdla_pkg::*;
  import sigdla_fig6_pkg::*;
  logic clk = 0, rst_n = 0, cfg_we = 0, cfg_ready, start = 0, out_valid;
  logic [31:0] cfg = 0;
  logic [63:0] in_words [BUF_WORDS];
  logic [63:0] out_word;
  int checks = 0, failures = 0;

  sigdla_dsu dut (.clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg(cfg), .cfg_ready(cfg_ready), .start(start),
    .in_words(in_words), .out_valid(out_valid), .out_word(out_word));

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

  task automatic write_cfg(logic [31:0] c);
    @(negedge clk); cfg_we = 1; cfg = c;
    @(negedge clk); cfg_we = 0;
  endtask

  task automatic shuffle(logic [63:0] exp, string s);
    @(negedge clk); start = 1;
    @(negedge clk); start = 0;
    chk(!out_valid, {s, ": not valid after 1 cycle"});
    @(negedge clk);
    chk(out_valid && out_word == exp, $sformatf("%s: got %h exp %h", s, out_word, exp));
  endtask

  initial begin
    for (int i = 0; i < BUF_WORDS; i++) in_words[i] = 0;
    in_words[0] = W_E1; in_words[1] = W_E2; in_words[2] = W_F1; in_words[3] = W_F2;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(!cfg_ready, "not ready after reset");
    for (int u = 0; u < 16; u++) begin
      write_cfg(shuf(u));
      chk(cfg_ready == (u == 15), $sformatf("cfg_ready after unit %0d", u));
    end
    shuffle(SHUFFLED, "worked example");
    for (int t = 0; t < 100; t++) begin
      logic [3:0] sel [16], spl [16];
      logic [63:0] exp;
      for (int i = 0; i < BUF_WORDS; i++) in_words[i] = {$urandom, $urandom};
      for (int u = 0; u < 16; u++) begin
        sel[u] = 4'($urandom); spl[u] = 4'($urandom);
        write_cfg({19'd0, (u == 15), 4'(u), sel[u], spl[u]});
      end
      for (int u = 0; u < 16; u++) exp[4*u +: 4] = in_words[sel[u]][4*spl[u] +: 4];
      shuffle(exp, $sformatf("random %0d", t));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
