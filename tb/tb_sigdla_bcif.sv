// tb_sigdla_bcif: buffer controller interface with a testbench model of the on-chip
// memory. Runs the worked example's rd-buf 0xe11 and 0xf11 (four words land in buffer
// slots 0..3, in order), checks the read addresses and the 3-cycle rd-buf duration, then
// wr-buf 0xff: shuffle_start must pulse, and the word returned by the padding side must
// be written to address ff of the signal region. A longer rd-buf (length 15, 16 words)
// then fills the whole buffer from slot 0.
module tb_sigdla_bcif;
  import sigdla_pkg::*;
  import sigdla_fig6_pkg::*;
  logic clk = 0, rst_n = 0, rd_buf = 0, wr_buf = 0, busy, mem_re, mem_we, shuffle_start, wb_valid = 0;
  logic [31:0] payload = 0;
  logic [MEM_AW-1:0] mem_addr;
  logic [63:0] mem_wdata, mem_rdata, wb_word = 0;
  logic [63:0] buf_words [BUF_WORDS];
  logic [63:0] imem [MEM_DEPTH];
  int checks = 0, failures = 0, starts = 0;

  sigdla_bcif dut (.clk(clk), .rst_n(rst_n), .rd_buf(rd_buf), .wr_buf(wr_buf), .payload(payload), .busy(busy),
    .mem_re(mem_re), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata), .mem_rdata(mem_rdata),
    .buf_words(buf_words), .shuffle_start(shuffle_start), .wb_valid(wb_valid), .wb_word(wb_word));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (mem_we) imem[mem_addr] <= mem_wdata;
    if (mem_re) mem_rdata <= imem[mem_addr];
    if (shuffle_start) starts++;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic issue(bit rd, logic [31:0] p, output int cycles);
    @(negedge clk); rd_buf = rd; wr_buf = !rd; payload = p;
    @(negedge clk); rd_buf = 0; wr_buf = 0;
    cycles = 0;
    while (busy) begin cycles++; @(negedge clk); end
  endtask

  initial begin
    int cyc;
    imem[SP_BASE + 'he1] = W_E1; imem[SP_BASE + 'he2] = W_E2;
    imem[SP_BASE + 'hf1] = W_F1; imem[SP_BASE + 'hf2] = W_F2;
    for (int i = 0; i < 16; i++) imem[SP_BASE + 'h300 + i] = 64'hA5A5_0000_0000_0000 | 64'(i);
    repeat (2) @(posedge clk);
    rst_n = 1;
    // rd-buf 0xe11: first read issued in the cycle after the instruction
    @(negedge clk); rd_buf = 1; payload = RD_E;
    @(negedge clk); rd_buf = 0;
    chk(mem_re && mem_addr == MEM_AW'(SP_BASE + 'he1), "rd-buf first address e1");
    @(negedge clk);
    chk(mem_re && mem_addr == MEM_AW'(SP_BASE + 'he2), "rd-buf second address e2");
    cyc = 1;
    while (busy) begin cyc++; @(negedge clk); end
    chk(cyc == 3, $sformatf("rd-buf of 2 words busy 3 cycles (got %0d)", cyc));
    issue(1, RD_F, cyc);
    chk(buf_words[0] == W_E1 && buf_words[1] == W_E2 && buf_words[2] == W_F1 && buf_words[3] == W_F2, "buffer slots 0..3");
    // wr-buf 0xff
    @(negedge clk); wr_buf = 1; payload = WR_FF;
    @(negedge clk); wr_buf = 0;
    chk(shuffle_start, "shuffle_start pulse");
    repeat (3) begin @(negedge clk); chk(busy && !mem_we, "waiting for padded word"); end
    wb_valid = 1; wb_word = PADDED;
    #1;
    chk(mem_we && mem_addr == MEM_AW'(SP_BASE + 'hff), "write-back address ff");
    @(negedge clk); wb_valid = 0;
    chk(!busy, "idle after write-back");
    chk(imem[SP_BASE + 'hff] == PADDED, "write-back data");
    chk(starts == 1, "one shuffle start");
    // 16-word read restarts at slot 0: bank 0x30, offset 0, length 15
    issue(1, 32'h0000_300f, cyc);
    for (int i = 0; i < 16; i++) chk(buf_words[i] == (64'hA5A5_0000_0000_0000 | 64'(i)), $sformatf("full buffer slot %0d", i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
