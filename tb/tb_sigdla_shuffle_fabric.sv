// tb_sigdla_shuffle_fabric: BCIF, DSU and DPU together on the worked example, with a
// testbench model of the on-chip memory. After rd-buf 0xe11/0xf11, sixteen
// ctrl-shuffling entries, ctrl-padding 0x10010 at 8-bit and wr-buf 0xff, address ff of the
// signal region must hold 302f_2625_1413_0a10, and the wr-buf must take 5 busy cycles.
// A second task at 16-bit width gathers whole 16-bit lanes from eight words and pads
// lane 3 with 0x0001 (the constant 1 of an FFT butterfly row).
module tb_sigdla_shuffle_fabric;
  import sigdla_pkg::*;
  import sigdla_fig6_pkg::*;
  logic clk = 0, rst_n = 0, rd_buf = 0, wr_buf = 0, shuf_we = 0, pad_we = 0, busy, shuf_ready;
  logic [31:0] payload = 0;
  logic [1:0] dbw = 1;
  logic mem_re, mem_we;
  logic [MEM_AW-1:0] mem_addr;
  logic [63:0] mem_wdata, mem_rdata;
  logic [63:0] imem [MEM_DEPTH];
  int checks = 0, failures = 0;

  sigdla_shuffle_fabric dut (.clk(clk), .rst_n(rst_n), .rd_buf(rd_buf), .wr_buf(wr_buf), .shuf_we(shuf_we),
    .pad_we(pad_we), .payload(payload), .data_bw(dbw), .busy(busy), .shuf_ready(shuf_ready),
    .mem_re(mem_re), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata), .mem_rdata(mem_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (mem_we) imem[mem_addr] <= mem_wdata;
    if (mem_re) mem_rdata <= imem[mem_addr];
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

  // op: 0 rd-buf, 1 wr-buf, 2 ctrl-shuffling, 3 ctrl-padding; returns busy cycles
  task automatic op(int kind, logic [31:0] p, output int cycles);
    @(negedge clk);
    rd_buf = (kind == 0); wr_buf = (kind == 1); shuf_we = (kind == 2); pad_we = (kind == 3); payload = p;
    @(negedge clk);
    {rd_buf, wr_buf, shuf_we, pad_we} = '0;
    cycles = 0;
    while (busy) begin cycles++; @(negedge clk); end
  endtask

  initial begin
    int c;
    imem[SP_BASE + 'he1] = W_E1; imem[SP_BASE + 'he2] = W_E2;
    imem[SP_BASE + 'hf1] = W_F1; imem[SP_BASE + 'hf2] = W_F2;
    for (int i = 0; i < 8; i++) imem[SP_BASE + 'h200 + i] = {16'(4 * i + 3), 16'(4 * i + 2), 16'(4 * i + 1), 16'(4 * i)};
    repeat (2) @(posedge clk);
    rst_n = 1;
    op(0, RD_E, c);
    op(0, RD_F, c);
    for (int u = 0; u < 16; u++) op(2, shuf(u), c);
    chk(shuf_ready, "configuration finished");
    op(3, PAD, c);
    op(1, WR_FF, c);
    chk(c == 5, $sformatf("wr-buf busy cycles %0d", c));
    chk(imem[SP_BASE + 'hff] == PADDED, $sformatf("worked example result %h", imem[SP_BASE + 'hff]));
    // 16-bit task: read 8 words at bank 0x20; output lane l = lane l of word 2l+1
    dbw = 2;
    op(0, 32'h0000_2007, c);
    for (int u = 0; u < 16; u++) op(2, {19'd0, (u == 15), 4'(u), 4'(2 * (u / 4) + 1), 4'(u)}, c);
    op(3, 32'h0008_0001, c);
    op(1, 32'h0000_0210, c);
    chk(imem[SP_BASE + 'h210] == {16'h0001, 16'(4 * 5 + 2), 16'(4 * 3 + 1), 16'(4 * 1 + 0)},
        $sformatf("16-bit task result %h", imem[SP_BASE + 'h210]));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
