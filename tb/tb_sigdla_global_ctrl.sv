// tb_sigdla_global_ctrl: global controller. Fills the instruction buffer past its depth
// while a unit is held busy (inst_ready must drop after 16 entries), then checks that each
// instruction comes out in order as the right strobe or register write, that nothing is
// issued while a unit is busy, that ctrl-bitwidth 0x10001 sets both widths to code 1, and
// that an unknown opcode raises bad_op.
module tb_sigdla_global_ctrl;
  import sigdla_pkg::*;
  logic clk = 0, rst_n = 0, inst_valid = 0, inst_ready, busy, bad_op;
  logic [63:0] inst = 0;
  logic fab_busy = 0, seq_busy = 0, dma_busy = 0;
  logic [1:0] data_bw, weight_bw;
  logic rd_buf, wr_buf, shuf_we, pad_we, seq_run, dma_load, dma_store;
  logic [31:0] payload, res_base, dma_ext;
  logic [MEM_AW-1:0] seq_act, seq_wgt, dma_int;
  logic [15:0] seq_steps, dma_len;
  int checks = 0, failures = 0;

  sigdla_global_ctrl dut (.clk(clk), .rst_n(rst_n), .inst_valid(inst_valid), .inst_ready(inst_ready), .inst(inst),
    .busy(busy), .bad_op(bad_op), .fab_busy(fab_busy), .seq_busy(seq_busy), .dma_busy(dma_busy),
    .data_bw(data_bw), .weight_bw(weight_bw), .rd_buf(rd_buf), .wr_buf(wr_buf), .shuf_we(shuf_we), .pad_we(pad_we),
    .payload(payload), .seq_run(seq_run), .seq_act(seq_act), .seq_wgt(seq_wgt), .seq_steps(seq_steps),
    .res_base(res_base), .dma_load(dma_load), .dma_store(dma_store), .dma_len(dma_len), .dma_ext(dma_ext),
    .dma_int(dma_int));

  always #5 clk = ~clk;

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

  typedef struct { opcode_e op; logic [31:0] p; } ins_t;
  ins_t prog [20];
  int pushed = 0;

  function automatic logic [6:0] strobes();
    return {rd_buf, wr_buf, shuf_we, pad_we, seq_run, dma_load, dma_store};
  endfunction

  initial begin
    prog[0]  = '{OP_CTRL_BITWIDTH, 32'h0001_0001};
    prog[1]  = '{OP_RD_BUF, 32'h0e11};
    prog[2]  = '{OP_CTRL_SHUFFLING, 32'h1f3f};
    prog[3]  = '{OP_CTRL_PADDING, 32'h0001_0010};
    prog[4]  = '{OP_WR_BUF, 32'h00ff};
    prog[5]  = '{OP_SEQ_ACT, 32'd123};
    prog[6]  = '{OP_SEQ_WGT, 32'd456};
    prog[7]  = '{OP_SEQ_OUT, 32'hABCD_0000};
    prog[8]  = '{OP_SEQ_RUN, 32'd7};
    prog[9]  = '{OP_DMA_EXT, 32'h1234_5678};
    prog[10] = '{OP_DMA_INT, 32'd999};
    prog[11] = '{OP_DMA_LOAD, 32'd20};
    prog[12] = '{OP_DMA_STORE, 32'd21};
    prog[13] = '{opcode_e'(32'h77), 32'd0};
    prog[14] = '{OP_CTRL_BITWIDTH, 32'h0002_0000};
    for (int i = 15; i < 20; i++) prog[i] = '{OP_NOP, 32'(i)};
    repeat (2) @(posedge clk);
    rst_n = 1;
    // hold a unit busy and fill the buffer
    @(negedge clk); dma_busy = 1;
    while (pushed < 20) begin
      inst_valid = 1; inst = {prog[pushed].op, prog[pushed].p};
      @(posedge clk);
      if (inst_ready) pushed++;
      @(negedge clk);
      if (pushed == 16) break;
    end
    inst_valid = 0;
    chk(pushed == 16 && !inst_ready, "buffer full after 16 entries");
    repeat (3) begin @(negedge clk); chk(strobes() == 0 && busy, "no issue while a unit is busy"); end
    dma_busy = 0; #1;
    // instruction 0: ctrl-bitwidth
    chk(strobes() == 0, "bitwidth has no strobe"); @(negedge clk);
    chk(data_bw == 1 && weight_bw == 1, "ctrl-bitwidth 0x10001");
    chk(rd_buf && payload == 32'h0e11, "rd-buf issued");
    @(posedge clk); #1 fab_busy = 1;
    repeat (2) begin @(negedge clk); chk(strobes() == 0, "wait on fabric"); end
    fab_busy = 0; #1;
    chk(shuf_we && payload == 32'h1f3f, "ctrl-shuffling"); @(negedge clk);
    chk(pad_we && payload == 32'h0001_0010, "ctrl-padding"); @(negedge clk);
    chk(wr_buf && payload == 32'h00ff, "wr-buf"); @(negedge clk);
    @(negedge clk); @(negedge clk); @(negedge clk);
    chk(seq_act == 123 && seq_wgt == 456 && res_base == 32'hABCD_0000, "sequence registers");
    chk(seq_run && seq_steps == 7, "seq-run");
    @(posedge clk); #1 seq_busy = 1;
    @(negedge clk); chk(strobes() == 0, "wait on sequence"); seq_busy = 0; #1;
    @(negedge clk); @(negedge clk);
    chk(dma_ext == 32'h1234_5678 && dma_int == 999, "dma registers");
    chk(dma_load && dma_len == 20, "dma-load"); @(negedge clk);
    chk(dma_store && dma_len == 21, "dma-store"); @(negedge clk);
    chk(!bad_op, "no bad_op yet"); @(negedge clk);
    chk(bad_op, "bad_op after unknown opcode");
    @(negedge clk);
    chk(data_bw == 2 && weight_bw == 0, "second ctrl-bitwidth");
    repeat (3) @(negedge clk);
    chk(!busy, "idle at end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
