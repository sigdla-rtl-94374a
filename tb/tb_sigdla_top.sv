// tb_sigdla_top: end-to-end test of the SigDLA accelerator at its full default size.
//
// A host model streams instruction programs into the accelerator as fast as inst_ready
// allows, and an off-chip memory model with random grant delays holds all data. Phases:
//   1. signal processing: the DMA loads four signal words into the signal region, the
//      worked shuffling example runs (rd-buf x2, 16 ctrl-shuffling, ctrl-padding, wr-buf)
//      and the result is stored back off chip and checked;
//   2. deep learning: for several data/weight bitwidth pairs (4x4, 8x4, 8x8, 16x16) the
//      DMA loads activations and weights, the sequence controller streams a multi-step dot
//      product into the eight PEs, and the eight results written off chip are compared
//      with dot products computed here;
//   3. an unknown opcode must raise bad_op.
// Mechanisms counted (each must occur): shuffles, paddings, bitwidth switches, multi-step
// accumulations, instruction-buffer back-pressure, off-chip grant stalls, DMA loads,
// stores and result writes.
module tb_sigdla_top;
  import sigdla_pkg::*;
  import sigdla_tb_pkg::*;
  import sigdla_fig6_pkg::*;

  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready, busy, bad_op;
  logic [63:0] inst = 0;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata;
  int checks = 0, failures = 0;
  int n_backpressure = 0, n_shuffle = 0, n_pad = 0, n_bwswitch = 0, n_accum = 0;
  int n_load = 0, n_store = 0, n_result = 0;
  logic [63:0] prog [$];

  sigdla_top dut (.clk(clk), .rst_n(rst_n), .inst_valid(inst_valid), .inst_ready(inst_ready), .inst(inst),
    .busy(busy), .bad_op(bad_op), .ext_req(ext_req), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_gnt(ext_gnt), .ext_rvalid(ext_rvalid), .ext_rdata(ext_rdata));

  sigdla_ext_mem_model #(.MAX_WAIT(2), .LAT(2)) ext (.clk(clk), .req(ext_req), .we(ext_we), .addr(ext_addr),
    .wdata(ext_wdata), .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  // mechanism counters observed inside the design
  logic [1:0] last_dbw = 2'd1, last_wbw = 2'd1;
  always @(posedge clk) if (rst_n) begin
    if (inst_valid && !inst_ready) n_backpressure++;
    if (dut.u_fabric.u_bcif.mem_we) n_shuffle++;
    if (dut.u_fabric.u_dpu.in_valid && dut.u_fabric.u_dpu.pad_pos != 0) n_pad++;
    if (dut.data_bw != last_dbw || dut.weight_bw != last_wbw) n_bwswitch++;
    last_dbw <= dut.data_bw; last_wbw <= dut.weight_bw;
    if (dut.u_acc.in_valid && dut.u_acc.last && !dut.u_acc.first) n_accum++;
    if (dut.u_gctrl.dma_load) n_load++;
    if (dut.u_gctrl.dma_store) n_store++;
    if (dut.u_acc.out_valid) n_result++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic put(opcode_e op, logic [31:0] p);
    prog.push_back({op, p});
  endtask

  // stream the queued program into the accelerator and wait until it is idle
  task automatic run_prog(output int cycles);
    cycles = 0;
    while (prog.size() > 0) begin
      @(negedge clk);
      inst_valid = 1; inst = prog[0];
      @(posedge clk);
      cycles++;
      if (inst_ready) void'(prog.pop_front());
    end
    @(negedge clk);
    inst_valid = 0;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  task automatic dl_layer(logic [1:0] dbw, logic [1:0] wbw, int steps, int base_ext);
    int cyc;
    logic [63:0] a [];
    logic [63:0] w [];
    a = new[steps]; w = new[steps * N_PE];
    for (int s = 0; s < steps; s++) begin a[s] = {$urandom, $urandom}; ext.poke(base_ext + s, a[s]); end
    for (int i = 0; i < steps * N_PE; i++) begin w[i] = {$urandom, $urandom}; ext.poke(base_ext + 'h1000 + i, w[i]); end
    put(OP_CTRL_BITWIDTH, {14'd0, dbw, 14'd0, wbw});
    put(OP_DMA_EXT, base_ext);            put(OP_DMA_INT, 32'd0);    put(OP_DMA_LOAD, steps);
    put(OP_DMA_EXT, base_ext + 'h1000);   put(OP_DMA_INT, 32'd4096); put(OP_DMA_LOAD, steps * N_PE);
    put(OP_SEQ_ACT, 32'd0); put(OP_SEQ_WGT, 32'd4096); put(OP_SEQ_OUT, base_ext + 'h8000);
    put(OP_SEQ_RUN, steps);
    run_prog(cyc);
    for (int k = 0; k < N_PE; k++) begin
      longint e;
      e = 0;
      for (int s = 0; s < steps; s++) e += ref_dot(a[s], w[s * N_PE + k], dbw, wbw);
      chk(ext.peek(base_ext + 'h8000 + k) == 64'(e),
          $sformatf("layer dbw=%0d wbw=%0d kernel %0d got %0d exp %0d", dbw, wbw, k,
                    $signed(ext.peek(base_ext + 'h8000 + k)), e));
    end
    $display("layer dbw=%0d wbw=%0d steps=%0d took %0d cycles", dbw, wbw, steps, cyc);
  endtask

  initial begin
    int cyc;
    ext.poke(32'h100, W_E1); ext.poke(32'h101, W_E2); ext.poke(32'h102, W_F1); ext.poke(32'h103, W_F2);
    repeat (3) @(posedge clk);
    rst_n = 1;

    // 1. signal processing: the worked shuffling example
    put(OP_DMA_EXT, 32'h100); put(OP_DMA_INT, SP_BASE + 'he1); put(OP_DMA_LOAD, 2);
    put(OP_DMA_EXT, 32'h102); put(OP_DMA_INT, SP_BASE + 'hf1); put(OP_DMA_LOAD, 2);
    put(OP_CTRL_BITWIDTH, BW88);
    put(OP_RD_BUF, RD_E); put(OP_RD_BUF, RD_F);
    for (int u = 0; u < 16; u++) put(OP_CTRL_SHUFFLING, shuf(u));
    put(OP_CTRL_PADDING, PAD);
    put(OP_WR_BUF, WR_FF);
    put(OP_DMA_EXT, 32'h200); put(OP_DMA_INT, SP_BASE + 'hff); put(OP_DMA_STORE, 1);
    run_prog(cyc);
    chk(ext.peek(32'h200) == PADDED, $sformatf("shuffled and padded word %h", ext.peek(32'h200)));
    $display("shuffling example took %0d cycles", cyc);

    // 2. deep learning layers at several bitwidths
    dl_layer(2'd0, 2'd0, 12, 32'h10000);
    dl_layer(2'd1, 2'd0, 9, 32'h20000);
    dl_layer(2'd1, 2'd1, 5, 32'h30000);
    dl_layer(2'd2, 2'd2, 3, 32'h40000);
    dl_layer(2'd0, 2'd0, 1, 32'h50000);

    // 3. unknown opcode
    put(opcode_e'(32'h55), 32'd0);
    run_prog(cyc);
    chk(bad_op, "bad_op raised");

    $display("mechanisms: backpressure=%0d shuffle=%0d pad=%0d bwswitch=%0d accum=%0d load=%0d store=%0d result=%0d stalls=%0d",
             n_backpressure, n_shuffle, n_pad, n_bwswitch, n_accum, n_load, n_store, n_result, ext.stall_cycles);
    chk(n_backpressure > 0, "instruction buffer back-pressure happened");
    chk(n_shuffle > 0, "shuffle happened");
    chk(n_pad > 0, "padding happened");
    chk(n_bwswitch >= 3, "bitwidth switches happened");
    chk(n_accum > 0, "multi-step accumulation happened");
    chk(n_load > 0 && n_store > 0 && n_result == 5, "DMA load, store and result writes happened");
    chk(ext.stall_cycles > 0, "off-chip grant stalls happened");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
