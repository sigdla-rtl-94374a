// sigdla_top: the SigDLA accelerator.
//
// A deep-learning accelerator whose computing array (8 PEs x 16 4-bit multipliers, 4/8/16-
// bit operands) also runs signal processing: a programmable shuffling fabric next to the
// on-chip buffer rewrites signal data in place so that FFT, FIR, DCT and DWT become
// convolution-like dot products. The host CPU sends 64-bit instructions to the global
// controller; the DMA engine fills and drains the 144 KB on-chip buffer through the memory
// controller port; the sequence controller streams buffer words into the array; the
// accumulator unit sums partial results and hands them to the DMA engine, which writes
// them off chip or back into the buffer (so an FFT's output can feed a CNN on chip).
//
// Ports: inst_valid/inst_ready/inst from the host; ext_* request/response port to the
// memory controller (request held until ext_gnt, read data on ext_rvalid); busy is high
// while instructions are pending or running; bad_op is a sticky unknown-opcode flag.
//
// The block structure follows the paper's overview figure; the CPU, memory controller and
// off-chip memory are outside this module.
module sigdla_top
  import sigdla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inst_valid,
  output logic              inst_ready,
  input  logic [63:0]       inst,
  output logic              busy,
  output logic              bad_op,
  output logic              ext_req,
  output logic              ext_we,
  output logic [EXT_AW-1:0] ext_addr,
  output logic [WORD_W-1:0] ext_wdata,
  input  logic              ext_gnt,
  input  logic              ext_rvalid,
  input  logic [WORD_W-1:0] ext_rdata
);
  // controller outputs
  logic [1:0]        data_bw, weight_bw;
  logic              rd_buf, wr_buf, shuf_we, pad_we, seq_run, dma_load, dma_store;
  logic [31:0]       payload;
  logic [MEM_AW-1:0] seq_act, seq_wgt, dma_int;
  logic [15:0]       seq_steps, dma_len;
  logic [EXT_AW-1:0] res_base, dma_ext;
  logic              fab_busy, seq_busy, dma_busy, shuf_ready;

  // memory ports
  logic              dma_re, dma_we, bc_re, bc_we, act_re, wgt_re;
  logic [MEM_AW-1:0] dma_addr, bc_addr, act_addr, wgt_addr;
  logic [WORD_W-1:0] dma_wdata, dma_rdata, bc_wdata, bc_rdata, act_rdata;
  logic [WORD_W-1:0] wgt_rdata [N_PE];

  // array and accumulator
  logic              arr_valid, acc_valid, acc_first, acc_last, psum_valid, acc_done;
  logic signed [PSUM_W-1:0] psum [N_PE];
  logic signed [ACC_W-1:0]  acc  [N_PE];

  sigdla_global_ctrl u_gctrl (
    .clk(clk), .rst_n(rst_n), .inst_valid(inst_valid), .inst_ready(inst_ready), .inst(inst),
    .busy(busy), .bad_op(bad_op), .fab_busy(fab_busy), .seq_busy(seq_busy), .dma_busy(dma_busy),
    .data_bw(data_bw), .weight_bw(weight_bw), .rd_buf(rd_buf), .wr_buf(wr_buf),
    .shuf_we(shuf_we), .pad_we(pad_we), .payload(payload), .seq_run(seq_run),
    .seq_act(seq_act), .seq_wgt(seq_wgt), .seq_steps(seq_steps), .res_base(res_base),
    .dma_load(dma_load), .dma_store(dma_store), .dma_len(dma_len), .dma_ext(dma_ext), .dma_int(dma_int)
  );

  sigdla_onchip_mem u_mem (
    .clk(clk),
    .dma_re(dma_re), .dma_we(dma_we), .dma_addr(dma_addr), .dma_wdata(dma_wdata), .dma_rdata(dma_rdata),
    .bc_re(bc_re), .bc_we(bc_we), .bc_addr(bc_addr), .bc_wdata(bc_wdata), .bc_rdata(bc_rdata),
    .act_re(act_re), .act_addr(act_addr), .act_rdata(act_rdata),
    .wgt_re(wgt_re), .wgt_addr(wgt_addr), .wgt_rdata(wgt_rdata)
  );

  sigdla_shuffle_fabric u_fabric (
    .clk(clk), .rst_n(rst_n), .rd_buf(rd_buf), .wr_buf(wr_buf), .shuf_we(shuf_we), .pad_we(pad_we),
    .payload(payload), .data_bw(data_bw), .busy(fab_busy), .shuf_ready(shuf_ready),
    .mem_re(bc_re), .mem_we(bc_we), .mem_addr(bc_addr), .mem_wdata(bc_wdata), .mem_rdata(bc_rdata)
  );

  sigdla_seq_ctrl u_seq (
    .clk(clk), .rst_n(rst_n), .run(seq_run), .act_base(seq_act), .wgt_base(seq_wgt), .steps(seq_steps),
    .acc_done(acc_done), .busy(seq_busy), .act_re(act_re), .act_addr(act_addr), .wgt_re(wgt_re),
    .wgt_addr(wgt_addr), .arr_valid(arr_valid), .acc_valid(acc_valid), .acc_first(acc_first),
    .acc_last(acc_last)
  );

  sigdla_compute_array u_array (
    .clk(clk), .rst_n(rst_n), .in_valid(arr_valid), .act(act_rdata), .wgt(wgt_rdata),
    .data_bw(data_bw), .weight_bw(weight_bw), .out_valid(psum_valid), .psum(psum)
  );

  sigdla_accumulator u_acc (
    .clk(clk), .rst_n(rst_n), .in_valid(psum_valid && acc_valid), .first(acc_first), .last(acc_last),
    .psum(psum), .out_valid(acc_done), .acc(acc)
  );

  sigdla_dma u_dma (
    .clk(clk), .rst_n(rst_n), .load(dma_load), .store(dma_store), .len(dma_len),
    .ext_base(dma_ext), .int_base(dma_int), .res_valid(acc_done), .res(acc), .res_base(res_base),
    .busy(dma_busy), .ext_req(ext_req), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_gnt(ext_gnt), .ext_rvalid(ext_rvalid), .ext_rdata(ext_rdata),
    .mem_re(dma_re), .mem_we(dma_we), .mem_addr(dma_addr), .mem_wdata(dma_wdata), .mem_rdata(dma_rdata)
  );

  a_valid_aligned: assert property (@(posedge clk) disable iff (!rst_n) acc_valid |-> psum_valid);
endmodule
