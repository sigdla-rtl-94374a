// sigdla_shuffle_fabric: programmable data shuffling fabric of SigDLA.
//
// Sits beside the on-chip buffer and rewrites signal data in place so that irregular
// access patterns (FFT butterflies and the like) become regular convolution operands. It
// has three stages: fetch and return (BCIF: rd-buf fills a 16-word buffer, wr-buf writes
// the result back), select/split/merge (DSU: 16 shuffling units each contribute one nibble
// of a new word) and padding (DPU: constants written into chosen elements). The global
// controller writes the instructions; the data bitwidth steers the padding.
//
// Timing: a wr-buf completes 6 cycles after it is issued (start, DSU 2, DPU 2, write).
// busy covers any running rd-buf or wr-buf.
//
// The three units and their order follow the paper.
module sigdla_shuffle_fabric
  import sigdla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_buf,
  input  logic              wr_buf,
  input  logic              shuf_we,
  input  logic              pad_we,
  input  logic [31:0]       payload,
  input  logic [1:0]        data_bw,
  output logic              busy,
  output logic              shuf_ready,
  output logic              mem_re,
  output logic              mem_we,
  output logic [MEM_AW-1:0] mem_addr,
  output logic [WORD_W-1:0] mem_wdata,
  input  logic [WORD_W-1:0] mem_rdata
);
  logic [WORD_W-1:0] buf_words [BUF_WORDS];
  logic              sh_start, dsu_v, dpu_v;
  logic [WORD_W-1:0] dsu_w, dpu_w;

  sigdla_bcif u_bcif (
    .clk(clk), .rst_n(rst_n), .rd_buf(rd_buf), .wr_buf(wr_buf), .payload(payload), .busy(busy),
    .mem_re(mem_re), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata), .mem_rdata(mem_rdata),
    .buf_words(buf_words), .shuffle_start(sh_start), .wb_valid(dpu_v), .wb_word(dpu_w)
  );

  sigdla_dsu u_dsu (
    .clk(clk), .rst_n(rst_n), .cfg_we(shuf_we), .cfg(payload), .cfg_ready(shuf_ready),
    .start(sh_start), .in_words(buf_words), .out_valid(dsu_v), .out_word(dsu_w)
  );

  sigdla_dpu u_dpu (
    .clk(clk), .rst_n(rst_n), .cfg_we(pad_we), .cfg(payload), .data_bw(data_bw),
    .in_valid(dsu_v), .in_word(dsu_w), .out_valid(dpu_v), .out_word(dpu_w)
  );
endmodule
