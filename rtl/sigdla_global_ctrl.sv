// sigdla_global_ctrl: global controller of SigDLA.
//
// The host streams 64-bit instructions {opcode[31:0], payload[31:0]} into an instruction
// buffer (a FIFO of IBUF_DEPTH entries, inst_valid/inst_ready handshake). The controller
// executes them in order. Configuration instructions take one cycle: ctrl-bitwidth sets
// the data and weight bitwidth broadcast to the computing array and the padding unit;
// ctrl-shuffling and ctrl-padding are forwarded to the DSU and DPU register files;
// seq-act/seq-wgt/seq-out and dma-ext/dma-int load the sequence controller's and DMA
// engine's registers. rd-buf, wr-buf, seq-run, dma-load and dma-store start a unit; an
// instruction is issued only when the shuffling fabric, sequence controller and DMA are
// all idle, so the units never compete for the buffer. Unknown opcodes are dropped and set
// the sticky bad_op flag. busy is high while instructions are buffered or running.
//
// Timing: a FIFO entry is issued at the earliest one cycle after it is written; one
// instruction per cycle while nothing runs.
//
// The instruction buffer, the bitwidth register and the distribution of shuffling
// instructions to the fabric's register files follow the paper; the opcode values, the FIFO
// depth, the strict in-order issue and the DLA-side instructions are this design's choice.
module sigdla_global_ctrl
  import sigdla_pkg::*;
#(
  parameter int IBUF_DEPTH = 16
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              inst_valid,
  output logic              inst_ready,
  input  logic [63:0]       inst,
  output logic              busy,
  output logic              bad_op,
  // unit status
  input  logic              fab_busy,
  input  logic              seq_busy,
  input  logic              dma_busy,
  // bitwidth configuration
  output logic [1:0]        data_bw,
  output logic [1:0]        weight_bw,
  // shuffling fabric
  output logic              rd_buf,
  output logic              wr_buf,
  output logic              shuf_we,
  output logic              pad_we,
  output logic [31:0]       payload,
  // sequence controller
  output logic              seq_run,
  output logic [MEM_AW-1:0] seq_act,
  output logic [MEM_AW-1:0] seq_wgt,
  output logic [15:0]       seq_steps,
  output logic [EXT_AW-1:0] res_base,
  // DMA engine
  output logic              dma_load,
  output logic              dma_store,
  output logic [15:0]       dma_len,
  output logic [EXT_AW-1:0] dma_ext,
  output logic [MEM_AW-1:0] dma_int
);
  localparam int AW = $clog2(IBUF_DEPTH);

  logic [63:0]  fifo [IBUF_DEPTH];
  logic [AW:0]  wp, rp;
  logic         empty, full, issue;
  opcode_e      op;
  logic [31:0]  pl;

  assign empty      = (wp == rp);
  assign full       = (wp[AW-1:0] == rp[AW-1:0]) && (wp[AW] != rp[AW]);
  assign inst_ready = !full;
  assign op         = opcode_e'(fifo[rp[AW-1:0]][63:32]);
  assign pl         = fifo[rp[AW-1:0]][31:0];
  assign issue      = !empty && !fab_busy && !seq_busy && !dma_busy;
  assign busy       = !empty || fab_busy || seq_busy || dma_busy;
  assign payload    = pl;

  always_comb begin
    rd_buf    = issue && (op == OP_RD_BUF);
    wr_buf    = issue && (op == OP_WR_BUF);
    shuf_we   = issue && (op == OP_CTRL_SHUFFLING);
    pad_we    = issue && (op == OP_CTRL_PADDING);
    seq_run   = issue && (op == OP_SEQ_RUN);
    dma_load  = issue && (op == OP_DMA_LOAD);
    dma_store = issue && (op == OP_DMA_STORE);
    seq_steps = pl[15:0];
    dma_len   = pl[15:0];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
      data_bw <= 2'(BW8);
      weight_bw <= 2'(BW8);
      seq_act <= '0; seq_wgt <= '0; res_base <= '0;
      dma_ext <= '0; dma_int <= '0;
      bad_op <= 1'b0;
    end else begin
      if (inst_valid && !full) begin
        fifo[wp[AW-1:0]] <= inst;
        wp <= wp + 1'b1;
      end
      if (issue) begin
        rp <= rp + 1'b1;
        case (op)
          OP_CTRL_BITWIDTH: begin data_bw <= pl[17:16]; weight_bw <= pl[1:0]; end
          OP_SEQ_ACT:       seq_act  <= pl[MEM_AW-1:0];
          OP_SEQ_WGT:       seq_wgt  <= pl[MEM_AW-1:0];
          OP_SEQ_OUT:       res_base <= pl;
          OP_DMA_EXT:       dma_ext  <= pl;
          OP_DMA_INT:       dma_int  <= pl[MEM_AW-1:0];
          OP_NOP, OP_RD_BUF, OP_WR_BUF, OP_CTRL_SHUFFLING, OP_CTRL_PADDING,
          OP_SEQ_RUN, OP_DMA_LOAD, OP_DMA_STORE: ;
          default:          bad_op   <= 1'b1;
        endcase
      end
    end
  end

  initial assert (IBUF_DEPTH == (1 << AW)) else $error("sigdla_global_ctrl: IBUF_DEPTH must be a power of two");
endmodule
