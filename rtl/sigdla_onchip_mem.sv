// sigdla_onchip_mem: shared on-chip buffer of SigDLA.
//
// DEPTH words of 64 bits (144 KB by default: the 128 KB buffer of the original DLA plus
// the 16 KB signal-processing region at words SP_BASE..). Feature maps, weights and signal
// data all live here; the shuffling fabric rewrites signal data in place and the sequence
// controller streams it to the array, so no data leaves the chip between signal
// processing and deep learning.
//
// Ports (all synchronous, read data one cycle after the address):
//   dma_*  read/write port of the DMA engine
//   bc_*   read/write port of the shuffling fabric's buffer controller interface
//   act_*  activation read port of the sequence controller
//   wgt_*  weight read port: NW consecutive words from wgt_addr, one per PE
// Writes on dma_* and bc_* never coincide in this design (the global controller runs one
// operation at a time); an assertion checks it. The array has no reset.
//
// Capacity and the 16 KB region follow the paper; the port set, the one-cycle latency and
// a flip-flop array instead of SRAM macros are this design's choice.
module sigdla_onchip_mem
  import sigdla_pkg::*;
#(
  parameter int DEPTH = MEM_DEPTH,
  parameter int NW    = N_PE
) (
  input  logic                  clk,
  input  logic                  dma_re,
  input  logic                  dma_we,
  input  logic [MEM_AW-1:0]     dma_addr,
  input  logic [WORD_W-1:0]     dma_wdata,
  output logic [WORD_W-1:0]     dma_rdata,
  input  logic                  bc_re,
  input  logic                  bc_we,
  input  logic [MEM_AW-1:0]     bc_addr,
  input  logic [WORD_W-1:0]     bc_wdata,
  output logic [WORD_W-1:0]     bc_rdata,
  input  logic                  act_re,
  input  logic [MEM_AW-1:0]     act_addr,
  output logic [WORD_W-1:0]     act_rdata,
  input  logic                  wgt_re,
  input  logic [MEM_AW-1:0]     wgt_addr,
  output logic [WORD_W-1:0]     wgt_rdata [NW]
);
  logic [WORD_W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (dma_we) mem[dma_addr] <= dma_wdata;
    if (bc_we)  mem[bc_addr]  <= bc_wdata;
  end

  always_ff @(posedge clk) begin
    if (dma_re) dma_rdata <= mem[dma_addr];
    if (bc_re)  bc_rdata  <= mem[bc_addr];
    if (act_re) act_rdata <= mem[act_addr];
    if (wgt_re) begin
      for (int k = 0; k < NW; k++) wgt_rdata[k] <= mem[wgt_addr + MEM_AW'(k)];
    end
  end

  a_one_writer: assert property (@(posedge clk) !(dma_we && bc_we));
endmodule
