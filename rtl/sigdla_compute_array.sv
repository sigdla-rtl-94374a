// sigdla_compute_array: variable-bitwidth computing array of SigDLA.
//
// N_PE precision-scalable PEs side by side. All PEs receive the same activation word (the
// input feature map is shared); PE k receives the weight word of convolution kernel k, so
// up to eight kernels are computed at once. The data and weight bitwidths come from the
// global controller and are the same for every PE.
//
// Timing: psum[k] and out_valid are registered, one cycle after in_valid.
//
// Eight PEs, shared activation and one kernel per PE follow the paper.
module sigdla_compute_array
  import sigdla_pkg::*;
#(
  parameter int NPE = N_PE
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [WORD_W-1:0]        act,
  input  logic [WORD_W-1:0]        wgt  [NPE],
  input  logic [1:0]               data_bw,
  input  logic [1:0]               weight_bw,
  output logic                     out_valid,
  output logic signed [PSUM_W-1:0] psum [NPE]
);
  logic [NPE-1:0] pe_valid;

  for (genvar k = 0; k < NPE; k++) begin : g_pe
    sigdla_pe u_pe (
      .clk(clk), .rst_n(rst_n), .in_valid(in_valid), .act(act), .wgt(wgt[k]),
      .data_bw(data_bw), .weight_bw(weight_bw), .out_valid(pe_valid[k]), .psum(psum[k])
    );
  end

  assign out_valid = pe_valid[0];
endmodule
