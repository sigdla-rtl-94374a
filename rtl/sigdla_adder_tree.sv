// sigdla_adder_tree: adder tree of a SigDLA PE.
//
// Sums N signed addends of W bits with a balanced binary tree of log2(N) adder levels
// (N must be a power of two). All products of a PE belong to the same dot product along
// the input channels, so the tree sums all of them in every bitwidth mode; the sum wraps
// modulo 2^W. Purely combinational.
//
// The adder tree is named by the paper; its shape is this design's choice.
module sigdla_adder_tree
  import sigdla_pkg::*;
#(
  parameter int N = N_MUL,
  parameter int W = PSUM_W
) (
  input  logic signed [W-1:0] in [N],
  output logic signed [W-1:0] sum
);
  localparam int LV = $clog2(N);

  for (genvar l = 0; l <= LV; l++) begin : g_lvl
    logic signed [W-1:0] s [N >> l];
    if (l == 0) begin : g_leaf
      for (genvar i = 0; i < N; i++) begin : g_in
        assign s[i] = in[i];
      end
    end else begin : g_add
      for (genvar i = 0; i < (N >> l); i++) begin : g_node
        assign s[i] = g_lvl[l-1].s[2*i] + g_lvl[l-1].s[2*i+1];
      end
    end
  end

  assign sum = g_lvl[LV].s[0];

  initial assert (N == (1 << LV)) else $error("sigdla_adder_tree: N must be a power of two");
endmodule
