// sigdla_input_map: configurable input mapping unit of a SigDLA PE.
//
// A bank of multiplexers: for each of the N multipliers, one 16-to-1 nibble multiplexer on
// the shared activation word and one on the PE's weight word, steered by the select codes
// of the bitwidth controller. In 4-bit mode multiplier m reads nibble m of both words; in
// wider modes the nibbles of one element pair are spread over several multipliers and
// fewer elements are consumed per cycle (16/(na*nw) pairs from the low end of each word).
// Purely combinational.
//
// That the mapping is made of multiplexers driven by the bitwidth controller is the
// paper's; the mux size is this design's choice.
module sigdla_input_map
  import sigdla_pkg::*;
#(
  parameter int N = N_MUL
) (
  input  logic [WORD_W-1:0] act,
  input  logic [WORD_W-1:0] wgt,
  input  mul_map_t          map   [N],
  output logic [NIB_W-1:0]  a_nib [N],
  output logic [NIB_W-1:0]  w_nib [N]
);
  always_comb begin
    for (int m = 0; m < N; m++) begin
      a_nib[m] = act[NIB_W*map[m].a_idx +: NIB_W];
      w_nib[m] = wgt[NIB_W*map[m].w_idx +: NIB_W];
    end
  end
endmodule
