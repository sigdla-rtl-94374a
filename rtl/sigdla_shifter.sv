// sigdla_shifter: configurable shifter of a SigDLA PE.
//
// Each 10-bit signed product of a 4-bit multiplier is sign-extended to OUT_W bits and
// shifted left by 0, 4, 8, ... 24 bits, chosen per multiplier by a 7-way multiplexer over
// the fixed shift taps (shift code 0..6 from the bitwidth controller). Purely
// combinational.
//
// Shift taps in steps of 4 up to 24 follow the paper; OUT_W is this design's choice.
module sigdla_shifter
  import sigdla_pkg::*;
#(
  parameter int N     = N_MUL,
  parameter int OUT_W = PSUM_W
) (
  input  logic signed [PROD_W-1:0] prod    [N],
  input  logic        [2:0]        shamt   [N],
  output logic signed [OUT_W-1:0]  shifted [N]
);
  always_comb begin
    for (int m = 0; m < N; m++) begin
      logic signed [OUT_W-1:0] x;
      x = OUT_W'(prod[m]);
      case (shamt[m])
        3'd0:    shifted[m] = x;
        3'd1:    shifted[m] = x <<< 4;
        3'd2:    shifted[m] = x <<< 8;
        3'd3:    shifted[m] = x <<< 12;
        3'd4:    shifted[m] = x <<< 16;
        3'd5:    shifted[m] = x <<< 20;
        default: shifted[m] = x <<< 24;
      endcase
    end
  end
endmodule
