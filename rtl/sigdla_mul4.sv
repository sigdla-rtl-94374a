// sigdla_mul4: the 4-bit x 4-bit multiplier cell of a SigDLA processing element.
//
// Every PE holds sixteen of these; wider products are assembled from them by shifting and
// adding (8x8 from four, 16x16 from sixteen). A nibble is either the top nibble of a
// two's-complement operand (signed) or a lower nibble (unsigned), so each operand carries a
// sign flag; the cell sign- or zero-extends both nibbles to 5 bits and multiplies them,
// giving a 10-bit signed product. Purely combinational.
//
// The 4-bit multiplier is the paper's; the per-operand sign flag is this design's choice,
// needed for the negative factors of the FFT mapping.
module sigdla_mul4
  import sigdla_pkg::*;
(
  input  logic [NIB_W-1:0]         a,
  input  logic [NIB_W-1:0]         w,
  input  logic                     a_signed,
  input  logic                     w_signed,
  output logic signed [PROD_W-1:0] p
);
  logic signed [NIB_W:0] a_x, w_x;

  always_comb begin
    a_x = signed'({a_signed & a[NIB_W-1], a});
    w_x = signed'({w_signed & w[NIB_W-1], w});
    p   = PROD_W'(a_x * w_x);
  end
endmodule
