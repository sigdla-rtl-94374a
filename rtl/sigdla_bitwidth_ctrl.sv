// sigdla_bitwidth_ctrl: bitwidth controller of a SigDLA PE.
//
// Turns the data (activation) and weight bitwidth codes into, for each of the N_MUL 4-bit
// multipliers, the nibble it reads from each 64-bit operand word, whether each nibble is
// the signed top nibble of its element, and how far its product is shifted. With na and nw
// nibbles per activation and weight element (1, 2 or 4), one element pair occupies
// g = na*nw multipliers: multiplier m serves pair k = m/g, activation nibble i = (m%g)%na and
// weight nibble j = (m%g)/na, and its product is shifted left by 4*(i+j). For 8x8 the
// shifts are 0,4,4,8; for 16x16 the largest is 24. All widths are powers of two, so the
// divisions are shifts and masks. Purely combinational.
//
// The decomposition and the 24-bit maximum shift follow the paper; the exact numbering of
// multipliers and nibbles is this design's choice.
module sigdla_bitwidth_ctrl
  import sigdla_pkg::*;
#(
  parameter int N = N_MUL
) (
  input  logic [1:0] data_bw,
  input  logic [1:0] weight_bw,
  output mul_map_t   map [N]
);
  logic [1:0] la, lw;
  logic [2:0] lg;

  always_comb begin
    la = bw_lognib(data_bw);
    lw = bw_lognib(weight_bw);
    lg = 3'(la) + 3'(lw);
    for (int m = 0; m < N; m++) begin
      logic [3:0] mm, k, j, i, jw;
      mm = 4'(m);
      k  = 4'(5'(mm) >> lg);
      j  = 4'(5'(mm) & ((5'd1 << lg) - 5'd1));
      i  = j & ((4'd1 << la) - 4'd1);
      jw = j >> la;
      map[m].a_idx = (k << la) | i;
      map[m].w_idx = (k << lw) | jw;
      map[m].a_sgn = (i  == ((4'd1 << la) - 4'd1));
      map[m].w_sgn = (jw == ((4'd1 << lw) - 4'd1));
      map[m].shamt = 3'(i + jw);
    end
  end
endmodule
