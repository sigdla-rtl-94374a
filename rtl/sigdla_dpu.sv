// sigdla_dpu: data padding unit (DPU) of the SigDLA shuffling fabric.
//
// Overwrites chosen elements of the shuffled 64-bit word with a constant, e.g. the 1s that
// the FFT butterfly needs once it is written as a convolution. Its register file is written
// by ctrl-padding (payload: padding-position[31:16], padding-value[15:0]). At element width
// w = 4, 8 or 16 bits (the data bitwidth) the word holds 64/w elements; bit e of
// padding-position selects element e (16, 8 or 4 valid bits), and a padded element takes
// padding-value[w-1:0]. A zero mask passes the word through. Nibble n of the word lies in
// element n/(w/4) at nibble n%(w/4) of it, so each output nibble is a small multiplexer over
// the data nibble and the value nibbles.
//
// Timing: two register stages (nibble registers, then the 64-bit output register):
// out_valid and out_word two cycles after in_valid. Register file cleared by reset.
//
// The per-nibble multiplexer structure and the two register stages follow the paper's
// figure; the field positions come from its worked example (0x10010 at 8-bit turns 0a09
// into 0a10). The text states value widths 16/8/4 for 4/8/16-bit data, the figure feeds
// each element from the low w bits of the value; this design follows the figure.
module sigdla_dpu
  import sigdla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [31:0]       cfg,
  input  logic [1:0]        data_bw,
  input  logic              in_valid,
  input  logic [WORD_W-1:0] in_word,
  output logic              out_valid,
  output logic [WORD_W-1:0] out_word
);
  logic [15:0]       pad_pos, pad_val;
  logic [NIB_W-1:0]  nib_d [N_NIB];
  logic [NIB_W-1:0]  nib_q [N_NIB];
  logic              v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pad_pos <= '0;
      pad_val <= '0;
    end else if (cfg_we) begin
      pad_pos <= cfg[31:16];
      pad_val <= cfg[15:0];
    end
  end

  always_comb begin
    logic [1:0] ln;
    ln = bw_lognib(data_bw);
    for (int n = 0; n < N_NIB; n++) begin
      logic [3:0] nn, e, q;
      nn = 4'(n);
      e  = nn >> ln;
      q  = nn & ((4'd1 << ln) - 4'd1);
      nib_d[n] = pad_pos[e] ? pad_val[NIB_W*q[1:0] +: NIB_W] : in_word[NIB_W*n +: NIB_W];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      out_valid <= 1'b0;
      out_word <= '0;
      for (int n = 0; n < N_NIB; n++) nib_q[n] <= '0;
    end else begin
      v1        <= in_valid;
      out_valid <= v1;
      if (in_valid) nib_q <= nib_d;
      if (v1) begin
        for (int n = 0; n < N_NIB; n++) out_word[NIB_W*n +: NIB_W] <= nib_q[n];
      end
    end
  end
endmodule
