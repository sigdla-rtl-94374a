// sigdla_accumulator: accumulator unit behind the SigDLA computing array.
//
// One ACC_W-bit accumulator per PE. A dot product longer than one word is fed as a run of
// partial sums: the first is marked 'first' (the accumulator restarts from it), the last
// 'last'. One cycle after the last partial sum is taken, out_valid pulses and acc holds the
// results; they stay there until the next 'first'. Partial sums are sign-extended.
//
// The accumulator unit is only named by the paper (its output goes to the DMA engine);
// its width and framing are this design's choice.
module sigdla_accumulator
  import sigdla_pkg::*;
#(
  parameter int NPE = N_PE
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic                     first,
  input  logic                     last,
  input  logic signed [PSUM_W-1:0] psum [NPE],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  acc  [NPE]
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      for (int k = 0; k < NPE; k++) acc[k] <= '0;
    end else begin
      out_valid <= in_valid & last;
      if (in_valid) begin
        for (int k = 0; k < NPE; k++)
          acc[k] <= (first ? ACC_W'(0) : acc[k]) + ACC_W'(psum[k]);
      end
    end
  end
endmodule
