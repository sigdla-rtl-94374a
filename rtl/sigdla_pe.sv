// sigdla_pe: precision-scalable processing element of the SigDLA computing array.
//
// One PE multiplies the shared 64-bit activation word by its own 64-bit weight word as a
// dot product along the input channels. The bitwidth controller decodes the data and
// weight widths (4, 8 or 16 bits each) into multiplexer selects; the input mapping unit
// routes nibbles to 16 4-bit multipliers; the configurable shifter moves each product to
// its place (shift 0..24) and the adder tree sums all 16. Per cycle the PE consumes 16
// 4x4, 8 8x4, 4 8x8, 1 16x16 (16/(na*nw) in general) element pairs.
//
// Timing: mapping, multipliers, shifter and tree are combinational; psum and out_valid are
// registered, one cycle after in_valid. Reset clears out_valid only.
//
// The structure (bitwidth controller, input mapping, 16 multipliers, shifter, adder tree)
// follows the paper; the single pipeline register is this design's choice.
module sigdla_pe
  import sigdla_pkg::*;
(
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic [WORD_W-1:0]        act,
  input  logic [WORD_W-1:0]        wgt,
  input  logic [1:0]               data_bw,
  input  logic [1:0]               weight_bw,
  output logic                     out_valid,
  output logic signed [PSUM_W-1:0] psum
);
  mul_map_t                  map     [N_MUL];
  logic [NIB_W-1:0]          a_nib   [N_MUL];
  logic [NIB_W-1:0]          w_nib   [N_MUL];
  logic signed [PROD_W-1:0]  prod    [N_MUL];
  logic [2:0]                shamt   [N_MUL];
  logic signed [PSUM_W-1:0]  shifted [N_MUL];
  logic signed [PSUM_W-1:0]  sum;

  sigdla_bitwidth_ctrl #(.N(N_MUL)) u_bwc (
    .data_bw(data_bw), .weight_bw(weight_bw), .map(map)
  );

  sigdla_input_map #(.N(N_MUL)) u_map (
    .act(act), .wgt(wgt), .map(map), .a_nib(a_nib), .w_nib(w_nib)
  );

  for (genvar m = 0; m < N_MUL; m++) begin : g_mul
    sigdla_mul4 u_mul (
      .a(a_nib[m]), .w(w_nib[m]), .a_signed(map[m].a_sgn), .w_signed(map[m].w_sgn), .p(prod[m])
    );
    assign shamt[m] = map[m].shamt;
  end

  sigdla_shifter #(.N(N_MUL), .OUT_W(PSUM_W)) u_shift (
    .prod(prod), .shamt(shamt), .shifted(shifted)
  );

  sigdla_adder_tree #(.N(N_MUL), .W(PSUM_W)) u_tree (
    .in(shifted), .sum(sum)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      psum      <= '0;
    end else begin
      out_valid <= in_valid;
      if (in_valid) psum <= sum;
    end
  end
endmodule
