// sigdla_seq_ctrl: sequence controller of SigDLA.
//
// Streams one operation from the on-chip buffer into the computing array: for step
// s = 0..steps-1 it reads activation word act_base+s and the NPE weight words
// wgt_base+NPE*s .. +NPE-1 (one per PE), one step per cycle. The array's partial sums are
// accumulated over all steps, so the operation is NPE dot products of 'steps' words each.
// Data that needed shuffling has already been rewritten in place by the shuffling fabric,
// so this controller reads the buffer the same way for both kinds of work.
//
// Timing: reads are issued in the cycles after 'run'; arr_valid is high one cycle later
// (with the memory data); acc_valid/acc_first/acc_last are high two cycles after the read
// (with the PE output). busy stays high until acc_done (accumulator result) arrives.
// steps = 0 is treated as 1.
//
// Its role follows the paper; the addressing scheme is this design's choice.
module sigdla_seq_ctrl
  import sigdla_pkg::*;
#(
  parameter int NPE = N_PE
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic [MEM_AW-1:0] act_base,
  input  logic [MEM_AW-1:0] wgt_base,
  input  logic [15:0]       steps,
  input  logic              acc_done,
  output logic              busy,
  output logic              act_re,
  output logic [MEM_AW-1:0] act_addr,
  output logic              wgt_re,
  output logic [MEM_AW-1:0] wgt_addr,
  output logic              arr_valid,
  output logic              acc_valid,
  output logic              acc_first,
  output logic              acc_last
);
  typedef enum logic [1:0] {IDLE, ISSUE, DRAIN} state_e;

  state_e      state;
  logic [15:0] s, n;
  logic [MEM_AW-1:0] a_ptr, w_ptr;
  logic        v1, f1, l1, v2, f2, l2;

  assign busy     = (state != IDLE);
  assign act_re   = (state == ISSUE);
  assign wgt_re   = (state == ISSUE);
  assign act_addr = a_ptr;
  assign wgt_addr = w_ptr;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      s <= '0; n <= '0; a_ptr <= '0; w_ptr <= '0;
      {v1, f1, l1, v2, f2, l2} <= '0;
    end else begin
      case (state)
        IDLE: if (run) begin
          s <= '0;
          n <= (steps == 0) ? 16'd1 : steps;
          a_ptr <= act_base;
          w_ptr <= wgt_base;
          state <= ISSUE;
        end
        ISSUE: begin
          s     <= s + 16'd1;
          a_ptr <= a_ptr + 1'b1;
          w_ptr <= w_ptr + MEM_AW'(NPE);
          if (s + 16'd1 == n) state <= DRAIN;
        end
        DRAIN: if (acc_done) state <= IDLE;
        default: state <= IDLE;
      endcase
      v1 <= (state == ISSUE);
      f1 <= (state == ISSUE) && (s == 0);
      l1 <= (state == ISSUE) && (s + 16'd1 == n);
      {v2, f2, l2} <= {v1, f1, l1};
    end
  end

  assign arr_valid = v1;
  assign acc_valid = v2;
  assign acc_first = f2;
  assign acc_last  = l2;
endmodule
