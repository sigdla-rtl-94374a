// sigdla_dma: DMA engine of SigDLA.
//
// Moves 64-bit words between the off-chip memory (through the memory controller port
// ext_*) and the on-chip buffer, and writes the accumulator results out.
//   load  : len words from off-chip ext_base.. into on-chip int_base..
//   store : len words from on-chip int_base.. to off-chip ext_base..
//   result: when res_valid pulses while idle, the NPE results are latched and written,
//           sign-extended to 64 bits, to res_base..res_base+NPE-1: off chip, or, when the
//           top bit of res_base is set, into the on-chip buffer at res_base[MEM_AW-1:0]..
//           (one word per cycle), so that a following step can pick them up without an
//           off-chip round trip.
// Off-chip port: a request (ext_req, ext_we, ext_addr, ext_wdata) is held until ext_gnt;
// read data returns on ext_rvalid/ext_rdata, any number of cycles later. One request is
// outstanding at a time. busy is high from the cycle after a command until it completes.
//
// That the DMA engine moves data between off-chip and on-chip memory and receives the
// accumulator output follows the paper, as does keeping FFT results on chip for the CNN
// that follows ("continuous in the switching process between FFT and CNN, without writing
// data to off-chip memory"); the res_base flag that selects it, the commands, the port
// protocol and the one-request-at-a-time operation are this design's choice.
module sigdla_dma
  import sigdla_pkg::*;
#(
  parameter int NPE = N_PE
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // commands
  input  logic                    load,
  input  logic                    store,
  input  logic [15:0]             len,
  input  logic [EXT_AW-1:0]       ext_base,
  input  logic [MEM_AW-1:0]       int_base,
  input  logic                    res_valid,
  input  logic signed [ACC_W-1:0] res      [NPE],
  input  logic [EXT_AW-1:0]       res_base,
  output logic                    busy,
  // off-chip memory controller
  output logic                    ext_req,
  output logic                    ext_we,
  output logic [EXT_AW-1:0]       ext_addr,
  output logic [WORD_W-1:0]       ext_wdata,
  input  logic                    ext_gnt,
  input  logic                    ext_rvalid,
  input  logic [WORD_W-1:0]       ext_rdata,
  // on-chip memory
  output logic                    mem_re,
  output logic                    mem_we,
  output logic [MEM_AW-1:0]       mem_addr,
  output logic [WORD_W-1:0]       mem_wdata,
  input  logic [WORD_W-1:0]       mem_rdata
);
  typedef enum logic [2:0] {IDLE, LD_REQ, LD_WAIT, ST_RD, ST_CAP, ST_REQ, RS_REQ, RS_MEM} state_e;

  state_e              state;
  logic [15:0]         cnt, n_words;
  logic [EXT_AW-1:0]   ext_a;
  logic [MEM_AW-1:0]   int_a;
  logic [WORD_W-1:0]   wbuf;
  logic signed [ACC_W-1:0] res_q [NPE];

  assign busy = (state != IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state   <= IDLE;
      cnt     <= '0;
      n_words <= '0;
      ext_a   <= '0;
      int_a   <= '0;
      wbuf    <= '0;
      for (int k = 0; k < NPE; k++) res_q[k] <= '0;
    end else begin
      case (state)
        IDLE: begin
          cnt <= '0;
          if (res_valid) begin
            for (int k = 0; k < NPE; k++) res_q[k] <= res[k];
            ext_a   <= res_base;
            int_a   <= res_base[MEM_AW-1:0];
            n_words <= 16'(NPE);
            state   <= res_base[EXT_AW-1] ? RS_MEM : RS_REQ;
          end else if (load && len != 0) begin
            ext_a <= ext_base; int_a <= int_base; n_words <= len; state <= LD_REQ;
          end else if (store && len != 0) begin
            ext_a <= ext_base; int_a <= int_base; n_words <= len; state <= ST_RD;
          end
        end
        LD_REQ:  if (ext_gnt) state <= LD_WAIT;
        LD_WAIT: if (ext_rvalid) begin
          cnt   <= cnt + 16'd1;
          ext_a <= ext_a + 1'b1;
          int_a <= int_a + 1'b1;
          state <= (cnt + 16'd1 == n_words) ? IDLE : LD_REQ;
        end
        ST_RD:  state <= ST_CAP;
        ST_CAP: begin wbuf <= mem_rdata; state <= ST_REQ; end
        ST_REQ: if (ext_gnt) begin
          cnt   <= cnt + 16'd1;
          ext_a <= ext_a + 1'b1;
          int_a <= int_a + 1'b1;
          state <= (cnt + 16'd1 == n_words) ? IDLE : ST_RD;
        end
        RS_REQ: if (ext_gnt) begin
          cnt   <= cnt + 16'd1;
          ext_a <= ext_a + 1'b1;
          state <= (cnt + 16'd1 == n_words) ? IDLE : RS_REQ;
        end
        RS_MEM: begin
          cnt   <= cnt + 16'd1;
          int_a <= int_a + 1'b1;
          state <= (cnt + 16'd1 == n_words) ? IDLE : RS_MEM;
        end
        default: state <= IDLE;
      endcase
    end
  end

  always_comb begin
    ext_req   = (state == LD_REQ) || (state == ST_REQ) || (state == RS_REQ);
    ext_we    = (state == ST_REQ) || (state == RS_REQ);
    ext_addr  = ext_a;
    ext_wdata = (state == RS_REQ) ? WORD_W'(res_q[cnt[$clog2(NPE)-1:0]]) : wbuf;
    mem_re    = (state == ST_RD);
    mem_we    = ((state == LD_WAIT) && ext_rvalid) || (state == RS_MEM);
    mem_addr  = int_a;
    mem_wdata = (state == RS_MEM) ? WORD_W'(res_q[cnt[$clog2(NPE)-1:0]]) : ext_rdata;
  end
endmodule
