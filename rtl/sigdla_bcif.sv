// sigdla_bcif: buffer controller interface (BCIF) of the SigDLA shuffling fabric.
//
// Holds the register file for the buffer-access instructions and the 16-word data buffer
// that feeds the data shuffling unit.
//   rd-buf (payload: bank-start[14:8], bank-offset[7:4], length[3:0]) reads length+1
//     words starting at SP_BASE + bank-start*16 + bank-offset into the buffer, appended
//     after the words already fetched for this task (slots wrap after 16).
//   wr-buf (payload: bank-start[10:4], bank-offset[3:0]) starts the shuffle of the
//     buffered words (shuffle_start), waits for the padded word from the padding unit and
//     writes it to SP_BASE + bank-start*16 + bank-offset. The buffer fill pointer then
//     restarts at slot 0 for the next task.
// Timing: one read per cycle, data stored one cycle later; rd-buf of L+1 words is busy for
// L+2 cycles. busy is high from the cycle after an instruction until it completes.
//
// Field positions follow the paper's worked example (0xe11 reads e1 and e2, 0xff writes
// ff); field widths above the printed hex digits, the 16-word bank and length+1 counting
// are this design's reading of that example.
module sigdla_bcif
  import sigdla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              rd_buf,
  input  logic              wr_buf,
  input  logic [31:0]       payload,
  output logic              busy,
  // on-chip memory port
  output logic              mem_re,
  output logic              mem_we,
  output logic [MEM_AW-1:0] mem_addr,
  output logic [WORD_W-1:0] mem_wdata,
  input  logic [WORD_W-1:0] mem_rdata,
  // to the data shuffling unit
  output logic [WORD_W-1:0] buf_words [BUF_WORDS],
  output logic              shuffle_start,
  // from the data padding unit
  input  logic              wb_valid,
  input  logic [WORD_W-1:0] wb_word
);
  localparam int PW = $clog2(BUF_WORDS);
  typedef enum logic [1:0] {IDLE, READ, WAIT_WB} state_e;

  state_e            state;
  logic [MEM_AW-1:0] rd_ptr, wr_addr;
  logic [4:0]        rd_left;
  logic [PW-1:0]     fill, fill_q;
  logic              rv_q;

  function automatic logic [MEM_AW-1:0] sp_addr(input logic [6:0] bank, input logic [3:0] off);
    return MEM_AW'(SP_BASE) + MEM_AW'({bank, off});
  endfunction

  assign busy          = (state != IDLE) || rv_q;
  assign mem_re        = (state == READ);
  assign mem_we        = (state == WAIT_WB) && wb_valid;
  assign mem_addr      = (state == WAIT_WB) ? wr_addr : rd_ptr;
  assign mem_wdata     = wb_word;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      rd_ptr <= '0; wr_addr <= '0; rd_left <= '0;
      fill <= '0; fill_q <= '0; rv_q <= 1'b0;
      shuffle_start <= 1'b0;
      for (int i = 0; i < BUF_WORDS; i++) buf_words[i] <= '0;
    end else begin
      shuffle_start <= 1'b0;
      rv_q   <= (state == READ);
      fill_q <= fill;
      if (rv_q) buf_words[fill_q] <= mem_rdata;
      case (state)
        IDLE: begin
          if (rd_buf) begin
            rd_ptr  <= sp_addr(payload[14:8], payload[7:4]);
            rd_left <= 5'(payload[3:0]) + 5'd1;
            state   <= READ;
          end else if (wr_buf) begin
            wr_addr       <= sp_addr(payload[10:4], payload[3:0]);
            shuffle_start <= 1'b1;
            state         <= WAIT_WB;
          end
        end
        READ: begin
          rd_ptr  <= rd_ptr + 1'b1;
          fill    <= fill + 1'b1;
          rd_left <= rd_left - 5'd1;
          if (rd_left == 5'd1) state <= IDLE;
        end
        WAIT_WB: if (wb_valid) begin
          fill  <= '0;
          state <= IDLE;
        end
        default: state <= IDLE;
      endcase
    end
  end
endmodule
