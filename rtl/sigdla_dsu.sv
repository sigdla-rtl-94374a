// sigdla_dsu: data shuffling unit (DSU) of the SigDLA shuffling fabric.
//
// Sixteen identical shuffling units build one new 64-bit word out of nibbles taken from
// the 16 words of the BCIF buffer. Shuffling unit u has a register-file entry written by a
// ctrl-shuffling instruction (payload: finish-flag[12], unit-num[11:8], sel-code[7:4],
// split-code[3:0]): its first multiplexer picks buffer word sel-code, the word is
// registered as 16 nibbles, and its second multiplexer picks nibble split-code of that
// word and places it at nibble u of the output register. The finish-flag marks the
// configuration of a task complete; cfg_ready stays high until the next ctrl-shuffling
// without it. Units not rewritten keep their previous entry.
//
// Timing: out_valid and out_word two cycles after start (selected-word register, then
// output register). The register file is cleared by reset.
//
// The two-multiplexer unit, its registers, the sixteen units and the instruction fields
// follow the paper (field positions from its worked example); the cfg_ready rule is this
// design's reading of the finish-flag.
module sigdla_dsu
  import sigdla_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              cfg_we,
  input  logic [31:0]       cfg,
  output logic              cfg_ready,
  input  logic              start,
  input  logic [WORD_W-1:0] in_words [BUF_WORDS],
  output logic              out_valid,
  output logic [WORD_W-1:0] out_word
);
  logic [3:0]        sel   [N_SU];
  logic [3:0]        split [N_SU];
  logic [WORD_W-1:0] word_q [N_SU];
  logic              v1;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cfg_ready <= 1'b0;
      for (int u = 0; u < N_SU; u++) begin
        sel[u]   <= '0;
        split[u] <= '0;
      end
    end else if (cfg_we) begin
      sel[cfg[11:8]]   <= cfg[7:4];
      split[cfg[11:8]] <= cfg[3:0];
      cfg_ready        <= cfg[12];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      v1 <= 1'b0;
      out_valid <= 1'b0;
      out_word  <= '0;
      for (int u = 0; u < N_SU; u++) word_q[u] <= '0;
    end else begin
      v1        <= start;
      out_valid <= v1;
      if (start) begin
        for (int u = 0; u < N_SU; u++) word_q[u] <= in_words[sel[u]];
      end
      if (v1) begin
        for (int u = 0; u < N_SU; u++) out_word[NIB_W*u +: NIB_W] <= word_q[u][NIB_W*split[u] +: NIB_W];
      end
    end
  end

  a_configured: assert property (@(posedge clk) disable iff (!rst_n) start |-> cfg_ready)
    else $error("sigdla_dsu: shuffle started before the configuration was finished");
endmodule
