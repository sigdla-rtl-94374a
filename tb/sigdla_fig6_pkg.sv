// sigdla_fig6_pkg: the worked shuffling example used by several testbenches.
// Four 64-bit words sit at signal-region addresses e1, e2, f1, f2 (bank e/f, offsets 1/2).
// rd-buf 0xe11 and 0xf11 fetch them; ctrl-shuffling entries (unit u takes nibble u of
// word u/4) gather the 16-bit lanes 0a09, 1413, 2625, 302f into one word; ctrl-padding
// 0x10010 at 8-bit width replaces the lowest byte with 0x10; wr-buf 0xff stores the
// result at address ff.
package sigdla_fig6_pkg;
  localparam logic [63:0] W_E1 = 64'h100f_0e0d_0c0d_0a09;
  localparam logic [63:0] W_E2 = 64'h1817_1615_1413_1211;
  localparam logic [63:0] W_F1 = 64'h2827_2625_2423_2221;
  localparam logic [63:0] W_F2 = 64'h302f_2e2d_2c2b_2a29;
  localparam logic [63:0] SHUFFLED = 64'h302f_2625_1413_0a09;
  localparam logic [63:0] PADDED   = 64'h302f_2625_1413_0a10;
  localparam logic [31:0] RD_E = 32'h0000_0e11;
  localparam logic [31:0] RD_F = 32'h0000_0f11;
  localparam logic [31:0] WR_FF = 32'h0000_00ff;
  localparam logic [31:0] PAD  = 32'h0001_0010;
  localparam logic [31:0] BW88 = 32'h0001_0001;

  // ctrl-shuffling payload for unit u: finish-flag on the last unit.
  function automatic logic [31:0] shuf(int u);
    return {19'd0, (u == 15), 4'(u), 4'(u / 4), 4'(u)};
  endfunction
endpackage
