// tb_sigdla_conv: a 3x3 convolution layer run end to end on the SigDLA accelerator, at its
// default size.
//
// The layer is the building block of the CNN benchmarks (3x3 convolutions over many
// channels): an 8x8 feature map with 16 input channels, eight 3x3 kernels (one per PE),
// stride 1, no padding, giving 6x6 outputs for 8 output channels. A pixel's channels are
// packed E per word (E = 16, 8, 4 at 4x4, 8x4, 8x8 bits), so a pixel takes 16/E words.
// For each output pixel the DMA gathers its 3x3 window from the off-chip feature map into a
// contiguous run of on-chip words (three loads of three neighbouring pixels), and one
// sequence run of 9*16/E steps computes all eight output channels; the weights (step s =
// window position and channel group, PE k = kernel k) are loaded once. Results are written
// off chip and compared with a direct convolution computed here; the cycle count of each
// width is reported.
// Bitwidth pairs: 4x4 (the paper's fastest CNN setting), 8x4 (its speech-enhancement CNN:
// 8-bit pixels, 4-bit weights) and 8x8. The window gathering by DMA and the data layout are
// this design's choice; the paper does not describe the DLA's convolution data path.
module tb_sigdla_conv;
  import sigdla_pkg::*;

  localparam int H = 8, W = 8, C = 16, K = 3, OH = H - K + 1, OW = W - K + 1;
  localparam int ACT = 0;       // im2col windows
  localparam int WGT = 8192;    // weight words

  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready, busy, bad_op;
  logic [63:0] inst = 0;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata;
  int checks = 0, failures = 0;
  logic [63:0] prog [$];

  sigdla_top dut (.clk(clk), .rst_n(rst_n), .inst_valid(inst_valid), .inst_ready(inst_ready), .inst(inst),
    .busy(busy), .bad_op(bad_op), .ext_req(ext_req), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_gnt(ext_gnt), .ext_rvalid(ext_rvalid), .ext_rdata(ext_rdata));

  sigdla_ext_mem_model #(.MAX_WAIT(2), .LAT(2)) ext (.clk(clk), .req(ext_req), .we(ext_we), .addr(ext_addr),
    .wdata(ext_wdata), .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic put(opcode_e op, logic [31:0] p);
    prog.push_back({op, p});
  endtask

  task automatic run_prog(output int cycles);
    cycles = 0;
    while (prog.size() > 0) begin
      @(negedge clk);
      inst_valid = 1; inst = prog[0];
      @(posedge clk);
      cycles++;
      if (inst_ready) void'(prog.pop_front());
    end
    @(negedge clk);
    inst_valid = 0;
    while (busy) begin @(negedge clk); cycles++; end
  endtask

  function automatic int rnd(int w);
    return int'($urandom_range((1 << w) - 1)) - (1 << (w - 1));
  endfunction

  task automatic run_layer(logic [1:0] dbw, logic [1:0] wbw, output int cycles);
    int wa, ww, e, wpp, steps, cyc;
    int fm [H][W][C];
    int kw [N_PE][K][K][C];
    wa = 4 << dbw; ww = 4 << wbw;
    e = 16 / ((wa / 4) * (ww / 4));
    wpp = C / e;
    steps = K * K * wpp;
    cycles = 0;
    // off-chip feature map, pixel-major, and weights in step order
    for (int y = 0; y < H; y++)
      for (int x = 0; x < W; x++) begin
        for (int c = 0; c < C; c++) fm[y][x][c] = rnd(wa);
        for (int g = 0; g < wpp; g++) begin
          logic [63:0] word;
          word = 0;
          for (int q = 0; q < e; q++) word[wa * q +: 16] = 16'(fm[y][x][g * e + q]) & 16'((1 << wa) - 1);
          ext.poke(32'h10000 + (y * W + x) * wpp + g, word);
        end
      end
    for (int k = 0; k < N_PE; k++)
      for (int dy = 0; dy < K; dy++)
        for (int dx = 0; dx < K; dx++)
          for (int c = 0; c < C; c++) kw[k][dy][dx][c] = rnd(ww);
    for (int dy = 0; dy < K; dy++)
      for (int dx = 0; dx < K; dx++)
        for (int g = 0; g < wpp; g++)
          for (int k = 0; k < N_PE; k++) begin
            logic [63:0] word;
            int s;
            word = 0;
            s = (dy * K + dx) * wpp + g;
            for (int q = 0; q < e; q++) word[ww * q +: 16] = 16'(kw[k][dy][dx][g * e + q]) & 16'((1 << ww) - 1);
            ext.poke(32'h20000 + s * N_PE + k, word);
          end
    put(OP_CTRL_BITWIDTH, {14'd0, dbw, 14'd0, wbw});
    put(OP_DMA_EXT, 32'h20000); put(OP_DMA_INT, WGT); put(OP_DMA_LOAD, steps * N_PE);
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OW; ox++) begin
        int o;
        o = oy * OW + ox;
        for (int dy = 0; dy < K; dy++) begin
          put(OP_DMA_EXT, 32'h10000 + ((oy + dy) * W + ox) * wpp);
          put(OP_DMA_INT, ACT + o * steps + dy * K * wpp);
          put(OP_DMA_LOAD, K * wpp);
        end
        put(OP_SEQ_ACT, ACT + o * steps); put(OP_SEQ_WGT, WGT);
        put(OP_SEQ_OUT, 32'h30000 + 8 * o); put(OP_SEQ_RUN, steps);
      end
    run_prog(cyc);
    cycles += cyc;
    for (int oy = 0; oy < OH; oy++)
      for (int ox = 0; ox < OW; ox++)
        for (int k = 0; k < N_PE; k++) begin
          longint acc;
          acc = 0;
          for (int dy = 0; dy < K; dy++)
            for (int dx = 0; dx < K; dx++)
              for (int c = 0; c < C; c++) acc += longint'(fm[oy + dy][ox + dx][c] * kw[k][dy][dx][c]);
          chk(ext.peek(32'h30000 + 8 * (oy * OW + ox) + k) == 64'(acc),
              $sformatf("%0dx%0d out[%0d][%0d][%0d] got %0d exp %0d", wa, ww, k, oy, ox,
                        $signed(ext.peek(32'h30000 + 8 * (oy * OW + ox) + k)), acc));
        end
  endtask

  initial begin
    int c44, c84, c88;
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_layer(2'd0, 2'd0, c44);
    run_layer(2'd1, 2'd0, c84);
    run_layer(2'd1, 2'd1, c88);
    $display("3x3 conv, 8x8x16 -> 6x6x8: cycles 4x4=%0d 8x4=%0d 8x8=%0d", c44, c84, c88);
    chk(c44 < c84 && c84 < c88, "narrower operands run faster");
    chk(!bad_op, "no bad opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
