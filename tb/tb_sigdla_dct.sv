// tb_sigdla_dct: 8x8 two-dimensional DCT run end to end on the SigDLA accelerator, at its
// default size.
//
// The 2D-DCT Z = C X C^T is two passes of dot products on the computing array at 8x8 bits,
// with the DCT-II matrix in fixed point (Cq = round(128 C), |Cq| <= 64):
//   pass 1, one sequence run per row i of X: the activation stream is row i (two words of
//     four 8-bit samples), PE k holds row k of Cq, giving Y128[i][k] = sum_j X[i][j] Cq[k][j];
//     the eight results are written back on chip;
//   pass 2, one run per column k: the activation words are column k of Y, gathered by the
//     shuffling fabric from eight different result words (a transpose), taking nibbles 2-3
//     of each result (Y128 / 256, back to 8 bits); PE u again holds row u of Cq, so the
//     results are Zraw[u][k] = sum_i Cq[u][i] Y'[i][k], about 64 Z[u][k].
// The tap words of Cq are loaded once and serve both passes. Zraw is stored off chip and
// compared bit-exactly with a model of the same arithmetic (floor division, 8-bit wrap),
// and Zraw/64 is compared with a floating-point DCT within a bound set by the rounding.
// Size: 8x8 blocks (a choice; the paper does not give the DCT size), two random blocks of
// samples in [-32, 31]. The two-pass mapping and the scaling are this design's choice; the
// paper gives the principle (a DCT's matrix operations mapped onto the convolution array).
module tb_sigdla_dct;
  import sigdla_pkg::*;

  localparam int Z  = 'h000;   // zero words
  localparam int XB = 'h010;   // input rows, two words per row
  localparam int W1 = 'h020;   // Cq tap words: step s, PE k at W1 + 8s + k
  localparam int R1 = 'h040;   // pass-1 results, 8 words per row
  localparam int A2 = 'h080;   // pass-2 activation words, two per column

  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready, busy, bad_op;
  logic [63:0] inst = 0;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata;
  int checks = 0, failures = 0;
  int n_shuffle = 0, n_onchip_res = 0;
  logic [63:0] prog [$];

  sigdla_top dut (.clk(clk), .rst_n(rst_n), .inst_valid(inst_valid), .inst_ready(inst_ready), .inst(inst),
    .busy(busy), .bad_op(bad_op), .ext_req(ext_req), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_gnt(ext_gnt), .ext_rvalid(ext_rvalid), .ext_rdata(ext_rdata));

  sigdla_ext_mem_model #(.MAX_WAIT(2), .LAT(2)) ext (.clk(clk), .req(ext_req), .we(ext_we), .addr(ext_addr),
    .wdata(ext_wdata), .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_fabric.u_bcif.mem_we) n_shuffle++;
    if (dut.u_dma.mem_we && !dut.u_dma.ext_rvalid) n_onchip_res++;
  end

  initial begin
    repeat (200000) @(posedge clk);
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

  // gather: output nibble u = nibble src_nib[u] of signal-region word src_addr[u]
  task automatic build_word(int src_addr[16], int src_nib[16], int dst);
    int uniq [$];
    int idx [16];
    for (int u = 0; u < 16; u++) begin
      int f [$];
      f = uniq.find_first_index(x) with (x == src_addr[u]);
      if (f.size() == 0) begin idx[u] = uniq.size(); uniq.push_back(src_addr[u]); end
      else idx[u] = f[0];
    end
    foreach (uniq[i]) put(OP_RD_BUF, {17'd0, 7'(uniq[i] >> 4), 4'(uniq[i]), 4'd0});
    for (int u = 0; u < 16; u++) put(OP_CTRL_SHUFFLING, {19'd0, (u == 15), 4'(u), 4'(idx[u]), 4'(src_nib[u])});
    put(OP_CTRL_PADDING, 32'd0);
    put(OP_WR_BUF, {21'd0, 11'(dst)});
  endtask

  int cq [8][8];
  real cf [8][8];

  task automatic run_block(int blk);
    int x [8][8];
    longint y128 [8][8];
    int yq [8][8];
    longint zraw [8][8];
    int sa [16], sn [16];
    int cyc, total;
    real maxerr;
    total = 0;
    for (int i = 0; i < 8; i++) for (int j = 0; j < 8; j++) x[i][j] = int'($urandom_range(63)) - 32;
    for (int i = 0; i < 8; i++)
      for (int h = 0; h < 2; h++)
        ext.poke(32'h1000 + 2 * i + h, {32'd0, 8'(x[i][4*h+3]), 8'(x[i][4*h+2]), 8'(x[i][4*h+1]), 8'(x[i][4*h])});
    put(OP_CTRL_BITWIDTH, 32'h0001_0001);
    put(OP_DMA_EXT, 32'h1000); put(OP_DMA_INT, SP_BASE + XB); put(OP_DMA_LOAD, 16);
    // pass 1: rows
    for (int i = 0; i < 8; i++) begin
      put(OP_SEQ_ACT, SP_BASE + XB + 2 * i); put(OP_SEQ_WGT, SP_BASE + W1);
      put(OP_SEQ_OUT, 32'h8000_0000 | (SP_BASE + R1 + 8 * i)); put(OP_SEQ_RUN, 2);
    end
    // pass 2: transpose through the shuffling fabric, then columns
    for (int k = 0; k < 8; k++) begin
      for (int s = 0; s < 2; s++) begin
        for (int u = 0; u < 16; u++) begin
          if (u < 8) begin sa[u] = R1 + 8 * (4 * s + u / 2) + k; sn[u] = 2 + u % 2; end
          else begin sa[u] = Z; sn[u] = 0; end
        end
        build_word(sa, sn, A2 + 2 * k + s);
      end
      put(OP_SEQ_ACT, SP_BASE + A2 + 2 * k); put(OP_SEQ_WGT, SP_BASE + W1);
      put(OP_SEQ_OUT, 32'h5000 + 8 * k); put(OP_SEQ_RUN, 2);
    end
    run_prog(cyc);
    total += cyc;

    // model
    for (int i = 0; i < 8; i++)
      for (int k = 0; k < 8; k++) begin
        y128[i][k] = 0;
        for (int j = 0; j < 8; j++) y128[i][k] += longint'(x[i][j] * cq[k][j]);
        yq[i][k] = int'($signed(8'(y128[i][k] >>> 8)));
      end
    maxerr = 0.0;
    for (int u = 0; u < 8; u++)
      for (int k = 0; k < 8; k++) begin
        real zf, err;
        zraw[u][k] = 0;
        for (int i = 0; i < 8; i++) zraw[u][k] += longint'(cq[u][i] * yq[i][k]);
        chk(ext.peek(32'h5000 + 8 * k + u) == 64'(zraw[u][k]),
            $sformatf("block %0d Z[%0d][%0d] got %0d exp %0d", blk, u, k, $signed(ext.peek(32'h5000 + 8 * k + u)), zraw[u][k]));
        zf = 0.0;
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) zf += cf[u][i] * x[i][j] * cf[k][j];
        err = zf - real'(zraw[u][k]) / 64.0;
        if (err < 0.0) err = -err;
        if (err > maxerr) maxerr = err;
      end
    $display("block %0d: %0d cycles, largest deviation from the exact DCT %0.2f", blk, total, maxerr);
    chk(maxerr <= 8.0, $sformatf("block %0d close to the exact DCT (%0.2f)", blk, maxerr));
  endtask

  initial begin
    int cyc;
    for (int k = 0; k < 8; k++)
      for (int j = 0; j < 8; j++) begin
        cf[k][j] = ((k == 0) ? $sqrt(0.125) : 0.5) * $cos((2 * j + 1) * k * 3.14159265358979 / 16.0);
        cq[k][j] = int'($rtoi($floor(128.0 * cf[k][j] + 0.5)));
      end
    for (int s = 0; s < 2; s++)
      for (int k = 0; k < 8; k++)
        ext.poke(32'h2000 + 8 * s + k, {32'd0, 8'(cq[k][4*s+3]), 8'(cq[k][4*s+2]), 8'(cq[k][4*s+1]), 8'(cq[k][4*s])});
    ext.poke(32'h3000, 64'd0);
    repeat (3) @(posedge clk);
    rst_n = 1;
    put(OP_DMA_EXT, 32'h3000); put(OP_DMA_INT, SP_BASE + Z); put(OP_DMA_LOAD, 1);
    put(OP_DMA_EXT, 32'h2000); put(OP_DMA_INT, SP_BASE + W1); put(OP_DMA_LOAD, 16);
    run_prog(cyc);
    run_block(0);
    run_block(1);
    $display("mechanisms: shuffle=%0d onchip_results=%0d", n_shuffle, n_onchip_res);
    chk(n_shuffle == 32 && n_onchip_res == 128, "transpose shuffles and on-chip results happened");
    chk(!bad_op, "no bad opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
