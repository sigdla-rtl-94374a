// tb_sigdla_fir: FIR filters run end to end on the SigDLA accelerator, at its default size.
//
// y[m] = sum_{i<L} h[i] x[m-i] is computed as a convolution on the computing array, eight
// outputs at a time: the input samples are the shared activation stream (packed E per
// word, E = 16, 4, 1 at 4, 8, 16 bits), and PE k holds the taps arranged for output m0+k,
// so that one sequence run of S steps produces y[m0..m0+7] in the accumulators. The
// samples before the first one are zero words placed ahead of the signal. The banded tap
// words are parameters that the host prepares and the DMA loads once per alignment; the
// samples are loaded once; results go off chip through the DMA.
// Workloads: a 256-sample signal with 20, 40 and 80 taps, and a 200-sample signal with 8
// taps, each at 4x4, 8x8 and 16x16 bits; every output is compared with a direct
// convolution computed here, and the cycle counts of the three widths are reported.
// The mapping onto the PEs and the data layout are this design's choice; the paper gives
// the principle (the FIR input mapped to the feature map, the taps to the kernel).
module tb_sigdla_fir;
  import sigdla_pkg::*;

  localparam int ACT = 0;       // on-chip word address of the padded signal
  localparam int WGT = 1024;    // tap words, one region per alignment
  localparam int WREG = 4096;   // size of one tap region

  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready, busy, bad_op;
  logic [63:0] inst = 0;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata;
  int checks = 0, failures = 0;
  int n_accum = 0;
  logic [63:0] prog [$];

  sigdla_top dut (.clk(clk), .rst_n(rst_n), .inst_valid(inst_valid), .inst_ready(inst_ready), .inst(inst),
    .busy(busy), .bad_op(bad_op), .ext_req(ext_req), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_gnt(ext_gnt), .ext_rvalid(ext_rvalid), .ext_rdata(ext_rdata));

  sigdla_ext_mem_model #(.MAX_WAIT(2), .LAT(2)) ext (.clk(clk), .req(ext_req), .we(ext_we), .addr(ext_addr),
    .wdata(ext_wdata), .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_acc.in_valid && dut.u_acc.last && !dut.u_acc.first) n_accum++;
  end

  initial begin
    repeat (2000000) @(posedge clk);
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

  // random signed value of w bits
  function automatic int rnd(int w);
    return int'($urandom_range((1 << w) - 1)) - (1 << (w - 1));
  endfunction

  task automatic run_fir(int n, int taps, logic [1:0] bw, output int cycles);
    int w, e, pad, nwords, nblk, cyc;
    int x [], h [];
    longint y;
    w = 4 << bw;
    e = 16 / ((w / 4) * (w / 4));
    pad = ((taps - 1 + e - 1) / e) * e;        // zero samples ahead of x[0], a multiple of E
    nwords = (n + pad + 8 + e - 1) / e + 1;
    nblk = (n + 7) / 8;
    x = new[n]; h = new[taps];
    foreach (x[i]) x[i] = rnd(w);
    foreach (h[i]) h[i] = rnd(w);
    cycles = 0;

    // padded signal x'[j] = x[j - pad], E elements per word
    for (int wd = 0; wd < nwords; wd++) begin
      logic [63:0] word;
      word = 0;
      for (int k = 0; k < e; k++) begin
        int j;
        j = wd * e + k - pad;
        if (j >= 0 && j < n) word[w * k +: 16] = 16'(x[j]) & 16'((1 << w) - 1);
      end
      ext.poke(32'h10000 + wd, word);
    end
    put(OP_CTRL_BITWIDTH, {14'd0, bw, 14'd0, bw});
    put(OP_DMA_EXT, 32'h10000); put(OP_DMA_INT, ACT); put(OP_DMA_LOAD, nwords);
    run_prog(cyc);
    cycles += cyc;

    // one tap region per alignment of m0 within a word
    for (int v = 0; v < (e + 7) / 8; v++) begin
      int m0, f, s_n;
      m0 = 8 * v;
      f = ((m0 + pad - taps + 1) / e) * e;     // first padded sample used, word aligned
      s_n = (m0 + 7 + pad - f) / e + 1;
      for (int s = 0; s < s_n; s++)
        for (int k = 0; k < N_PE; k++) begin
          logic [63:0] word;
          word = 0;
          for (int q = 0; q < e; q++) begin
            int i;
            i = m0 + k + pad - (f + e * s + q);
            if (i >= 0 && i < taps) word[w * q +: 16] = 16'(h[i]) & 16'((1 << w) - 1);
          end
          ext.poke(32'h20000 + v * WREG + s * N_PE + k, word);
        end
      put(OP_DMA_EXT, 32'h20000 + v * WREG); put(OP_DMA_INT, WGT + v * WREG); put(OP_DMA_LOAD, s_n * N_PE);
    end
    run_prog(cyc);
    cycles += cyc;

    for (int b = 0; b < nblk; b++) begin
      int m0, v, f, s_n;
      m0 = 8 * b;
      v = (m0 % e) / 8;
      f = ((m0 + pad - taps + 1) / e) * e;
      s_n = (m0 + 7 + pad - f) / e + 1;
      put(OP_SEQ_ACT, ACT + f / e); put(OP_SEQ_WGT, WGT + v * WREG);
      put(OP_SEQ_OUT, 32'h30000 + m0); put(OP_SEQ_RUN, s_n);
    end
    run_prog(cyc);
    cycles += cyc;

    for (int m = 0; m < n; m++) begin
      y = 0;
      for (int i = 0; i < taps; i++) if (m - i >= 0) y += longint'(h[i]) * longint'(x[m - i]);
      chk(ext.peek(32'h30000 + m) == 64'(y),
          $sformatf("n=%0d taps=%0d w=%0d y[%0d] got %0d exp %0d", n, taps, w, m, $signed(ext.peek(32'h30000 + m)), y));
    end
  endtask

  initial begin
    int c [3];
    int sizes [4][2] = '{'{256, 20}, '{256, 40}, '{256, 80}, '{200, 8}};
    repeat (3) @(posedge clk);
    rst_n = 1;
    foreach (sizes[z]) begin
      for (int bw = 0; bw < 3; bw++) run_fir(sizes[z][0], sizes[z][1], 2'(bw), c[bw]);
      $display("%0d samples, %0d taps: cycles 4x4=%0d 8x8=%0d 16x16=%0d", sizes[z][0], sizes[z][1], c[0], c[1], c[2]);
      chk(c[0] < c[1] && c[1] < c[2], "narrower data runs faster");
    end
    chk(n_accum > 0, "multi-step accumulation happened");
    chk(!bad_op, "no bad opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
