// tb_sigdla_fft: radix-2 FFT run end to end on the SigDLA accelerator, at its default size.
//
// The FFT is executed the way the accelerator turns signal processing into dot products:
// every butterfly x'(p) = x(p) + W x(q), x'(q) = x(p) - W x(q) becomes one sequence step in
// which the shared activation word holds the four 8-bit operands [pr, pi, qr, qi] and four
// PEs hold the butterfly-factor words
//     PE0 [16, 0, wr, -wi] -> 16 Re x'(p)     PE1 [16, 0, -wr,  wi] -> 16 Re x'(q)
//     PE2 [0, 16, wi,  wr] -> 16 Im x'(p)     PE3 [0, 16, -wi, -wr] -> 16 Im x'(q)
// (twiddles in fixed point with 16 = 1.0; PEs 4..7 get zero words). The irregular access
// pattern is handled by the shuffling fabric: for each butterfly, rd-buf fetches the words
// that hold p and q, sixteen ctrl-shuffling entries gather their nibbles into one word and
// wr-buf stores it in the signal region. The factor words are built the same way from a
// compact twiddle table [wr, wi, -wr, -wi], with the constant 16 inserted by the padding
// unit. Results are written back on chip as 48-bit values; the next stage takes nibbles 1
// and 2 of each (the value divided by 16, i.e. back to 8 bits), so the whole transform runs
// without leaving the chip until the last stage is stored off chip.
//
// Checks: every result word of the last stage against a bit-exact fixed-point model of the
// same arithmetic (floor division by 16, 8-bit wrap), and, for the 8-point transform whose
// values cannot overflow, the outputs against a floating-point DFT within a few LSBs.
// After each transform the spectrum is packed on chip by the fabric and a layer of eight
// kernels with 8-bit data and 4-bit weights runs on it (the FFT-then-CNN flow), checked
// against dot products computed here.
// The same transform also runs on 16-bit complex data at 16x16 bits: the array then takes
// one element pair per step, so each butterfly output is a 4-step dot product over four
// activation words (one operand each, gathered by the fabric), the factor words hold
// twiddles with 4096 = 1.0 and are loaded directly, and the next stage takes nibbles 3..6
// of each result (division by 4096).
// Sizes: 8 and 128 points at 8 bits, 8 and 128 points at 16 bits (128 is the smallest of
// the paper's 16-bit FFT sizes; 256 to 1024 points need more signal-region space than this
// layout's 8-word result blocks allow).
// The mapping of the butterfly onto the PEs, the data layout and the fixed-point scaling
// are this design's choice; the paper gives the principle (butterfly factors and signal
// data mapped onto a convolution, irregular data reorganised by the shuffling fabric,
// fixed coefficients inserted by padding).
module tb_sigdla_fft;
  import sigdla_pkg::*;

  localparam int Z   = 'h000;  // 16 zero words
  localparam int X   = 'h010;  // input samples, one per word: re byte 0, im byte 1
  localparam int T   = 'h090;  // twiddle table, one word per twiddle
  localparam int A   = 'h0d0;  // activation word per butterfly
  localparam int WB  = 'h110;  // 8 factor words per twiddle
  localparam int R0  = 'h310;  // result blocks, 8 words per butterfly (ping)
  localparam int R1  = 'h510;  // (pong)
  localparam int FW  = 0;      // 16-bit factor words, outside the signal region

  logic clk = 0, rst_n = 0;
  logic inst_valid = 0, inst_ready, busy, bad_op;
  logic [63:0] inst = 0;
  logic ext_req, ext_we, ext_gnt, ext_rvalid;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata;
  int checks = 0, failures = 0;
  int n_shuffle = 0, n_pad = 0, n_onchip_res = 0;
  logic [63:0] prog [$];

  sigdla_top dut (.clk(clk), .rst_n(rst_n), .inst_valid(inst_valid), .inst_ready(inst_ready), .inst(inst),
    .busy(busy), .bad_op(bad_op), .ext_req(ext_req), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata),
    .ext_gnt(ext_gnt), .ext_rvalid(ext_rvalid), .ext_rdata(ext_rdata));

  sigdla_ext_mem_model #(.MAX_WAIT(2), .LAT(2)) ext (.clk(clk), .req(ext_req), .we(ext_we), .addr(ext_addr),
    .wdata(ext_wdata), .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;

  always @(posedge clk) if (rst_n) begin
    if (dut.u_fabric.u_bcif.mem_we) n_shuffle++;
    if (dut.u_fabric.u_dpu.in_valid && dut.u_fabric.u_dpu.pad_pos != 0) n_pad++;
    if (dut.u_dma.mem_we && !dut.u_dma.ext_rvalid) n_onchip_res++;
  end

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

  // Build one word in the signal region: output nibble u = nibble src_nib[u] of the word at
  // signal-region address src_addr[u]; pad_mask/pad_val go to the padding unit (8-bit lanes).
  task automatic build_word(int src_addr[16], int src_nib[16], int dst, logic [15:0] pad_mask, logic [7:0] pad_v);
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
    put(OP_CTRL_PADDING, {pad_mask, 8'd0, pad_v});
    put(OP_WR_BUF, {21'd0, 11'(dst)});
  endtask

  function automatic int bitrev(int v, int bits);
    int r = 0;
    for (int i = 0; i < bits; i++) r |= ((v >> i) & 1) << (bits - 1 - i);
    return r;
  endfunction

  // element width wrap: 8 bits, or 16 bits in the wide format
  function automatic int narrow(longint v, bit wide);
    return wide ? int'($signed(16'(v))) : int'($signed(8'(v)));
  endfunction

  // one fixed-point FFT of n points; returns the number of cycles
  task automatic run_fft(int n, int amp, bit float_check, bit cnn, bit wide);
    int lg, cyc, total, one, sh, nn;
    int loc_re_a [], loc_re_n [], loc_im_a [], loc_im_n [];
    int xr [], xi [], mr [], mi [];
    int wr [], wi [];
    longint last_v [];
    int sa [16], sn [16];
    lg = $clog2(n);
    one = wide ? 4096 : 16;         // fixed-point 1.0 of the twiddles
    sh = wide ? 12 : 4;             // result bits dropped when taken to the next stage
    nn = wide ? 4 : 2;              // nibbles per element
    loc_re_a = new[n]; loc_re_n = new[n]; loc_im_a = new[n]; loc_im_n = new[n];
    xr = new[n]; xi = new[n]; mr = new[n]; mi = new[n];
    wr = new[n / 2]; wi = new[n / 2];
    last_v = new[n / 2 * 8];
    total = 0;

    // off-chip data: zero block, samples, twiddle table
    for (int i = 0; i < n; i++) begin
      xr[i] = int'($urandom_range(2 * amp)) - amp;
      xi[i] = int'($urandom_range(2 * amp)) - amp;
      ext.poke(32'h1000 + i, wide ? {32'd0, 16'(xi[i]), 16'(xr[i])} : {48'd0, 8'(xi[i]), 8'(xr[i])});
    end
    for (int t = 0; t < n / 2; t++) begin
      real ang;
      ang = 2.0 * 3.14159265358979 * t / n;
      wr[t] = int'($rtoi($floor(real'(one) * $cos(ang) + 0.5)));
      wi[t] = int'($rtoi($floor(-real'(one) * $sin(ang) + 0.5)));
      ext.poke(32'h2000 + t, {32'd0, 8'(-wi[t]), 8'(-wr[t]), 8'(wi[t]), 8'(wr[t])});
    end
    for (int i = 0; i < 16; i++) ext.poke(32'h3000 + i, 64'd0);

    put(OP_CTRL_BITWIDTH, wide ? 32'h0002_0002 : 32'h0001_0001);
    put(OP_DMA_EXT, 32'h3000); put(OP_DMA_INT, SP_BASE + Z); put(OP_DMA_LOAD, 16);
    put(OP_DMA_EXT, 32'h1000); put(OP_DMA_INT, SP_BASE + X); put(OP_DMA_LOAD, n);
    if (wide) begin
      // 16x16: one element pair per step, so a butterfly output is a 4-step dot product;
      // factor word for twiddle t, step s (operand pr, pi, qr, qi), PE k at FW + 32t + 8s + k
      for (int t = 0; t < n / 2; t++)
        for (int st = 0; st < 4; st++)
          for (int k = 0; k < N_PE; k++) begin
            int c [4][4];
            c = '{'{one, 0, wr[t], -wi[t]}, '{one, 0, -wr[t], wi[t]}, '{0, one, wi[t], wr[t]}, '{0, one, -wi[t], -wr[t]}};
            ext.poke(32'h8000 + 32 * t + 8 * st + k, (k < 4) ? {48'd0, 16'(c[k][st])} : 64'd0);
          end
      put(OP_DMA_EXT, 32'h8000); put(OP_DMA_INT, FW); put(OP_DMA_LOAD, n / 2 * 32);
    end else begin
    put(OP_DMA_EXT, 32'h2000); put(OP_DMA_INT, SP_BASE + T); put(OP_DMA_LOAD, n / 2);
    // zero words 4..7 of each factor block
    for (int t = 0; t < n / 2; t++) begin
      put(OP_DMA_EXT, 32'h3000); put(OP_DMA_INT, SP_BASE + WB + 8 * t + 4); put(OP_DMA_LOAD, 4);
    end
    // factor words: lane sources per PE (lane 0..3), -1 = zero, -2 = padded 16
    for (int t = 0; t < n / 2; t++) begin
      int lanes [4][4] = '{'{-2, -1, 0, 3}, '{-2, -1, 2, 1}, '{-1, -2, 1, 0}, '{-1, -2, 3, 2}};
      for (int k = 0; k < 4; k++) begin
        logic [15:0] mask;
        mask = 0;
        for (int u = 0; u < 16; u++) begin
          int ln;
          ln = (u < 8) ? lanes[k][u / 2] : -1;
          if (ln >= 0) begin sa[u] = T + t; sn[u] = 2 * ln + u % 2; end
          else begin sa[u] = Z; sn[u] = 0; end
          if (ln == -2) mask[u / 2] = 1'b1;
        end
        build_word(sa, sn, WB + 8 * t + k, mask, 8'h10);
      end
    end
    end
    run_prog(cyc);
    total += cyc;

    // bit-reversed input order, decimation in time
    for (int i = 0; i < n; i++) begin
      int s;
      s = bitrev(i, lg);
      loc_re_a[i] = X + s; loc_re_n[i] = 0; loc_im_a[i] = X + s; loc_im_n[i] = nn;
      mr[i] = xr[s]; mi[i] = xi[s];
    end
    for (int st = 0; st < lg; st++) begin
      int h, b, rb;
      h = 1 << st;
      rb = (st % 2 == 0) ? R0 : R1;
      b = 0;
      for (int g = 0; g < n; g += 2 * h) begin
        for (int j = 0; j < h; j++) begin
          int p, q, t;
          longint v [4];
          p = g + j; q = g + j + h; t = j * (n / (2 * h));
          if (wide) begin
            // four activation words, one operand each in the low 16 bits
            for (int st = 0; st < 4; st++) begin
              for (int u = 0; u < 16; u++) begin
                if (u >= 4) begin sa[u] = Z; sn[u] = 0; end
                else case (st)
                  0: begin sa[u] = loc_re_a[p]; sn[u] = loc_re_n[p] + u; end
                  1: begin sa[u] = loc_im_a[p]; sn[u] = loc_im_n[p] + u; end
                  2: begin sa[u] = loc_re_a[q]; sn[u] = loc_re_n[q] + u; end
                  default: begin sa[u] = loc_im_a[q]; sn[u] = loc_im_n[q] + u; end
                endcase
              end
              build_word(sa, sn, A + 4 * b + st, 16'd0, 8'd0);
            end
            put(OP_SEQ_ACT, SP_BASE + A + 4 * b); put(OP_SEQ_WGT, FW + 32 * t);
            put(OP_SEQ_OUT, 32'h8000_0000 | (SP_BASE + rb + 8 * b)); put(OP_SEQ_RUN, 4);
          end else begin
          // activation word [pr, pi, qr, qi]
          for (int u = 0; u < 16; u++) begin
            case (u / 2)
              0: begin sa[u] = loc_re_a[p]; sn[u] = loc_re_n[p] + u % 2; end
              1: begin sa[u] = loc_im_a[p]; sn[u] = loc_im_n[p] + u % 2; end
              2: begin sa[u] = loc_re_a[q]; sn[u] = loc_re_n[q] + u % 2; end
              3: begin sa[u] = loc_im_a[q]; sn[u] = loc_im_n[q] + u % 2; end
              default: begin sa[u] = Z; sn[u] = 0; end
            endcase
          end
          build_word(sa, sn, A + b, 16'd0, 8'd0);
          put(OP_SEQ_ACT, SP_BASE + A + b); put(OP_SEQ_WGT, SP_BASE + WB + 8 * t);
          put(OP_SEQ_OUT, 32'h8000_0000 | (SP_BASE + rb + 8 * b)); put(OP_SEQ_RUN, 1);
          end
          // model
          v[0] = one * mr[p] + wr[t] * mr[q] - wi[t] * mi[q];
          v[1] = one * mr[p] - wr[t] * mr[q] + wi[t] * mi[q];
          v[2] = one * mi[p] + wi[t] * mr[q] + wr[t] * mi[q];
          v[3] = one * mi[p] - wi[t] * mr[q] - wr[t] * mi[q];
          for (int k = 0; k < 8; k++) last_v[8 * b + k] = (k < 4) ? v[k] : 0;
          mr[p] = narrow(v[0] >>> sh, wide); mr[q] = narrow(v[1] >>> sh, wide);
          mi[p] = narrow(v[2] >>> sh, wide); mi[q] = narrow(v[3] >>> sh, wide);
          loc_re_a[p] = rb + 8 * b;     loc_re_n[p] = sh / 4;
          loc_re_a[q] = rb + 8 * b + 1; loc_re_n[q] = sh / 4;
          loc_im_a[p] = rb + 8 * b + 2; loc_im_n[p] = sh / 4;
          loc_im_a[q] = rb + 8 * b + 3; loc_im_n[q] = sh / 4;
          b++;
        end
      end
      run_prog(cyc);
      total += cyc;
      if (st == lg - 1) begin
        put(OP_DMA_EXT, 32'h4000); put(OP_DMA_INT, SP_BASE + rb); put(OP_DMA_STORE, n / 2 * 8);
        run_prog(cyc);
        for (int w = 0; w < n / 2 * 8; w++)
          chk(ext.peek(32'h4000 + w) == 64'(last_v[w]),
              $sformatf("n=%0d result word %0d got %0d exp %0d", n, w, $signed(ext.peek(32'h4000 + w)), last_v[w]));
      end
    end

    if (float_check) begin
      real err, maxerr;
      maxerr = 0.0;
      for (int k = 0; k < n; k++) begin
        real sr, si;
        sr = 0.0; si = 0.0;
        for (int i = 0; i < n; i++) begin
          real a;
          a = -2.0 * 3.14159265358979 * i * k / n;
          sr += xr[i] * $cos(a) - xi[i] * $sin(a);
          si += xr[i] * $sin(a) + xi[i] * $cos(a);
        end
        err = (sr - mr[k] > 0.0) ? sr - mr[k] : mr[k] - sr;
        if (err > maxerr) maxerr = err;
        err = (si - mi[k] > 0.0) ? si - mi[k] : mi[k] - si;
        if (err > maxerr) maxerr = err;
      end
      $display("n=%0d, %0d-bit: largest deviation from the exact DFT: %0.2f LSB", n, 4 * nn, maxerr);
      chk(maxerr <= (wide ? real'(n) : 5.0), $sformatf("n=%0d FFT close to the DFT (%0.2f)", n, maxerr));
    end

    if (cnn) begin
      // the spectrum feeds a layer without leaving the chip: the fabric packs the 2n 8-bit
      // values [re0, im0, re1, im1, ...] eight to a word, then eight kernels of 4-bit
      // weights run over them at 8x4 bits
      int nw;
      logic [63:0] wt [];
      nw = 2 * n / 8;
      wt = new[nw * N_PE];
      for (int s = 0; s < nw; s++) begin
        for (int u = 0; u < 16; u++) begin
          int pt;
          pt = (8 * s + u / 2) / 2;
          if (((8 * s + u / 2) % 2) == 0) begin sa[u] = loc_re_a[pt]; sn[u] = loc_re_n[pt] + u % 2; end
          else begin sa[u] = loc_im_a[pt]; sn[u] = loc_im_n[pt] + u % 2; end
        end
        build_word(sa, sn, A + s, 16'd0, 8'd0);
      end
      foreach (wt[i]) begin wt[i] = {32'd0, $urandom}; ext.poke(32'h6000 + i, wt[i]); end
      put(OP_CTRL_BITWIDTH, 32'h0001_0000);
      put(OP_DMA_EXT, 32'h6000); put(OP_DMA_INT, 32'd0); put(OP_DMA_LOAD, nw * N_PE);
      put(OP_SEQ_ACT, SP_BASE + A); put(OP_SEQ_WGT, 32'd0); put(OP_SEQ_OUT, 32'h7000); put(OP_SEQ_RUN, nw);
      run_prog(cyc);
      total += cyc;
      for (int k = 0; k < N_PE; k++) begin
        longint e;
        e = 0;
        for (int s = 0; s < nw; s++)
          for (int q = 0; q < 8; q++) begin
            int v, wv;
            v = ((8 * s + q) % 2 == 0) ? mr[(8 * s + q) / 2] : mi[(8 * s + q) / 2];
            wv = int'($signed(wt[s * N_PE + k][4 * q +: 4]));
            e += longint'(v * wv);
          end
        chk(ext.peek(32'h7000 + k) == 64'(e), $sformatf("layer on the spectrum, kernel %0d got %0d exp %0d",
                                                       k, $signed(ext.peek(32'h7000 + k)), e));
      end
    end
    $display("%0d-point %0d-bit FFT: %0d cycles including twiddle preparation", n, 4 * nn, total);
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run_fft(8, 7, 1, 1, 0);
    run_fft(128, 1, 0, 1, 0);
    run_fft(8, 1000, 1, 0, 1);
    run_fft(128, 150, 1, 0, 1);
    $display("mechanisms: shuffle=%0d pad=%0d onchip_results=%0d", n_shuffle, n_pad, n_onchip_res);
    chk(n_shuffle > 0 && n_pad > 0 && n_onchip_res > 0, "shuffle, padding and on-chip results happened");
    chk(!bad_op, "no bad opcode");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
