// tb_sigdla_onchip_mem: random writes through the DMA and BCIF ports (never both at once)
// into the full 144 KB array, mirrored in a testbench model; random reads on all four read
// ports, including the eight-word weight port, must return the model's data one cycle later.
module tb_sigdla_onchip_mem;
  import sigdla_pkg::*;
  logic clk = 0;
  logic dma_re = 0, dma_we = 0, bc_re = 0, bc_we = 0, act_re = 0, wgt_re = 0;
  logic [MEM_AW-1:0] dma_addr = 0, bc_addr = 0, act_addr = 0, wgt_addr = 0;
  logic [63:0] dma_wdata = 0, bc_wdata = 0, dma_rdata, bc_rdata, act_rdata;
  logic [63:0] wgt_rdata [N_PE];
  logic [63:0] model [int];
  int checks = 0, failures = 0;

  sigdla_onchip_mem dut (.clk(clk),
    .dma_re(dma_re), .dma_we(dma_we), .dma_addr(dma_addr), .dma_wdata(dma_wdata), .dma_rdata(dma_rdata),
    .bc_re(bc_re), .bc_we(bc_we), .bc_addr(bc_addr), .bc_wdata(bc_wdata), .bc_rdata(bc_rdata),
    .act_re(act_re), .act_addr(act_addr), .act_rdata(act_rdata),
    .wgt_re(wgt_re), .wgt_addr(wgt_addr), .wgt_rdata(wgt_rdata));

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [MEM_AW-1:0] raddr();
    // cluster addresses so reads hit written words; include both ends of the array
    int r = $urandom_range(0, 3);
    if (r == 0) return MEM_AW'($urandom_range(0, 63));
    if (r == 1) return MEM_AW'($urandom_range(SP_BASE, SP_BASE + 63));
    if (r == 2) return MEM_AW'($urandom_range(MEM_DEPTH - 64, MEM_DEPTH - N_PE));
    return MEM_AW'($urandom_range(0, MEM_DEPTH - N_PE));
  endfunction

  function automatic logic [63:0] mval(int a);
    return model.exists(a) ? model[a] : 64'hx;
  endfunction

  initial begin
    // initialise the regions that are read
    for (int a = 0; a < 64; a++) begin
      @(negedge clk); dma_we = 1; dma_addr = MEM_AW'(a); dma_wdata = {$urandom, $urandom}; model[a] = dma_wdata;
      @(negedge clk); dma_we = 0; bc_we = 1; bc_addr = MEM_AW'(SP_BASE + a); bc_wdata = {$urandom, $urandom}; model[SP_BASE + a] = bc_wdata;
      @(negedge clk); bc_we = 0; dma_we = 1; dma_addr = MEM_AW'(MEM_DEPTH - 64 + a); dma_wdata = {$urandom, $urandom}; model[MEM_DEPTH - 64 + a] = dma_wdata;
    end
    @(negedge clk); dma_we = 0;
    for (int t = 0; t < 400; t++) begin
      logic [MEM_AW-1:0] a0, a1, a2, a3;
      logic [63:0] e0, e1, e2;
      logic [63:0] e3 [N_PE];
      bit ok;
      @(negedge clk);
      do a0 = raddr(); while (!model.exists(int'(a0)));
      do a1 = raddr(); while (!model.exists(int'(a1)));
      do a2 = raddr(); while (!model.exists(int'(a2)));
      do a3 = raddr(); while (!model.exists(int'(a3)) || !model.exists(int'(a3) + N_PE - 1));
      dma_re = 1; bc_re = 1; act_re = 1; wgt_re = 1;
      dma_addr = a0; bc_addr = a1; act_addr = a2; wgt_addr = a3;
      e0 = model[a0]; e1 = model[a1]; e2 = model[a2];
      for (int k = 0; k < N_PE; k++) e3[k] = mval(int'(a3) + k);
      // a write in the same cycle on one of the ports, to a word not read now
      if ($urandom_range(0, 1)) begin
        int wa = $urandom_range(0, 63);
        if (wa != a0 && wa != a1 && wa != a2 && !(wa >= a3 && wa < a3 + N_PE)) begin
          if ($urandom_range(0, 1)) begin dma_we = 1; bc_we = 0; end else begin bc_we = 1; dma_we = 0; end
          if (dma_we) begin dma_wdata = {$urandom, $urandom}; model[wa] = dma_wdata; end
          else begin bc_wdata = {$urandom, $urandom}; model[wa] = bc_wdata; end
          if (dma_we) dma_re = 0; else bc_re = 0;
          if (dma_we) begin dma_addr = MEM_AW'(wa); end else begin bc_addr = MEM_AW'(wa); end
        end
      end
      @(negedge clk);
      ok = 1;
      if (dma_re && dma_rdata !== e0) ok = 0;
      if (bc_re && bc_rdata !== e1) ok = 0;
      if (act_rdata !== e2) ok = 0;
      for (int k = 0; k < N_PE; k++) if (wgt_rdata[k] !== e3[k]) ok = 0;
      checks++;
      if (!ok) begin failures++; $display("FAIL t=%0d a=%0d %0d %0d %0d", t, a0, a1, a2, a3); end
      dma_re = 0; bc_re = 0; act_re = 0; wgt_re = 0; dma_we = 0; bc_we = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
