// tb_sigdla_dma: DMA engine against an off-chip memory model with random grant delays and
// a testbench model of the on-chip memory port. Checks a load (off-chip words appear
// on-chip), a store (on-chip words appear off-chip), a result write (eight sign-extended
// accumulator values at the result address, off chip and, with the address's top bit set,
// into the on-chip buffer) and that busy covers each command.
module tb_sigdla_dma;
  import sigdla_pkg::*;
  logic clk = 0, rst_n = 0;
  logic load = 0, store = 0, res_valid = 0, busy;
  logic [15:0] len = 0;
  logic [31:0] ext_base = 0, res_base = 0;
  logic [MEM_AW-1:0] int_base = 0;
  logic signed [ACC_W-1:0] res [N_PE];
  logic ext_req, ext_we, ext_gnt, ext_rvalid, mem_re, mem_we;
  logic [31:0] ext_addr;
  logic [63:0] ext_wdata, ext_rdata, mem_wdata, mem_rdata;
  logic [MEM_AW-1:0] mem_addr;
  logic [63:0] imem [MEM_DEPTH];
  int checks = 0, failures = 0;
  logic [63:0] imem_300_guard;

  sigdla_dma dut (.clk(clk), .rst_n(rst_n), .load(load), .store(store), .len(len), .ext_base(ext_base),
    .int_base(int_base), .res_valid(res_valid), .res(res), .res_base(res_base), .busy(busy),
    .ext_req(ext_req), .ext_we(ext_we), .ext_addr(ext_addr), .ext_wdata(ext_wdata), .ext_gnt(ext_gnt),
    .ext_rvalid(ext_rvalid), .ext_rdata(ext_rdata), .mem_re(mem_re), .mem_we(mem_we), .mem_addr(mem_addr),
    .mem_wdata(mem_wdata), .mem_rdata(mem_rdata));

  sigdla_ext_mem_model #(.MAX_WAIT(3), .LAT(2)) ext (.clk(clk), .req(ext_req), .we(ext_we), .addr(ext_addr),
    .wdata(ext_wdata), .gnt(ext_gnt), .rvalid(ext_rvalid), .rdata(ext_rdata));

  always #5 clk = ~clk;
  always @(posedge clk) begin
    if (mem_we) imem[mem_addr] <= mem_wdata;
    if (mem_re) mem_rdata <= imem[mem_addr];
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(bit ok, string s);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", s); end
  endtask

  task automatic wait_idle();
    @(negedge clk);
    chk(busy, "busy after command");
    while (busy) @(negedge clk);
  endtask

  initial begin
    for (int k = 0; k < N_PE; k++) res[k] = 0;
    for (int a = 0; a < 64; a++) ext.poke(32'h1000 + a, {$urandom, $urandom});
    for (int a = 0; a < 64; a++) imem[200 + a] = {$urandom, $urandom};
    imem[300 + N_PE] = 64'h0123_4567_89ab_cdef;
    imem_300_guard   = imem[300 + N_PE];
    repeat (2) @(posedge clk);
    rst_n = 1;
    // load 40 words
    @(negedge clk); load = 1; len = 40; ext_base = 32'h1000; int_base = 15'd100;
    @(negedge clk); load = 0;
    wait_idle();
    for (int a = 0; a < 40; a++) chk(imem[100 + a] == ext.peek(32'h1000 + a), $sformatf("load word %0d", a));
    // store 33 words
    @(negedge clk); store = 1; len = 33; ext_base = 32'h8000; int_base = 15'd200;
    @(negedge clk); store = 0;
    wait_idle();
    for (int a = 0; a < 33; a++) chk(ext.peek(32'h8000 + a) == imem[200 + a], $sformatf("store word %0d", a));
    chk(ext.peek(32'h8000 + 33) == 0, "store length");
    // results
    @(negedge clk);
    res_valid = 1; res_base = 32'h9000;
    for (int k = 0; k < N_PE; k++) res[k] = ACC_W'(longint'($urandom) - 64'sd2147483648);
    @(negedge clk); res_valid = 0;
    wait_idle();
    for (int k = 0; k < N_PE; k++) chk(ext.peek(32'h9000 + k) == 64'(res[k]), $sformatf("result %0d", k));
    // results kept on chip: top bit of the result address set
    @(negedge clk);
    res_valid = 1; res_base = 32'h8000_0000 | 32'd300;
    for (int k = 0; k < N_PE; k++) res[k] = ACC_W'(longint'($urandom) - 64'sd2147483648);
    @(negedge clk); res_valid = 0;
    wait_idle();
    for (int k = 0; k < N_PE; k++) chk(imem[300 + k] == 64'(res[k]), $sformatf("on-chip result %0d", k));
    chk(imem[300 + N_PE] == imem_300_guard, "on-chip result length");
    chk(ext.stall_cycles > 0, "grant stalls exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
