// sigdla_ext_mem_model: behavioural model of the memory controller and off-chip memory
// for the SigDLA testbenches (not part of the design). A request is granted after a
// random wait of 0..MAX_WAIT cycles; read data returns GNT-to-data LAT cycles after the
// grant. Contents are a sparse array of 64-bit words; unwritten words read as zero.
module sigdla_ext_mem_model #(
  parameter int MAX_WAIT = 3,
  parameter int LAT      = 2
) (
  input  logic        clk,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [63:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [63:0] rdata
);
  logic [63:0] mem [int unsigned];
  int wait_left = -1;
  int stall_cycles = 0;
  int writes = 0, reads = 0;
  logic [63:0] pipe_d [LAT];
  logic        pipe_v [LAT];

  initial begin
    gnt = 0; rvalid = 0; rdata = 0;
    for (int i = 0; i < LAT; i++) begin pipe_v[i] = 0; pipe_d[i] = 0; end
  end

  function automatic logic [63:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : 64'd0;
  endfunction

  task automatic poke(int unsigned a, logic [63:0] d);
    mem[a] = d;
  endtask

  always @(posedge clk) begin
    // read return pipeline
    rvalid <= pipe_v[LAT-1];
    rdata  <= pipe_d[LAT-1];
    for (int i = LAT - 1; i > 0; i--) begin pipe_v[i] <= pipe_v[i-1]; pipe_d[i] <= pipe_d[i-1]; end
    pipe_v[0] <= 1'b0;
    if (gnt && req) begin
      if (we) begin mem[addr] = wdata; writes++; end
      else begin pipe_v[0] <= 1'b1; pipe_d[0] <= peek(addr); reads++; end
    end
    gnt <= 1'b0;
    if (req && !gnt) begin
      if (wait_left < 0) wait_left = $urandom_range(0, MAX_WAIT);
      if (wait_left == 0) begin gnt <= 1'b1; wait_left = -1; end
      else begin wait_left--; stall_cycles++; end
    end
  end
endmodule
