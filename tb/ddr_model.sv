// Behavioural model of the DDR2 memory interface command port (not
// synthesizable; testbench use only). Accepts a command when req_ready is
// high (ready is withdrawn at random, about one cycle in four), stores
// writes in a sparse array and returns read data LATENCY cycles later, in
// order.
module ddr_model #(
  parameter int AW = 24,
  parameter int LATENCY = 6
) (
  input  logic          clk,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  logic [31:0]   wdata,
  output logic          rvalid,
  output logic [31:0]   rdata
);
  timeunit 1ns; timeprecision 1ps;
  logic [31:0] mem [int unsigned];
  logic [32:0] pipe [LATENCY];
  int writes = 0, reads = 0, stalls = 0;

  initial begin
    req_ready = 1'b0;
    for (int i = 0; i < LATENCY; i++) pipe[i] = '0;
  end

  always @(posedge clk) begin
    logic [32:0] nxt;
    nxt = '0;
    if (req_valid && req_ready) begin
      if (we) begin
        mem[int'(addr)] = wdata;
        writes++;
      end else begin
        nxt = {1'b1, mem.exists(int'(addr)) ? mem[int'(addr)] : 32'hBAD0_BAD0};
        reads++;
      end
    end
    if (req_valid && !req_ready) stalls++;
    for (int i = LATENCY - 1; i > 0; i--) pipe[i] <= pipe[i-1];
    pipe[0] <= nxt;
    req_ready <= ($urandom_range(0, 3) != 0);
  end

  assign rvalid = pipe[LATENCY-1][32];
  assign rdata  = pipe[LATENCY-1][31:0];
endmodule
