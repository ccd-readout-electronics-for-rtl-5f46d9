// One camera around the readout FPGA, for multi-camera testbenches.
//
// Holds a bee_fpga at its default parameters with what a camera connects to
// it: a PCIe host model (tasks mwr and mrd send 1-DW memory write and read
// TLPs and wait for the completion), a behavioural DDR2 memory-interface
// model and two behavioural ADC chains. The synchronized 25 MHz input comes
// in as clk_wpu, so a testbench can wire one camera's 25 MHz outputs to the
// others. The host model and the completion check are this testbench's own;
// the connection of cameras by one 25 MHz wire follows the readout system.
module camera_rig (
  input  logic        arst_n,
  input  logic        clk_pcie,
  input  logic        clk_sys,
  input  logic        clk_fast,
  input  logic        clk_wpu,
  output logic [7:0]  clk25_out,
  output logic [15:0] ccd_lines,
  output logic        adc_read,
  output int          cpl_errors
);
  timeunit 1ns; timeprecision 1ps;
  logic [15:0] completer_id = 16'h0100;
  logic [31:0] rx_data = '0, tx_data;
  logic rx_sof = 0, rx_eof = 0, rx_valid = 0, rx_ready;
  logic tx_sof, tx_eof, tx_valid, tx_ready = 1;
  logic mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [23:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic sck;
  logic [1:0] sdata;

  bee_fpga u_fpga (.*);

  ddr_model #(.AW(24), .LATENCY(8)) u_ddr (.clk(clk_sys), .req_valid(mem_req_valid),
    .req_ready(mem_req_ready), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .rvalid(mem_rvalid), .rdata(mem_rdata));
  adc_chain_model #(.GROUP(0)) u_adc0 (.sck(sck), .sdo(sdata[0]));
  adc_chain_model #(.GROUP(1)) u_adc1 (.sck(sck), .sdo(sdata[1]));

  initial cpl_errors = 0;

  task automatic send(input logic [31:0] w [$]);
    for (int i = 0; i < w.size(); i++) begin
      @(negedge clk_pcie);
      rx_valid = 1; rx_data = w[i]; rx_sof = (i == 0); rx_eof = (i == w.size() - 1);
      @(posedge clk_pcie);
      while (!rx_ready) @(posedge clk_pcie);
    end
    @(negedge clk_pcie); rx_valid = 0; rx_sof = 0; rx_eof = 0;
  endtask

  task automatic mwr(input logic [21:0] off, input logic [31:0] data);
    logic [31:0] w [$];
    w = '{ {3'b010, 5'b00000, 14'd0, 10'd1}, 32'h0000_00FF, {10'h3C0, off}, data };
    send(w);
  endtask

  logic [7:0] tag = 0;
  task automatic mrd(input logic [21:0] off, output logic [31:0] data);
    logic [31:0] w [$], c [4];
    int n;
    n = 0;
    tag++;
    w = '{ {3'b000, 5'b00000, 14'd0, 10'd1}, {16'h0000, tag, 8'h0F}, {10'h3C0, off} };
    send(w);
    while (n < 4) begin
      @(posedge clk_pcie);
      if (tx_valid && tx_ready) begin c[n] = tx_data; n++; end
    end
    if (c[0] != 32'h4A00_0001 || c[2][15:8] != tag) cpl_errors++;
    data = c[3];
  endtask
endmodule
