// Behavioural model of one daisy chain of four 16-bit ADCs as seen on the
// serial data line (not synthesizable; testbench use only).
//
// Before a burst the line shows a busy-indicator bit of 1; every falling
// edge of sck shifts the chain by one bit, so the following 64 bits are the
// four conversions, MSB first, ADC 0 (nearest the FPGA) first. A rising
// SCK edge after a pause loads the next set of values. The values of read n are
// value(group, adc, n) = 16'h1000*group + 16'h0100*adc + n*7 + 16'h0033.
module adc_chain_model #(
  parameter int GROUP = 0
) (
  input  logic sck,
  output logic sdo
);
  timeunit 1ns; timeprecision 1ps;
  logic [64:0] sh;
  int n = 0;

  function automatic logic [15:0] value(input int g, input int a, input int k);
    return 16'(16'h1000 * g + 16'h0100 * a + k * 7 + 16'h0033);
  endfunction

  function automatic logic [64:0] load(input int k);
    return {1'b1, value(GROUP, 0, k), value(GROUP, 1, k), value(GROUP, 2, k), value(GROUP, 3, k)};
  endfunction

  realtime t_last = -1000.0;
  initial sh = {1'b1, 64'd0};
  assign sdo = sh[64];

  // a rising edge after a pause of more than 50 ns starts a new read
  always @(posedge sck) begin
    if ($realtime - t_last > 50.0) begin
      sh = load(n);
      n++;
    end
    t_last = $realtime;
  end
  always @(negedge sck) begin
    sh <= #1 {sh[63:0], 1'b0};
    t_last = $realtime;
  end
endmodule
