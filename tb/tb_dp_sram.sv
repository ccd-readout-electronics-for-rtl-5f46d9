// Self-checking testbench of the dual-port program RAM at its full 128 KB
// size: port A (77 MHz) writes a pattern over every word, then reads some
// back with one cycle of latency; port B (25 MHz) reads all words and
// compares them with the pattern.
module tb_dp_sram;
  timeunit 1ns; timeprecision 1ps;
  localparam int AW = 15;
  logic clka = 0, clkb = 0, wea = 0;
  logic [AW-1:0] addra = '0, addrb = '0;
  logic [31:0] dina = '0, douta, doutb;
  int checks = 0, failures = 0;

  always #6.5 clka = ~clka;
  always #20 clkb = ~clkb;
  dp_sram #(.AW(AW), .DW(32)) dut (.*);

  function automatic logic [31:0] pat(input int a);
    return 32'(a) * 32'h9E3779B1 ^ 32'h5A5A0000;
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clka); wea = 1; addra = AW'(a); dina = pat(a);
    end
    @(negedge clka); wea = 0;
    for (int a = 0; a < 2**AW; a += 997) begin
      @(negedge clka); addra = AW'(a);
      @(negedge clka);
      check(douta == pat(a), $sformatf("port A word %0d", a));
    end
    for (int a = 0; a < 2**AW; a++) begin
      @(negedge clkb); addrb = AW'(a);
      @(negedge clkb);
      if (doutb != pat(a)) check(0, $sformatf("port B word %0d", a));
      else checks++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
