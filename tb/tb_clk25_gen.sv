// Self-checking testbench of the 25 MHz synchronisation clock generator:
// with enable low all eight outputs stay low; once enabled they toggle
// together with a 40 ns period and 20 ns high time, every period complete;
// after enable drops the clock stops low without a short pulse.
module tb_clk25_gen;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, enable = 0;
  logic [7:0] clk25_out;
  logic running;
  int checks = 0, failures = 0, rises = 0;
  realtime t_rise = 0, t_fall = 0;

  always #2.5 clk = ~clk;
  clk25_gen #(.NOUT(8), .DIV(8)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n) check(clk25_out == '0 || clk25_out == '1, "outputs equal");
  always @(posedge clk25_out[0]) begin
    if (rises > 0) check($realtime - t_rise == 40.0, $sformatf("period %0t", $realtime - t_rise));
    t_rise = $realtime;
    rises++;
  end
  always @(negedge clk25_out[0]) if (rst_n) begin
    t_fall = $realtime;
    check(t_fall - t_rise == 20.0, $sformatf("high time %0t", t_fall - t_rise));
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    #500;
    check(rises == 0 && clk25_out == '0, "no clock while disabled");
    #3 enable = 1;
    #1003;
    check(rises >= 24 && rises <= 26, $sformatf("%0d rising edges in 1 us", rises));
    enable = 0;
    #200;
    check(!running && clk25_out == '0, "stopped low");
    rises = 0;
    #400;
    check(rises == 0, "stays stopped");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #50us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
