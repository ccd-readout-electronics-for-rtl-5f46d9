// Self-checking testbench of the SCK burst generator: three ADC-read
// triggers from a 25 MHz-timed source must give three bursts of exactly 65
// pulses, each pulse 20 ns (50 MHz) with 10 ns high, one shift strobe per
// pulse in its high phase, first on pulse 1 only, and nothing while the
// trigger stays high.
module tb_sck_gen;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, adc_read = 0;
  logic sck, shift, first, busy, burst_done;
  int checks = 0, failures = 0;
  int pulses = 0, shifts = 0, firsts = 0, bursts = 0;
  realtime t_rise, t_prev_rise, t_fall;

  always #2.5 clk = ~clk;   // 200 MHz

  sck_gen #(.NPULSES(65), .HALF(2)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge sck) begin
    t_prev_rise = t_rise;
    t_rise = $realtime;
    pulses++;
    if (pulses > 1) check(t_rise - t_prev_rise == 20.0, $sformatf("SCK period %0t", t_rise - t_prev_rise));
  end
  always @(negedge sck) if (rst_n) begin
    t_fall = $realtime;
    check(t_fall - t_rise == 10.0, "SCK high time 10 ns");
  end
  always @(posedge clk) begin
    if (shift) begin
      shifts++;
      check(sck, "shift only while SCK is high");
    end
    if (first) firsts++;
    if (burst_done) bursts++;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 3; b++) begin
      pulses = 0; shifts = 0; firsts = 0;
      #40 adc_read = 1;
      #(b == 1 ? 2000 : 80) adc_read = 0;  // burst 1 holds the bit past the burst
      wait (!busy && pulses > 0);
      #200;
      check(pulses == 65, $sformatf("burst %0d: %0d pulses", b, pulses));
      check(shifts == 65, $sformatf("burst %0d: %0d shifts", b, shifts));
      check(firsts == 1, $sformatf("burst %0d: %0d first strobes", b, firsts));
    end
    check(bursts == 3, $sformatf("%0d bursts", bursts));
    check(!sck, "SCK idles low");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
