// Self-checking testbench of the ADC input deserializer. Two behavioural ADC
// chains (four ADCs each) are read by SCK bursts from sck_gen; each burst
// must produce one valid pulse with the eight samples the chains hold, in
// channel order group*4 + position. Also checks that each set is complete
// within the 1.3 us burst plus a few cycles.
module tb_adc_deser;
  timeunit 1ns; timeprecision 1ps;
  logic clk = 0, rst_n = 0, adc_read = 0;
  logic sck, shift, first, busy, burst_done;
  logic [1:0] sdata;
  logic [15:0] samples [8];
  logic valid;
  int checks = 0, failures = 0, sets = 0;
  realtime t_trig;

  always #2.5 clk = ~clk;

  sck_gen #(.NPULSES(65), .HALF(2)) u_sck (.*);
  adc_chain_model #(.GROUP(0)) u_a0 (.sck(sck), .sdo(sdata[0]));
  adc_chain_model #(.GROUP(1)) u_a1 (.sck(sck), .sdo(sdata[1]));
  adc_deser #(.NGROUPS(2), .ADC_PER_GROUP(4), .SAMPLE_W(16)) dut (
    .clk(clk), .rst_n(rst_n), .sdata(sdata), .shift(shift), .first(first),
    .samples(samples), .valid(valid));

  function automatic logic [15:0] expv(input int g, input int a, input int k);
    return 16'(16'h1000 * g + 16'h0100 * a + k * 7 + 16'h0033);
  endfunction

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (valid && rst_n) begin
    for (int c = 0; c < 8; c++)
      check(samples[c] == expv(c / 4, c % 4, sets),
            $sformatf("set %0d ch %0d = %h exp %h", sets, c, samples[c], expv(c / 4, c % 4, sets)));
    check($realtime - t_trig < 1300.0 + 60.0, $sformatf("set %0d latency %0t", sets, $realtime - t_trig));
    sets++;
  end

  initial begin
    repeat (4) @(posedge clk);
    rst_n = 1;
    for (int b = 0; b < 5; b++) begin
      #40 adc_read = 1; t_trig = $realtime;
      #80 adc_read = 0;
      wait (burst_done);
      #100;
    end
    check(sets == 5, $sformatf("%0d sample sets", sets));
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
