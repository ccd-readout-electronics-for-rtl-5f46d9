// Self-checking testbench of the waveform processor.
//
// Loads a program with a plain WAVE sequence, a counted loop with an ADC
// read, and two nested loops into a behavioural 1-cycle-latency RAM, runs it
// and compares every change of the clock lines (value and spacing in
// 25 MHz cycles) with a reference interpreter written here, which walks the
// same program with the 2-cycle slot rule: WAVE lasts 2*(dwell+1) cycles,
// every other instruction 2. It also checks the number of ADC reads, done,
// the restart after run is dropped and raised again, the loop-depth
// limit, and a vertically binned row read (two loops in sequence inside an
// outer loop).
module tb_wpu;
  import pfs_pkg::*;
  localparam int AW = 8;
  logic clk = 0, rst_n = 0, run = 0;
  logic [AW-1:0] start_addr = '0, ram_addr;
  logic [31:0]   ram_rdata;
  logic [15:0]   lines;
  logic          adc_read, busy, done;
  logic [31:0]   prog [2**AW];
  int checks = 0, failures = 0;

  always #20 clk = ~clk;   // 25 MHz
  always_ff @(posedge clk) ram_rdata <= prog[ram_addr];

  wpu #(.AW(AW), .NLINES(16), .LOOP_DEPTH(2)) dut (.*);

  // reference interpreter: list of (time offset, lines) at each WAVE
  int exp_t [$];
  logic [15:0] exp_v [$];
  int exp_adc;
  task automatic interpret(input int start);
    int pc = start, t = 0, sp = 0;
    int ls [2], lc [2];
    logic prev_adc = 0;
    exp_adc = 0;
    exp_t.delete(); exp_v.delete();
    forever begin
      logic [31:0] w = prog[pc];
      case (w[31:30])
        2'b00: begin
          exp_t.push_back(t); exp_v.push_back(w[15:0]);
          if (w[29] && !prev_adc) exp_adc++;
          prev_adc = w[29];
          t += 2 * (int'(w[28:16]) + 1); pc++;
        end
        2'b01: begin
          if (sp < 2) begin ls[sp] = pc + 1; lc[sp] = (w[15:0] == 0) ? 1 : int'(w[15:0]); sp++; end
          t += 2; pc++;
        end
        2'b10: begin
          if (sp > 0 && lc[sp-1] > 1) begin lc[sp-1]--; pc = ls[sp-1]; end
          else begin if (sp > 0) sp--; pc++; end
          t += 2;
        end
        default: return;
      endcase
    end
  endtask

  // observation
  int cyc = 0;
  int obs_t [$];
  logic [15:0] obs_v [$];
  int obs_adc = 0;
  logic [15:0] last_lines;
  logic last_adc;
  always @(negedge clk) begin
    cyc++;
    if (lines !== last_lines) begin obs_t.push_back(cyc); obs_v.push_back(lines); end
    if (adc_read && !last_adc) obs_adc++;
    last_lines = lines;
    last_adc = adc_read;
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic run_and_compare(input int start, input string name);
    int k, j;
    logic [15:0] prevv;
    interpret(start);
    obs_t.delete(); obs_v.delete(); obs_adc = 0;
    start_addr = AW'(start);
    @(posedge clk); run = 1;
    wait (done);
    repeat (4) @(posedge clk);
    // drop repeated values from the expected list (no visible change)
    prevv = last_lines_before;
    k = 0;
    for (j = 0; j < exp_v.size(); j++) begin
      if (exp_v[j] == prevv) continue;
      prevv = exp_v[j];
      if (k >= obs_v.size()) begin check(0, $sformatf("%s: missing change %0d", name, j)); break; end
      check(obs_v[k] == exp_v[j], $sformatf("%s: change %0d value %h exp %h", name, k, obs_v[k], exp_v[j]));
      if (k > 0)
        check(obs_t[k] - obs_t[0] == exp_t[j] - exp_t[first_j],
              $sformatf("%s: change %0d at +%0d cycles, exp +%0d", name, k, obs_t[k] - obs_t[0], exp_t[j] - exp_t[first_j]));
      else first_j = j;
      k++;
    end
    check(k == obs_v.size(), $sformatf("%s: %0d changes seen, %0d expected", name, obs_v.size(), k));
    check(obs_adc == exp_adc, $sformatf("%s: %0d ADC reads, exp %0d", name, obs_adc, exp_adc));
    check(done && !busy, {name, ": done"});
    run = 0;
    @(posedge clk); @(posedge clk); @(posedge clk);
    check(!done && !busy, {name, ": back to idle"});
    last_lines_before = lines;
  endtask
  logic [15:0] last_lines_before = '0;
  int first_j = 0;

  initial begin
    for (int i = 0; i < 2**AW; i++) prog[i] = halt_op();
    // program A at 0
    prog[0]  = wave(0, 0, 16'h0001);
    prog[1]  = wave(0, 3, 16'h0002);
    prog[2]  = loop_op(3);
    prog[3]  = wave(1, 1, 16'h0004);
    prog[4]  = wave(0, 0, 16'h0008);
    prog[5]  = endloop_op();
    prog[6]  = loop_op(2);
    prog[7]  = loop_op(3);
    prog[8]  = wave(0, 0, 16'h0010);
    prog[9]  = wave(0, 2, 16'h0020);
    prog[10] = endloop_op();
    prog[11] = wave(0, 5, 16'h0040);
    prog[12] = endloop_op();
    prog[13] = wave(0, 0, 16'h8000);
    prog[14] = halt_op();
    // program B at 32: three nested loops (the third is beyond the depth
    // limit and is ignored), then a long dwell
    prog[32] = loop_op(2);
    prog[33] = loop_op(2);
    prog[34] = loop_op(5);
    prog[35] = wave(1, 0, 16'h0100);
    prog[36] = wave(0, 0, 16'h0200);
    prog[37] = endloop_op();
    prog[38] = endloop_op();
    prog[39] = wave(0, 100, 16'h0400);
    prog[40] = halt_op();
    // program C at 64: a binned row read, two loops one after the other
    // inside a row loop (2 parallel transfers, then 4 pixel reads, 3 times)
    prog[64] = loop_op(3);
    prog[65] = loop_op(2);
    prog[66] = wave(0, 3, 16'h1000);
    prog[67] = wave(0, 1, 16'h2000);
    prog[68] = endloop_op();
    prog[69] = loop_op(4);
    prog[70] = wave(0, 0, 16'h4000);
    prog[71] = wave(1, 2, 16'h0800);
    prog[72] = endloop_op();
    prog[73] = endloop_op();
    prog[74] = wave(0, 0, 16'h0000);
    prog[75] = halt_op();
    repeat (3) @(posedge clk);
    rst_n = 1;
    repeat (2) @(posedge clk);
    run_and_compare(0, "progA");
    run_and_compare(32, "progB");
    run_and_compare(64, "progC binned");
    run_and_compare(0, "progA again");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
