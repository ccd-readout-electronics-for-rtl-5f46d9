// Multi-camera synchronisation testbench: a master and seven slave cameras.
//
// NCAM = 8 complete readout FPGAs at their default parameters, each in a
// camera_rig with its own PCIe host, DDR2 model and ADC chains. Camera 0 is
// the master: its 25 MHz sync output i goes to camera i's synchronized 25 MHz
// input (output 0 back to itself), all with the same 2 ns cable delay
// (equal-length lines). Every host loads the same program (two rows of eight
// pixels, each pixel with an ADC read) and sets run; only camera 0 then
// sets master. Checks:
//   - nothing runs, and no slave drives its own 25 MHz outputs, before and
//     after the master clock starts
//   - every change of the clock lines happens in all cameras at the same
//     time with the same value (lock-step execution)
//   - all take the same number of ADC reads and all image FIFOs hold the
//     same frame: FRAME_WORDS, FRAME_CRC and every image word against the
//     values computed here from the ADC model
//   - a second start with only the master armed: the slaves stay idle
// Mechanisms counted: synchronous start, lock-step edges, unarmed slaves.
module tb_multi_camera;
  timeunit 1ns; timeprecision 1ps;
  import pfs_pkg::*;

  localparam int NCAM = 8;
  localparam int ROWS = 2, PIXELS = 8;
  localparam int WORDS = ROWS * PIXELS * 4;

  logic arst_n = 1;   // pulsed low at 1 ns so every asynchronous reset sees an edge
  logic obs_en = 0;
  // A few 25 MHz pulses on the sync inputs while reset is low: the WPU
  // domain has no clock of its own, and simulated flops start at random
  // values, so this is what applies its reset before the master clock runs.
  logic boot_clk = 0;
  initial begin
    #10;
    repeat (8) #20 boot_clk = ~boot_clk;
  end
  logic clk_pcie = 0, clk_sys = 0, clk_fast = 0;
  logic [7:0]  c25 [NCAM];
  logic [15:0] lines [NCAM];
  logic        adc [NCAM];
  logic        clk_wpu [NCAM];
  int          cerr [NCAM];

  always #8    clk_pcie = ~clk_pcie;
  always #6.5  clk_sys  = ~clk_sys;
  always #2.5  clk_fast = ~clk_fast;

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  logic [31:0] prog [$];
  initial prog = '{
    loop_op(ROWS),
    wave(0, 20, 16'h0001),
    wave(0, 20, 16'h0002),
    loop_op(PIXELS),
    wave(0, 3, 16'h0010),
    wave(0, 5, 16'h0020),
    wave(1, 25, 16'h0040),           // ADC read, 2.08 us
    endloop_op(),
    endloop_op(),
    wave(0, 49, 16'h0000),
    halt_op()
  };

  function automatic logic [15:0] adcv(input int g, input int a, input int k);
    return 16'(16'h1000 * g + 16'h0100 * a + k * 7 + 16'h0033);
  endfunction

  function automatic logic [31:0] crc_of(input logic [31:0] w [$]);
    logic [31:0] c = 32'hFFFFFFFF;
    foreach (w[i]) for (int b = 31; b >= 0; b--) begin
      logic fb;
      fb = c[31] ^ w[i][b];
      c = c << 1;
      if (fb) c = c ^ 32'h04C11DB7;
    end
    return ~c;
  endfunction

  // the host sequence of every camera runs in its own block, step by step
  int          phase = 0;
  bit          ack [NCAM];
  logic [31:0] expw [$];
  logic [31:0] st [NCAM], fwords [NCAM], fcrc [NCAM], lvl [NCAM];
  int          bad_words [NCAM];
  realtime     tch [NCAM][$];
  logic [15:0] vch [NCAM][$];
  int          reads [NCAM], own_clk_edges [NCAM];

  for (genvar i = 0; i < NCAM; i++) begin : g_cam
    assign #2 clk_wpu[i] = c25[0][i] | boot_clk;
    camera_rig u_rig (.arst_n(arst_n), .clk_pcie(clk_pcie), .clk_sys(clk_sys),
      .clk_fast(clk_fast), .clk_wpu(clk_wpu[i]), .clk25_out(c25[i]), .ccd_lines(lines[i]),
      .adc_read(adc[i]), .cpl_errors(cerr[i]));

    initial begin reads[i] = 0; own_clk_edges[i] = 0; end
    always @(lines[i]) if (obs_en) begin tch[i].push_back($realtime); vch[i].push_back(lines[i]); end
    always @(posedge adc[i]) if (obs_en) reads[i]++;
    always @(c25[i]) if (obs_en && i != 0) own_clk_edges[i]++;

    initial begin
      logic [31:0] d;
      int n;
      // 1: load the program, start address, run
      wait (phase == 1);
      foreach (prog[k]) u_rig.mwr(22'(k * 4), prog[k]);
      u_rig.mwr(22'h100004, 32'd0);
      u_rig.mwr(22'h100000, 32'h1);
      ack[i] = 1;
      // 2: the master starts the sync clock
      wait (phase == 2);
      if (i == 0) u_rig.mwr(22'h100000, 32'h3);
      ack[i] = 1;
      // 3: wait for done
      wait (phase == 3);
      n = 0;
      do begin
        #10us;
        u_rig.mrd(22'h100008, st[i]);
        n++;
      end while (!st[i][1] && n < 100);
      ack[i] = 1;
      // 4: frame registers and image
      wait (phase == 4);
      u_rig.mrd(22'h100010, fwords[i]);
      u_rig.mrd(22'h100014, fcrc[i]);
      u_rig.mrd(22'h10000C, lvl[i]);
      bad_words[i] = 0;
      for (int k = 0; k < WORDS; k++) begin
        u_rig.mrd(22'h200000, d);
        if (d != expw[k]) bad_words[i]++;
      end
      ack[i] = 1;
      // 5: run off everywhere while the clock still runs
      wait (phase == 5);
      u_rig.mwr(22'h100000, (i == 0) ? 32'h2 : 32'h0);
      ack[i] = 1;
      // 6: master only: clock off, then run and clock on again
      wait (phase == 6);
      if (i == 0) begin
        u_rig.mwr(22'h100000, 32'h0);
        #2000;
        u_rig.mwr(22'h100000, 32'h1);
        u_rig.mwr(22'h100000, 32'h3);
      end
      ack[i] = 1;
      // 7: status
      wait (phase == 7);
      u_rig.mrd(22'h100008, st[i]);
      ack[i] = 1;
    end
  end

  task automatic step(input int p);
    foreach (ack[i]) ack[i] = 0;
    phase = p;
    for (int i = 0; i < NCAM; i++) wait (ack[i]);
  endtask

  int sync_starts = 0, lockstep_edges = 0, idle_slaves = 0;

  initial begin
    int bad;
    logic [31:0] exp_crc;
    for (int k = 0; k < ROWS * PIXELS; k++)
      for (int w = 0; w < 4; w++)
        expw.push_back({adcv((2 * w + 1) / 4, (2 * w + 1) % 4, k), adcv((2 * w) / 4, (2 * w) % 4, k)});
    exp_crc = crc_of(expw);
    #1 arst_n = 0;
    #100 arst_n = 1;
    obs_en = 1;
    #200;
    step(1);
    #2000;
    bad = 0;
    foreach (tch[i]) bad += tch[i].size();
    check(bad == 0, "no line changes before the master clock starts");
    step(2);
    step(3);
    #10us;
    // lock-step: every camera's change list equals the master's
    check(tch[0].size() > 0, "master lines changed");
    for (int i = 1; i < NCAM; i++) begin
      bad = 0;
      if (tch[i].size() != tch[0].size()) bad++;
      foreach (tch[0][k]) if (k < tch[i].size()) begin
        if (tch[i][k] != tch[0][k] || vch[i][k] != vch[0][k]) begin
          if (bad < 3) $display("FAIL: camera %0d change %0d: %h at %0t, master %h at %0t",
                                i, k, vch[i][k], tch[i][k], vch[0][k], tch[0][k]);
          bad++;
        end else lockstep_edges++;
      end
      check(bad == 0, $sformatf("camera %0d: %0d line changes out of step with the master", i, bad));
      if (tch[i].size() > 0 && tch[0].size() > 0 && tch[i][0] == tch[0][0]) sync_starts++;
    end
    for (int i = 0; i < NCAM; i++) begin
      check(st[i][1], $sformatf("camera %0d done", i));
      check(reads[i] == ROWS * PIXELS, $sformatf("camera %0d: %0d ADC reads", i, reads[i]));
    end
    step(4);
    for (int i = 0; i < NCAM; i++) begin
      check(fwords[i] == WORDS, $sformatf("camera %0d FRAME_WORDS %0d", i, fwords[i]));
      check(fcrc[i] == exp_crc, $sformatf("camera %0d FRAME_CRC %h exp %h", i, fcrc[i], exp_crc));
      check(lvl[i] == WORDS + 1, $sformatf("camera %0d FIFO_LEVEL %0d", i, lvl[i]));
      check(bad_words[i] == 0, $sformatf("camera %0d: %0d image words wrong", i, bad_words[i]));
      if (i != 0) check(own_clk_edges[i] == 0, $sformatf("camera %0d drives no sync clock", i));
    end
    step(5);
    #2000;
    foreach (tch[i]) begin tch[i].delete(); vch[i].delete(); end
    step(6);
    #5us;
    step(7);
    check(st[0][0] && tch[0].size() > 0, "armed master runs again");
    for (int i = 1; i < NCAM; i++) begin
      check(!st[i][0] && !st[i][1] && tch[i].size() == 0, $sformatf("unarmed camera %0d stays idle", i));
      if (!st[i][0] && tch[i].size() == 0) idle_slaves++;
    end
    foreach (cerr[i]) check(cerr[i] == 0, $sformatf("camera %0d completion headers", i));
    $display("mechanisms: sync_starts=%0d lockstep_edges=%0d idle_slaves=%0d",
             sync_starts, lockstep_edges, idle_slaves);
    check(sync_starts == NCAM - 1, "every slave started with the master");
    check(lockstep_edges > 0, "lock-step edges seen");
    check(idle_slaves > 0, "unarmed slaves stayed idle");
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
