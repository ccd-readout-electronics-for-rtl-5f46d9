// End-to-end testbench of the readout FPGA at its default parameters.
//
// Around the FPGA: a PCIe host model that sends memory-read and -write TLPs
// and collects completions, a behavioural DDR2 memory-interface model, two
// behavioural ADC chains on the serial data lines, and the master's own
// 25 MHz output wired back to the synchronized 25 MHz input.
//
// The host writes a row-read program into the 128 KB program RAM (through
// PCIe writes), sets run, and then starts the master 25 MHz clock, which
// starts the waveform processor. The program reads ROWS rows with the
// readout timing of the camera: a 240 us parallel transfer, then 536 serial
// pixels of 168 slots (13.44 us) each, each pixel ending with an ADC read.
// While the frame is taken the host polls FIFO_LEVEL and drains the image
// through the FIFO data window. Checks:
//   - the program read back from the RAM
//   - row period (93050 slots = 7.444 ms) and pixel period (13.44 us)
//   - 65 SCK pulses per ADC read at 50 MHz, ROWS*536 reads in all
//   - every image word against the ADC model's values, the CRC trailer
//     against a CRC computed here, FRAME_WORDS / FRAME_CRC / STATUS
//   - a read of the empty FIFO window returns zero, FIFO clear
// Mechanisms counted (each must happen at least once): nested loops,
// ADC bursts, DDR2 back-pressure, concurrent FIFO write and read,
// empty-window read, master clock start and stop, FIFO clear.
module tb_bee_fpga;
  timeunit 1ns; timeprecision 1ps;
  import pfs_pkg::*;

  localparam int ROWS   = 2;
  localparam int PIXELS = 536;
  localparam int WORDS  = ROWS * PIXELS * 4;

  logic arst_n = 1;   // pulsed low at 1 ns so every asynchronous reset sees an edge
  logic clk_pcie = 0, clk_sys = 0, clk_fast = 0, clk_wpu;
  logic [15:0] completer_id = 16'h0100;
  logic [31:0] rx_data = '0, tx_data;
  logic rx_sof = 0, rx_eof = 0, rx_valid = 0, rx_ready;
  logic tx_sof, tx_eof, tx_valid, tx_ready = 1;
  logic mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [23:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic [15:0] ccd_lines;
  logic adc_read, sck;
  logic [1:0] sdata;
  logic [7:0] clk25_out;

  always #8    clk_pcie = ~clk_pcie;   // 62.5 MHz
  always #6.5  clk_sys  = ~clk_sys;    // ~77 MHz
  always #2.5  clk_fast = ~clk_fast;   // 200 MHz
  // master's sync clock, back through the LVDS input; a few pulses while reset
  // is low apply the reset of the WPU domain, whose flops start at random
  // values in simulation and which has no clock before the master starts it
  logic boot_clk = 0;
  initial begin
    #10;
    repeat (8) #20 boot_clk = ~boot_clk;
  end
  assign #2 clk_wpu = clk25_out[0] | boot_clk;

  bee_fpga dut (.*);

  ddr_model #(.AW(24), .LATENCY(8)) u_ddr (.clk(clk_sys), .req_valid(mem_req_valid),
    .req_ready(mem_req_ready), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .rvalid(mem_rvalid), .rdata(mem_rdata));
  adc_chain_model #(.GROUP(0)) u_adc0 (.sck(sck), .sdo(sdata[0]));
  adc_chain_model #(.GROUP(1)) u_adc1 (.sck(sck), .sdo(sdata[1]));

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------- host model ----------------
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
    int n = 0;
    tag++;
    w = '{ {3'b000, 5'b00000, 14'd0, 10'd1}, {16'h0000, tag, 8'h0F}, {10'h3C0, off} };
    send(w);
    while (n < 4) begin
      @(posedge clk_pcie);
      if (tx_valid && tx_ready) begin c[n] = tx_data; n++; end
    end
    if (c[0] != 32'h4A00_0001 || c[2][15:8] != tag) check(0, "completion header");
    data = c[3];
  endtask

  // ---------------- program ----------------
  // clock-line assignment used by this program (bit: signal)
  //  0-2 P1..P3 parallel, 3 TG, 4-6 S1..S3 serial, 7 SW, 8 RG,
  //  9 CDS integrator reset, 10 integrate minus, 11 integrate plus, 12 CNV
  localparam logic [15:0] P1 = 16'h0001, P2 = 16'h0002, P3 = 16'h0004, TG = 16'h0008;
  localparam logic [15:0] S1 = 16'h0010, S2 = 16'h0020, S3 = 16'h0040, SW = 16'h0080;
  localparam logic [15:0] RG = 16'h0100, IR = 16'h0200, IM = 16'h0400, IP = 16'h0800;
  localparam logic [15:0] CNV = 16'h1000;
  logic [31:0] prog [$];
  initial begin
    prog = '{
      loop_op(ROWS),
      wave(0, 999, P1 | TG),            // parallel transfer: 3 x 1000 slots = 240 us
      wave(0, 999, P2 | TG),
      wave(0, 999, P3),
      loop_op(PIXELS),
      wave(0,  9, RG | S1 | SW),        // reset summing node        10
      wave(0,  9, S2 | SW | IR),        // reset integrator          10
      wave(0, 59, S2 | SW | IM),        // integrate pedestal        60
      wave(0,  9, S3),                  // charge to summing node    10
      wave(0, 59, S3 | IP),             // integrate signal          60
      wave(0,  1, S3 | CNV),            // convert                    2
      wave(1, 14, S1),                  // ADC read                  15
      endloop_op(),                     // pixel = 168 slots = 13.44 us
      endloop_op(),
      wave(0, 49, 16'h0000),            // 4 us for the last read to land
      halt_op()
    };
  end
  localparam int ROW_SLOTS   = 3000 + 1 + PIXELS * 168 + 1;
  localparam real SLOT_NS    = 80.0;

  // ---------------- observers ----------------
  realtime t_adc [$];
  int sck_pulses = 0, sck_bursts = 0, bad_bursts = 0;
  realtime t_sck = 0, t_sck_prev = 0;
  always @(posedge adc_read) t_adc.push_back($realtime);
  always @(posedge sck) begin
    t_sck_prev = t_sck; t_sck = $realtime;
    if (t_sck - t_sck_prev > 100.0) begin
      if (sck_pulses != 0 && sck_pulses != 65) bad_bursts++;
      sck_bursts++; sck_pulses = 1;
    end else begin
      sck_pulses++;
      if (t_sck - t_sck_prev != 20.0) bad_bursts++;
    end
  end
  int clk25_edges = 0;
  always @(posedge clk25_out[0]) clk25_edges++;
  int concurrent = 0;
  always @(posedge clk_sys) if (dut.u_fifo.mem_req_valid && dut.u_fifo.mem_req_ready &&
                                dut.u_fifo.pick_r && dut.u_fifo.want_w) concurrent++;

  function automatic logic [15:0] adcv(input int g, input int a, input int k);
    return 16'(16'h1000 * g + 16'h0100 * a + k * 7 + 16'h0033);
  endfunction

  function automatic logic [31:0] crc_of(input logic [31:0] w [$]);
    logic [31:0] c = 32'hFFFFFFFF;
    foreach (w[i]) for (int b = 31; b >= 0; b--) begin
      logic fb = c[31] ^ w[i][b];
      c = c << 1;
      if (fb) c = c ^ 32'h04C11DB7;
    end
    return ~c;
  endfunction

  // ---------------- test ----------------
  logic [31:0] img [$];
  int empty_reads = 0, clears = 0;
  initial begin
    logic [31:0] d, lvl, st, exp_crc;
    logic [31:0] expw [$];
    int i;
    #1 arst_n = 0;
    #100 arst_n = 1;
    #200;
    // load the program and read it back
    foreach (prog[k]) mwr(22'(k * 4), prog[k]);
    foreach (prog[k]) begin
      mrd(22'(k * 4), d);
      check(d == prog[k], $sformatf("program word %0d read back %h", k, d));
    end
    mwr(22'h100004, 32'd0);            // WPU_START
    mwr(22'h100000, 32'h1);            // run, clock still off
    #2000;
    mrd(22'h100008, st);
    check(st[1:0] == 2'b00 && clk25_edges == 0, "WPU waits for the 25 MHz clock");
    mwr(22'h100000, 32'h3);            // master clock on: execution starts
    #3000;
    mrd(22'h100008, st);
    check(st[0] == 1'b1, "WPU busy after the clock starts");
    // drain the image while the frame is taken
    do begin
      mrd(22'h10000C, lvl);
      for (int n = 0; n < int'(lvl); n++) begin
        mrd(22'h200000, d);
        img.push_back(d);
      end
      mrd(22'h100008, st);
      if (lvl == 0) #20us;
    end while (!(st[1] && st[2]) && $realtime < 30ms);
    check(st[1] == 1'b1, "WPU done");
    #10us;
    mrd(22'h10000C, lvl);
    for (int n = 0; n < int'(lvl); n++) begin
      mrd(22'h200000, d);
      img.push_back(d);
    end
    // empty-window read returns zero
    mrd(22'h200000, d);
    check(d == 0, "read of empty FIFO window is zero");
    empty_reads++;
    // compare image
    for (int r = 0; r < ROWS; r++)
      for (int p = 0; p < PIXELS; p++) begin
        int k, c0, c1;
        k = r * PIXELS + p;
        for (int w = 0; w < 4; w++) begin
          c0 = 2 * w; c1 = 2 * w + 1;
          expw.push_back({adcv(c1 / 4, c1 % 4, k), adcv(c0 / 4, c0 % 4, k)});
        end
      end
    exp_crc = crc_of(expw);
    check(img.size() == WORDS + 1, $sformatf("%0d words read, exp %0d", img.size(), WORDS + 1));
    i = 0;
    foreach (expw[j]) if (j < img.size()) begin
      if (img[j] != expw[j]) begin
        if (i < 10) $display("FAIL: image word %0d = %h exp %h", j, img[j], expw[j]);
        i++;
      end
    end
    check(i == 0, $sformatf("%0d image words wrong", i));
    if (img.size() > WORDS) check(img[WORDS] == exp_crc, $sformatf("CRC trailer %h exp %h", img[WORDS], exp_crc));
    mrd(22'h100010, d);  check(d == WORDS, $sformatf("FRAME_WORDS %0d", d));
    mrd(22'h100014, d);  check(d == exp_crc, "FRAME_CRC");
    mrd(22'h100008, st); check(st[3] == 1'b0, "no overflow");
    // timing
    check(t_adc.size() == ROWS * PIXELS, $sformatf("%0d ADC reads", t_adc.size()));
    check(sck_bursts == ROWS * PIXELS && bad_bursts == 0,
          $sformatf("%0d SCK bursts, %0d malformed (65 pulses at 50 MHz)", sck_bursts, bad_bursts));
    if (t_adc.size() > PIXELS) begin
      check(t_adc[1] - t_adc[0] == 168 * SLOT_NS, $sformatf("pixel period %0t", t_adc[1] - t_adc[0]));
      check(t_adc[PIXELS] - t_adc[0] == ROW_SLOTS * SLOT_NS,
            $sformatf("row period %0t ns, exp %0t", t_adc[PIXELS] - t_adc[0], ROW_SLOTS * SLOT_NS));
    end
    // stop: run off (the WPU needs its clock to see it), then clock off,
    // then FIFO clear
    mwr(22'h100000, 32'h2);
    #2000;
    mrd(22'h100008, st);
    check(st[1:0] == 2'b00, "WPU idle after run cleared");
    mwr(22'h100000, 32'h0);
    #2000;
    i = clk25_edges;
    #2000;
    check(clk25_edges == i, "master clock stopped");
    mwr(22'h100000, 32'h4);
    clears++;
    #1000;
    mrd(22'h10000C, lvl);
    check(lvl == 0, "FIFO empty after clear");
    // mechanisms
    check(t_adc.size() > PIXELS, "nested loops (row loop around pixel loop) ran");
    check(sck_bursts > 0, "ADC bursts happened");
    check(u_ddr.stalls > 0, $sformatf("DDR2 back-pressure seen %0d times", u_ddr.stalls));
    check(concurrent > 0, $sformatf("FIFO read while writing %0d times", concurrent));
    check(empty_reads > 0 && clears > 0, "empty read and clear happened");
    $display("mechanisms: rows=%0d adc_reads=%0d sck_bursts=%0d ddr_stalls=%0d concurrent_rw=%0d empty_reads=%0d clears=%0d clk25_edges=%0d",
             ROWS, t_adc.size(), sck_bursts, u_ddr.stalls, concurrent, empty_reads, clears, clk25_edges);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #40ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
