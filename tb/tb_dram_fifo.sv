// Self-checking testbench of the DDR2-backed FIFO, with a behavioural
// memory (random command back-pressure, 6-cycle read latency). The ring is
// shrunk to 256 words so that wrap-around and the full condition are
// exercised: 3000 words stream through with random write and read activity,
// a phase with the reader stopped fills the ring to exactly 256 + read-ahead
// words, and every word read must come out in order. Level and empty are
// checked, and clear is checked to empty the ring.
module tb_dram_fifo;
  timeunit 1ns; timeprecision 1ps;
  localparam int AW = 8;
  logic clk = 0, rd_clk = 0, rst_n = 0, rd_rst_n = 0, clear = 0;
  logic wr_valid = 0, wr_ready;
  logic [31:0] wr_data = '0;
  logic mem_req_valid, mem_req_ready, mem_we, mem_rvalid;
  logic [AW-1:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic rd_valid, rd_en = 0;
  logic [31:0] rd_data;
  logic [AW:0] level;
  logic empty;
  int checks = 0, failures = 0, nw = 0, nr = 0, max_level = 0;
  bit reader_on = 1;
  int total = 3000;

  always #6.5 clk = ~clk;
  always #8 rd_clk = ~rd_clk;
  dram_fifo #(.AW(AW), .PF_AW(4)) dut (.*);
  ddr_model #(.AW(AW), .LATENCY(6)) u_mem (.clk(clk), .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .we(mem_we), .addr(mem_addr), .wdata(mem_wdata), .rvalid(mem_rvalid), .rdata(mem_rdata));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] pat(input int i);
    return 32'(i) ^ 32'h7C00_0000;
  endfunction

  // writer
  always @(posedge clk) if (rst_n) begin
    if (wr_valid && wr_ready) nw++;
    if (int'(level) > max_level) max_level = int'(level);
  end
  always @(negedge clk) begin
    if (!(wr_valid && !wr_ready_q)) begin
      wr_valid = (nw < total) && ($urandom_range(0, 1) == 1);
      wr_data  = pat(nw);
    end
  end
  logic wr_ready_q;
  always @(posedge clk) wr_ready_q <= wr_ready;

  // reader
  always @(posedge rd_clk) if (rd_rst_n) begin
    if (rd_en && rd_valid) begin
      if (rd_data != pat(nr)) check(0, $sformatf("word %0d = %h exp %h", nr, rd_data, pat(nr)));
      else checks++;
      nr++;
    end
  end
  always @(negedge rd_clk) rd_en = reader_on && ($urandom_range(0, 2) != 0);

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1; rd_rst_n = 1;
    // phase 1: stop the reader until the ring is full
    reader_on = 0;
    #20us;
    check(nw == 256 + 15, $sformatf("full after %0d words (ring 256 + read-ahead 15)", nw));
    check(int'(level) == nw, $sformatf("level %0d", level));
    check(!wr_ready, "no write accepted when full");
    reader_on = 1;
    wait (nr == total);
    #2us;
    check(empty && level == 0, "empty at the end");
    check(nw == total, "all words written");
    // clear
    total = 3100;
    reader_on = 0;
    #5us;
    check(level == 100, $sformatf("level %0d before clear", level));
    @(negedge clk) clear = 1;
    @(negedge clk) clear = 0;
    #1us;
    check(level <= 15 && level > 0, $sformatf("clear leaves only the read-ahead words (%0d)", level));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2ms;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
