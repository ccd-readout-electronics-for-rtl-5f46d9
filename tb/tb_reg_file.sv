// Self-checking testbench of the register file with the program RAM on its
// port A: program-RAM writes and read-back, CTRL/WPU_START read-back, the
// self-clearing FIFO-clear strobe, status bits passed through the
// synchronisers, reads of unmapped addresses, and the fixed one-cycle
// response latency.
module tb_reg_file;
  timeunit 1ns; timeprecision 1ps;
  import pfs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic req_valid = 0, rsp_valid;
  pio_req_t req = '0;
  logic [31:0] rsp_rdata;
  logic sram_we; logic [14:0] sram_addr, start_addr; logic [31:0] sram_wdata, sram_rdata, doutb;
  logic run, master, fifo_clear;
  logic wpu_busy = 0, wpu_done = 0, fifo_empty = 1, overflow = 0;
  logic [24:0] fifo_level = 25'd1234;
  logic [31:0] frame_words = 32'd4288, frame_crc = 32'hCAFEF00D;
  int checks = 0, failures = 0, clears = 0;

  always #6.5 clk = ~clk;
  reg_file #(.WPU_AW(15), .FIFO_AW(24)) dut (.*);
  dp_sram #(.AW(15), .DW(32)) u_ram (.clka(clk), .wea(sram_we), .addra(sram_addr), .dina(sram_wdata),
    .douta(sram_rdata), .clkb(clk), .addrb(15'd0), .doutb(doutb));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (fifo_clear && rst_n) clears++;

  task automatic access(input logic we, input logic [21:0] byte_addr, input logic [31:0] wd,
                        output logic [31:0] rd);
    @(negedge clk);
    req_valid = 1; req.we = we; req.addr = byte_addr[20:2]; req.wdata = wd;
    @(negedge clk);
    req_valid = 0;
    check(rsp_valid, "response after one cycle");
    rd = rsp_rdata;
    @(negedge clk);
    check(!rsp_valid, "single response");
  endtask

  initial begin
    logic [31:0] d;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 64; i++) access(1, 22'(i * 4 * 509), 32'hA000_0000 + 32'(i), d);
    for (int i = 0; i < 64; i++) begin
      access(0, 22'(i * 4 * 509), 0, d);
      check(d == 32'hA000_0000 + 32'(i), $sformatf("RAM word %0d = %h", i * 509, d));
    end
    access(1, 22'h100000, 32'h3, d);
    check(run && master, "CTRL run/master set");
    access(0, 22'h100000, 0, d);
    check(d == 32'h3, "CTRL read back");
    access(1, 22'h100004, 32'd321, d);
    check(start_addr == 15'd321, "WPU_START");
    access(0, 22'h100004, 0, d);
    check(d == 32'd321, "WPU_START read back");
    access(1, 22'h100000, 32'h4, d);
    check(!run && !master, "CTRL cleared");
    @(negedge clk);
    check(clears == 1 && !fifo_clear, "FIFO clear is a one-cycle strobe");
    wpu_busy = 1; fifo_empty = 0; overflow = 1;
    repeat (3) @(negedge clk);
    access(0, 22'h100008, 0, d);
    check(d == 32'b1001, $sformatf("STATUS busy %b", d));
    wpu_busy = 0; wpu_done = 1;
    repeat (3) @(negedge clk);
    access(0, 22'h100008, 0, d);
    check(d == 32'b1010, $sformatf("STATUS done %b", d));
    access(0, 22'h10000C, 0, d);  check(d == 32'd1234, "FIFO_LEVEL");
    access(0, 22'h100010, 0, d);  check(d == 32'd4288, "FRAME_WORDS");
    access(0, 22'h100014, 0, d);  check(d == 32'hCAFEF00D, "FRAME_CRC");
    access(0, 22'h100040, 0, d);  check(d == 0, "unmapped register reads 0");
    access(0, 22'h080000, 0, d);  check(d == 0, "unmapped region reads 0");
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
