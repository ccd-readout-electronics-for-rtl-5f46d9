// Self-checking testbench of the PIO resynchroniser: 200 random reads and
// writes cross from a 62.5 MHz side to a 77 MHz register model that answers
// after a random delay. Checks that every request arrives once and intact,
// that reads return the model's data, that only one access is in flight, and
// that a round trip stays under 20 PCIe cycles.
module tb_pio_resync;
  timeunit 1ns; timeprecision 1ps;
  import pfs_pkg::*;
  logic clk_a = 0, clk_b = 0, rst_a_n = 0, rst_b_n = 0;
  logic req_valid = 0, req_ready, rsp_valid;
  pio_req_t req, b_req;
  logic [31:0] rsp_rdata, b_rsp_rdata;
  logic b_req_valid, b_rsp_valid;
  int checks = 0, failures = 0, seen = 0, outstanding = 0;
  logic [31:0] regs [16];

  always #8 clk_a = ~clk_a;
  always #6.5 clk_b = ~clk_b;
  pio_resync dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // 77 MHz register model
  initial begin
    b_rsp_valid = 0; b_rsp_rdata = '0;
    forever begin
      @(posedge clk_b);
      b_rsp_valid <= 0;
      if (b_req_valid && rst_b_n) begin
        pio_req_t r;
        r = b_req;
        seen++;
        outstanding++;
        check(outstanding == 1, "one access in flight");
        repeat ($urandom_range(0, 3)) @(posedge clk_b);
        if (r.we) regs[r.addr[3:0]] = r.wdata;
        b_rsp_rdata <= regs[r.addr[3:0]];
        b_rsp_valid <= 1;
        outstanding--;
      end
    end
  end

  initial begin
    logic [31:0] shadow [16];
    for (int i = 0; i < 16; i++) begin regs[i] = 32'(i); shadow[i] = 32'(i); end
    repeat (3) @(posedge clk_a);
    rst_a_n = 1; rst_b_n = 1;
    repeat (3) @(posedge clk_a);
    for (int n = 0; n < 200; n++) begin
      int t;
      pio_req_t r;
      r.we = 1'($urandom_range(0, 1));
      r.addr = PIO_AW'($urandom_range(0, 15));
      r.wdata = $urandom;
      @(posedge clk_a);
      check(req_ready, "ready when idle");
      req_valid <= 1; req <= r;
      @(posedge clk_a);
      req_valid <= 0;
      t = 0;
      while (!rsp_valid) begin @(posedge clk_a); t++; end
      check(t < 20, $sformatf("round trip %0d cycles", t));
      if (r.we) shadow[r.addr[3:0]] = r.wdata;
      else check(rsp_rdata == shadow[r.addr[3:0]], $sformatf("read %0d data %h exp %h", n, rsp_rdata, shadow[r.addr[3:0]]));
    end
    repeat (10) @(posedge clk_a);
    check(seen == 200, $sformatf("%0d requests seen on side B", seen));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #200us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
