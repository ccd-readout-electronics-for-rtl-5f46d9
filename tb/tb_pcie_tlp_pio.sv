// Self-checking testbench of the PCIe TLP to PIO engine. Sends memory-write
// and memory-read TLPs (with gaps in the stream and back-pressure on the
// completion side), plus TLPs the engine must drop (a 2-word read, a 4-DW
// header write, a message), and checks: the PIO accesses made, every
// completion's header fields (format/type, length, completer and requester
// IDs, tag, byte count, lower address) and data, pops of the FIFO data window
// and the zero returned when the FIFO is empty.
module tb_pcie_tlp_pio;
  timeunit 1ns; timeprecision 1ps;
  import pfs_pkg::*;
  logic clk = 0, rst_n = 0;
  logic [15:0] completer_id = 16'h0300;
  logic [31:0] rx_data = '0, tx_data;
  logic rx_sof = 0, rx_eof = 0, rx_valid = 0, rx_ready;
  logic tx_sof, tx_eof, tx_valid, tx_ready = 0;
  logic pio_req_valid, pio_req_ready, pio_rsp_valid = 0;
  pio_req_t pio_req;
  logic [31:0] pio_rsp_rdata = '0;
  logic fifo_valid, fifo_pop;
  logic [31:0] fifo_data;
  logic [31:0] q [$];
  logic [31:0] regs [int];
  int checks = 0, failures = 0, pio_count = 0;

  always #8 clk = ~clk;
  pcie_tlp_pio dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // PIO responder: accepts at once, answers two cycles later
  assign pio_req_ready = 1'b1;
  always @(posedge clk) begin
    pio_rsp_valid <= 0;
    if (pio_req_valid) begin
      pio_req_t r;
      r = pio_req;
      pio_count++;
      if (r.we) regs[int'(r.addr)] = r.wdata;
      repeat (2) @(posedge clk);
      pio_rsp_rdata <= regs.exists(int'(r.addr)) ? regs[int'(r.addr)] : 32'hDEAD0000 | 32'(r.addr);
      pio_rsp_valid <= 1;
    end
  end
  // FIFO window source
  assign fifo_valid = q.size() > 0;
  assign fifo_data  = fifo_valid ? q[0] : 32'h0;
  logic pop_d = 0;
  always @(posedge clk) pop_d <= fifo_pop;
  always @(negedge clk) if (pop_d) void'(q.pop_front());
  // random back-pressure on completions
  always @(posedge clk) tx_ready <= ($urandom_range(0, 2) != 0);

  task automatic send(input logic [31:0] w [$]);
    for (int i = 0; i < w.size(); i++) begin
      @(negedge clk);
      while ($urandom_range(0, 3) == 0) begin rx_valid = 0; @(negedge clk); end
      rx_valid = 1; rx_data = w[i]; rx_sof = (i == 0); rx_eof = (i == w.size() - 1);
      @(posedge clk);
      while (!rx_ready) @(posedge clk);
    end
    @(negedge clk); rx_valid = 0; rx_sof = 0; rx_eof = 0;
  endtask

  task automatic mwr(input logic [31:0] addr, input logic [31:0] data);
    logic [31:0] w [$];
    w = '{ {3'b010, 5'b00000, 14'd0, 10'd1}, 32'h0100_07FF, addr, data };
    send(w);
  endtask

  task automatic mrd(input logic [31:0] addr, input logic [7:0] tag, input logic [31:0] exp_data);
    logic [31:0] w [$], c [4];
    int n = 0;
    w = '{ {3'b000, 5'b00000, 14'd0, 10'd1}, {16'h0100, tag, 8'h0F}, addr };
    send(w);
    while (n < 4) begin
      @(posedge clk);
      if (tx_valid && tx_ready) begin
        check(tx_sof == (n == 0) && tx_eof == (n == 3), "completion framing");
        c[n] = tx_data; n++;
      end
    end
    check(c[0] == 32'h4A00_0001, $sformatf("CplD DW0 %h", c[0]));
    check(c[1] == {completer_id, 16'h0004}, $sformatf("CplD DW1 %h", c[1]));
    check(c[2] == {16'h0100, tag, 1'b0, addr[6:0]}, $sformatf("CplD DW2 %h", c[2]));
    check(c[3] == exp_data, $sformatf("read %h data %h exp %h", addr, c[3], exp_data));
  endtask

  initial begin
    logic [31:0] w [$];
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 20; i++) mwr(32'hF000_0000 + 32'(i * 4), 32'h1111_0000 + 32'(i));
    mwr(32'hF010_0004, 32'd77);
    repeat (5) @(posedge clk);
    check(pio_count == 21, $sformatf("%0d PIO writes", pio_count));
    for (int i = 0; i < 20; i += 3) mrd(32'hF000_0000 + 32'(i * 4), 8'(i), 32'h1111_0000 + 32'(i));
    mrd(32'hF010_0004, 8'h55, 32'd77);
    mrd(32'hF010_0008, 8'h56, 32'hDEAD0000 | 32'h40002);
    // TLPs to drop: 2-DW read, 4-DW header write, message
    pio_count = 0;
    w = '{ {3'b000, 5'b00000, 14'd0, 10'd2}, 32'h0100_01FF, 32'hF000_0000 }; send(w);
    w = '{ {3'b011, 5'b00000, 14'd0, 10'd1}, 32'h0100_07FF, 32'h0, 32'hF000_0000, 32'h0 }; send(w);
    w = '{ {3'b001, 5'b10100, 14'd0, 10'd0}, 32'h0100_0000, 32'h0, 32'h0 }; send(w);
    repeat (10) @(posedge clk);
    check(pio_count == 0 && !tx_valid, "dropped TLPs make no access and no completion");
    // FIFO window
    q = '{32'hAAAA0001, 32'hAAAA0002, 32'hAAAA0003};
    mrd(32'hF020_0000, 8'h10, 32'hAAAA0001);
    mrd(32'hF020_0000, 8'h11, 32'hAAAA0002);
    mwr(32'hF020_0000, 32'h0);     // ignored
    mrd(32'hF020_0000, 8'h12, 32'hAAAA0003);
    mrd(32'hF020_0000, 8'h13, 32'h0);
    check(pio_count == 0, "FIFO window makes no PIO access");
    check(q.size() == 0, "FIFO popped three times");
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
