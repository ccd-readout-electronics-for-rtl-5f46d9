// Self-checking testbench of the storage/CRC engine. Two frames of sample
// sets are pushed in at 200 MHz while the FIFO side applies random
// back-pressure at 77 MHz. Checks every stored word (two samples per word,
// channel order), the trailer word (inverted CRC-32, computed here by a
// separate reference), the latched word count and CRC, and then that an
// over-full crossing FIFO raises overflow and that the next frame clears it.
module tb_storage_crc;
  timeunit 1ns; timeprecision 1ps;
  logic clk_fast = 0, clk = 0, rst_fast_n = 0, rst_n = 0;
  logic [15:0] samples [8];
  logic samples_valid = 0, frame_active = 0;
  logic wr_valid, wr_ready = 0;
  logic [31:0] wr_data, frame_words, frame_crc;
  logic overflow;
  logic [31:0] got [$], expw [$];
  int checks = 0, failures = 0;
  bit stall = 0;

  always #2.5 clk_fast = ~clk_fast;
  always #6.5 clk = ~clk;
  storage_crc #(.NCH(8), .SAMPLE_W(16)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // reference CRC-32, MSB first, one bit at a time
  function automatic logic [31:0] ref_crc(input logic [31:0] w [$]);
    logic [31:0] c = 32'hFFFFFFFF;
    foreach (w[i]) for (int b = 31; b >= 0; b--) begin
      logic fb = c[31] ^ w[i][b];
      c = c << 1;
      if (fb) c = c ^ 32'h04C11DB7;
    end
    return ~c;
  endfunction

  always @(posedge clk) begin
    if (wr_valid && wr_ready && rst_n) got.push_back(wr_data);
    wr_ready <= !stall && ($urandom_range(0, 2) != 0);
  end

  task automatic push_set(input int f, input int k);
    @(negedge clk_fast);
    for (int c = 0; c < 8; c++) samples[c] = 16'(f * 16'h1000 + c * 16'h0100 + k);
    samples_valid = 1;
    for (int c = 0; c < 8; c += 2) expw.push_back({samples[c+1], samples[c]});
    @(negedge clk_fast);
    samples_valid = 0;
  endtask

  task automatic frame(input int f, input int nsets);
    logic [31:0] crc;
    got.delete(); expw.delete();
    #30 frame_active = 1;
    #200;
    for (int k = 0; k < nsets; k++) begin push_set(f, k); #($urandom_range(40, 300)); end
    #2000 frame_active = 0;
    #2000;
    crc = ref_crc(expw);
    check(got.size() == expw.size() + 1, $sformatf("frame %0d: %0d words, exp %0d", f, got.size(), expw.size() + 1));
    for (int i = 0; i < expw.size() && i < got.size(); i++)
      check(got[i] == expw[i], $sformatf("frame %0d word %0d = %h exp %h", f, i, got[i], expw[i]));
    if (got.size() > 0) check(got[got.size()-1] == crc, $sformatf("frame %0d trailer %h exp %h", f, got[got.size()-1], crc));
    check(frame_words == 32'(expw.size()), $sformatf("frame %0d frame_words %0d", f, frame_words));
    check(frame_crc == crc, $sformatf("frame %0d frame_crc", f));
    check(!overflow, "no overflow");
  endtask

  initial begin
    for (int c = 0; c < 8; c++) samples[c] = '0;
    repeat (3) @(posedge clk);
    rst_fast_n = 1; rst_n = 1;
    #100;
    frame(1, 12);
    frame(2, 3);
    // overflow: hold the FIFO side and push 20 sets back to back
    stall = 1;
    #30 frame_active = 1;
    #200;
    for (int k = 0; k < 20; k++) push_set(3, k);
    #100;
    check(overflow, "overflow flagged");
    stall = 0;
    #3000 frame_active = 0;
    #2000 frame_active = 1;
    #200;
    check(!overflow, "overflow cleared by next frame");
    frame_active = 0;
    #1000;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #500us;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
