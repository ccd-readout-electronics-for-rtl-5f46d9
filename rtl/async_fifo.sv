// Dual-clock FIFO with Gray-coded pointers, used wherever data crosses
// between the design's clock domains. Depth is 2**AW words. wr_full and
// rd_empty are conservative (each side sees the other's pointer through a
// two-flop synchroniser). rd_data shows the head word whenever rd_empty is
// low (first-word fall-through); rd_en pops it. wr_rst_n and rd_rst_n must be
// asserted together.
module async_fifo #(
  parameter int unsigned DW = 32,
  parameter int unsigned AW = 4
) (
  input  logic          wr_clk,
  input  logic          wr_rst_n,
  input  logic          wr_en,
  input  logic [DW-1:0] wr_data,
  output logic          wr_full,
  output logic [AW:0]   wr_level,
  input  logic          rd_clk,
  input  logic          rd_rst_n,
  input  logic          rd_en,
  output logic [DW-1:0] rd_data,
  output logic          rd_empty
);
  logic [DW-1:0] mem [2**AW];
  logic [AW:0] wbin, wgray, rbin, rgray;
  logic [AW:0] rgray_w, wgray_r;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction
  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b = g;
    for (int i = int'(AW) - 1; i >= 0; i--) b[i] = b[i+1] ^ g[i];
    return b;
  endfunction

  // write side
  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin  <= '0;
      wgray <= '0;
    end else if (wr_en && !wr_full) begin
      wbin  <= wbin + 1'b1;
      wgray <= bin2gray(wbin + 1'b1);
    end
  end
  always_ff @(posedge wr_clk) begin
    if (wr_en && !wr_full) mem[wbin[AW-1:0]] <= wr_data;
  end
  sync_2ff #(.W(AW+1)) u_sync_r2w (.clk(wr_clk), .rst_n(wr_rst_n), .d(rgray), .q(rgray_w));
  always_comb begin
    wr_full  = (wgray == {~rgray_w[AW:AW-1], rgray_w[AW-2:0]});
    wr_level = wbin - gray2bin(rgray_w);
  end

  // read side
  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin  <= '0;
      rgray <= '0;
    end else if (rd_en && !rd_empty) begin
      rbin  <= rbin + 1'b1;
      rgray <= bin2gray(rbin + 1'b1);
    end
  end
  sync_2ff #(.W(AW+1)) u_sync_w2r (.clk(rd_clk), .rst_n(rd_rst_n), .d(wgray), .q(wgray_r));
  assign rd_empty = (rgray == wgray_r);
  assign rd_data  = mem[rbin[AW-1:0]];
endmodule
