// 64 MB image FIFO kept in the DDR2 SDRAM.
//
// The storage engine streams image words in; the PCIe side reads them out
// while (or after) the frame is taken. The FIFO is a ring of 2**AW 32-bit
// words (AW = 24: 16 M words = 64 MB) in external memory, reached through a
// simple command port on the memory interface:
//   mem_req_valid / mem_req_ready   one command per handshake
//   mem_we, mem_addr, mem_wdata     write or read of one word (word address)
//   mem_rvalid, mem_rdata           read data, in request order, any latency
// Writes and reads share the port; when both are waiting they alternate.
//
// Read-ahead. Words read from memory go into a 16-word dual-clock FIFO whose
// read side is in the 62.5 MHz PCIe domain (rd_valid / rd_data / rd_en,
// first-word fall-through). Reads are only issued while the words in flight
// plus the words in that FIFO stay below its depth, so it cannot overflow.
//
// level counts every word accepted and not yet handed to the read-ahead
// FIFO's output side (DDR, in flight, read-ahead). clear empties the DDR
// ring only; it is applied once no read is in flight. The 64 MB size follows
// the readout system; the memory port, the read-ahead and the arbitration
// are this design's choices.
module dram_fifo #(
  parameter int unsigned AW = 24,
  parameter int unsigned PF_AW = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  // write side (from storage engine)
  input  logic          wr_valid,
  input  logic [31:0]   wr_data,
  output logic          wr_ready,
  // memory interface command port
  output logic          mem_req_valid,
  input  logic          mem_req_ready,
  output logic          mem_we,
  output logic [AW-1:0] mem_addr,
  output logic [31:0]   mem_wdata,
  input  logic          mem_rvalid,
  input  logic [31:0]   mem_rdata,
  // read side (PCIe clock domain)
  input  logic          rd_clk,
  input  logic          rd_rst_n,
  output logic          rd_valid,
  output logic [31:0]   rd_data,
  input  logic          rd_en,
  // status (clk domain)
  output logic [AW:0]   level,
  output logic          empty
);
  localparam int unsigned PF_DEPTH = 2**PF_AW;

  logic [AW:0]      wptr, rptr, stored;
  logic [PF_AW:0]   inflight, pf_level;
  logic             pf_full, pf_empty;
  logic             full, want_w, want_r, pick_r, last_r, clear_pend;

  always_comb begin
    stored   = wptr - rptr;
    full     = stored[AW];
    want_w   = wr_valid && !full && !clear_pend;
    want_r   = (stored != '0) && !clear_pend &&
               ((32'(inflight) + 32'(pf_level)) < PF_DEPTH - 1);
    pick_r   = want_r && (!want_w || !last_r);
    mem_req_valid = want_w || want_r;
    mem_we        = !pick_r;
    mem_addr      = pick_r ? rptr[AW-1:0] : wptr[AW-1:0];
    mem_wdata     = wr_data;
    wr_ready      = mem_req_ready && want_w && !pick_r;
    level         = stored + (AW+1)'(inflight) + (AW+1)'(pf_level);
    empty         = (level == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      inflight   <= '0;
      last_r     <= 1'b0;
      clear_pend <= 1'b0;
    end else begin
      if (clear) clear_pend <= 1'b1;
      if (clear_pend && inflight == '0) begin
        wptr       <= '0;
        rptr       <= '0;
        clear_pend <= clear;
      end else if (mem_req_valid && mem_req_ready) begin
        last_r <= pick_r;
        if (pick_r) rptr <= rptr + 1'b1;
        else        wptr <= wptr + 1'b1;
      end
      inflight <= inflight + (PF_AW+1)'(mem_req_valid && mem_req_ready && pick_r)
                           - (PF_AW+1)'(mem_rvalid);
    end
  end

  async_fifo #(.DW(32), .AW(PF_AW)) u_readahead (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_en(mem_rvalid), .wr_data(mem_rdata),
    .wr_full(pf_full), .wr_level(pf_level),
    .rd_clk(rd_clk), .rd_rst_n(rd_rst_n), .rd_en(rd_en), .rd_data(rd_data), .rd_empty(pf_empty));

  assign rd_valid = !pf_empty;

  // Read data never arrives for a read that was not issued, and never meets
  // a full read-ahead FIFO.
  assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> inflight != '0);
  assert property (@(posedge clk) disable iff (!rst_n) mem_rvalid |-> !pf_full);
endmodule
