// PIO resynchroniser between the 62.5 MHz PCIe domain and the 77 MHz
// register domain.
//
// One single-word access at a time crosses with a toggle handshake: side A
// captures the request and flips req_tog; side B sees the flip through two
// flops, pulses b_req_valid with the (by then stable) request and waits for
// the register file's b_rsp_valid; it captures the read data and flips
// ack_tog, which side A sees two flops later and reports as a one-cycle
// rsp_valid. req_ready is low while an access is in flight; writes are also
// acknowledged. A round trip costs about 3 cycles of each clock plus the
// register file's latency. The block's place follows the readout system;
// the handshake is this design's choice.
module pio_resync
  import pfs_pkg::*;
(
  // side A: PCIe TLP engine
  input  logic        clk_a,
  input  logic        rst_a_n,
  input  logic        req_valid,
  output logic        req_ready,
  input  pio_req_t    req,
  output logic        rsp_valid,
  output logic [31:0] rsp_rdata,
  // side B: register file
  input  logic        clk_b,
  input  logic        rst_b_n,
  output logic        b_req_valid,
  output pio_req_t    b_req,
  input  logic        b_rsp_valid,
  input  logic [31:0] b_rsp_rdata
);
  logic     req_tog, ack_tog;
  logic     req_tog_b, req_tog_b_d, ack_tog_a, ack_tog_a_d;
  logic     busy;
  pio_req_t req_hold;
  logic [31:0] rdata_hold;

  // side A
  always_ff @(posedge clk_a or negedge rst_a_n) begin
    if (!rst_a_n) begin
      req_tog     <= 1'b0;
      busy        <= 1'b0;
      req_hold    <= '0;
      ack_tog_a_d <= 1'b0;
      rsp_valid   <= 1'b0;
      rsp_rdata   <= '0;
    end else begin
      ack_tog_a_d <= ack_tog_a;
      rsp_valid   <= 1'b0;
      if (req_valid && !busy) begin
        req_hold <= req;
        req_tog  <= ~req_tog;
        busy     <= 1'b1;
      end else if (busy && (ack_tog_a != ack_tog_a_d)) begin
        busy      <= 1'b0;
        rsp_valid <= 1'b1;
        rsp_rdata <= rdata_hold;
      end
    end
  end
  assign req_ready = !busy;
  sync_2ff #(.W(1)) u_ack_sync (.clk(clk_a), .rst_n(rst_a_n), .d(ack_tog), .q(ack_tog_a));

  // side B
  sync_2ff #(.W(1)) u_req_sync (.clk(clk_b), .rst_n(rst_b_n), .d(req_tog), .q(req_tog_b));
  always_ff @(posedge clk_b or negedge rst_b_n) begin
    if (!rst_b_n) begin
      req_tog_b_d <= 1'b0;
      ack_tog     <= 1'b0;
      rdata_hold  <= '0;
    end else begin
      req_tog_b_d <= req_tog_b;
      if (b_rsp_valid) begin
        rdata_hold <= b_rsp_rdata;
        ack_tog    <= ~ack_tog;
      end
    end
  end
  assign b_req_valid = (req_tog_b != req_tog_b_d);
  assign b_req       = req_hold;
endmodule
