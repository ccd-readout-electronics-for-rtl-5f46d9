// PCIe TLP to PIO engine (62.5 MHz PCIe user clock).
//
// Turns the host's memory requests, as TLPs from the PCIe core, into
// single-word PIO accesses and answers reads with completions:
//   MRd32 (fmt 000, type 00000, length 1)  -> PIO read or FIFO pop, then CplD
//   MWr32 (fmt 010, type 00000, length 1)  -> PIO write (no completion)
// Anything else (4-DW headers, bursts, messages, completions) is consumed
// and dropped. Byte enables are ignored: every access is a full word.
//
// TLPs move on 32-bit streams, one header or data word per beat, with
// sof/eof marking the first and last word and valid/ready handshakes, as on
// the 32-bit user interface of the FPGA's PCIe core. The BAR is 4 MB; byte
// offsets 0x200000 and up are the FIFO data window, where a read pops one
// image word from the DDR2 FIFO. If no word is at the FIFO output, the read
// waits up to FIFO_WAIT cycles (a word counted in FIFO_LEVEL may still be on
// its way from DDR2) and then completes with zero. Lower offsets go over
// the PIO bus to the register file. One request is handled at a time, so
// rx_ready drops while an access is under way.
//
// The TLP formats are those of the PCIe base specification; the single-word
// restriction, the dropped requests and the address map are this design's
// choices. The engine's role follows the readout system.
module pcie_tlp_pio
  import pfs_pkg::*;
#(
  parameter int unsigned FIFO_WAIT = 200
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [15:0] completer_id,
  // received TLPs
  input  logic [31:0] rx_data,
  input  logic        rx_sof,
  input  logic        rx_eof,
  input  logic        rx_valid,
  output logic        rx_ready,
  // transmitted completions
  output logic [31:0] tx_data,
  output logic        tx_sof,
  output logic        tx_eof,
  output logic        tx_valid,
  input  logic        tx_ready,
  // PIO bus
  output logic        pio_req_valid,
  input  logic        pio_req_ready,
  output pio_req_t    pio_req,
  input  logic        pio_rsp_valid,
  input  logic [31:0] pio_rsp_rdata,
  // FIFO data window
  input  logic        fifo_valid,
  input  logic [31:0] fifo_data,
  output logic        fifo_pop
);
  typedef enum logic [2:0] {
    S_H0, S_H1, S_H2, S_DATA, S_DROP, S_PIO, S_PIO_WAIT, S_TX
  } state_e;

  state_e      state;
  logic        is_rd, is_wr;
  logic [2:0]  tc;
  logic [1:0]  attr;
  logic [15:0] req_id;
  logic [7:0]  tag;
  logic [21:2] addr;   // DW address; bits [1:0] of the header are reserved
  logic [31:0] wdata, cpl_data;
  logic [1:0]  tx_idx;
  logic        fifo_win;
  logic [7:0]  fifo_wait;

  assign fifo_win = addr[21];

  // header decode of the first word
  logic [2:0] fmt;
  logic [4:0] typ;
  logic [9:0] len;
  always_comb begin
    fmt = rx_data[31:29];
    typ = rx_data[28:24];
    len = rx_data[9:0];
  end

  assign rx_ready = (state == S_H0) || (state == S_H1) || (state == S_H2) ||
                    (state == S_DATA) || (state == S_DROP);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_H0;
      is_rd    <= 1'b0;
      is_wr    <= 1'b0;
      tc       <= '0;
      attr     <= '0;
      req_id   <= '0;
      tag      <= '0;
      addr     <= '0;
      wdata    <= '0;
      cpl_data <= '0;
      tx_idx   <= '0;
      fifo_wait <= '0;
    end else begin
      unique case (state)
        S_H0: if (rx_valid && rx_sof) begin
          is_rd <= (fmt == 3'b000) && (typ == 5'b00000) && (len == 10'd1);
          is_wr <= (fmt == 3'b010) && (typ == 5'b00000) && (len == 10'd1);
          tc    <= rx_data[22:20];
          attr  <= rx_data[13:12];
          state <= rx_eof ? S_H0 : S_H1;
        end
        S_H1: if (rx_valid) begin
          req_id <= rx_data[31:16];
          tag    <= rx_data[15:8];
          state  <= rx_eof ? S_H0 : ((is_rd || is_wr) ? S_H2 : S_DROP);
        end
        S_H2: if (rx_valid) begin
          addr <= rx_data[21:2];
          if (rx_eof)     state <= is_rd ? S_PIO : S_H0;
          else if (is_wr) state <= S_DATA;
          else            state <= S_DROP;
        end
        S_DATA: if (rx_valid) begin
          wdata <= rx_data;
          state <= rx_eof ? S_PIO : S_DROP;
        end
        S_DROP: if (rx_valid && rx_eof) state <= S_H0;
        S_PIO: begin
          if (fifo_win) begin
            // FIFO window: reads pop (waiting up to FIFO_WAIT cycles for a
            // word still on its way from DDR2), writes are ignored
            tx_idx <= '0;
            if (!is_rd) begin
              state <= S_H0;
            end else if (fifo_valid || fifo_wait == 8'(FIFO_WAIT)) begin
              cpl_data  <= fifo_valid ? fifo_data : 32'd0;
              fifo_wait <= '0;
              state     <= S_TX;
            end else begin
              fifo_wait <= fifo_wait + 1'b1;
            end
          end else if (pio_req_ready) begin
            state <= S_PIO_WAIT;
          end
        end
        S_PIO_WAIT: if (pio_rsp_valid) begin
          cpl_data <= pio_rsp_rdata;
          tx_idx   <= '0;
          state    <= is_rd ? S_TX : S_H0;
        end
        S_TX: if (tx_ready) begin
          tx_idx <= tx_idx + 1'b1;
          if (tx_idx == 2'd3) state <= S_H0;
        end
        default: state <= S_H0;
      endcase
    end
  end

  always_comb begin
    pio_req_valid = (state == S_PIO) && !fifo_win;
    pio_req.we    = is_wr;
    pio_req.addr  = addr[20:2];
    pio_req.wdata = wdata;
    fifo_pop      = (state == S_PIO) && fifo_win && is_rd && fifo_valid;
    tx_valid      = (state == S_TX);
    tx_sof        = (state == S_TX) && (tx_idx == 2'd0);
    tx_eof        = (state == S_TX) && (tx_idx == 2'd3);
    unique case (tx_idx)
      2'd0: tx_data = {3'b010, 5'b01010, 1'b0, tc, 4'b0000, 1'b0, 1'b0, attr, 2'b00, 10'd1};
      2'd1: tx_data = {completer_id, 3'b000, 1'b0, 12'd4};
      2'd2: tx_data = {req_id, tag, 1'b0, addr[6:2], 2'b00};
      default: tx_data = cpl_data;
    endcase
  end

  // A completion word is held until the core takes it.
  assert property (@(posedge clk) disable iff (!rst_n)
                   tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
endmodule
