// Storage/CRC engine.
//
// Moves the pixel samples from the ADC deserializer (200 MHz) into the
// 64 MB DDR2 FIFO (77 MHz) and protects each frame with a CRC.
//
// - A 16-deep dual-clock FIFO carries each set of NCH samples across.
// - On the 77 MHz side each set is packed into NCH/2 32-bit words, word k
//   being {channel 2k+1, channel 2k}, and written to the FIFO (wr_valid /
//   wr_ready handshake; a word is taken when both are high).
// - A frame is the time the waveform processor is busy. When it starts, the
//   CRC is set to 0xFFFFFFFF and the word count to 0. Every data word updates
//   a CRC-32 (polynomial 0x04C11DB7, MSB first). When the WPU stops and the
//   crossing FIFO is empty, the inverted CRC is written as one extra trailer
//   word and frame_words / frame_crc are latched for the host.
// - overflow is set (and held until the next frame starts) when a sample set
//   arrives while the crossing FIFO is full.
//
// The engine's existence and its place between the deserializer and the
// FIFO follow the readout system; the packing, the CRC polynomial, the
// trailer word and the frame boundaries are this design's choices. Because
// the trailer waits only for the crossing FIFO to drain, a program must dwell
// at least 2 us after its last ADC read before it halts. The crossing FIFO's
// fill level output is not needed here and is left unread.
module storage_crc
  import pfs_pkg::*;
#(
  parameter int unsigned NCH      = 8,
  parameter int unsigned SAMPLE_W = 16
) (
  // 200 MHz side
  input  logic                clk_fast,
  input  logic                rst_fast_n,
  input  logic [SAMPLE_W-1:0] samples [NCH],
  input  logic                samples_valid,
  // 77 MHz side
  input  logic                clk,
  input  logic                rst_n,
  input  logic                frame_active,   // WPU busy, 25 MHz domain
  output logic                wr_valid,
  output logic [31:0]         wr_data,
  input  logic                wr_ready,
  output logic [31:0]         frame_words,
  output logic [31:0]         frame_crc,
  output logic                overflow
);
  localparam int unsigned NW = NCH * SAMPLE_W / 32;   // words per sample set
  localparam int unsigned KW = (NW > 1) ? $clog2(NW) : 1;

  // ---------------- clock crossing ----------------
  logic [NCH*SAMPLE_W-1:0] set_in, set_out;
  logic                    cf_full, cf_empty, cf_pop;
  logic [4:0]              cf_level;
  logic                    ovf_fast, frame_fast, frame_fast_d;

  always_comb begin
    for (int c = 0; c < int'(NCH); c++) set_in[c*SAMPLE_W +: SAMPLE_W] = samples[c];
  end

  async_fifo #(.DW(NCH*SAMPLE_W), .AW(4)) u_cross (
    .wr_clk(clk_fast), .wr_rst_n(rst_fast_n), .wr_en(samples_valid), .wr_data(set_in),
    .wr_full(cf_full), .wr_level(cf_level),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(cf_pop), .rd_data(set_out), .rd_empty(cf_empty));

  sync_2ff #(.W(1)) u_sync_ff (.clk(clk_fast), .rst_n(rst_fast_n), .d(frame_active), .q(frame_fast));
  always_ff @(posedge clk_fast or negedge rst_fast_n) begin
    if (!rst_fast_n) begin
      ovf_fast     <= 1'b0;
      frame_fast_d <= 1'b0;
    end else begin
      frame_fast_d <= frame_fast;
      if (frame_fast && !frame_fast_d)   ovf_fast <= 1'b0;
      else if (samples_valid && cf_full) ovf_fast <= 1'b1;
    end
  end
  sync_2ff #(.W(1)) u_sync_ovf (.clk(clk), .rst_n(rst_n), .d(ovf_fast), .q(overflow));

  // ---------------- packing, CRC, trailer ----------------
  logic          fa_s, fa_d;
  logic [KW-1:0] k;
  logic          trailer_due;
  logic [31:0]   crc, words;
  logic          is_trailer;

  sync_2ff #(.W(1)) u_sync_fa (.clk(clk), .rst_n(rst_n), .d(frame_active), .q(fa_s));

  always_comb begin
    is_trailer = trailer_due && cf_empty;
    wr_valid   = !cf_empty || is_trailer;
    wr_data    = is_trailer ? ~crc : set_out[k*32 +: 32];
    cf_pop     = !cf_empty && wr_ready && (k == KW'(NW - 1));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fa_d        <= 1'b0;
      k           <= '0;
      trailer_due <= 1'b0;
      crc         <= '1;
      words       <= '0;
      frame_words <= '0;
      frame_crc   <= '0;
    end else begin
      fa_d <= fa_s;
      if (fa_s && !fa_d) begin
        crc         <= '1;
        words       <= '0;
        trailer_due <= 1'b0;
      end else begin
        if (!fa_s && fa_d) trailer_due <= 1'b1;
        if (wr_valid && wr_ready) begin
          if (is_trailer) begin
            trailer_due <= 1'b0;
            frame_words <= words;
            frame_crc   <= ~crc;
          end else begin
            crc   <= crc32_word(crc, wr_data);
            words <= words + 1'b1;
            k     <= (k == KW'(NW - 1)) ? '0 : k + 1'b1;
          end
        end
      end
    end
  end

  // A word offered to the FIFO stays until it is taken.
  assert property (@(posedge clk) disable iff (!rst_n)
                   wr_valid && !wr_ready && !is_trailer |=> wr_valid);
endmodule
