// ADC serial clock (SCK) burst generator.
//
// A rising edge of the waveform processor's ADC-read bit starts one ADC read:
// NPULSES (65) SCK pulses at 50 MHz, i.e. 200 MHz divided by 2*HALF with
// HALF = 2 (two cycles high, two low). The ADC-read bit comes from the
// 25 MHz domain and is synchronised here with two flops before its edge is
// detected, so the burst starts 3 to 4 fast cycles after the bit rises.
//
// shift is high in the last cycle of each SCK high phase: the deserializer
// samples the data lines then, before the ADCs change them on the falling
// SCK edge. first marks the shift of pulse 1 of a burst. busy is high from
// the detected edge to the end of the last pulse. A trigger during a burst
// is ignored. Pulse count and rate follow the readout system; the duty
// cycle, the sampling point and the synchroniser are this design's choices.
module sck_gen #(
  parameter int unsigned NPULSES = 65,
  parameter int unsigned HALF    = 2
) (
  input  logic clk,
  input  logic rst_n,
  input  logic adc_read,
  output logic sck,
  output logic shift,
  output logic first,
  output logic busy,
  output logic burst_done
);
  localparam int unsigned PW = $clog2(NPULSES + 1);
  localparam int unsigned HW = $clog2(HALF + 1);

  logic          trig_s, trig_d;
  logic [PW-1:0] pulses;
  logic [HW-1:0] hcnt;

  sync_2ff #(.W(1)) u_sync (.clk(clk), .rst_n(rst_n), .d(adc_read), .q(trig_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      trig_d     <= 1'b0;
      busy       <= 1'b0;
      sck        <= 1'b0;
      pulses     <= '0;
      hcnt       <= '0;
      burst_done <= 1'b0;
    end else begin
      trig_d     <= trig_s;
      burst_done <= 1'b0;
      if (!busy) begin
        if (trig_s && !trig_d) begin
          busy   <= 1'b1;
          sck    <= 1'b1;
          hcnt   <= HW'(1);
          pulses <= '0;
        end
      end else if (hcnt == HW'(HALF)) begin
        hcnt <= HW'(1);
        if (sck) begin
          sck    <= 1'b0;
          pulses <= pulses + 1'b1;
        end else if (pulses == PW'(NPULSES)) begin
          busy       <= 1'b0;
          burst_done <= 1'b1;
        end else begin
          sck <= 1'b1;
        end
      end else begin
        hcnt <= hcnt + 1'b1;
      end
    end
  end

  assign shift = busy && sck && (hcnt == HW'(HALF));
  assign first = shift && (pulses == '0);
endmodule
