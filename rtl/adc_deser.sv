// ADC input deserializer.
//
// The front end has eight 16-bit ADCs, one per CCD output, in NGROUPS = 2
// daisy chains of ADC_PER_GROUP = 4 (one chain per CCD). Each chain returns
// its data on one serial line, clocked by the SCK burst of sck_gen. A burst
// has 65 pulses for 64 data bits: the first bit of each burst is taken as the
// chain's busy-indicator bit and discarded, the next 64 bits are the four
// conversions MSB first, the ADC nearest the FPGA first. Sample channel
// numbering is group*ADC_PER_GROUP + position in the chain.
//
// Timing: runs on the 200 MHz clock. Data lines are sampled on sck_gen's
// shift strobe. One cycle after the last bit, samples holds all eight values
// and valid pulses for one cycle. The burst format (two groups of four,
// 16 bits, 65 pulses) follows the readout system; the use of the extra bit
// and the bit order are this design's reading.
module adc_deser #(
  parameter int unsigned NGROUPS       = 2,
  parameter int unsigned ADC_PER_GROUP = 4,
  parameter int unsigned SAMPLE_W      = 16
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [NGROUPS-1:0]   sdata,
  input  logic                 shift,
  input  logic                 first,
  output logic [SAMPLE_W-1:0]  samples [NGROUPS*ADC_PER_GROUP],
  output logic                 valid
);
  localparam int unsigned BITS = ADC_PER_GROUP * SAMPLE_W;
  localparam int unsigned CW   = $clog2(BITS + 1);

  logic [BITS-1:0] sreg [NGROUPS];
  logic [CW-1:0]   nbits;
  logic            active;
  logic [BITS-1:0] nxt  [NGROUPS];

  always_comb begin
    for (int g = 0; g < int'(NGROUPS); g++) nxt[g] = {sreg[g][BITS-2:0], sdata[g]};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      nbits  <= '0;
      active <= 1'b0;
      valid  <= 1'b0;
      for (int g = 0; g < int'(NGROUPS); g++) sreg[g] <= '0;
      for (int c = 0; c < int'(NGROUPS * ADC_PER_GROUP); c++) samples[c] <= '0;
    end else begin
      valid <= 1'b0;
      if (shift) begin
        if (first) begin
          // busy-indicator bit: start a new word
          nbits  <= '0;
          active <= 1'b1;
        end else if (active) begin
          for (int g = 0; g < int'(NGROUPS); g++) sreg[g] <= nxt[g];
          nbits <= nbits + 1'b1;
          if (nbits == CW'(BITS - 1)) begin
            active <= 1'b0;
            valid  <= 1'b1;
            for (int g = 0; g < int'(NGROUPS); g++)
              for (int p = 0; p < int'(ADC_PER_GROUP); p++)
                samples[g*ADC_PER_GROUP + p] <=
                  nxt[g][BITS-1-p*SAMPLE_W -: SAMPLE_W];
          end
        end
      end
    end
  end
endmodule
