// 25 MHz synchronisation clock generator.
//
// In the master camera this block divides the 200 MHz clock by DIV (8) and
// drives the result on NOUT (8) equal outputs: one returns to the master's
// own waveform processor, the others go to up to seven slave cameras over
// equal-length LVDS lines. Since every WPU starts on the first edges of this
// clock, starting and stopping it is what starts all cameras together.
//
// enable comes from the register file in another clock domain and is
// synchronised here. The clock starts and stops only at the boundary of a
// whole period (outputs low), so no runt pulse is produced. Outputs are high
// for the first DIV/2 cycles of each period. Slaves leave enable low.
// The division and the output count follow the readout system (200 MHz logic,
// 25 MHz, master plus up to seven slaves); the clean start/stop is this
// design's choice.
module clk25_gen #(
  parameter int unsigned NOUT = 8,
  parameter int unsigned DIV  = 8
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            enable,
  output logic [NOUT-1:0] clk25_out,
  output logic            running
);
  localparam int unsigned CW = $clog2(DIV);
  logic          en_s;
  logic [CW-1:0] phase;

  sync_2ff #(.W(1)) u_sync (.clk(clk), .rst_n(rst_n), .d(enable), .q(en_s));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase     <= '0;
      running   <= 1'b0;
      clk25_out <= '0;
    end else begin
      if (!running) begin
        phase <= '0;
        if (en_s) begin
          running   <= 1'b1;
          clk25_out <= '1;       // first rising edge
        end
      end else begin
        if (phase == CW'(DIV - 1)) begin
          phase <= '0;
          if (en_s) clk25_out <= '1;
          else begin
            running   <= 1'b0;
            clk25_out <= '0;
          end
        end else begin
          phase <= phase + 1'b1;
          if (phase == CW'(DIV / 2 - 1)) clk25_out <= '0;
        end
      end
    end
  end
endmodule
