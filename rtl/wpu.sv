// Waveform processor unit (WPU).
//
// A small sequencer that plays CCD and CDS clock patterns out of its program
// memory. Every WAVE instruction sets all clock lines and the ADC-read bit at
// once and holds them for (dwell+1) slots; LOOP/ENDLOOP repeat a block of
// instructions (for example a row-read routine repeated over all rows), HALT
// ends the program. The instruction encoding is given in pfs_pkg.
//
// Timing. The WPU runs on the synchronized 25 MHz clock shared by all
// cameras. One slot is 2 clock cycles, which gives the 80 ns
// granularity of the readout system: a slot is one cycle to present the
// program address to the RAM and one to execute the word that comes back.
// WAVE lines change at the end of the execute cycle, so line edges of
// consecutive WAVE words are exactly 2*(dwell+1) clock cycles apart. LOOP,
// ENDLOOP and HALT use one slot each and leave the lines alone.
//
// Start. run is a level from the host. When the WPU is idle and sees run, it
// starts at start_addr; after HALT it sits in done until run is cleared.
// Because every camera's WPU is clocked by the same 25 MHz wire and the run
// bit is set before the master starts that clock, all units begin on the
// same edge. Loop nesting depth (LOOP_DEPTH) is this design's choice; a LOOP
// beyond it is ignored and its ENDLOOP closes the enclosing loop.
module wpu
  import pfs_pkg::*;
#(
  parameter int unsigned AW         = 15,
  parameter int unsigned NLINES     = 16,
  parameter int unsigned LOOP_DEPTH = 2
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              run,
  input  logic [AW-1:0]     start_addr,
  output logic [AW-1:0]     ram_addr,
  input  logic [31:0]       ram_rdata,
  output logic [NLINES-1:0] lines,
  output logic              adc_read,
  output logic              busy,
  output logic              done
);
  typedef enum logic [2:0] {S_IDLE, S_FETCH, S_EXEC, S_WAIT, S_DONE} state_e;
  localparam int unsigned LW = (NLINES < LINE_W) ? NLINES : LINE_W;
  localparam int unsigned DW = $clog2(LOOP_DEPTH + 1);
  localparam int unsigned IW = (LOOP_DEPTH > 1) ? $clog2(LOOP_DEPTH) : 1;

  state_e                 state;
  logic [AW-1:0]          pc;
  logic [DWELL_W:0]       wait_cnt;
  logic [AW-1:0]          loop_start [LOOP_DEPTH];
  logic [LOOPCNT_W-1:0]   loop_left  [LOOP_DEPTH];
  logic [DW-1:0]          depth;

  wpu_op_e                op;
  logic [DWELL_W-1:0]     dwell;
  logic [LOOPCNT_W-1:0]   count;
  logic [IW-1:0]          push_i, top_i;   // stack slot to push / innermost loop

  always_comb begin
    op    = wpu_op_e'(ram_rdata[31:30]);
    dwell = ram_rdata[28:16];
    count = (ram_rdata[15:0] == '0) ? LOOPCNT_W'(1) : ram_rdata[15:0];
    push_i = IW'(depth);
    top_i  = IW'(depth - 1'b1);
  end

  assign ram_addr = pc;
  assign busy     = (state != S_IDLE) && (state != S_DONE);
  assign done     = (state == S_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      pc       <= '0;
      wait_cnt <= '0;
      depth    <= '0;
      lines    <= '0;
      adc_read <= 1'b0;
      for (int i = 0; i < int'(LOOP_DEPTH); i++) begin
        loop_start[i] <= '0;
        loop_left[i]  <= '0;
      end
    end else begin
      unique case (state)
        S_IDLE: begin
          if (run) begin
            pc    <= start_addr;
            depth <= '0;
            state <= S_FETCH;
          end
        end
        S_FETCH: state <= S_EXEC;   // RAM address is pc; data arrives next cycle
        S_EXEC: begin
          unique case (op)
            OP_WAVE: begin
              lines    <= ram_rdata[LW-1:0];
              adc_read <= ram_rdata[29];
              pc       <= pc + 1'b1;
              if (dwell == '0) begin
                state <= S_FETCH;
              end else begin
                wait_cnt <= {dwell, 1'b0} - 1'b1;   // 2*dwell more cycles
                state    <= S_WAIT;
              end
            end
            OP_LOOP: begin
              if (int'(depth) < int'(LOOP_DEPTH)) begin
                loop_start[push_i] <= pc + 1'b1;
                loop_left[push_i]  <= count;
                depth             <= depth + 1'b1;
              end
              pc    <= pc + 1'b1;
              state <= S_FETCH;
            end
            OP_ENDLOOP: begin
              if (depth != '0 && loop_left[top_i] > LOOPCNT_W'(1)) begin
                loop_left[top_i] <= loop_left[top_i] - 1'b1;
                pc <= loop_start[top_i];
              end else begin
                if (depth != '0) depth <= depth - 1'b1;
                pc <= pc + 1'b1;
              end
              state <= S_FETCH;
            end
            OP_HALT: begin
              adc_read <= 1'b0;
              state    <= S_DONE;
            end
          endcase
        end
        S_WAIT: begin
          if (wait_cnt == '0) state <= S_FETCH;
          else                wait_cnt <= wait_cnt - 1'b1;
        end
        S_DONE: begin
          if (!run) state <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The loop stack never underflows and the depth never exceeds its size.
  assert property (@(posedge clk) disable iff (!rst_n) int'(depth) <= int'(LOOP_DEPTH));
endmodule
