// Shared types and constants of the CCD readout FPGA.
//
// The waveform processor (WPU) reads 32-bit instruction words from its
// 128 KB program memory. The instruction layout below is this design's own
// encoding; the readout system only specifies that each instruction carries
// the clock-line states, a dwell count and one "ADC read" bit, and that a
// binary loops over rows.
//
//   [31:30] op       WAVE / LOOP / ENDLOOP / HALT
//   WAVE    [29]     ADC read bit (rising edge starts a 65-pulse SCK burst)
//           [28:16]  dwell: the pattern is held for (dwell+1) 80 ns slots
//           [15:0]   clock-line states
//   LOOP    [15:0]   iteration count (0 is taken as 1); body starts at pc+1
//   ENDLOOP          closes the innermost LOOP
//   HALT             ends the program, lines keep their last state
//
// The PIO bus carries single-word host accesses between the PCIe TLP engine,
// the resynchroniser and the register file. Addresses are word addresses
// inside the FPGA's BAR (byte offset >> 2).
package pfs_pkg;

  typedef enum logic [1:0] {
    OP_WAVE    = 2'b00,
    OP_LOOP    = 2'b01,
    OP_ENDLOOP = 2'b10,
    OP_HALT    = 2'b11
  } wpu_op_e;

  localparam int unsigned DWELL_W    = 13;
  localparam int unsigned LINE_W     = 16;
  localparam int unsigned LOOPCNT_W  = 16;

  // PIO word address width: BAR offsets 0x000000 .. 0x1FFFFF
  localparam int unsigned PIO_AW = 19;

  typedef struct packed {
    logic              we;
    logic [PIO_AW-1:0] addr;
    logic [31:0]       wdata;
  } pio_req_t;

  // Register map (byte offsets within the BAR)
  localparam logic [21:0] BAR_SRAM_BASE = 22'h000000;  // 128 KB program RAM
  localparam logic [21:0] BAR_REG_BASE  = 22'h100000;  // registers
  localparam logic [21:0] BAR_FIFO_BASE = 22'h200000;  // FIFO data window (reads pop)

  localparam logic [3:0] REG_CTRL        = 4'd0;  // rw [0] run [1] master clock [2] fifo clear
  localparam logic [3:0] REG_WPU_START   = 4'd1;  // rw program start address (word)
  localparam logic [3:0] REG_STATUS      = 4'd2;  // ro [0] busy [1] done [2] fifo empty [3] overflow
  localparam logic [3:0] REG_FIFO_LEVEL  = 4'd3;  // ro words held in the DDR2 FIFO
  localparam logic [3:0] REG_FRAME_WORDS = 4'd4;  // ro data words of the last frame
  localparam logic [3:0] REG_FRAME_CRC   = 4'd5;  // ro CRC-32 of the last frame

  // Build a WAVE instruction (used by testbenches and host software alike).
  function automatic logic [31:0] wave(input logic adc, input int unsigned dwell,
                                       input logic [LINE_W-1:0] lines);
    return {OP_WAVE, adc, DWELL_W'(dwell), lines};
  endfunction

  function automatic logic [31:0] loop_op(input int unsigned count);
    return {OP_LOOP, 14'd0, LOOPCNT_W'(count)};
  endfunction

  function automatic logic [31:0] endloop_op();
    return {OP_ENDLOOP, 30'd0};
  endfunction

  function automatic logic [31:0] halt_op();
    return {OP_HALT, 30'd0};
  endfunction

  // One step of CRC-32 (polynomial 0x04C11DB7, MSB first) over a 32-bit word.
  function automatic logic [31:0] crc32_word(input logic [31:0] crc, input logic [31:0] data);
    logic [31:0] c;
    c = crc;
    for (int i = 31; i >= 0; i--) begin
      if (c[31] ^ data[i]) c = {c[30:0], 1'b0} ^ 32'h04C11DB7;
      else                 c = {c[30:0], 1'b0};
    end
    return c;
  endfunction

endpackage
