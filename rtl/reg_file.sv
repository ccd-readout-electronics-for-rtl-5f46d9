// Register file: the host's view of the readout FPGA (77 MHz domain).
//
// Host accesses arrive from the PIO resynchroniser as single-word requests
// (req_valid with a pio_req_t) and are answered exactly one cycle later with
// rsp_valid (and read data). The BAR is decoded as
//   0x000000-0x01FFFF  WPU program RAM (port A of the dual-port SRAM)
//   0x100000-0x10003F  registers, see pfs_pkg (CTRL, WPU_START, STATUS,
//                      FIFO_LEVEL, FRAME_WORDS, FRAME_CRC)
// Other addresses read as zero and ignore writes.
//
// CTRL bit 0 (run) starts the waveform processor, bit 1 (master) enables the
// 25 MHz synchronisation clock of a master camera, bit 2 (fifo clear) is a
// self-clearing strobe that empties the DDR2 FIFO. The WPU's busy/done come
// from the 25 MHz domain and pass two-flop synchronisers. The register map is
// this design's own; the register file's place between the PIO path, the
// program RAM, the WPU and the clock generator follows the readout system.
module reg_file
  import pfs_pkg::*;
#(
  parameter int unsigned WPU_AW  = 15,
  parameter int unsigned FIFO_AW = 24
) (
  input  logic              clk,
  input  logic              rst_n,
  // PIO bus
  input  logic              req_valid,
  input  pio_req_t          req,
  output logic              rsp_valid,
  output logic [31:0]       rsp_rdata,
  // program RAM port A
  output logic              sram_we,
  output logic [WPU_AW-1:0] sram_addr,
  output logic [31:0]       sram_wdata,
  input  logic [31:0]       sram_rdata,
  // control
  output logic              run,
  output logic              master,
  output logic              fifo_clear,
  output logic [WPU_AW-1:0] start_addr,
  // status
  input  logic              wpu_busy,
  input  logic              wpu_done,
  input  logic [FIFO_AW:0]  fifo_level,
  input  logic              fifo_empty,
  input  logic              overflow,
  input  logic [31:0]       frame_words,
  input  logic [31:0]       frame_crc
);
  logic        is_sram, is_reg;
  logic [3:0]  ridx;
  logic        busy_s, done_s;
  logic        rd_sram_q;
  logic [31:0] reg_q;

  sync_2ff #(.W(2)) u_sync (.clk(clk), .rst_n(rst_n), .d({wpu_busy, wpu_done}), .q({busy_s, done_s}));

  always_comb begin
    is_sram    = (req.addr[PIO_AW-1:WPU_AW] == '0);
    is_reg     = (req.addr[PIO_AW-1 -: 2] == 2'b10) && (req.addr[PIO_AW-3:4] == '0);
    ridx       = req.addr[3:0];
    sram_we    = req_valid && req.we && is_sram;
    sram_addr  = req.addr[WPU_AW-1:0];
    sram_wdata = req.wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run        <= 1'b0;
      master     <= 1'b0;
      fifo_clear <= 1'b0;
      start_addr <= '0;
      rsp_valid  <= 1'b0;
      rd_sram_q  <= 1'b0;
      reg_q      <= '0;
    end else begin
      rsp_valid  <= req_valid;
      rd_sram_q  <= req_valid && !req.we && is_sram;
      fifo_clear <= 1'b0;
      reg_q      <= '0;
      if (req_valid && is_reg) begin
        if (req.we) begin
          unique case (ridx)
            REG_CTRL: begin
              run        <= req.wdata[0];
              master     <= req.wdata[1];
              fifo_clear <= req.wdata[2];
            end
            REG_WPU_START: start_addr <= req.wdata[WPU_AW-1:0];
            default: ;
          endcase
        end else begin
          unique case (ridx)
            REG_CTRL:        reg_q <= {30'd0, master, run};
            REG_WPU_START:   reg_q <= 32'(start_addr);
            REG_STATUS:      reg_q <= {28'd0, overflow, fifo_empty, done_s, busy_s};
            REG_FIFO_LEVEL:  reg_q <= 32'(fifo_level);
            REG_FRAME_WORDS: reg_q <= frame_words;
            REG_FRAME_CRC:   reg_q <= frame_crc;
            default:         reg_q <= '0;
          endcase
        end
      end
    end
  end

  assign rsp_rdata = rd_sram_q ? sram_rdata : reg_q;
endmodule
