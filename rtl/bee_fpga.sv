// Back-end readout FPGA of a CCD camera: top level.
//
// Connects the blocks of the readout FPGA in four clock domains:
//   62.5 MHz (clk_pcie)  PCIe TLP to PIO engine
//   77 MHz   (clk_sys)   PIO resynchroniser side B, register file, program RAM
//                        port A, storage/CRC engine, 64 MB DDR2 FIFO
//   25 MHz   (clk_wpu)   waveform processor and program RAM port B, clocked by
//                        the synchronized 25 MHz clock arriving from the master
//   200 MHz  (clk_fast)  25 MHz clock generation, SCK generation, ADC
//                        deserializer
// Host path: PCIe core -> TLP engine -> PIO resynchroniser -> register file
// -> program RAM / control. Image path: ADC serial lines -> deserializer ->
// storage/CRC engine -> DDR2 FIFO -> TLP engine (FIFO data window) -> host.
// Clock path: register file -> waveform processor -> CCD/CDS clock lines and
// ADC-read bit -> SCK burst.
//
// The PCIe core, the DDR2 memory interface and the LVDS buffers are vendor
// parts and stay outside: their signals are this module's ports. In a master
// camera one clk25_out output is wired back (through the LVDS input) to
// clk_wpu; a slave takes clk_wpu from the master's cable. arst_n is an
// asynchronous reset, released in each domain by its own synchroniser.
// Domains and blocks follow the readout system's FPGA architecture;
// interfaces between blocks are this design's.
//
// Lint notes: the 25 MHz generator's running flag and the SCK generator's
// busy and burst_done outputs are left unread here (they serve the block
// testbenches and debugging). The per-domain resets are used asynchronously
// by the flops and synchronously by the handshake assertions' disable iff,
// which lint reports as a net flopped both ways; no flop uses them
// synchronously.
module bee_fpga
  import pfs_pkg::*;
#(
  parameter int unsigned NLINES     = 16,
  parameter int unsigned WPU_AW     = 15,
  parameter int unsigned FIFO_AW    = 24,
  parameter int unsigned LOOP_DEPTH = 2,
  parameter int unsigned NSYNC      = 8
) (
  input  logic              arst_n,
  input  logic              clk_pcie,
  input  logic              clk_sys,
  input  logic              clk_wpu,
  input  logic              clk_fast,
  // PCIe core user interface
  input  logic [15:0]       completer_id,
  input  logic [31:0]       rx_data,
  input  logic              rx_sof,
  input  logic              rx_eof,
  input  logic              rx_valid,
  output logic              rx_ready,
  output logic [31:0]       tx_data,
  output logic              tx_sof,
  output logic              tx_eof,
  output logic              tx_valid,
  input  logic              tx_ready,
  // DDR2 memory interface command port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output logic              mem_we,
  output logic [FIFO_AW-1:0] mem_addr,
  output logic [31:0]       mem_wdata,
  input  logic              mem_rvalid,
  input  logic [31:0]       mem_rdata,
  // LVDS to the front end
  output logic [NLINES-1:0] ccd_lines,
  output logic              adc_read,
  output logic              sck,
  input  logic [1:0]        sdata,
  // synchronisation clock outputs (master)
  output logic [NSYNC-1:0]  clk25_out
);
  logic rst_pcie_n, rst_sys_n, rst_wpu_n, rst_fast_n;
  rst_sync u_rs_pcie (.clk(clk_pcie), .arst_n(arst_n), .rst_n(rst_pcie_n));
  rst_sync u_rs_sys  (.clk(clk_sys),  .arst_n(arst_n), .rst_n(rst_sys_n));
  rst_sync u_rs_wpu  (.clk(clk_wpu),  .arst_n(arst_n), .rst_n(rst_wpu_n));
  rst_sync u_rs_fast (.clk(clk_fast), .arst_n(arst_n), .rst_n(rst_fast_n));

  // ---------------- host path ----------------
  logic        a_req_valid, a_req_ready, a_rsp_valid;
  pio_req_t    a_req, b_req;
  logic [31:0] a_rsp_rdata, b_rsp_rdata;
  logic        b_req_valid, b_rsp_valid;
  logic        fifo_rd_valid, fifo_pop;
  logic [31:0] fifo_rd_data;

  pcie_tlp_pio u_tlp (
    .clk(clk_pcie), .rst_n(rst_pcie_n), .completer_id(completer_id),
    .rx_data(rx_data), .rx_sof(rx_sof), .rx_eof(rx_eof), .rx_valid(rx_valid), .rx_ready(rx_ready),
    .tx_data(tx_data), .tx_sof(tx_sof), .tx_eof(tx_eof), .tx_valid(tx_valid), .tx_ready(tx_ready),
    .pio_req_valid(a_req_valid), .pio_req_ready(a_req_ready), .pio_req(a_req),
    .pio_rsp_valid(a_rsp_valid), .pio_rsp_rdata(a_rsp_rdata),
    .fifo_valid(fifo_rd_valid), .fifo_data(fifo_rd_data), .fifo_pop(fifo_pop));

  pio_resync u_resync (
    .clk_a(clk_pcie), .rst_a_n(rst_pcie_n),
    .req_valid(a_req_valid), .req_ready(a_req_ready), .req(a_req),
    .rsp_valid(a_rsp_valid), .rsp_rdata(a_rsp_rdata),
    .clk_b(clk_sys), .rst_b_n(rst_sys_n),
    .b_req_valid(b_req_valid), .b_req(b_req),
    .b_rsp_valid(b_rsp_valid), .b_rsp_rdata(b_rsp_rdata));

  logic              sram_we;
  logic [WPU_AW-1:0] sram_addr, start_addr, wpu_ram_addr;
  logic [31:0]       sram_wdata, sram_rdata, wpu_ram_data;
  logic              run, master, fifo_clear;
  logic              wpu_busy, wpu_done;
  logic [FIFO_AW:0]  fifo_level;
  logic              fifo_empty, overflow;
  logic [31:0]       frame_words, frame_crc;

  reg_file #(.WPU_AW(WPU_AW), .FIFO_AW(FIFO_AW)) u_regs (
    .clk(clk_sys), .rst_n(rst_sys_n),
    .req_valid(b_req_valid), .req(b_req), .rsp_valid(b_rsp_valid), .rsp_rdata(b_rsp_rdata),
    .sram_we(sram_we), .sram_addr(sram_addr), .sram_wdata(sram_wdata), .sram_rdata(sram_rdata),
    .run(run), .master(master), .fifo_clear(fifo_clear), .start_addr(start_addr),
    .wpu_busy(wpu_busy), .wpu_done(wpu_done), .fifo_level(fifo_level), .fifo_empty(fifo_empty),
    .overflow(overflow), .frame_words(frame_words), .frame_crc(frame_crc));

  dp_sram #(.AW(WPU_AW), .DW(32)) u_sram (
    .clka(clk_sys), .wea(sram_we), .addra(sram_addr), .dina(sram_wdata), .douta(sram_rdata),
    .clkb(clk_wpu), .addrb(wpu_ram_addr), .doutb(wpu_ram_data));

  // ---------------- waveform processor ----------------
  logic              run_w;
  logic [WPU_AW-1:0] start_w;
  sync_2ff #(.W(1)) u_sync_run (.clk(clk_wpu), .rst_n(rst_wpu_n), .d(run), .q(run_w));
  // start_addr is static while run is low, so it is sampled directly
  assign start_w = start_addr;

  wpu #(.AW(WPU_AW), .NLINES(NLINES), .LOOP_DEPTH(LOOP_DEPTH)) u_wpu (
    .clk(clk_wpu), .rst_n(rst_wpu_n), .run(run_w), .start_addr(start_w),
    .ram_addr(wpu_ram_addr), .ram_rdata(wpu_ram_data),
    .lines(ccd_lines), .adc_read(adc_read), .busy(wpu_busy), .done(wpu_done));

  // ---------------- 200 MHz clock and ADC logic ----------------
  logic clk25_running;
  clk25_gen #(.NOUT(NSYNC), .DIV(8)) u_clk25 (
    .clk(clk_fast), .rst_n(rst_fast_n), .enable(master),
    .clk25_out(clk25_out), .running(clk25_running));

  logic shift, first, sck_busy, burst_done;
  sck_gen #(.NPULSES(65), .HALF(2)) u_sck (
    .clk(clk_fast), .rst_n(rst_fast_n), .adc_read(adc_read),
    .sck(sck), .shift(shift), .first(first), .busy(sck_busy), .burst_done(burst_done));

  logic [15:0] samples [8];
  logic        samples_valid;
  adc_deser #(.NGROUPS(2), .ADC_PER_GROUP(4), .SAMPLE_W(16)) u_deser (
    .clk(clk_fast), .rst_n(rst_fast_n), .sdata(sdata), .shift(shift), .first(first),
    .samples(samples), .valid(samples_valid));

  // ---------------- image storage ----------------
  logic        st_valid, st_ready;
  logic [31:0] st_data;
  storage_crc #(.NCH(8), .SAMPLE_W(16)) u_store (
    .clk_fast(clk_fast), .rst_fast_n(rst_fast_n), .samples(samples), .samples_valid(samples_valid),
    .clk(clk_sys), .rst_n(rst_sys_n), .frame_active(wpu_busy),
    .wr_valid(st_valid), .wr_data(st_data), .wr_ready(st_ready),
    .frame_words(frame_words), .frame_crc(frame_crc), .overflow(overflow));

  dram_fifo #(.AW(FIFO_AW), .PF_AW(4)) u_fifo (
    .clk(clk_sys), .rst_n(rst_sys_n), .clear(fifo_clear),
    .wr_valid(st_valid), .wr_data(st_data), .wr_ready(st_ready),
    .mem_req_valid(mem_req_valid), .mem_req_ready(mem_req_ready), .mem_we(mem_we),
    .mem_addr(mem_addr), .mem_wdata(mem_wdata), .mem_rvalid(mem_rvalid), .mem_rdata(mem_rdata),
    .rd_clk(clk_pcie), .rd_rst_n(rst_pcie_n), .rd_valid(fifo_rd_valid), .rd_data(fifo_rd_data),
    .rd_en(fifo_pop), .level(fifo_level), .empty(fifo_empty));
endmodule
