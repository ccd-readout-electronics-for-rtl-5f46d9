// 128 KB dual-port program memory of the waveform processor.
//
// Port A belongs to the host side (register file, 77 MHz): it writes WPU
// binaries and reads them back. Port B belongs to the waveform processor
// (synchronized 25 MHz): read only. Both ports read synchronously with one
// cycle of latency, as an FPGA block RAM does. Size (128 KB) follows the
// readout system; the 32-bit word width is this design's choice, so the
// default depth is 2**15 words.
module dp_sram #(
  parameter int unsigned AW = 15,
  parameter int unsigned DW = 32
) (
  input  logic          clka,
  input  logic          wea,
  input  logic [AW-1:0] addra,
  input  logic [DW-1:0] dina,
  output logic [DW-1:0] douta,
  input  logic          clkb,
  input  logic [AW-1:0] addrb,
  output logic [DW-1:0] doutb
);
  logic [DW-1:0] mem [2**AW];

  always_ff @(posedge clka) begin
    if (wea) mem[addra] <= dina;
    douta <= mem[addra];
  end

  always_ff @(posedge clkb) begin
    doutb <= mem[addrb];
  end
endmodule
