// Reset synchroniser: asserts asynchronously, releases on the second clock
// edge after the asynchronous reset input goes high. A domain whose clock has
// not started stays in reset until it does.
module rst_sync (
  input  logic clk,
  input  logic arst_n,
  output logic rst_n
);
  logic r1;
  always_ff @(posedge clk or negedge arst_n) begin
    if (!arst_n) begin
      r1    <= 1'b0;
      rst_n <= 1'b0;
    end else begin
      r1    <= 1'b1;
      rst_n <= r1;
    end
  end
endmodule
