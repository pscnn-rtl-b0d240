// line_buffer: the 1024-bit input line buffer in front of the CIM wordlines.
//
// The IFM arrives as 32-bit words. Each cycle with shift high the buffer moves
// by one word: the new word enters word slot 31 (bits 1023:992) and slot 0
// (bits 31:0) drops out, so the oldest data of the window sits at the lowest
// wordlines. Slot i drives wordlines 32*i..32*i+31, which puts tap j, channel c
// of a kernel on wordline j*chn_in + c: positions grouped in order, as in the
// published weight-mapping figure. clear empties the buffer (synchronous).
// The 1024-bit size is published; the 32-bit shift granule follows the
// feature-map word width chosen in this design.
module line_buffer #(
  parameter int unsigned WIDTH = 1024,
  parameter int unsigned IN_W  = 32
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clear,
  input  logic             shift,
  input  logic [IN_W-1:0]  din,
  output logic [WIDTH-1:0] wl
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     wl <= '0;
    else if (clear) wl <= '0;
    else if (shift) wl <= {din, wl[WIDTH-1:IN_W]};
  end
endmodule
