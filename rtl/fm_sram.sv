// fm_sram: one 64Kb single-port feature-map SRAM bank (2048 words x 32 bits).
//
// Stands in for the foundry SRAM macro as a plain array. One access per cycle:
// with ce high, we high writes wdata at addr; we low reads addr and the word
// appears on rdata after the clock edge (one-cycle read latency). With ce low
// the bank is idle, which is how the flexible ping-pong buffer leaves unused
// banks switched off. The 2048x32 organisation follows from the 64Kb size and
// the 11-bit addresses of the pointer instruction; the read latency is this
// design's choice.
module fm_sram #(
  parameter int unsigned DEPTH = 2048,
  parameter int unsigned WIDTH = 32,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             ce,
  input  logic             we,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);
  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (ce) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end
endmodule
