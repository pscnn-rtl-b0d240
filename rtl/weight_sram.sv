// weight_sram: the 512Kb weight SRAM (512 words x 1024 bits).
//
// Holds model weights that do not fit in the CIM macro. One word is the full
// 1024-weight column of one output channel (one weight bit per wordline,
// 1 = +1, 0 = -1), so a replacement moves one bitline pair per access.
// Single port: with ce high, we high writes, we low reads and rdata is valid
// after the clock edge. Written as an array in place of the foundry macro;
// the 512x1024 organisation is chosen to match the 9-bit weight_sram_addr
// field of the replacement instruction.
module weight_sram #(
  parameter int unsigned DEPTH = 512,
  parameter int unsigned WIDTH = 1024,
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
