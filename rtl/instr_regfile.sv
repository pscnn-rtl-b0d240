// instr_regfile: instruction register file of the system controller.
//
// DEPTH 32-bit registers. The host writes the program through the I/O
// interface (we/waddr/wdata, synchronous); the system controller reads the
// instruction at its program counter combinationally (raddr -> rdata), and
// the host can read back through a second read port (haddr -> hrdata).
// The depth is not published; 64 entries hold the keyword-spotting program
// with room to spare.
module instr_regfile #(
  parameter int unsigned DEPTH = 64,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [31:0]   wdata,
  input  logic [AW-1:0] raddr,
  output logic [31:0]   rdata,
  input  logic [AW-1:0] haddr,
  output logic [31:0]   hrdata
);
  logic [31:0] regs [DEPTH];

  always_ff @(posedge clk) begin
    if (we) regs[waddr] <= wdata;
  end

  assign rdata  = regs[raddr];
  assign hrdata = regs[haddr];
endmodule
