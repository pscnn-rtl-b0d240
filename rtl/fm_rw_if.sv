// fm_rw_if: the flexible ping-pong feature-map SRAM system.
//
// Four single-port 64Kb banks (fm_sram) sit behind one read port and one
// write port that use a 13-bit linear word address {bank, word}. Because the
// IFM read pointer and the OFM write pointer are set independently by the
// pointer instruction, a feature map may start in any bank and run on into
// the next one; the IFM/OFM split of the 256Kb is thus decided per layer
// instead of being fixed at two halves, and a layer normally touches only two
// banks. Each bank's chip enable is raised only in a cycle in which it is
// read or written, so untouched banks stay idle (bank_active shows them).
//
// Ports and timing:
//   * write port (wr_req/wr_addr/wr_data): always accepted, written at the edge.
//   * read port (rd_req/rd_addr): rd_gnt says whether the read is taken this
//     cycle; the word returns on rd_data with rd_valid one cycle later. A read
//     that hits the bank being written in the same cycle is refused (the
//     write wins) and must be retried: this is the single-port stall.
//   * host port (h_we/h_re/h_addr/h_wdata): used only while the core is idle;
//     it takes the write or read port when the core does not. Read data comes
//     back on rd_data with h_rvalid one cycle later.
// The banking and pointer scheme is published; the arbitration rule and the
// host port are this design's choices.
module fm_rw_if #(
  parameter int unsigned BANKS = 4,
  parameter int unsigned DEPTH = 2048,
  localparam int unsigned WAW  = $clog2(DEPTH),
  localparam int unsigned BW   = $clog2(BANKS),
  localparam int unsigned AW   = WAW + BW
) (
  input  logic          clk,
  input  logic          rst_n,
  // core read port
  input  logic          rd_req,
  input  logic [AW-1:0] rd_addr,
  output logic          rd_gnt,
  output logic          rd_valid,
  output logic [31:0]   rd_data,
  // core write port
  input  logic          wr_req,
  input  logic [AW-1:0] wr_addr,
  input  logic [31:0]   wr_data,
  // host port
  input  logic          h_we,
  input  logic          h_re,
  input  logic [AW-1:0] h_addr,
  input  logic [31:0]   h_wdata,
  output logic          h_rvalid,
  // status
  output logic [BANKS-1:0] bank_active,
  output logic             conflict
);
  logic          w_en, r_en;
  logic [AW-1:0] w_a, r_a;
  logic [31:0]   w_d;
  logic [BW-1:0] w_bank, r_bank, r_bank_q;
  logic          r_core_q, r_host_q;
  logic [31:0]   bank_rdata [BANKS];

  always_comb begin
    w_en = wr_req | h_we;
    w_a  = wr_req ? wr_addr : h_addr;
    w_d  = wr_req ? wr_data : h_wdata;
    w_bank = w_a[AW-1:WAW];

    r_a    = rd_req ? rd_addr : h_addr;
    r_bank = r_a[AW-1:WAW];
    conflict = rd_req && w_en && (r_bank == w_bank);
    rd_gnt   = rd_req && !conflict;
    r_en     = rd_gnt || (!rd_req && h_re && !(w_en && r_bank == w_bank));
  end

  for (genvar b = 0; b < BANKS; b++) begin : g_bank
    logic ce, we;
    logic [WAW-1:0] a;
    always_comb begin
      we = w_en && (w_bank == BW'(b));
      ce = we || (r_en && (r_bank == BW'(b)));
      a  = we ? w_a[WAW-1:0] : r_a[WAW-1:0];
    end
    assign bank_active[b] = ce;
    fm_sram #(.DEPTH(DEPTH), .WIDTH(32)) u_sram (
      .clk(clk), .ce(ce), .we(we), .addr(a), .wdata(w_d), .rdata(bank_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_core_q <= 1'b0;
      r_host_q <= 1'b0;
      r_bank_q <= '0;
    end else begin
      r_core_q <= rd_gnt;
      r_host_q <= r_en && !rd_req;
      if (r_en) r_bank_q <= r_bank;
    end
  end

  assign rd_valid = r_core_q;
  assign h_rvalid = r_host_q;
  assign rd_data  = bank_rdata[r_bank_q];

  // The two pointers may only collide on a bank in a way the stall resolves.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n)
                                !((h_we || h_re) && (rd_req || wr_req)));
endmodule
