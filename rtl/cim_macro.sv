// cim_macro: behavioural model of the 1Mb SRAM computing-in-memory macro.
//
// BEHAVIOURAL MODEL. The real part is an analog 10T-SRAM macro (1024
// wordlines x 1024 bitlines, 128 sense amplifiers) taken from another work;
// this file reproduces its logic function, not its circuits.
//
// Ternary weight mapping: each weight occupies two cells on adjacent bitlines,
// BL[2p] (positive) and BL[2p+1] (negative), so the 1024 bitlines form 512
// pairs and the array stores 512 columns of 1024 weights. Activating the
// wordlines with the 1024 activation bits makes each pair carry a positive
// and a negative popcount; a sense amplifier outputs 1 when the positive
// current is at least the negative one:
//   dout[o] = (popcount(wl & P[p]) - popcount(wl & N[p]) >= 0), p = 128*bl_out + o
// which is the binarised 1024-term MAC of one output channel.
//
// Interface and timing (this design's choices):
//   * cim_en high for one cycle samples wl and bl_out; dout holds the 128 SA
//     results from the next cycle until the next cim_en.
//   * bl_out picks which of four groups of 128 contiguous pairs feeds the SAs.
//   * Weight port: w_we writes one pair from a 1024-bit weight column
//     (bit 1 = +1 programs P=1,N=0; bit 0 = -1 programs P=0,N=1). w_re reads a
//     pair back as a weight column (the P cells) on w_rdata after the edge.
module cim_macro #(
  parameter int unsigned WL_N   = 1024,
  parameter int unsigned PAIR_N = 512,
  parameter int unsigned SA_N   = 128,
  localparam int unsigned PAW   = $clog2(PAIR_N),
  localparam int unsigned GW    = $clog2(PAIR_N / SA_N)
) (
  input  logic            clk,
  // compute
  input  logic            cim_en,
  input  logic [WL_N-1:0] wl,
  input  logic [GW-1:0]   bl_out,
  output logic [SA_N-1:0] dout,
  // weight port
  input  logic            w_we,
  input  logic            w_re,
  input  logic [PAW-1:0]  w_pair,
  input  logic [WL_N-1:0] w_wdata,
  output logic [WL_N-1:0] w_rdata
);
  localparam int unsigned CW = $clog2(WL_N + 1);

  // Cell array, stored column-wise: bitline pair p holds P[p] and N[p].
  logic [WL_N-1:0] cell_p [PAIR_N];
  logic [WL_N-1:0] cell_n [PAIR_N];

  // Sense amplifier decision for one pair.
  function automatic logic sense(input logic [WL_N-1:0] act,
                                 input logic [WL_N-1:0] p,
                                 input logic [WL_N-1:0] n);
    logic [CW-1:0] ip, in_;
    ip  = CW'($countones(act & p));
    in_ = CW'($countones(act & n));
    return ip >= in_;
  endfunction

  always_ff @(posedge clk) begin
    if (cim_en) begin
      for (int o = 0; o < SA_N; o++) begin
        dout[o] <= sense(wl, cell_p[int'(bl_out) * SA_N + o],
                             cell_n[int'(bl_out) * SA_N + o]);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (w_we) begin
      cell_p[w_pair] <= w_wdata;
      cell_n[w_pair] <= ~w_wdata;
    end else if (w_re) begin
      w_rdata <= cell_p[w_pair];
    end
  end
endmodule
