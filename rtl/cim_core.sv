// cim_core: the CIM core of PSCNN.
//
// Wires together the core controller, the 1024-bit input line buffer, the
// CIM macro, the weight SRAM with its weight R/W interface, and the
// pooling-write block (PWB). A MAC command (mac_start + layer_cfg) streams the
// IFM from the feature-map read port through the line buffer into the macro
// (or around it on the shortcut path) and writes the OFM through the PWB to
// the feature-map write port; mac_done pulses at the end. A replacement
// command (repl_start + repl_cfg) copies weight columns between the weight
// SRAM and the macro; repl_done pulses at the end. The host reaches both
// weight memories through the weight R/W interface while the core is idle.
// The partition follows the published block diagram; the port protocol is
// this design's own.
module cim_core
  import pscnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  // commands
  input  logic             mac_start,
  input  layer_cfg_t       layer_cfg,
  output logic             mac_done,
  input  logic             repl_start,
  input  repl_cfg_t        repl_cfg,
  output logic             repl_done,
  output logic             busy,
  // feature-map ports
  output logic             fm_rd_req,
  output logic [FM_AW-1:0] fm_rd_addr,
  input  logic             fm_rd_gnt,
  input  logic             fm_rd_valid,
  input  logic [FM_W-1:0]  fm_rd_data,
  output logic             fm_wr_req,
  output logic [FM_AW-1:0] fm_wr_addr,
  output logic [FM_W-1:0]  fm_wr_data,
  // host access to weights
  input  logic             h_we,
  input  logic             h_re,
  input  logic             h_cim,
  input  logic [13:0]      h_addr,
  input  logic [31:0]      h_wdata,
  output logic [31:0]      h_rdata,
  output logic             h_rvalid,
  // events
  output logic             ev_fire,        // CIM macro evaluated a window
  output logic             ev_shortcut,    // result took the shortcut path
  output logic             ev_pool,        // pooling group completed
  output logic             ev_stall_conflict,
  output logic             ev_stall_credit
);
  logic            lb_clear, lb_shift;
  logic [FM_W-1:0] lb_din;
  logic [WL_N-1:0] wl;
  logic            cim_en, cim_valid, sc_valid;
  logic [1:0]      bl_out;
  logic [SA_N-1:0] dout, sc_data;
  logic            pwb_start, sel_shortcut, flush, flush_done, pwb_idle;
  logic [4:0]      pool;
  logic [2:0]      out_log2, ob_free;
  logic [FM_AW-1:0] wr_base;
  logic            cc_busy, repl_busy;

  logic            ws_ce, ws_we, c_we, c_re;
  logic [8:0]      ws_addr, c_pair;
  logic [WL_N-1:0] ws_wdata, ws_rdata, c_wdata, c_rdata;

  core_controller u_ctrl (
    .clk, .rst_n, .start(mac_start), .cfg(layer_cfg), .busy(cc_busy), .done(mac_done),
    .rd_req(fm_rd_req), .rd_addr(fm_rd_addr), .rd_gnt(fm_rd_gnt), .rd_valid(fm_rd_valid),
    .rd_data(fm_rd_data),
    .lb_clear, .lb_shift, .lb_din,
    .cim_en, .bl_out, .cim_valid,
    .sc_valid, .sc_data,
    .pwb_start, .pool, .out_log2, .wr_base, .sel_shortcut, .flush, .flush_done, .ob_free,
    .stall_conflict(ev_stall_conflict), .stall_credit(ev_stall_credit)
  );

  line_buffer #(.WIDTH(WL_N), .IN_W(FM_W)) u_lb (
    .clk, .rst_n, .clear(lb_clear), .shift(lb_shift), .din(lb_din), .wl
  );

  cim_macro #(.WL_N(WL_N), .PAIR_N(PAIR_N), .SA_N(SA_N)) u_cim (
    .clk, .cim_en, .wl, .bl_out, .dout,
    .w_we(c_we), .w_re(c_re), .w_pair(c_pair), .w_wdata(c_wdata), .w_rdata(c_rdata)
  );

  weight_sram #(.DEPTH(WS_DEPTH), .WIDTH(WL_N)) u_wsram (
    .clk, .ce(ws_ce), .we(ws_we), .addr(ws_addr), .wdata(ws_wdata), .rdata(ws_rdata)
  );

  weight_rw_if u_wif (
    .clk, .rst_n, .start(repl_start), .cfg(repl_cfg), .busy(repl_busy), .done(repl_done),
    .h_we, .h_re, .h_cim, .h_addr, .h_wdata, .h_rdata, .h_rvalid,
    .ws_ce, .ws_we, .ws_addr, .ws_wdata, .ws_rdata,
    .c_we, .c_re, .c_pair, .c_wdata, .c_rdata
  );

  pwb u_pwb (
    .clk, .rst_n, .start(pwb_start), .pool, .out_log2, .wr_base, .sel_shortcut,
    .flush, .flush_done, .idle(pwb_idle),
    .cim_valid, .cim_data(dout), .sc_valid, .sc_data, .ob_free,
    .wr_req(fm_wr_req), .wr_addr(fm_wr_addr), .wr_data(fm_wr_data),
    .pool_done(ev_pool)
  );

  assign busy        = cc_busy || repl_busy || !pwb_idle;
  assign ev_fire     = cim_en;
  assign ev_shortcut = sc_valid;
endmodule
