// pscnn_top: PSCNN, a programmable SRAM computing-in-memory processor for
// binary 1-D CNNs (keyword spotting).
//
// Blocks: the I/O interface (host port), the system controller with its
// instruction register file, the flexible ping-pong feature-map SRAM system
// (four 64Kb banks) and one CIM core (1Mb CIM macro, 512Kb weight SRAM,
// 1024-bit input line buffer, pooling-write block). The host loads the
// program, the input feature map and the weights, pulses start, waits for
// done and reads the result from the feature-map SRAM. The whole network runs
// layer by layer on chip: each layer's OFM is written to feature-map SRAM and
// read back as the next layer's IFM, at addresses set by pointer
// instructions.
//
// Ports: host (host_req_t request, rdata/rvalid reply one cycle later, idle
// only), start/done/running, bank_active (feature-map banks enabled this
// cycle), and event strobes for observation: ev_fire (CIM macro evaluated),
// ev_shortcut (result passed around the macro), ev_pool (pooling group
// completed), ev_repl (weight replacement finished), ev_stall_conflict (IFM
// read held by a bank conflict), ev_stall_credit (window held for PWB room).
module pscnn_top
  import pscnn_pkg::*;
#(
  parameter int unsigned IRF_DEPTH = 64,
  localparam int unsigned PCW      = $clog2(IRF_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  host_req_t       host_req,
  output logic [31:0]     host_rdata,
  output logic            host_rvalid,
  input  logic            start,
  output logic            done,
  output logic            running,
  output logic [FM_BANKS-1:0] bank_active,
  output logic            ev_fire,
  output logic            ev_shortcut,
  output logic            ev_pool,
  output logic            ev_repl,
  output logic            ev_stall_conflict,
  output logic            ev_stall_credit
);
  // instruction path
  logic [PCW-1:0] pc, irf_addr;
  logic [31:0]    instr, irf_wdata, irf_hrdata;
  logic           irf_we;
  // controller <-> core
  logic           mac_start, mac_done, repl_start, repl_done, core_busy, sc_running;
  layer_cfg_t     layer_cfg;
  repl_cfg_t      repl_cfg;
  // FM
  logic             fm_rd_req, fm_rd_gnt, fm_rd_valid, fm_wr_req, fm_conflict;
  logic [FM_AW-1:0] fm_rd_addr, fm_wr_addr, h_fm_addr;
  logic [31:0]      fm_rd_data, fm_wr_data, h_fm_wdata;
  logic             h_fm_we, h_fm_re, h_fm_rvalid;
  // weights
  logic             h_w_we, h_w_re, h_w_cim, h_w_rvalid;
  logic [13:0]      h_w_addr;
  logic [31:0]      h_w_wdata, h_w_rdata;

  io_interface #(.IRF_DEPTH(IRF_DEPTH)) u_io (
    .clk, .rst_n, .req(host_req), .rdata(host_rdata), .rvalid(host_rvalid), .running,
    .irf_we, .irf_addr, .irf_wdata, .irf_rdata(irf_hrdata),
    .fm_we(h_fm_we), .fm_re(h_fm_re), .fm_addr(h_fm_addr), .fm_wdata(h_fm_wdata),
    .fm_rdata(fm_rd_data), .fm_rvalid(h_fm_rvalid),
    .w_we(h_w_we), .w_re(h_w_re), .w_cim(h_w_cim), .w_addr(h_w_addr), .w_wdata(h_w_wdata),
    .w_rdata(h_w_rdata), .w_rvalid(h_w_rvalid)
  );

  instr_regfile #(.DEPTH(IRF_DEPTH)) u_irf (
    .clk, .we(irf_we), .waddr(irf_addr), .wdata(irf_wdata),
    .raddr(pc), .rdata(instr), .haddr(irf_addr), .hrdata(irf_hrdata)
  );

  system_controller #(.IRF_DEPTH(IRF_DEPTH)) u_sysctl (
    .clk, .rst_n, .start, .running(sc_running), .done, .pc, .instr,
    .mac_start, .layer_cfg, .mac_done, .repl_start, .repl_cfg, .repl_done
  );

  fm_rw_if #(.BANKS(FM_BANKS), .DEPTH(FM_DEPTH)) u_fm (
    .clk, .rst_n,
    .rd_req(fm_rd_req), .rd_addr(fm_rd_addr), .rd_gnt(fm_rd_gnt),
    .rd_valid(fm_rd_valid), .rd_data(fm_rd_data),
    .wr_req(fm_wr_req), .wr_addr(fm_wr_addr), .wr_data(fm_wr_data),
    .h_we(h_fm_we), .h_re(h_fm_re), .h_addr(h_fm_addr), .h_wdata(h_fm_wdata),
    .h_rvalid(h_fm_rvalid), .bank_active, .conflict(fm_conflict)
  );

  cim_core u_core (
    .clk, .rst_n,
    .mac_start, .layer_cfg, .mac_done, .repl_start, .repl_cfg, .repl_done, .busy(core_busy),
    .fm_rd_req, .fm_rd_addr, .fm_rd_gnt, .fm_rd_valid, .fm_rd_data,
    .fm_wr_req, .fm_wr_addr, .fm_wr_data,
    .h_we(h_w_we), .h_re(h_w_re), .h_cim(h_w_cim), .h_addr(h_w_addr), .h_wdata(h_w_wdata),
    .h_rdata(h_w_rdata), .h_rvalid(h_w_rvalid),
    .ev_fire, .ev_shortcut, .ev_pool, .ev_stall_conflict, .ev_stall_credit
  );

  assign running = sc_running || core_busy;
  assign ev_repl = repl_done;

  // A conflict seen by the FM system is always a refused core read.
  a_conflict_is_stall: assert property (@(posedge clk) disable iff (!rst_n)
                                        fm_conflict |-> ev_stall_conflict);
endmodule
