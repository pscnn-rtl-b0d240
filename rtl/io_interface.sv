// io_interface: host port of the processor.
//
// One 32-bit request per cycle (host_req_t: we, re, sel, addr, wdata) is
// routed by sel to the instruction register file (addr[5:0]), the
// feature-map SRAM system (addr[12:0], linear word address), the weight
// SRAM or the CIM macro (addr[13:0] = {column, beat}). Read data returns on
// rdata with rvalid one cycle after the request. The host may only access
// the memories while the processor is not running (checked by an
// assertion). The published block diagram shows only that an I/O interface
// exists; this protocol is this design's own.
module io_interface
  import pscnn_pkg::*;
#(
  parameter int unsigned IRF_DEPTH = 64,
  localparam int unsigned PCW      = $clog2(IRF_DEPTH)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  host_req_t       req,
  output logic [31:0]     rdata,
  output logic            rvalid,
  input  logic            running,
  // instruction register file
  output logic            irf_we,
  output logic [PCW-1:0]  irf_addr,
  output logic [31:0]     irf_wdata,
  input  logic [31:0]     irf_rdata,
  // FM system
  output logic            fm_we,
  output logic            fm_re,
  output logic [FM_AW-1:0] fm_addr,
  output logic [31:0]     fm_wdata,
  input  logic [31:0]     fm_rdata,
  input  logic            fm_rvalid,
  // weight memories
  output logic            w_we,
  output logic            w_re,
  output logic            w_cim,
  output logic [13:0]     w_addr,
  output logic [31:0]     w_wdata,
  input  logic [31:0]     w_rdata,
  input  logic            w_rvalid
);
  logic        irf_rvalid;
  logic [31:0] irf_rdata_q;

  always_comb begin
    irf_we    = req.we && (req.sel == HS_INSTR);
    irf_addr  = req.addr[PCW-1:0];
    irf_wdata = req.wdata;
    fm_we     = req.we && (req.sel == HS_FM);
    fm_re     = req.re && (req.sel == HS_FM);
    fm_addr   = req.addr[FM_AW-1:0];
    fm_wdata  = req.wdata;
    w_we      = req.we && (req.sel == HS_WSRAM || req.sel == HS_CIM);
    w_re      = req.re && (req.sel == HS_WSRAM || req.sel == HS_CIM);
    w_cim     = (req.sel == HS_CIM);
    w_addr    = req.addr[13:0];
    w_wdata   = req.wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      irf_rvalid  <= 1'b0;
      irf_rdata_q <= '0;
    end else begin
      irf_rvalid  <= req.re && (req.sel == HS_INSTR);
      irf_rdata_q <= irf_rdata;
    end
  end

  always_comb begin
    rvalid = irf_rvalid || fm_rvalid || w_rvalid;
    rdata  = irf_rvalid ? irf_rdata_q : fm_rvalid ? fm_rdata : w_rdata;
  end

  a_idle_only: assert property (@(posedge clk) disable iff (!rst_n)
                                (req.we || req.re) |-> !running);
  a_one_op: assert property (@(posedge clk) disable iff (!rst_n) !(req.we && req.re));
endmodule
