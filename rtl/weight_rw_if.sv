// weight_rw_if: weight read/write interface between the CIM macro, the weight
// SRAM and the host.
//
// Weight replacement: when the model does not fit in the CIM macro, a
// replacement instruction copies `length` consecutive weight columns (one
// bitline pair = one output channel of 1024 weights per cycle) between the
// weight SRAM and the macro. direction 0 copies weight SRAM words
// ws_addr.. into pairs cim_addr..; direction 1 copies the other way. The copy
// is a two-stage pipeline (read one memory, write the other a cycle later),
// so `length` pairs are moved in length+1 cycles after start, and done is
// high in the cycle after the last write (length+2 cycles after start).
//
// Host access (only while no replacement runs): both memories are seen as
// 32-bit beats, address {column[8:0], beat[4:0]}. Writes collect beats in a
// 1024-bit staging register and write the whole column when beat 31 arrives.
// Reads fetch the column and return the addressed beat on h_rdata with
// h_rvalid one cycle after the request.
//
// That weights move between the two memories under instruction control is
// published; the column-per-cycle organisation, the direction encoding and
// the host protocol are this design's choices.
module weight_rw_if
  import pscnn_pkg::*;
#(
  localparam int unsigned CAW = 9
) (
  input  logic            clk,
  input  logic            rst_n,
  // replacement command
  input  logic            start,
  input  repl_cfg_t       cfg,
  output logic            busy,
  output logic            done,
  // host
  input  logic            h_we,
  input  logic            h_re,
  input  logic            h_cim,      // 1: CIM macro, 0: weight SRAM
  input  logic [CAW+4:0]  h_addr,
  input  logic [31:0]     h_wdata,
  output logic [31:0]     h_rdata,
  output logic            h_rvalid,
  // weight SRAM
  output logic            ws_ce,
  output logic            ws_we,
  output logic [CAW-1:0]  ws_addr,
  output logic [WL_N-1:0] ws_wdata,
  input  logic [WL_N-1:0] ws_rdata,
  // CIM weight port
  output logic            c_we,
  output logic            c_re,
  output logic [CAW-1:0]  c_pair,
  output logic [WL_N-1:0] c_wdata,
  input  logic [WL_N-1:0] c_rdata
);
  logic            dir_q;
  logic [CAW-1:0]  src_q, dst_q, dst_d1;
  logic [CAW:0]    left_q;
  logic            rd_d1;          // a read was issued last cycle
  logic [WL_N-1:0] staging;
  logic            hrd_d1, hrd_cim_d1;
  logic [4:0]      hbeat_d1;

  wire issue = busy && (left_q != 0);
  wire [4:0] h_beat = h_addr[4:0];
  wire [CAW-1:0] h_col = h_addr[CAW+4:5];
  wire h_commit = h_we && (h_beat == 5'd31);
  logic [WL_N-1:0] staging_next;

  always_comb begin
    staging_next = staging;
    staging_next[32*h_beat +: 32] = h_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; dir_q <= 1'b0;
      src_q <= '0; dst_q <= '0; dst_d1 <= '0; left_q <= '0; rd_d1 <= 1'b0;
      hrd_d1 <= 1'b0; hrd_cim_d1 <= 1'b0; hbeat_d1 <= '0; staging <= '0;
    end else begin
      done  <= 1'b0;
      rd_d1 <= issue;
      if (start && !busy) begin
        busy   <= (cfg.length != 0);
        done   <= (cfg.length == 0);
        dir_q  <= cfg.direction;
        src_q  <= cfg.direction ? cfg.cim_addr : cfg.ws_addr;
        dst_q  <= cfg.direction ? cfg.ws_addr  : cfg.cim_addr;
        left_q <= {1'b0, cfg.length};
      end else if (busy) begin
        if (issue) begin
          src_q  <= src_q + 1'b1;
          dst_q  <= dst_q + 1'b1;
          dst_d1 <= dst_q;
          left_q <= left_q - 1'b1;
        end
        if (rd_d1 && !issue) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      if (h_we) staging <= staging_next;
      hrd_d1 <= h_re;  hrd_cim_d1 <= h_cim;  hbeat_d1 <= h_beat;
    end
  end

  // Memory port drive: replacement traffic, else host traffic.
  always_comb begin
    ws_ce = 1'b0; ws_we = 1'b0; ws_addr = '0; ws_wdata = c_rdata;
    c_we  = 1'b0; c_re  = 1'b0; c_pair  = '0; c_wdata  = ws_rdata;
    if (busy) begin
      if (!dir_q) begin
        // weight SRAM -> CIM
        ws_ce = issue; ws_addr = src_q;
        c_we  = rd_d1; c_pair  = dst_d1;
      end else begin
        // CIM -> weight SRAM (a pair read and the previous write never clash:
        // they go to different memories)
        c_re  = issue; c_pair = src_q;
        ws_ce = rd_d1; ws_we = rd_d1; ws_addr = dst_d1;
      end
    end else if (h_cim) begin
      c_we = h_commit; c_re = h_re; c_pair = h_col; c_wdata = staging_next;
    end else begin
      ws_ce = h_commit || h_re; ws_we = h_commit; ws_addr = h_col; ws_wdata = staging_next;
    end
  end

  always_comb begin
    logic [WL_N-1:0] col;
    col      = hrd_cim_d1 ? c_rdata : ws_rdata;
    h_rdata  = col[32*hbeat_d1 +: 32];
    h_rvalid = hrd_d1;
  end
endmodule
