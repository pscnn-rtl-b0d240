// system_controller: instruction fetch, decode and sequencing.
//
// After a start pulse the controller fetches instructions from the
// instruction register file from address 0, one at a time, and dispatches
// them by their 3-bit opcode:
//   * pointer (100): latches the IFM read pointer {src, read_addr} and the OFM
//     write pointer {dst, write_addr} (13-bit linear FM word addresses) used
//     by the following MAC instructions; one cycle.
//   * MAC (111): starts the CIM core on one layer with the latched pointers
//     and waits for mac_done.
//   * weight replacement (101): starts a weight copy and waits for repl_done.
//   * halt (000): stops fetching and pulses done.
// Other opcodes are skipped. The wbbias field of the pointer instruction is
// decoded nowhere: its meaning is not published.
// The four instruction kinds and their fields are published; running each
// instruction to completion before fetching the next, and skipping unknown
// opcodes, are this design's choices.
module system_controller
  import pscnn_pkg::*;
#(
  parameter int unsigned IRF_DEPTH = 64,
  localparam int unsigned PCW      = $clog2(IRF_DEPTH)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           start,
  output logic           running,
  output logic           done,
  // instruction register file
  output logic [PCW-1:0] pc,
  input  logic [31:0]    instr,
  // CIM core
  output logic           mac_start,
  output layer_cfg_t     layer_cfg,
  input  logic           mac_done,
  output logic           repl_start,
  output repl_cfg_t      repl_cfg,
  input  logic           repl_done
);
  typedef enum logic [1:0] {C_IDLE, C_FETCH, C_WAIT_MAC, C_WAIT_REPL} cstate_e;
  cstate_e state;
  logic [FM_AW-1:0] rd_ptr, wr_ptr;

  mac_instr_t  mi;
  repl_instr_t ri;
  ptr_instr_t  pi;
  assign mi = mac_instr_t'(instr);
  assign ri = repl_instr_t'(instr);
  assign pi = ptr_instr_t'(instr);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= C_IDLE; pc <= '0; rd_ptr <= '0; wr_ptr <= '0;
      mac_start <= 1'b0; repl_start <= 1'b0; done <= 1'b0;
      layer_cfg <= '0; repl_cfg <= '0;
    end else begin
      mac_start  <= 1'b0;
      repl_start <= 1'b0;
      done       <= 1'b0;
      case (state)
        C_IDLE: if (start) begin
          pc    <= '0;
          state <= C_FETCH;
        end
        C_FETCH: begin
          case (opcode_e'(instr[31:29]))
            OP_HALT: begin
              done  <= 1'b1;
              state <= C_IDLE;
            end
            OP_PTR: begin
              rd_ptr <= {pi.src, pi.read_addr};
              wr_ptr <= {pi.dst, pi.write_addr};
              pc     <= pc + 1'b1;
            end
            OP_MAC: begin
              layer_cfg <= '{mtype: mi.mtype, in_range: mi.in_range, chn_in: mi.chn_in,
                             padding: mi.padding, stride: mi.stride, bl_out: mi.bl_out,
                             chn_out: mi.chn_out, dil_pool: mi.dil_pool,
                             rd_base: rd_ptr, wr_base: wr_ptr};
              mac_start <= 1'b1;
              state     <= C_WAIT_MAC;
            end
            OP_REPL: begin
              repl_cfg   <= '{direction: ri.direction, cim_addr: ri.cim_addr,
                              ws_addr: ri.ws_addr, length: ri.length};
              repl_start <= 1'b1;
              state      <= C_WAIT_REPL;
            end
            default: pc <= pc + 1'b1;
          endcase
        end
        C_WAIT_MAC: if (mac_done) begin
          pc    <= pc + 1'b1;
          state <= C_FETCH;
        end
        C_WAIT_REPL: if (repl_done) begin
          pc    <= pc + 1'b1;
          state <= C_FETCH;
        end
        default: state <= C_IDLE;
      endcase
    end
  end

  assign running = (state != C_IDLE);
endmodule
