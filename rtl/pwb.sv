// pwb: pooling-write block.
//
// Sits between the CIM sense amplifiers and the feature-map SRAM write port.
// A MUX picks either the 128 SA outputs of the CIM macro or the shortcut
// path (IFM data that bypasses the macro for a pooling-only layer). Selected
// results enter the output buffer, a small FIFO. The pooling process unit
// takes one result per cycle and ORs it with the content of the write
// buffer, which is fed back to it: for binary activations OR is max pooling.
// The first result of a group overwrites the write buffer instead; when
// `pool` results have been combined the write buffer is written out as
// chn_out/32 words of 32 bits to consecutive FM addresses from wr_base.
// With pool = 1 the block simply writes every result (convolution only).
// 8-channel results are packed four to a word, the first in bits 7:0.
// Because convolution outputs arrive in order, pooling happens on the fly
// and the feature map never has to be read back for a separate pooling pass.
//
// Timing: start loads the layer settings and clears all state. ob_free tells
// the producer how many results can still be accepted (credit flow control;
// a result offered when ob_free is 0 is an error, see the assertion). A
// write buffer drain takes one cycle per word; the pooling unit waits while
// the write buffer drains. flush at the end of a layer writes a partly
// packed word and drops an unfinished pooling group; flush_done pulses when
// everything is written.
//
// The structure (MUX, output buffer, OR-based pooling unit, write buffer fed
// back to the pooling unit, shortcut path) follows the published block
// diagram; buffer depth, packing and the flush rule are this design's own.
module pwb
  import pscnn_pkg::*;
#(
  parameter int unsigned OB_DEPTH = 4
) (
  input  logic             clk,
  input  logic             rst_n,
  // layer settings
  input  logic             start,
  input  logic [4:0]       pool,        // pooling window, 1 = none
  input  logic [2:0]       out_log2,    // log2 of output channels (3, 5, 6, 7)
  input  logic [FM_AW-1:0] wr_base,
  input  logic             sel_shortcut,
  input  logic             flush,
  output logic             flush_done,
  output logic             idle,
  // results
  input  logic             cim_valid,
  input  logic [SA_N-1:0]  cim_data,
  input  logic             sc_valid,
  input  logic [SA_N-1:0]  sc_data,
  output logic [2:0]       ob_free,
  // FM write port
  output logic             wr_req,
  output logic [FM_AW-1:0] wr_addr,
  output logic [FM_W-1:0]  wr_data,
  // event counters for observation
  output logic             pool_done     // a pooling group completed
);
  localparam int unsigned PW = $clog2(OB_DEPTH);

  // ---------------- MUX and output buffer ----------------
  logic            in_valid;
  logic [SA_N-1:0] in_data;
  logic [SA_N-1:0] ob_mem [OB_DEPTH];
  logic [PW-1:0]   ob_rd, ob_wr;
  logic [PW:0]     ob_cnt;
  logic            pop;

  assign in_valid = sel_shortcut ? sc_valid : cim_valid;
  assign in_data  = sel_shortcut ? sc_data  : cim_data;
  assign ob_free  = 3'(OB_DEPTH - ob_cnt);

  // ---------------- pooling unit and write buffer ----------------
  logic [SA_N-1:0]  wbuf;
  logic [4:0]       pcnt;
  logic [2:0]       drain_left;   // words still to write from wbuf / pack
  logic [1:0]       beat;
  logic             drain_pack;
  logic [FM_W-1:0]  pack;
  logic [2:0]       pack_cnt;
  logic [FM_AW-1:0] wptr;
  logic             flushing;

  wire  [SA_N-1:0] pooled   = (pcnt == 0) ? ob_mem[ob_rd] : (wbuf | ob_mem[ob_rd]);
  wire             last_in  = (pcnt + 5'd1 == pool);
  wire             narrow   = (out_log2 == 3'd3);
  assign pop = (ob_cnt != 0) && (drain_left == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ob_rd <= '0; ob_wr <= '0; ob_cnt <= '0;
      wbuf <= '0; pcnt <= '0; drain_left <= '0; beat <= '0; drain_pack <= 1'b0;
      pack <= '0; pack_cnt <= '0; wptr <= '0; flushing <= 1'b0; flush_done <= 1'b0;
    end else if (start) begin
      ob_rd <= '0; ob_wr <= '0; ob_cnt <= '0;
      pcnt <= '0; drain_left <= '0; beat <= '0; drain_pack <= 1'b0;
      pack <= '0; pack_cnt <= '0; wptr <= wr_base; flushing <= 1'b0; flush_done <= 1'b0;
    end else begin
      flush_done <= 1'b0;
      // output buffer bookkeeping
      if (in_valid) begin
        ob_mem[ob_wr] <= in_data;
        ob_wr <= ob_wr + 1'b1;
      end
      if (pop) ob_rd <= ob_rd + 1'b1;
      ob_cnt <= ob_cnt + (PW+1)'(in_valid) - (PW+1)'(pop);

      // pooling
      if (pop) begin
        wbuf <= pooled;
        if (last_in) begin
          pcnt <= '0;
          if (narrow) begin
            pack     <= {pooled[7:0], pack[FM_W-1:8]};
            pack_cnt <= (pack_cnt == 3'd3) ? 3'd0 : pack_cnt + 1'b1;
            if (pack_cnt == 3'd3) begin
              drain_left <= 3'd1;
              drain_pack <= 1'b1;
            end
          end else begin
            drain_left <= 3'(1 << (out_log2 - 3'd5));
            drain_pack <= 1'b0;
            beat       <= '0;
          end
        end else begin
          pcnt <= pcnt + 1'b1;
        end
      end

      // write-out
      if (drain_left != 0) begin
        drain_left <= drain_left - 1'b1;
        beat       <= beat + 1'b1;
        wptr       <= wptr + 1'b1;
      end

      // end of layer
      if (flush && !flushing) flushing <= 1'b1;
      if (flushing && ob_cnt == 0 && drain_left == 0) begin
        pcnt <= '0;
        if (pack_cnt != 0) begin
          pack       <= pack >> (8 * (4 - pack_cnt));
          pack_cnt   <= '0;
          drain_left <= 3'd1;
          drain_pack <= 1'b1;
        end else begin
          flushing   <= 1'b0;
          flush_done <= 1'b1;
        end
      end
    end
  end

  assign wr_req    = (drain_left != 0);
  assign wr_addr   = wptr;
  assign wr_data   = drain_pack ? pack : wbuf[32*beat +: 32];
  assign idle      = (ob_cnt == 0) && (drain_left == 0) && !flushing;
  assign pool_done = pop && last_in;

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  !(in_valid && !pop && ob_cnt == (PW+1)'(OB_DEPTH)));
endmodule
