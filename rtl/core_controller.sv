// core_controller: runs one MAC instruction on the CIM core.
//
// A MAC instruction describes a whole layer: the IFM length in 32-bit words,
// input/output channel counts, zero padding, stride, dilation or pooling
// size, and which group of 128 bitline pairs holds the kernels. The
// controller turns it into a stream of IFM word requests, one per cycle,
// each being either a feature-map SRAM read at rd_base + v or a zero word for
// padding. Returned words are shifted into the 1024-bit line buffer; when
// the buffer holds a complete window the CIM macro is fired for one cycle and
// its 128 SA outputs go to the pooling-write block (PWB) a cycle later.
//
// The kernel always fills the 1024 wordlines: k = 1024 / chn_in taps, tap j
// and channel c on wordline j*chn_in + c. Three request patterns are used:
//   * dilation 1 (sliding): the first window needs 32 words, each further
//     output only stride*chn_in/32 new words; the buffer keeps the rest.
//     Needs stride*chn_in and padding*chn_in to be multiples of 32.
//   * dilation > 1 (gather): for output t the 32 words of positions
//     t*stride - padding + j*dilation (j = 0..k-1) are fetched again. Needs
//     chn_in >= 32.
//   * pooling only (shortcut): each position's chn_in/32 words are gathered
//     into one 128-bit result and sent around the macro to the PWB, which
//     pools them. Needs chn_in >= 32.
// Output counts: sliding ((L_w + 2*P_w - 32) >> log2(S_w)) + 1 in words;
// gather ((L + 2p - d*(k-1) - 1) >> log2(s)) + 1 in positions; pooling L.
//
// Flow control: the request that completes a window is only issued when the
// PWB output buffer has a free entry not already promised to a result in
// flight (credits). A read refused by the FM system (bank conflict with a
// write) is simply retried. When all requests are done and the pipeline is
// empty the PWB is flushed and done pulses.
//
// The line buffer, the shifting dataflow, the weight mapping, the shortcut
// path and the instruction fields are published. The request patterns for
// dilation, the output-count formulas, the field encodings and the credit
// scheme are this design's choices.
module core_controller
  import pscnn_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  layer_cfg_t       cfg,
  output logic             busy,
  output logic             done,
  // FM read port
  output logic             rd_req,
  output logic [FM_AW-1:0] rd_addr,
  input  logic             rd_gnt,
  input  logic             rd_valid,
  input  logic [FM_W-1:0]  rd_data,
  // line buffer
  output logic             lb_clear,
  output logic             lb_shift,
  output logic [FM_W-1:0]  lb_din,
  // CIM macro
  output logic             cim_en,
  output logic [1:0]       bl_out,
  output logic             cim_valid,  // SA outputs valid this cycle
  // shortcut path
  output logic             sc_valid,
  output logic [SA_N-1:0]  sc_data,
  // PWB control
  output logic             pwb_start,
  output logic [4:0]       pool,
  output logic [2:0]       out_log2,
  output logic [FM_AW-1:0] wr_base,
  output logic             sel_shortcut,
  output logic             flush,
  input  logic             flush_done,
  input  logic [2:0]       ob_free,
  // observation
  output logic             stall_conflict,  // read refused by a bank conflict
  output logic             stall_credit     // window completion held for PWB room
);
  typedef enum logic [2:0] {S_IDLE, S_SETUP, S_RUN, S_DRAIN, S_FLUSH} state_e;
  typedef enum logic [1:0] {M_SLIDE, M_GATHER, M_POOL} mode_e;

  state_e state;
  mode_e  mode;
  layer_cfg_t c;

  // derived layer constants (registered in S_SETUP)
  logic [2:0]  in_log2;          // log2 chn_in
  logic [2:0]  wpp_log2;         // log2 words per position (chn_in >= 32)
  logic [3:0]  sw_log2;          // log2 words per stride (sliding)
  logic [5:0]  k_taps;           // taps per window (gather), 1 for pooling
  logic [15:0] n_out;            // windows / results to produce

  // request generator state
  logic [15:0] t;                // output index
  logic [5:0]  j;                // tap
  logic [2:0]  u;                // word within position
  logic [5:0]  g;                // words issued in the current sliding group
  logic signed [16:0] v_slide;
  logic        first_win;
  logic        gen_done;

  // pipeline
  logic        d_valid, d_zero, d_last;
  logic        fire_q;           // cim_en this cycle
  logic [2:0]  inflight;
  logic [SA_N-1:0] gather;
  logic [2:0]  u_d;

  // ---------------- current request ----------------
  logic signed [16:0] pos, vreq;
  logic [12:0] L_pos;
  logic        req_zero, req_last, req_valid;

  always_comb begin
    L_pos = c.in_range >> wpp_log2;
    pos   = 17'(signed'({1'b0, t}) * signed'(17'(1 << stride_log2(c.stride))))
          - signed'(17'(c.padding))
          + signed'(17'(j)) * signed'(17'(dilation(c.dil_pool)));
    if (mode == M_POOL) pos = signed'({1'b0, t});
    if (mode == M_SLIDE) begin
      vreq     = v_slide;
      req_zero = (v_slide < 0) || (v_slide >= signed'(17'(c.in_range)));
      req_last = first_win ? (g == 6'(WIN_WORDS - 1)) : (g == 6'((1 << sw_log2) - 1));
    end else begin
      vreq     = (pos <<< wpp_log2) + signed'(17'(u));
      req_zero = (pos < 0) || (pos >= signed'(17'(L_pos)));
      req_last = (j == k_taps - 6'd1) && (u == 3'((1 << wpp_log2) - 1));
    end
    req_valid = (state == S_RUN) && !gen_done;
  end

  // layer constants worked out from the latched instruction, used in S_SETUP
  int chn, pw, span, l, s_l2, nw_s, nw_g;
  always_comb begin
    chn  = int'(chn_count(c.chn_in));
    pw   = (int'(c.padding) * chn) / 32;
    s_l2 = int'(stride_log2(c.stride)) + int'(chn_log2(c.chn_in)) - 5;
    l    = int'(c.in_range) >> (int'(chn_log2(c.chn_in)) - 5);
    span = int'(dilation(c.dil_pool)) * ((1024 >> chn_log2(c.chn_in)) - 1) + 1;
    nw_s = int'(c.in_range) + 2 * pw - int'(WIN_WORDS);
    nw_g = l + 2 * int'(c.padding) - span;
  end

  wire credit_ok = (3'(inflight) < ob_free);
  wire want      = req_valid && (!req_last || credit_ok);
  wire accept    = want && (req_zero || rd_gnt);

  assign rd_req         = want && !req_zero;
  assign rd_addr        = c.rd_base + vreq[FM_AW-1:0];
  assign stall_conflict = rd_req && !rd_gnt;
  assign stall_credit   = req_valid && req_last && !credit_ok;

  // ---------------- data stage ----------------
  wire [FM_W-1:0] d_word = d_zero ? '0 : rd_data;
  assign lb_shift = d_valid && (mode != M_POOL);
  assign lb_din   = d_word;
  assign cim_en   = fire_q;
  assign bl_out   = c.bl_out;

  wire result_in = cim_valid || sc_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; mode <= M_SLIDE; c <= '0;
      in_log2 <= '0; wpp_log2 <= '0; sw_log2 <= '0; k_taps <= '0; n_out <= '0;
      t <= '0; j <= '0; u <= '0; g <= '0; v_slide <= '0; first_win <= 1'b0; gen_done <= 1'b0;
      d_valid <= 1'b0; d_zero <= 1'b0; d_last <= 1'b0; fire_q <= 1'b0; cim_valid <= 1'b0;
      inflight <= '0; gather <= '0; sc_valid <= 1'b0; sc_data <= '0;
      done <= 1'b0; flush <= 1'b0;
    end else begin
      done  <= 1'b0;
      flush <= 1'b0;

      // pipeline registers
      d_valid   <= accept;
      d_zero    <= req_zero;
      d_last    <= req_last;
      fire_q    <= d_valid && d_last && (mode != M_POOL);
      cim_valid <= fire_q;
      sc_valid  <= 1'b0;
      if (d_valid && mode == M_POOL) begin
        gather[32*u_d +: 32] <= d_word;
        if (d_last) begin
          sc_valid <= 1'b1;
          sc_data  <= gather;
          sc_data[32*u_d +: 32] <= d_word;
        end
      end
      inflight <= inflight + 3'(accept && req_last) - 3'(result_in);

      case (state)
        S_IDLE: if (start) begin
          c     <= cfg;
          state <= S_SETUP;
        end

        S_SETUP: begin
          in_log2  <= chn_log2(c.chn_in);
          wpp_log2 <= (chn_log2(c.chn_in) >= 3'd5) ? chn_log2(c.chn_in) - 3'd5 : 3'd0;
          sw_log2 <= 4'(s_l2);
          if (c.mtype == MT_POOL) begin
            mode   <= M_POOL;
            k_taps <= 6'd1;
            n_out  <= 16'(l);
          end else if (dilation(c.dil_pool) == 3'd1) begin
            mode   <= M_SLIDE;
            k_taps <= 6'(1024 >> chn_log2(c.chn_in));
            n_out  <= (nw_s < 0) ? 16'd0 : 16'((nw_s >> s_l2) + 1);
          end else begin
            mode   <= M_GATHER;
            k_taps <= 6'(1024 >> chn_log2(c.chn_in));
            n_out  <= (nw_g < 0) ? 16'd0 : 16'((nw_g >> stride_log2(c.stride)) + 1);
          end
          t <= '0; j <= '0; u <= '0; g <= '0; first_win <= 1'b1;
          v_slide  <= 17'(-pw);
          gen_done <= 1'b0;
          state    <= S_RUN;
        end

        S_RUN: begin
          if (n_out == 0) gen_done <= 1'b1;
          if (accept) begin
            if (mode == M_SLIDE) begin
              v_slide <= v_slide + 17'sd1;
              if (req_last) begin
                g <= '0;
                first_win <= 1'b0;
                t <= t + 1'b1;
                if (t + 16'd1 == n_out) gen_done <= 1'b1;
              end else begin
                g <= g + 1'b1;
              end
            end else begin
              if (u == 3'((1 << wpp_log2) - 1)) begin
                u <= '0;
                if (j == k_taps - 6'd1) begin
                  j <= '0;
                  t <= t + 1'b1;
                  if (t + 16'd1 == n_out) gen_done <= 1'b1;
                end else begin
                  j <= j + 1'b1;
                end
              end else begin
                u <= u + 1'b1;
              end
            end
          end
          if (gen_done) state <= S_DRAIN;
        end

        S_DRAIN: if (!d_valid && !fire_q && !cim_valid && !sc_valid && inflight == 0) begin
          flush <= 1'b1;
          state <= S_FLUSH;
        end

        S_FLUSH: if (flush_done) begin
          done  <= 1'b1;
          state <= S_IDLE;
        end

        default: state <= S_IDLE;
      endcase
    end
  end

  // word index of the data-stage word within its position (pooling only)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      u_d <= '0;
    else if (accept) u_d <= u;
  end

  assign busy         = (state != S_IDLE);
  assign lb_clear     = (state == S_SETUP);
  assign pwb_start    = (state == S_SETUP);
  assign pool         = pool_size(c.mtype, c.dil_pool);
  assign out_log2     = chn_log2(c.chn_out);
  assign wr_base      = c.wr_base;
  assign sel_shortcut = (c.mtype == MT_POOL);

  a_read_returns: assert property (@(posedge clk) disable iff (!rst_n)
      (d_valid && !d_zero) |-> rd_valid);
  a_slide_stride: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_RUN && mode == M_SLIDE) |-> (int'(stride_log2(c.stride)) + int'(in_log2) >= 5));
  a_gather_chn: assert property (@(posedge clk) disable iff (!rst_n)
      (state == S_RUN && mode != M_SLIDE) |-> (in_log2 >= 3'd5));
endmodule
