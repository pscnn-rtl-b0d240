// tb_core_controller: runs the core controller against a feature-map memory
// model that randomly refuses reads (bank-conflict stalls) and a PWB model
// that drains its output buffer at random, with a real line buffer. At every
// CIM firing the 1024 wordlines must equal the window built here from
// positions (tap j, channel c on wordline j*chn_in + c, zero outside the
// feature map). Covers sliding windows on 8- and 64-channel inputs, a dilated
// (gathered) window on 128-channel input and a pooling-only layer on the
// shortcut path. The output buffer must never overflow, and with all reads
// granted a sliding layer must take 32 + (n-1)*stride_words cycles plus a
// small fixed overhead.
module tb_core_controller;
  import pscnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, busy, done, rd_req, rd_gnt, rd_valid, lb_clear, lb_shift, cim_en, cim_valid;
  logic sc_valid, pwb_start, sel_shortcut, flush, flush_done, stall_conflict, stall_credit;
  layer_cfg_t cfg;
  logic [12:0] rd_addr, wr_base; logic [31:0] rd_data, lb_din; logic [1:0] bl_out;
  logic [127:0] sc_data; logic [4:0] pool; logic [2:0] out_log2, ob_free;
  logic [1023:0] wl;
  int checks = 0, failures = 0;
  logic [31:0] mem [8192];
  bit refuse_en, fast;
  int ob_cnt, fires, results, bad_windows, overflow;
  logic [1023:0] exp_win[$];
  logic [127:0]  exp_pos[$];

  core_controller dut (.*);
  line_buffer u_lb (.clk, .rst_n, .clear(lb_clear), .shift(lb_shift), .din(lb_din), .wl);

  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // memory model
  always_comb rd_gnt = rd_req && !(refuse_en && ($urandom_range(0, 3) == 0));
  always @(posedge clk) begin
    rd_valid <= rd_gnt;
    if (rd_gnt) rd_data <= mem[rd_addr];
  end
  // PWB model
  always @(posedge clk) begin
    int nc;
    nc = ob_cnt + int'(cim_valid) + int'(sc_valid);
    if (nc > 0 && (fast || $urandom_range(0, 2) == 0)) nc--;
    if (nc > 4) overflow++;
    ob_cnt <= nc;
    flush_done <= flush;
    if (cim_en) begin
      fires++;
      if (exp_win.size() == 0 || wl !== exp_win.pop_front()) bad_windows++;
    end
    if (sc_valid) begin
      results++;
      if (exp_pos.size() == 0 || (sc_data & mask) !== exp_pos.pop_front()) bad_windows++;
    end
  end
  assign ob_free = 3'(4 - ob_cnt);
  logic [127:0] mask;

  task automatic layer(mac_type_e t, int chn, int L, int s, int p, int d, int dp,
                       bit refuse, output int cyc, output int n);
    int k, wpp; logic [127:0] pos[$];
    refuse_en = refuse;
    // random feature map at word address 5000
    for (int x = 0; x < L; x++) pos.push_back({$urandom, $urandom, $urandom, $urandom} & ((128'd1 << chn) - 1));
    if (chn == 8) for (int w = 0; w < L / 4; w++) mem[5000 + w] = {pos[4*w+3][7:0], pos[4*w+2][7:0], pos[4*w+1][7:0], pos[4*w][7:0]};
    else for (int x = 0; x < L; x++) for (int u = 0; u < chn / 32; u++) mem[5000 + x * (chn / 32) + u] = pos[x][32*u +: 32];
    k = 1024 / chn;
    mask = (chn == 128) ? '1 : ((128'd1 << chn) - 1);
    exp_win.delete(); exp_pos.delete();
    if (t == MT_POOL) begin n = L; foreach (pos[x]) exp_pos.push_back(pos[x]); end
    else begin
      n = (L + 2 * p - d * (k - 1) - 1) / s + 1;
      for (int o = 0; o < n; o++) begin
        logic [1023:0] a; a = '0;
        for (int j = 0; j < k; j++) begin
          int x; x = o * s - p + j * d;
          if (x >= 0 && x < L) for (int c = 0; c < chn; c++) a[j * chn + c] = pos[x][c];
        end
        exp_win.push_back(a);
      end
    end
    fires = 0; results = 0; bad_windows = 0;
    @(negedge clk);
    start = 1;
    cfg = '{mtype: t, in_range: 13'(L * chn / 32), chn_in: (chn == 8) ? 2'd0 : (chn == 32) ? 2'd1 : (chn == 64) ? 2'd2 : 2'd3,
            padding: 4'(p), stride: (s == 1) ? 2'd0 : (s == 2) ? 2'd1 : 2'd2, bl_out: 2'd1, chn_out: 2'd3,
            dil_pool: 2'(dp), rd_base: 13'd5000, wr_base: 13'd7};
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    checks++; if (bad_windows != 0) begin failures++; $display("%0d bad windows/results", bad_windows); end
    checks++; if ((t == MT_POOL ? results : fires) != n) begin failures++; $display("count %0d expected %0d", t == MT_POOL ? results : fires, n); end
    $display("layer chn=%0d L=%0d s=%0d p=%0d d=%0d: %0d outputs in %0d cycles", chn, L, s, p, d, n, cyc);
  endtask

  initial begin
    int cyc, n;
    start = 0; cfg = '0; ob_cnt = 0; fast = 0; overflow = 0; refuse_en = 0; mask = '1;
    foreach (mem[i]) mem[i] = 0;
    #12 rst_n = 1;
    fast = 1;
    layer(MT_CONV, 8, 192, 4, 4, 1, 0, 0, cyc, n);        // sliding, no stalls: one output per cycle
    checks++; if (cyc > 32 + (n - 1) + 12) begin failures++; $display("sliding too slow: %0d", cyc); end
    fast = 0;
    layer(MT_CONV, 8, 192, 4, 4, 1, 0, 1, cyc, n);        // sliding with refused reads
    layer(MT_CONV_POOL2, 64, 12, 2, 8, 1, 0, 1, cyc, n);  // sliding, 64 channels
    layer(MT_CONV, 128, 20, 1, 7, 2, 1, 1, cyc, n);       // dilation 2: gathered windows
    checks++; if (cyc < n * 32) failures++;               // gather needs 32 words per output
    layer(MT_POOL, 128, 9, 1, 0, 1, 1, 1, cyc, n);        // shortcut
    checks++; if (overflow != 0) begin failures++; $display("output buffer overflow"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
