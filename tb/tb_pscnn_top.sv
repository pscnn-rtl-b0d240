// tb_pscnn_top: end-to-end test of the processor on a small binary CNN.
//
// The host loads weights (directly into the CIM macro and into the weight
// SRAM), an input feature map and a program, starts the processor and checks
// every layer's output in feature-map SRAM against tb_ref_pkg. The program
// exercises: sliding-window convolution on 8-channel input with stride 4
// (output-buffer credit stalls, since 128-channel results need four writes
// each), a pooling-only layer on the shortcut path, a dilated convolution
// fused with max pooling, a weight replacement from the weight SRAM, an
// 8-channel-output layer whose IFM and OFM share one bank (read stalls on
// bank conflicts, packed and flushed output words), the same layer with
// 128 output channels, a replacement back into
// the weight SRAM, and halt. Each mechanism is counted and must occur.
module tb_pscnn_top;
  import pscnn_pkg::*;
  import tb_ref_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  host_req_t   hreq;
  logic [31:0] hrdata;
  logic        hrvalid, start, done, running;
  logic [3:0]  bank_active;
  logic ev_fire, ev_shortcut, ev_pool, ev_repl, ev_stall_conflict, ev_stall_credit;

  pscnn_top dut (
    .clk, .rst_n, .host_req(hreq), .host_rdata(hrdata), .host_rvalid(hrvalid),
    .start, .done, .running, .bank_active,
    .ev_fire, .ev_shortcut, .ev_pool, .ev_repl, .ev_stall_conflict, .ev_stall_credit
  );

  int checks = 0, failures = 0;
  int n_fire = 0, n_short = 0, n_pool = 0, n_repl = 0, n_conf = 0, n_cred = 0, n_bank_over = 0;
  longint cycles = 0;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    n_fire  += int'(ev_fire);
    n_short += int'(ev_shortcut);
    n_pool  += int'(ev_pool);
    n_repl  += int'(ev_repl);
    n_conf  += int'(ev_stall_conflict);
    n_cred  += int'(ev_stall_credit);
    if ($countones(bank_active) > 2) n_bank_over++;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic hwrite(host_sel_e sel, int addr, logic [31:0] data);
    hreq = '{we: 1'b1, re: 1'b0, sel: sel, addr: 16'(addr), wdata: data};
    @(posedge clk); #1;
    hreq = '0;
  endtask

  task automatic hread(host_sel_e sel, int addr, output logic [31:0] data);
    hreq = '{we: 1'b0, re: 1'b1, sel: sel, addr: 16'(addr), wdata: '0};
    @(posedge clk); #1;
    hreq = '0;
    data = hrdata;
    if (!hrvalid) begin failures++; $display("no rvalid"); end
  endtask

  task automatic load_col(host_sel_e sel, int col, col_t w);
    for (int b = 0; b < 32; b++) hwrite(sel, col * 32 + b, w[32*b +: 32]);
  endtask

  task automatic check_fm(string name, int base, logic [31:0] exp[$]);
    int bad = 0;
    foreach (exp[i]) begin
      logic [31:0] got;
      hread(HS_FM, base + i, got);
      if (got !== exp[i]) begin
        if (bad < 4) $display("%s word %0d: got %h expected %h", name, i, got, exp[i]);
        bad++;
      end
    end
    checks++;
    if (bad != 0) failures++;
    $display("%s: %0d words, %0d wrong", name, exp.size(), bad);
  endtask

  function automatic logic [31:0] i_mac(mac_type_e t, int rng, int ci, int pad, int st,
                                        int bl, int co, int dp);
    return {OP_MAC, t, 13'(rng), 2'(ci), 4'(pad), 2'(st), 2'(bl), 2'(co), 2'(dp)};
  endfunction
  function automatic logic [31:0] i_ptr(int rd, int wr);
    return {OP_PTR, 1'b0, 2'b00, 13'(rd), 13'(wr)};
  endfunction
  function automatic logic [31:0] i_repl(bit dir, int cim, int ws, int len);
    return {OP_REPL, 1'b0, dir, 9'(cim), 9'(ws), 9'(len)};
  endfunction

  col_t  w0[$], w1[$], w2[$];
  pos_t  x0[$], y1[$], y2[$], y3c[$], y3[$], y5[$], y6[$];
  logic [31:0] words[$], prog[$];

  initial begin
    hreq = '0; start = 0;
    repeat (3) @(posedge clk); #1 rst_n = 1;
    @(posedge clk); #1;

    // weights and input
    for (int i = 0; i < 128; i++) w0.push_back({$urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                                                $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                                                $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom,
                                                $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom, $urandom});
    for (int i = 0; i < 64; i++)  w1.push_back(w0[(i * 7 + 3) % 128] ^ {32{$urandom}});
    for (int i = 0; i < 128; i++) w2.push_back(w0[(i * 5 + 1) % 128] ^ {32{$urandom}});
    for (int i = 0; i < 512; i++) x0.push_back(pos_t'($urandom & 32'hff));
    foreach (w0[i]) load_col(HS_CIM, i, w0[i]);
    foreach (w1[i]) load_col(HS_CIM, 128 + i, w1[i]);
    foreach (w2[i]) load_col(HS_WSRAM, i, w2[i]);
    pack(x0, 8, words);
    foreach (words[i]) hwrite(HS_FM, i, words[i]);

    // program
    prog.push_back(i_ptr(0, 6144));
    prog.push_back(i_mac(MT_CONV, 128, 0, 0, 2, 0, 3, 0));        // 8ch in, s4, 128 out
    prog.push_back(i_ptr(6144, 0));
    prog.push_back(i_mac(MT_POOL, 388, 3, 0, 0, 0, 3, 1));        // max pool 4, shortcut
    prog.push_back(i_ptr(0, 2048));
    prog.push_back(i_mac(MT_CONV_POOL2, 96, 3, 7, 0, 1, 2, 1));   // 128 in, d2, p7, 64 out, pool 2
    prog.push_back(i_repl(1'b0, 256, 0, 128));                    // weight SRAM -> CIM group 2
    prog.push_back(i_ptr(2048, 2148));                            // same bank in and out
    prog.push_back(i_mac(MT_CONV, 24, 2, 8, 1, 2, 0, 0));         // 64 in, s2, p8, 8 out
    prog.push_back(i_ptr(2048, 2200));                            // same bank, 128 out
    prog.push_back(i_mac(MT_CONV, 24, 2, 8, 1, 2, 3, 0));
    prog.push_back(i_repl(1'b1, 0, 300, 4));                      // CIM pairs 0..3 -> weight SRAM
    prog.push_back(32'h0);                                        // halt
    foreach (prog[i]) hwrite(HS_INSTR, i, prog[i]);

    // reference
    conv(x0, 8, 4, 0, 1, w0, 128, y1);
    maxpool(y1, 4, y2);
    conv(y2, 128, 1, 7, 2, w1, 64, y3c);
    maxpool(y3c, 2, y3);
    conv(y3, 64, 2, 8, 1, w2, 8, y5);
    conv(y3, 64, 2, 8, 1, w2, 128, y6);
    $display("layer sizes: %0d %0d %0d %0d", y1.size(), y2.size(), y3.size(), y5.size());

    start = 1; @(posedge clk); #1 start = 0;
    wait (done); @(posedge clk); #1;
    $display("program finished after %0d cycles", cycles);

    pack(y1, 128, words); check_fm("conv 8->128", 6144, words);
    pack(y2, 128, words); check_fm("pool-only 4", 0, words);
    pack(y3, 64, words);  check_fm("dilated conv+pool2", 2048, words);
    pack(y5, 8, words);   check_fm("conv 64->8 same bank", 2148, words);
    pack(y6, 128, words); check_fm("conv 64->128 same bank", 2200, words);
    begin
      int bad = 0;
      for (int i = 0; i < 4; i++)
        for (int b = 0; b < 32; b++) begin
          logic [31:0] got;
          hread(HS_WSRAM, (300 + i) * 32 + b, got);
          if (got !== w0[i][32*b +: 32]) bad++;
        end
      checks++; if (bad) failures++;
      $display("CIM -> weight SRAM copy: %0d beats wrong", bad);
    end

    $display("events: fire=%0d shortcut=%0d pool=%0d repl=%0d conflict_stall=%0d credit_stall=%0d",
             n_fire, n_short, n_pool, n_repl, n_conf, n_cred);
    checks++; if (n_fire  != y1.size() + y3c.size() + y5.size() + y6.size()) begin failures++; $display("fire count"); end
    checks++; if (n_short != y1.size()) begin failures++; $display("shortcut count"); end
    checks++; if (n_pool  == 0) failures++;
    checks++; if (n_repl  != 2) failures++;
    checks++; if (n_conf  == 0) begin failures++; $display("no bank-conflict stall seen"); end
    checks++; if (n_cred  == 0) begin failures++; $display("no credit stall seen"); end
    checks++; if (n_bank_over != 0) begin failures++; $display("more than two banks active"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
