// tb_cim_core: the CIM core with a feature-map memory model. Weight
// columns are loaded through the host weight port (CIM group 0 directly,
// group 3 via the weight SRAM and a replacement command). Then a fused
// convolution + max-pool-2 layer (64-channel input, stride 2, padding 8) runs
// on group 3, and a convolution with 128 outputs on group 0; the OFM words
// written are compared with tb_ref_pkg.
module tb_cim_core;
  import pscnn_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic mac_start, mac_done, repl_start, repl_done, busy;
  layer_cfg_t layer_cfg; repl_cfg_t repl_cfg;
  logic fm_rd_req, fm_rd_gnt, fm_rd_valid, fm_wr_req;
  logic [12:0] fm_rd_addr, fm_wr_addr; logic [31:0] fm_rd_data, fm_wr_data;
  logic h_we, h_re, h_cim, h_rvalid; logic [13:0] h_addr; logic [31:0] h_wdata, h_rdata;
  logic ev_fire, ev_shortcut, ev_pool, ev_stall_conflict, ev_stall_credit;
  int checks = 0, failures = 0;
  logic [31:0] mem [8192];
  cim_core dut (.*);
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  assign fm_rd_gnt = fm_rd_req;
  always @(posedge clk) begin
    fm_rd_valid <= fm_rd_gnt;
    if (fm_rd_gnt) fm_rd_data <= mem[fm_rd_addr];
    if (fm_wr_req) mem[fm_wr_addr] <= fm_wr_data;
  end
  function automatic col_t rcol(); col_t v; for (int i = 0; i < 32; i++) v[32*i +: 32] = $urandom; return v; endfunction
  task automatic load(bit cim, int col, col_t w);
    for (int b = 0; b < 32; b++) begin
      @(negedge clk); h_we = 1; h_cim = cim; h_addr = 14'(col * 32 + b); h_wdata = w[32*b +: 32];
    end
    @(negedge clk); h_we = 0;
  endtask
  task automatic mac(layer_cfg_t c);
    @(negedge clk); layer_cfg = c; mac_start = 1; @(negedge clk); mac_start = 0;
    while (!mac_done) @(negedge clk);
  endtask
  task automatic cmp(string name, int base, logic [31:0] e[$]);
    int bad = 0; foreach (e[i]) if (mem[base + i] !== e[i]) bad++;
    checks++; if (bad) failures++;
    $display("%s: %0d/%0d words wrong", name, bad, e.size());
  endtask
  col_t wa[$], wb[$]; pos_t x[$], y[$], yp[$], z[$]; logic [31:0] words[$];
  initial begin
    mac_start = 0; repl_start = 0; layer_cfg = '0; repl_cfg = '0; h_we = 0; h_re = 0; h_cim = 0; h_addr = 0; h_wdata = 0;
    foreach (mem[i]) mem[i] = 0;
    #12 rst_n = 1;
    for (int i = 0; i < 128; i++) begin wa.push_back(rcol()); load(1, i, wa[i]); end
    for (int i = 0; i < 64; i++) begin wb.push_back(rcol()); load(0, 10 + i, wb[i]); end
    @(negedge clk); repl_cfg = '{direction: 1'b0, cim_addr: 9'd384, ws_addr: 9'd10, length: 9'd64}; repl_start = 1;
    @(negedge clk); repl_start = 0; while (!repl_done) @(negedge clk);
    for (int i = 0; i < 40; i++) x.push_back({$urandom, $urandom, $urandom, $urandom} & {64'h0, {64{1'b1}}});
    pack(x, 64, words); foreach (words[i]) mem[100 + i] = words[i];
    // layer 1: 64 -> 64 channels, stride 2, padding 8, fused max pool 2, group 3
    mac('{mtype: MT_CONV_POOL2, in_range: 13'(words.size()), chn_in: 2'd2, padding: 4'd8, stride: 2'd1,
          bl_out: 2'd3, chn_out: 2'd2, dil_pool: 2'd0, rd_base: 13'd100, wr_base: 13'd3000});
    conv(x, 64, 2, 8, 1, wb, 64, y); maxpool(y, 2, yp);
    pack(yp, 64, words); cmp("conv+pool2 64->64", 3000, words);
    // layer 2: 64 -> 128 channels, stride 1, padding 4, group 0
    mac('{mtype: MT_CONV, in_range: 13'(words.size()), chn_in: 2'd2, padding: 4'd4, stride: 2'd0,
          bl_out: 2'd0, chn_out: 2'd3, dil_pool: 2'd0, rd_base: 13'd3000, wr_base: 13'd6000});
    conv(yp, 64, 1, 4, 1, wa, 128, z);
    pack(z, 128, words); cmp("conv 64->128", 6000, words);
    checks++; if (busy) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
