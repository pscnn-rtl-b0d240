// tb_system_controller: runs a program of pointer, MAC, replacement, an
// unknown opcode and halt from a register-file model, answering mac_start
// and repl_start after random delays. Checks the decoded layer and
// replacement settings (including the pointers latched by the preceding
// pointer instruction), the order of commands, that nothing runs after
// halt, and that done pulses once.
module tb_system_controller;
  import pscnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, running, done, mac_start, mac_done, repl_start, repl_done;
  logic [5:0] pc; logic [31:0] instr; layer_cfg_t layer_cfg; repl_cfg_t repl_cfg;
  int checks = 0, failures = 0;
  logic [31:0] prog [64];
  int n_mac = 0, n_repl = 0, n_done = 0;
  system_controller dut (.*);
  assign instr = prog[pc];
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  // core model
  always @(posedge clk) begin
    if (rst_n && mac_start) begin
      n_mac++;
      fork begin repeat ($urandom_range(1, 20)) @(posedge clk); mac_done <= 1; @(posedge clk); mac_done <= 0; end join_none
    end
    if (rst_n && repl_start) begin
      n_repl++;
      fork begin repeat ($urandom_range(1, 20)) @(posedge clk); repl_done <= 1; @(posedge clk); repl_done <= 0; end join_none
    end
    if (rst_n && done) n_done++;
  end

  initial begin
    start = 0; mac_done = 0; repl_done = 0;
    foreach (prog[i]) prog[i] = {OP_MAC, 29'h0};   // anything after halt would be a MAC
    prog[0] = {OP_PTR, 1'b0, 2'd2, 2'd1, 11'd77, 2'd3, 11'd1500};
    prog[1] = {OP_MAC, MT_CONV_POOL4, 13'd4000, 2'd0, 4'd5, 2'd2, 2'd1, 2'd2, 2'd1};
    prog[2] = 32'h2000_0000;                         // opcode 001: skipped
    prog[3] = {OP_REPL, 1'b0, 1'b1, 9'd300, 9'd17, 9'd140};
    prog[4] = {OP_PTR, 1'b0, 2'd0, 2'd3, 11'd5, 2'd0, 11'd9};
    prog[5] = {OP_MAC, MT_POOL, 13'd31, 2'd3, 4'd0, 2'd0, 2'd3, 2'd3, 2'd0};
    prog[6] = 32'h0;                                 // halt
    #12 rst_n = 1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    // first MAC
    wait (mac_start); #1;
    checks++;
    if (layer_cfg.mtype != MT_CONV_POOL4 || layer_cfg.in_range != 4000 || layer_cfg.chn_in != 0 ||
        layer_cfg.padding != 5 || layer_cfg.stride != 2 || layer_cfg.bl_out != 1 || layer_cfg.chn_out != 2 ||
        layer_cfg.dil_pool != 1 || layer_cfg.rd_base != {2'd1, 11'd77} || layer_cfg.wr_base != {2'd3, 11'd1500}) begin
      failures++; $display("MAC 1 decode wrong: %p", layer_cfg);
    end
    wait (repl_start); #1;
    checks++;
    if (repl_cfg.direction != 1 || repl_cfg.cim_addr != 300 || repl_cfg.ws_addr != 17 || repl_cfg.length != 140) failures++;
    checks++; if (n_mac != 1) failures++;
    @(posedge clk); wait (mac_start); #1;
    checks++;
    if (layer_cfg.mtype != MT_POOL || layer_cfg.in_range != 31 || layer_cfg.rd_base != {2'd3, 11'd5} ||
        layer_cfg.wr_base != {2'd0, 11'd9}) failures++;
    wait (done); repeat (30) @(posedge clk);
    checks++; if (n_mac != 2 || n_repl != 1 || n_done != 1 || running) begin
      failures++; $display("mac %0d repl %0d done %0d", n_mac, n_repl, n_done);
    end
    checks++; if (pc != 6) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
