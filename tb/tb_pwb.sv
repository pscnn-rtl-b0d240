// tb_pwb: drives the pooling-write block with random results and checks
// the words it writes against OR-pooling computed here: 64-channel results
// pooled by 4 from the CIM input, 128-channel results without pooling fed
// back to back (output buffer fills; producer honours ob_free), 8-channel
// results packed four per word with a flushed partial word, and the
// shortcut input selected by the MUX (CIM input ignored).
module tb_pwb;
  import pscnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, sel_shortcut, flush, flush_done, idle, cim_valid, sc_valid, wr_req, pool_done;
  logic [4:0] pool; logic [2:0] out_log2, ob_free; logic [12:0] wr_base, wr_addr;
  logic [127:0] cim_data, sc_data; logic [31:0] wr_data;
  int checks = 0, failures = 0;
  logic [31:0] mem [8192];
  pwb dut (.*);
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  always @(posedge clk) if (wr_req) mem[wr_addr] <= wr_data;

  function automatic logic [127:0] rnd();
    return {$urandom, $urandom, $urandom, $urandom};
  endfunction

  task automatic run(int p, int lg, int base, bit sc, int n, bit hold_cim);
    logic [127:0] res[$], acc; logic [31:0] exp[$]; int bad; logic [31:0] pk; int pc;
    @(negedge clk); start = 1; pool = 5'(p); out_log2 = 3'(lg); wr_base = 13'(base); sel_shortcut = sc;
    @(negedge clk); start = 0;
    for (int i = 0; i < n; i++) begin
      logic [127:0] r; r = rnd();
      while (ob_free == 0) @(negedge clk);
      if (sc) begin sc_valid = 1; sc_data = r; cim_valid = hold_cim; cim_data = rnd(); end
      else begin cim_valid = 1; cim_data = r; end
      res.push_back(r);
      @(negedge clk); cim_valid = 0; sc_valid = 0;
      if (i % 3 == 0 && !hold_cim) @(negedge clk);
    end
    flush = 1; @(negedge clk); flush = 0;
    while (!flush_done) @(negedge clk);
    // expected words
    pc = 0; pk = 0;
    for (int g = 0; g + p <= n; g += p) begin
      acc = '0; for (int i = 0; i < p; i++) acc |= res[g + i];
      if (lg == 3) begin pk[8*pc +: 8] = acc[7:0]; pc++; if (pc == 4) begin exp.push_back(pk); pk = 0; pc = 0; end end
      else for (int u = 0; u < (1 << (lg - 5)); u++) exp.push_back(acc[32*u +: 32]);
    end
    if (pc != 0) exp.push_back(pk);
    bad = 0;
    foreach (exp[i]) if (mem[base + i] !== exp[i]) bad++;
    checks++; if (bad) begin failures++; $display("pool %0d chn 2^%0d: %0d of %0d words wrong", p, lg, bad, exp.size()); end
    checks++; if (!idle) failures++;
  endtask

  initial begin
    start = 0; sel_shortcut = 0; flush = 0; cim_valid = 0; sc_valid = 0; pool = 1; out_log2 = 7;
    wr_base = 0; cim_data = 0; sc_data = 0;
    foreach (mem[i]) mem[i] = 0;
    #12 rst_n = 1;
    run(4, 6, 100, 0, 41, 0);   // 64 channels, pool 4, one group dropped
    run(1, 7, 300, 0, 30, 0);   // 128 channels, back to back
    run(2, 3, 600, 0, 22, 0);   // 8 channels, pool 2: 11 results -> 3 words (last partial)
    run(2, 7, 900, 1, 10, 1);   // shortcut: MUX must ignore the CIM input
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
