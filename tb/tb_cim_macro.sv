// tb_cim_macro: programs random weight columns into all 512 bitline pairs,
// then fires the macro with random activations on every bl_out group and
// compares the 128 sense-amplifier bits with an independent popcount
// reference (including activations chosen to make the two currents tie).
// Also reads columns back through the weight port.
module tb_cim_macro;
  logic clk = 0; always #5 clk = ~clk;
  logic cim_en, w_we, w_re; logic [1023:0] wl, w_wdata, w_rdata; logic [1:0] bl_out;
  logic [127:0] dout; logic [8:0] w_pair;
  int checks = 0, failures = 0;
  logic [1023:0] W [512];
  cim_macro dut (.clk, .cim_en, .wl, .bl_out, .dout, .w_we, .w_re, .w_pair, .w_wdata, .w_rdata);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  function automatic logic [1023:0] rnd();
    logic [1023:0] v; for (int i = 0; i < 32; i++) v[32*i +: 32] = $urandom; return v;
  endfunction
  initial begin
    cim_en = 0; w_we = 0; w_re = 0; wl = 0; bl_out = 0; w_pair = 0; w_wdata = 0;
    for (int p = 0; p < 512; p++) begin
      @(negedge clk); w_we = 1; w_pair = 9'(p); W[p] = rnd(); w_wdata = W[p];
    end
    @(negedge clk); w_we = 0;
    for (int n = 0; n < 40; n++) begin
      logic [127:0] exp;
      logic [1023:0] a;
      a = rnd();
      if (n % 5 == 0) a = a & rnd();      // sparser activations
      if (n == 7) a = '0;                 // all-zero: every SA sees a tie -> 1
      @(negedge clk); cim_en = 1; wl = a; bl_out = 2'(n % 4);
      @(negedge clk); cim_en = 0; wl = rnd();
      for (int o = 0; o < 128; o++) begin
        int pp, pn;
        pp = $countones(a & W[(n % 4) * 128 + o]);
        pn = $countones(a & ~W[(n % 4) * 128 + o]);
        exp[o] = (pp >= pn);
      end
      checks++; if (dout !== exp) begin failures++; $display("window %0d mismatch", n); end
      @(negedge clk);  // dout holds while cim_en is low
      checks++; if (dout !== exp) failures++;
    end
    for (int p = 0; p < 512; p += 37) begin
      @(negedge clk); w_re = 1; w_pair = 9'(p);
      @(negedge clk); w_re = 0;
      checks++; if (w_rdata !== W[p]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
