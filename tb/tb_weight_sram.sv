// tb_weight_sram: writes random 1024-bit columns to random words of the
// weight SRAM and reads them back one cycle later; a disabled access must
// not write.
module tb_weight_sram;
  logic clk = 0; always #5 clk = ~clk;
  logic ce, we; logic [8:0] addr; logic [1023:0] wdata, rdata;
  int checks = 0, failures = 0;
  weight_sram dut (.clk, .ce, .we, .addr, .wdata, .rdata);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [1023:0] model [int];
  function automatic logic [1023:0] rnd();
    logic [1023:0] v; for (int i = 0; i < 32; i++) v[32*i +: 32] = $urandom; return v;
  endfunction
  initial begin
    ce = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 100; i++) begin
      int a; a = $urandom_range(1, 511);
      @(negedge clk); ce = 1; we = 1; addr = 9'(a); wdata = rnd(); model[a] = wdata;
    end
    @(negedge clk); ce = 1; we = 1; addr = 0; wdata = '0;
    @(negedge clk); ce = 0; we = 1; addr = 0; wdata = '1;           // disabled
    @(negedge clk); ce = 1; we = 0; addr = 0; @(negedge clk); ce = 0;
    checks++; if (rdata !== '0) failures++;
    foreach (model[a]) begin
      @(negedge clk); ce = 1; we = 0; addr = 9'(a);
      @(negedge clk); ce = 0;
      checks++; if (rdata !== model[a]) begin failures++; $display("word %0d wrong", a); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
