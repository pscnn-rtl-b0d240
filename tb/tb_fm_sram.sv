// tb_fm_sram: writes random words to random addresses of one feature-map
// bank, reads them back with the one-cycle latency, and checks that a
// disabled bank neither writes nor changes its read output.
module tb_fm_sram;
  logic clk = 0; always #5 clk = ~clk;
  logic ce, we; logic [10:0] addr; logic [31:0] wdata, rdata;
  int checks = 0, failures = 0;
  fm_sram dut (.clk, .ce, .we, .addr, .wdata, .rdata);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  logic [31:0] model [int];
  initial begin
    ce = 0; we = 0; addr = 0; wdata = 0;
    for (int i = 0; i < 300; i++) begin
      int a; a = $urandom_range(0, 2047);
      @(negedge clk); ce = 1; we = 1; addr = 11'(a); wdata = $urandom; model[a] = wdata;
    end
    @(negedge clk); ce = 0; we = 1; addr = 11'(5); wdata = 32'hdeadbeef;  // disabled: no write
    foreach (model[a]) begin
      @(negedge clk); ce = 1; we = 0; addr = 11'(a);
      @(negedge clk); ce = 0;
      checks++; if (rdata !== model[a]) begin failures++; $display("addr %0d got %h exp %h", a, rdata, model[a]); end
      @(negedge clk); addr = addr + 1'b1;   // ce low: output must hold
      checks++; if (rdata !== model[a]) failures++;
    end
    if (!model.exists(5)) begin
      @(negedge clk); ce = 1; we = 0; addr = 11'(5); @(negedge clk); ce = 0;
      checks++; if (rdata === 32'hdeadbeef) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
