// tb_instr_regfile: fills the instruction register file with random words
// and reads every entry back through both read ports.
module tb_instr_regfile;
  logic clk = 0; always #5 clk = ~clk;
  logic we; logic [5:0] waddr, raddr, haddr; logic [31:0] wdata, rdata, hrdata;
  int checks = 0, failures = 0;
  logic [31:0] model [64];
  instr_regfile dut (.clk, .we, .waddr, .wdata, .raddr, .rdata, .haddr, .hrdata);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    we = 0; waddr = 0; raddr = 0; haddr = 0; wdata = 0;
    for (int i = 0; i < 64; i++) begin
      @(negedge clk); we = 1; waddr = 6'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 64; i++) begin
      raddr = 6'(i); haddr = 6'(63 - i); #1;
      checks++; if (rdata !== model[i] || hrdata !== model[63 - i]) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
