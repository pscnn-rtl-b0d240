// tb_line_buffer: shifts 50 random words into the line buffer and checks
// after each that word slot i holds the (i+1)-th newest-but-31 word, i.e.
// the last 32 words with the oldest in bits 31:0; then checks clear and
// that the buffer holds when shift is low.
module tb_line_buffer;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic clear, shift; logic [31:0] din; logic [1023:0] wl;
  int checks = 0, failures = 0;
  logic [31:0] hist[$];
  line_buffer dut (.clk, .rst_n, .clear, .shift, .din, .wl);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    clear = 0; shift = 0; din = 0;
    for (int i = 0; i < 32; i++) hist.push_back('0);
    #12 rst_n = 1;
    for (int n = 0; n < 50; n++) begin
      @(negedge clk); shift = 1; din = $urandom; hist.push_back(din); hist.pop_front();
      @(negedge clk); shift = 0;
      checks++;
      for (int i = 0; i < 32; i++) if (wl[32*i +: 32] !== hist[i]) begin failures++; break; end
    end
    @(negedge clk); din = 32'h1234; @(negedge clk);
    checks++; if (wl[1023:992] !== hist[31]) failures++;
    clear = 1; @(negedge clk); clear = 0;
    checks++; if (wl !== '0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
