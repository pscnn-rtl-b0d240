// tb_weight_rw_if: with a real weight SRAM and CIM macro attached, the host
// writes columns into the weight SRAM beat by beat, a replacement copies
// them into the CIM macro (checked by host reads of the macro and by the
// cycle count: `length` columns with done seen length+2 cycles after start), and a
// replacement in the other direction copies macro columns back into the
// weight SRAM.
module tb_weight_rw_if;
  import pscnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic start, busy, done, h_we, h_re, h_cim, h_rvalid;
  repl_cfg_t cfg;
  logic [13:0] h_addr; logic [31:0] h_wdata, h_rdata;
  logic ws_ce, ws_we, c_we, c_re; logic [8:0] ws_addr, c_pair;
  logic [1023:0] ws_wdata, ws_rdata, c_wdata, c_rdata, wl; logic [127:0] dout;
  int checks = 0, failures = 0;
  logic [1023:0] W [16];
  weight_rw_if dut (.*);
  weight_sram u_ws (.clk, .ce(ws_ce), .we(ws_we), .addr(ws_addr), .wdata(ws_wdata), .rdata(ws_rdata));
  cim_macro u_cim (.clk, .cim_en(1'b0), .wl('0), .bl_out(2'd0), .dout, .w_we(c_we), .w_re(c_re),
                   .w_pair(c_pair), .w_wdata(c_wdata), .w_rdata(c_rdata));
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic hw(bit cim, int col, int beat, logic [31:0] d);
    @(negedge clk); h_we = 1; h_cim = cim; h_addr = 14'(col * 32 + beat); h_wdata = d;
    @(negedge clk); h_we = 0;
  endtask
  task automatic hr(bit cim, int col, int beat, output logic [31:0] d);
    @(negedge clk); h_re = 1; h_cim = cim; h_addr = 14'(col * 32 + beat);
    @(negedge clk); h_re = 0; #1; d = h_rdata;
    if (!h_rvalid) failures++;
  endtask
  task automatic run(bit dir, int cim, int ws, int len, output int cyc);
    @(negedge clk); start = 1; cfg = '{direction: dir, cim_addr: 9'(cim), ws_addr: 9'(ws), length: 9'(len)};
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc; logic [31:0] d; int bad;
    start = 0; cfg = '0; h_we = 0; h_re = 0; h_cim = 0; h_addr = 0; h_wdata = 0;
    #12 rst_n = 1;
    for (int c = 0; c < 16; c++) begin
      for (int b = 0; b < 32; b++) W[c][32*b +: 32] = $urandom;
      for (int b = 0; b < 32; b++) hw(0, 100 + c, b, W[c][32*b +: 32]);
    end
    bad = 0;
    for (int b = 0; b < 32; b++) begin hr(0, 103, b, d); if (d !== W[3][32*b +: 32]) bad++; end
    checks++; if (bad) failures++;
    run(0, 40, 100, 16, cyc);       // weight SRAM 100..115 -> CIM 40..55
    checks++; if (cyc != 18) begin failures++; $display("replacement took %0d cycles", cyc); end
    bad = 0;
    for (int c = 0; c < 16; c++) for (int b = 0; b < 32; b += 5) begin
      hr(1, 40 + c, b, d); if (d !== W[c][32*b +: 32]) bad++;
    end
    checks++; if (bad) begin failures++; $display("%0d CIM beats wrong", bad); end
    run(1, 42, 200, 4, cyc);        // CIM 42..45 -> weight SRAM 200..203
    checks++; if (cyc != 6) failures++;
    bad = 0;
    for (int c = 0; c < 4; c++) for (int b = 0; b < 32; b += 3) begin
      hr(0, 200 + c, b, d); if (d !== W[2 + c][32*b +: 32]) bad++;
    end
    checks++; if (bad) failures++;
    run(0, 0, 0, 0, cyc);           // length 0: immediate done
    checks++; if (cyc > 2) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
