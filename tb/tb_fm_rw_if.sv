// tb_fm_rw_if: loads the four banks through the host port across bank
// boundaries, reads them back through the core read port, and checks the
// ping-pong behaviour: a read and a write in different banks proceed in the
// same cycle, a read that hits the bank being written is refused (stall) and
// succeeds when retried, and only the accessed banks are enabled.
module tb_fm_rw_if;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  logic rd_req, rd_gnt, rd_valid, wr_req, h_we, h_re, h_rvalid, conflict;
  logic [12:0] rd_addr, wr_addr, h_addr; logic [31:0] rd_data, wr_data, h_wdata;
  logic [3:0] bank_active;
  int checks = 0, failures = 0;
  logic [31:0] model [8192];
  fm_rw_if dut (.*);
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    rd_req = 0; wr_req = 0; h_we = 0; h_re = 0; rd_addr = 0; wr_addr = 0; h_addr = 0; wr_data = 0; h_wdata = 0;
    #12 rst_n = 1;
    // host writes around every bank boundary
    for (int b = 0; b < 4; b++) for (int i = -8; i < 8; i++) begin
      int a; a = (b * 2048 + i) & 8191;
      @(negedge clk); h_we = 1; h_addr = 13'(a); h_wdata = $urandom; model[a] = h_wdata;
      #1; checks++; if (bank_active != (4'b1 << (a / 2048))) failures++;
    end
    @(negedge clk); h_we = 0;
    // core reads back
    for (int b = 0; b < 4; b++) for (int i = -8; i < 8; i++) begin
      int a; a = (b * 2048 + i) & 8191;
      @(negedge clk); rd_req = 1; rd_addr = 13'(a); #1;
      checks++; if (!rd_gnt) failures++;
      @(negedge clk); rd_req = 0; #1;
      checks++; if (!rd_valid || rd_data !== model[a]) begin failures++; $display("read %0d", a); end
    end
    // simultaneous read bank 0 and write bank 2: both go, two banks active
    @(negedge clk); rd_req = 1; rd_addr = 13'd3; wr_req = 1; wr_addr = 13'd4100; wr_data = 32'hcafe0001; #1;
    checks++; if (!rd_gnt || conflict || bank_active != 4'b0101) failures++;
    @(negedge clk); rd_req = 0; wr_req = 0; #1;
    checks++; if (!rd_valid || rd_data !== model[3]) failures++;
    model[4100] = 32'hcafe0001;
    // read and write in the same bank: read refused, write done
    @(negedge clk); rd_req = 1; rd_addr = 13'd2050; wr_req = 1; wr_addr = 13'd2051; wr_data = 32'hcafe0002; #1;
    checks++; if (rd_gnt || !conflict) failures++;
    model[2051] = 32'hcafe0002;
    @(negedge clk); wr_req = 0; #1;  // retry alone
    checks++; if (!rd_gnt || rd_valid) failures++;
    @(negedge clk); rd_req = 1; rd_addr = 13'd2051; #1;
    checks++; if (!rd_valid || rd_data !== model[2050]) failures++;
    @(negedge clk); rd_req = 0; #1;
    checks++; if (!rd_valid || rd_data !== model[2051]) failures++;
    @(negedge clk); h_re = 1; h_addr = 13'd4100;
    @(negedge clk); h_re = 0; #1;
    checks++; if (!h_rvalid || rd_valid || rd_data !== 32'hcafe0001) failures++;
    @(negedge clk); #1;
    checks++; if (bank_active != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
