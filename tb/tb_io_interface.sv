// tb_io_interface: checks that each host request reaches exactly the
// addressed target with the right address bits and data, and that read data
// from each target is returned with rvalid one cycle after the request.
module tb_io_interface;
  import pscnn_pkg::*;
  logic clk = 0, rst_n = 0; always #5 clk = ~clk;
  host_req_t req; logic [31:0] rdata; logic rvalid, running;
  logic irf_we, fm_we, fm_re, fm_rvalid, w_we, w_re, w_cim, w_rvalid;
  logic [5:0] irf_addr; logic [31:0] irf_wdata, irf_rdata, fm_wdata, fm_rdata, w_wdata, w_rdata;
  logic [12:0] fm_addr; logic [13:0] w_addr;
  int checks = 0, failures = 0;
  io_interface dut (.*);
  initial begin repeat (5000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  // target models: data = address-derived pattern, one-cycle latency
  assign irf_rdata = {26'h1abcde0, irf_addr};
  always @(posedge clk) begin
    fm_rvalid <= fm_re; fm_rdata <= {19'h5555, fm_addr};
    w_rvalid  <= w_re;  w_rdata  <= {w_cim, 3'b0, 14'h0, w_addr};
  end
  initial begin
    running = 0; req = '0;
    #12 rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      host_sel_e s; logic [15:0] a; logic [31:0] d; bit wr;
      s = host_sel_e'($urandom_range(0, 3)); a = 16'($urandom); d = $urandom; wr = $urandom_range(0, 1);
      @(negedge clk); req = '{we: wr, re: !wr, sel: s, addr: a, wdata: d}; #1;
      checks++;
      if (wr) begin
        if (irf_we != (s == HS_INSTR) || fm_we != (s == HS_FM) || w_we != (s == HS_WSRAM || s == HS_CIM) ||
            fm_re || w_re) failures++;
        else if (s == HS_INSTR && (irf_addr != a[5:0] || irf_wdata != d)) failures++;
        else if (s == HS_FM && (fm_addr != a[12:0] || fm_wdata != d)) failures++;
        else if ((s == HS_WSRAM || s == HS_CIM) && (w_addr != a[13:0] || w_wdata != d || w_cim != (s == HS_CIM))) failures++;
      end
      @(negedge clk); req = '0; #1;
      if (!wr) begin
        logic [31:0] e;
        case (s)
          HS_INSTR: e = {26'h1abcde0, a[5:0]};
          HS_FM:    e = {19'h5555, a[12:0]};
          default:  e = {(s == HS_CIM), 3'b0, 14'h0, a[13:0]};
        endcase
        checks++; if (!rvalid || rdata !== e) begin failures++; $display("read sel %0d got %h exp %h", s, rdata, e); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
