// tb_l2_mem: self-checking testbench of the L2 memory.
//
// Writes the whole 128 KiB memory through its request/grant port, then runs
// random reads and byte-enable writes against a reference array. Checks that
// every request is granted at once and answered exactly one cycle later with
// the correct data.
module tb_l2_mem;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int WORDS = 32768;
  logic        req, gnt, rvalid;
  mem_req_t    req_d;
  logic [31:0] rdata;
  logic [31:0] model [WORDS];

  l2_mem dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_d_i(req_d), .gnt_o(gnt),
    .rvalid_o(rvalid), .rdata_o(rdata));

  initial begin
    logic [31:0] exp_d;
    bit          pend, pend_rd;
    int          w;
    req = 0; req_d = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      req = 1; req_d = '{addr: L2_BASE + 32'(4 * i), we: 1'b1, be: 4'hf, wdata: $urandom};
      model[i] = req_d.wdata;
    end
    @(negedge clk); req = 0;
    pend = 0;
    for (int t = 0; t < 30000; t++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (!rvalid || (pend_rd && rdata !== exp_d)) begin
          failures++; $display("FAIL response: rvalid %b got %h expected %h", rvalid, rdata, exp_d);
        end
      end else begin
        checks++;
        if (rvalid) begin failures++; $display("FAIL rvalid without request"); end
      end
      req = $urandom_range(3) != 0;
      w = $urandom_range(WORDS - 1);
      req_d = '{addr: L2_BASE + 32'(4 * w), we: 1'($urandom), be: 4'($urandom), wdata: $urandom};
      #1;
      checks++;
      if (gnt != req) begin failures++; $display("FAIL grant"); end
      pend = req; pend_rd = !req_d.we;
      if (req && !req_d.we) exp_d = model[w];
      if (req && req_d.we)
        for (int b = 0; b < 4; b++) if (req_d.be[b]) model[w][8*b +: 8] = req_d.wdata[8*b +: 8];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
