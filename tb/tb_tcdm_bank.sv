// tb_tcdm_bank: self-checking testbench of one TCDM bank.
//
// Random reads and writes with random byte enables over the whole bank are
// compared with a reference array. Checks the single-cycle access the paper
// states (read data valid in the cycle after the request) and that the read
// data holds while the bank is idle.
module tb_tcdm_bank;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int WORDS = 1024;
  logic        req, we;
  logic [3:0]  be;
  logic [9:0]  addr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [WORDS];

  tcdm_bank #(.WORDS(WORDS)) dut (.clk_i(clk), .req_i(req), .we_i(we), .be_i(be),
    .addr_i(addr), .wdata_i(wdata), .rdata_o(rdata));

  initial begin
    logic [31:0] exp_d;
    bit          pend;
    req = 0; we = 0; be = 0; addr = 0; wdata = 0;
    // initialise every word
    for (int i = 0; i < WORDS; i++) begin
      @(negedge clk);
      req = 1; we = 1; be = 4'hf; addr = 10'(i); wdata = $urandom; model[i] = wdata;
    end
    pend = 0;
    for (int t = 0; t < 20000; t++) begin
      @(negedge clk);
      if (pend) begin
        checks++;
        if (rdata !== exp_d) begin
          failures++; $display("FAIL read: got %h expected %h", rdata, exp_d);
        end
      end
      req = $urandom_range(3) != 0; we = 1'($urandom); be = 4'($urandom);
      addr = 10'($urandom); wdata = $urandom;
      pend = req && !we;
      if (pend) exp_d = model[addr];
      if (req && we) for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
    end
    // hold check
    @(negedge clk); req = 1; we = 0; addr = 10'd5; exp_d = model[5];
    @(negedge clk); req = 0;
    repeat (3) begin
      @(negedge clk);
      checks++;
      if (rdata !== exp_d) begin failures++; $display("FAIL hold: got %h expected %h", rdata, exp_d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
