// tb_tcdm_interconnect: self-checking testbench of the TCDM logarithmic
// interconnect with its 32 banks (18 masters, the cluster's configuration).
//
// Every master issues random reads and writes (random byte enables) into a
// small address window so that bank conflicts are frequent; a request is
// held until granted. A reference memory is updated in grant order. Checks:
// at most one grant per bank and cycle, grant only with a request, every
// granted access answered exactly one cycle later with the correct read
// data, no master waits more than NM cycles (round robin), and the
// parallelism the paper relies on: 18 masters hitting 18 different banks are
// all served in one cycle. Bank conflicts are counted and must occur.
module tb_tcdm_interconnect;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NM = 18, NB = 32, WORDS = 1024;

  logic     [NM-1:0]       req, gnt, rvalid;
  mem_req_t [NM-1:0]       req_d;
  logic     [NM-1:0][31:0] rdata;
  logic     [NB-1:0]       b_req, b_we;
  logic     [NB-1:0][3:0]  b_be;
  logic     [NB-1:0][9:0]  b_addr;
  logic     [NB-1:0][31:0] b_wdata, b_rdata;

  tcdm_interconnect #(.NM(NM), .NB(NB), .WORDS(WORDS)) dut (
    .clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_d_i(req_d), .gnt_o(gnt),
    .rvalid_o(rvalid), .rdata_o(rdata), .bank_req_o(b_req), .bank_we_o(b_we),
    .bank_be_o(b_be), .bank_addr_o(b_addr), .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));

  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(WORDS)) i_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]),
      .be_i(b_be[b]), .addr_i(b_addr[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end

  logic [31:0] model [NB*WORDS];
  bit          known [NB*WORDS];   // word fully written at least once
  int          window = 256;   // words
  int          load = 70;      // percent
  logic [31:0] expq [NM][$];
  bit          isrd [NM][$];
  int          waitc [NM];
  int          conflicts = 0, grants = 0, maxwait = 0;
  bit          run = 0;

  // responses first (they belong to the previous cycle's grants), then grants
  always @(posedge clk) if (rst_n) begin
    for (int m = 0; m < NM; m++) begin
      if (rvalid[m]) begin
        logic [31:0] e; bit r;
        checks++;
        if (expq[m].size() == 0) begin failures++; $display("FAIL m%0d: unexpected rvalid", m); end
        else begin
          e = expq[m].pop_front(); r = isrd[m].pop_front();
          if (r && rdata[m] !== e) begin
            failures++; $display("FAIL m%0d read: got %h expected %h", m, rdata[m], e);
          end
        end
      end
    end
    begin
      int cnt [NB];
      bit confl;
      confl = 0;
      for (int b = 0; b < NB; b++) cnt[b] = 0;
      for (int m = 0; m < NM; m++) begin
        int w;
        w = int'(req_d[m].addr[16:2]);
        if (gnt[m] && !req[m]) begin failures++; $display("FAIL m%0d: grant without request", m); end
        if (req[m] && gnt[m]) begin
          cnt[w % NB]++;
          grants++;
          if (req_d[m].we) begin
            for (int k = 0; k < 4; k++) if (req_d[m].be[k]) model[w][8*k +: 8] = req_d[m].wdata[8*k +: 8];
            if (req_d[m].be == 4'hf) known[w] = 1;
            expq[m].push_back(0); isrd[m].push_back(0);
          end else begin
            expq[m].push_back(model[w]); isrd[m].push_back(known[w]);
          end
          if (waitc[m] > maxwait) maxwait = waitc[m];
          waitc[m] = 0;
        end else if (req[m]) begin
          confl = 1;
          waitc[m]++;
          if (waitc[m] > NM) begin failures++; $display("FAIL m%0d starved", m); waitc[m] = 0; end
        end
      end
      for (int b = 0; b < NB; b++)
        if (cnt[b] > 1) begin failures++; $display("FAIL bank %0d granted %0d times", b, cnt[b]); end
      checks++;
      if (confl) conflicts++;
    end
  end

  // request generation at the falling edge
  always @(negedge clk) if (run) begin
    for (int m = 0; m < NM; m++) begin
      if (!req[m] || gnt[m]) begin
        req[m] = $urandom_range(99) < load;
        req_d[m].addr  = TCDM_BASE + 32'($urandom_range(window - 1) * 4);
        req_d[m].we    = 1'($urandom);
        req_d[m].be    = ($urandom_range(1) != 0) ? 4'hf : 4'($urandom);
        req_d[m].wdata = $urandom;
      end
    end
  end

  initial begin
    int g0;
    req = '0; req_d = '0;
    for (int i = 0; i < NB * WORDS; i++) known[i] = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run = 1;
    repeat (5000) @(negedge clk);
    window = 32; load = 100;
    repeat (2000) @(negedge clk);
    run = 0;
    @(negedge clk);
    req = '0;
    repeat (3) @(negedge clk);
    // all masters to different banks: all granted in one cycle
    for (int m = 0; m < NM; m++) begin
      req[m] = 1; req_d[m] = '{addr: TCDM_BASE + 32'((m * 5 % NB) * 4 + NB * 4 * m), we: 1'b0, be: 4'hf, wdata: 0};
    end
    g0 = grants;
    @(negedge clk);
    req = '0;
    checks++;
    if (grants - g0 != NM) begin failures++; $display("FAIL parallel: %0d grants", grants - g0); end
    repeat (3) @(negedge clk);
    checks++;
    if (conflicts == 0) begin failures++; $display("FAIL no bank conflicts seen"); end
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (expq[m].size() != 0) begin failures++; $display("FAIL m%0d missing responses", m); end
    end
    $display("grants %0d, cycles with conflicts %0d, longest wait %0d", grants, conflicts, maxwait);
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
