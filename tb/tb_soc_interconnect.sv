// tb_soc_interconnect: self-checking testbench of the SoC interconnect at its
// full size (64 cluster ports, 8 master ports into the logic-base
// interconnect, one L2 port).
//
// Every cluster port issues random reads and writes, each to its own address
// region, either in the L2 or in the HMC space (interleaved over the master
// ports at 32-byte granularity). The L2 is a single-cycle memory; the master
// ports are memories with random latency (1..20 cycles) and random grant
// stalls. Checks: read data against a reference, one in-order response per
// granted request for every cluster port, correct routing (the address that
// reaches a master port belongs to it), that every target is used and that
// requests to different master ports are served in parallel (8 grants in
// one cycle).
module tb_soc_interconnect;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NM = 64, NP = 8;
  localparam logic [31:0] EXT_A = 32'h8000_0000;

  logic     [NM-1:0]       req, gnt, rvalid;
  mem_req_t [NM-1:0]       req_d;
  logic     [NM-1:0][31:0] rdata;
  logic                    l_req, l_gnt, l_rvalid;
  mem_req_t                l_req_d;
  logic     [31:0]         l_rdata;
  logic     [NP-1:0]       p_req, p_gnt, p_rvalid;
  mem_req_t [NP-1:0]       p_req_d;
  logic     [NP-1:0][31:0] p_rdata;

  soc_interconnect #(.NM(NM), .NP(NP)) dut (.clk_i(clk), .rst_ni(rst_n),
    .req_i(req), .req_d_i(req_d), .gnt_o(gnt), .rvalid_o(rvalid), .rdata_o(rdata),
    .l2_req_o(l_req), .l2_req_d_o(l_req_d), .l2_gnt_i(l_gnt), .l2_rvalid_i(l_rvalid),
    .l2_rdata_i(l_rdata),
    .mp_req_o(p_req), .mp_req_d_o(p_req_d), .mp_gnt_i(p_gnt), .mp_rvalid_i(p_rvalid),
    .mp_rdata_i(p_rdata));

  tb_mem_model #(.WORDS(32768)) l2_m (.clk_i(clk), .req_i(l_req), .req_d_i(l_req_d),
    .gnt_o(l_gnt), .rvalid_o(l_rvalid), .rdata_o(l_rdata));
  for (genvar p = 0; p < NP; p++) begin : g_mp
    tb_mem_model #(.WORDS(16384), .MIN_LAT(1), .MAX_LAT(20), .STALL_PCT(10)) m (.clk_i(clk),
      .req_i(p_req[p]), .req_d_i(p_req_d[p]), .gnt_o(p_gnt[p]), .rvalid_o(p_rvalid[p]),
      .rdata_o(p_rdata[p]));
    initial for (int w = 0; w < 16384; w++) m.mem[w] = 0;
  end
  initial for (int w = 0; w < 32768; w++) l2_m.mem[w] = 0;

  logic [31:0] refm [logic [31:0]];
  logic [31:0] expq [NM][$];
  bit          isrd [NM][$];
  bit          took [NM];
  int          port_use [NP+1];
  int          max_par = 0;
  bit          run = 0;
  int          l2_pct = 30;

  always @(posedge clk) for (int m = 0; m < NM; m++) took[m] = req[m] && gnt[m];

  always @(posedge clk) if (rst_n) begin
    int par;
    for (int m = 0; m < NM; m++) if (rvalid[m]) begin
      checks++;
      if (expq[m].size() == 0) begin failures++; $display("FAIL m%0d unexpected response", m); end
      else begin
        logic [31:0] e; bit r;
        e = expq[m].pop_front(); r = isrd[m].pop_front();
        if (r && rdata[m] !== e) begin failures++; $display("FAIL m%0d read %h expected %h", m, rdata[m], e); end
      end
    end
    for (int m = 0; m < NM; m++) if (req[m] && gnt[m]) begin
      logic [31:0] a, o;
      a = req_d[m].addr;
      o = refm.exists(a) ? refm[a] : 32'd0;
      expq[m].push_back(o); isrd[m].push_back(!req_d[m].we);
      if (req_d[m].we) refm[a] = req_d[m].wdata;
    end
    par = 0;
    for (int p = 0; p < NP; p++) if (p_req[p] && p_gnt[p]) begin
      par++; port_use[p]++;
      checks++;
      if (int'(p_req_d[p].addr[7:5]) != p || p_req_d[p].addr < EXT_A) begin
        failures++; $display("FAIL port %0d got address %h", p, p_req_d[p].addr);
      end
    end
    if (l_req && l_gnt) port_use[NP]++;
    if (par > max_par) max_par = par;
  end

  always @(negedge clk) begin
    for (int m = 0; m < NM; m++) begin
      if (run && (!req[m] || took[m])) begin
        logic [31:0] a;
        int w;
        w = $urandom_range(63);
        if ($urandom_range(99) < l2_pct) a = L2_BASE + 32'(m * 256 + w * 4);
        else                             a = EXT_A + 32'((m << 10) + ((w % 4) << 8) + ($urandom_range(7) << 5) + ((w / 8) << 2));
        req[m]   = $urandom_range(2) != 0;
        req_d[m] = '{addr: a, we: 1'($urandom), be: 4'hf, wdata: $urandom};
      end else if (!run && took[m]) req[m] = 0;
    end
  end

  initial begin
    req = '0; req_d = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run = 1;
    repeat (6000) @(negedge clk);
    l2_pct = 0;
    repeat (2000) @(negedge clk);
    run = 0;
    repeat (400) @(negedge clk);
    req = '0;
    repeat (100) @(negedge clk);
    for (int m = 0; m < NM; m++) begin
      checks++;
      if (expq[m].size() != 0) begin failures++; $display("FAIL m%0d: %0d responses missing", m, expq[m].size()); end
    end
    for (int p = 0; p <= NP; p++) begin
      checks++;
      if (port_use[p] == 0) begin failures++; $display("FAIL target %0d never used", p); end
    end
    checks++;
    if (max_par != NP) begin failures++; $display("FAIL at most %0d master ports active in one cycle", max_par); end
    $display("L2 accesses %0d, master port 0 accesses %0d, max parallel %0d", port_use[NP], port_use[0], max_par);
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
