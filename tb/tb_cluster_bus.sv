// tb_cluster_bus: self-checking testbench of the cluster bus.
//
// All slaves are behavioural memories: the TCDM port and the eight NTX
// register ports answer one cycle after the grant with random grant stalls,
// the DMA register port answers after one cycle, and the SoC port has a
// random latency of 1..10 cycles. A core driver issues random pipelined
// reads and writes (up to several outstanding) to the TCDM, to single NTX,
// to the NTX broadcast address, to the DMA and to the outside; at the same
// time a DMA driver uses the DMA external port. Checks: every read returns
// the reference value, responses come back in order, a broadcast write
// reaches all eight NTX and gets exactly one response, and the core and the
// DMA both get through the shared SoC port (arbitration conflicts counted).
module tb_cluster_bus;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int NN = 8;
  localparam logic [31:0] EXT_A = 32'h8000_0000;

  logic        c_req, c_gnt, c_rvalid;
  mem_req_t    c_req_d;
  logic [31:0] c_rdata;
  logic        t_req, t_gnt, t_rvalid;
  mem_req_t    t_req_d;
  logic [31:0] t_rdata;
  logic [NN-1:0] n_req, n_gnt, n_rvalid;
  mem_req_t    n_req_d;
  logic [NN-1:0][31:0] n_rdata;
  logic        d_req, d_gnt, d_rvalid;
  logic [31:0] d_rdata;
  logic        de_req, de_gnt, de_rvalid;
  mem_req_t    de_req_d;
  logic [31:0] de_rdata;
  logic        e_req, e_gnt, e_rvalid;
  mem_req_t    e_req_d;
  logic [31:0] e_rdata;

  cluster_bus #(.NUM_NTX(NN)) dut (.clk_i(clk), .rst_ni(rst_n),
    .core_req_i(c_req), .core_req_d_i(c_req_d), .core_gnt_o(c_gnt), .core_rvalid_o(c_rvalid),
    .core_rdata_o(c_rdata),
    .tcdm_req_o(t_req), .tcdm_req_d_o(t_req_d), .tcdm_gnt_i(t_gnt), .tcdm_rvalid_i(t_rvalid),
    .tcdm_rdata_i(t_rdata),
    .ntx_req_o(n_req), .ntx_req_d_o(n_req_d), .ntx_gnt_i(n_gnt), .ntx_rvalid_i(n_rvalid),
    .ntx_rdata_i(n_rdata),
    .dma_cfg_req_o(d_req), .dma_cfg_gnt_i(d_gnt), .dma_cfg_rvalid_i(d_rvalid), .dma_cfg_rdata_i(d_rdata),
    .dma_ext_req_i(de_req), .dma_ext_req_d_i(de_req_d), .dma_ext_gnt_o(de_gnt),
    .dma_ext_rvalid_o(de_rvalid), .dma_ext_rdata_o(de_rdata),
    .ext_req_o(e_req), .ext_req_d_o(e_req_d), .ext_gnt_i(e_gnt), .ext_rvalid_i(e_rvalid),
    .ext_rdata_i(e_rdata));

  tb_mem_model #(.WORDS(64), .STALL_PCT(20)) tcdm_m (.clk_i(clk), .req_i(t_req), .req_d_i(t_req_d),
    .gnt_o(t_gnt), .rvalid_o(t_rvalid), .rdata_o(t_rdata));
  for (genvar i = 0; i < NN; i++) begin : g_ntx
    tb_mem_model #(.WORDS(64), .STALL_PCT(20)) m (.clk_i(clk), .req_i(n_req[i]), .req_d_i(n_req_d),
      .gnt_o(n_gnt[i]), .rvalid_o(n_rvalid[i]), .rdata_o(n_rdata[i]));
    initial for (int w = 0; w < 64; w++) m.mem[w] = 0;
  end
  tb_mem_model #(.WORDS(8)) dma_m (.clk_i(clk), .req_i(d_req), .req_d_i(n_req_d),
    .gnt_o(d_gnt), .rvalid_o(d_rvalid), .rdata_o(d_rdata));
  tb_mem_model #(.WORDS(512), .MIN_LAT(1), .MAX_LAT(10), .STALL_PCT(20)) ext_m (.clk_i(clk),
    .req_i(e_req), .req_d_i(e_req_d), .gnt_o(e_gnt), .rvalid_o(e_rvalid), .rdata_o(e_rdata));

  // reference contents (updated at grant time)
  logic [31:0] r_tcdm [64], r_ntx [NN][64], r_dma [8], r_ext [512];
  logic [31:0] cexp [$]; bit crd [$];
  logic [31:0] dexp [$]; bit drd [$];
  int          bcasts = 0, ext_conflicts = 0, core_ext = 0, ncore = 0, ndma = 0;

  function automatic logic [31:0] merge(logic [31:0] o, mem_req_t r);
    for (int b = 0; b < 4; b++) if (r.be[b]) o[8*b +: 8] = r.wdata[8*b +: 8];
    return o;
  endfunction

  bit c_took, d_took;   // the current request was granted at the last edge
  always @(posedge clk) begin
    c_took = c_req && c_gnt;
    d_took = de_req && de_gnt;
  end

  always @(posedge clk) if (rst_n) begin
    // responses
    if (c_rvalid) begin
      checks++;
      if (cexp.size() == 0) begin failures++; $display("FAIL core: unexpected response"); end
      else begin
        logic [31:0] e; bit r;
        e = cexp.pop_front(); r = crd.pop_front();
        if (r && c_rdata !== e) begin failures++; $display("FAIL core read: got %h expected %h", c_rdata, e); end
      end
    end
    if (de_rvalid) begin
      checks++;
      if (dexp.size() == 0) begin failures++; $display("FAIL dma: unexpected response"); end
      else begin
        logic [31:0] e; bit r;
        e = dexp.pop_front(); r = drd.pop_front();
        if (r && de_rdata !== e) begin failures++; $display("FAIL dma read: got %h expected %h", de_rdata, e); end
      end
    end
    if (dut.core_ext_req && de_req) ext_conflicts++;
    // grants
    if (c_req && c_gnt) begin
      logic [31:0] a, o;
      int w;
      a = c_req_d.addr; w = int'(a[7:2]);
      ncore++;
      if (a >= TCDM_BASE && a < TCDM_BASE + 32'h100) begin
        o = r_tcdm[w]; if (c_req_d.we) r_tcdm[w] = merge(o, c_req_d);
      end else if (a >= PERIPH_BASE && a < PERIPH_BASE + NN * 256) begin
        o = r_ntx[a[10:8]][w]; if (c_req_d.we) r_ntx[a[10:8]][w] = merge(o, c_req_d);
      end else if (a[31:8] == NTX_BCAST[31:8]) begin
        o = 0; bcasts++;
        for (int i = 0; i < NN; i++) r_ntx[i][w] = merge(r_ntx[i][w], c_req_d);
      end else if (a[31:8] == DMA_BASE[31:8]) begin
        o = r_dma[w % 8]; if (c_req_d.we) r_dma[w % 8] = merge(o, c_req_d);
      end else begin
        w = int'(a[10:2]); core_ext++;
        o = r_ext[w]; if (c_req_d.we) r_ext[w] = merge(o, c_req_d);
      end
      cexp.push_back(o); crd.push_back(!c_req_d.we);
    end
    if (de_req && de_gnt) begin
      int w;
      w = int'(de_req_d.addr[10:2]);
      ndma++;
      dexp.push_back(r_ext[w]); drd.push_back(!de_req_d.we);
      if (de_req_d.we) r_ext[w] = merge(r_ext[w], de_req_d);
    end
  end

  // core driver: a new random request as soon as the previous one is granted
  bit run = 0;
  always @(negedge clk) begin
    if (run && (!c_req || c_took)) begin
      int k, w;
      logic [31:0] a;
      k = $urandom_range(5); w = $urandom_range(63);
      unique case (k)
        0:       a = TCDM_BASE + 32'(w * 4);
        1, 2:    a = PERIPH_BASE + 32'($urandom_range(NN - 1) * 256 + w * 4);
        3:       a = NTX_BCAST + 32'(w * 4);
        4:       a = DMA_BASE + 32'((w % 8) * 4);
        default: a = EXT_A + 32'($urandom_range(255) * 4);
      endcase
      c_req   = $urandom_range(3) != 0;
      c_req_d = '{addr: a, we: (k == 3) ? 1'b1 : 1'($urandom), be: ($urandom_range(1) ? 4'hf : 4'($urandom)),
                  wdata: $urandom};
    end else if (!run && c_took) c_req = 0;
    if (run && (!de_req || d_took)) begin
      de_req   = $urandom_range(2) != 0;
      de_req_d = '{addr: EXT_A + 32'($urandom_range(256, 511) * 4), we: 1'($urandom), be: 4'hf, wdata: $urandom};
    end else if (!run && d_took) de_req = 0;
  end

  initial begin
    c_req = 0; c_req_d = '0; de_req = 0; de_req_d = '0;
    for (int i = 0; i < 64; i++) begin
      r_tcdm[i] = $urandom; tcdm_m.mem[i] = r_tcdm[i];
      for (int n = 0; n < NN; n++) r_ntx[n][i] = 0;
    end
    for (int i = 0; i < 8; i++) begin r_dma[i] = $urandom; dma_m.mem[i] = r_dma[i]; end
    for (int i = 0; i < 512; i++) begin r_ext[i] = $urandom; ext_m.mem[i] = r_ext[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    run = 1;
    repeat (20000) @(negedge clk);
    run = 0;
    repeat (50) @(negedge clk);
    c_req = 0; de_req = 0;
    repeat (50) @(negedge clk);
    checks++;
    if (cexp.size() || dexp.size()) begin failures++; $display("FAIL missing responses"); end
    // broadcast writes must have reached every NTX
    for (int i = 0; i < 64; i++) begin
      checks++;
      if (g_ntx[0].m.mem[i] !== r_ntx[0][i] || g_ntx[NN-1].m.mem[i] !== r_ntx[NN-1][i]) begin
        failures++; $display("FAIL NTX register word %0d", i);
      end
    end
    checks++;
    if (bcasts == 0 || core_ext == 0 || ndma == 0 || ext_conflicts == 0) begin
      failures++; $display("FAIL coverage: bcasts %0d core_ext %0d dma %0d conflicts %0d", bcasts, core_ext, ndma, ext_conflicts);
    end
    $display("core accesses %0d, broadcasts %0d, core ext %0d, dma ext %0d, ext conflicts %0d",
             ncore, bcasts, core_ext, ndma, ext_conflicts);
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
