// tb_ntx_pim_top_full: end-to-end testbench of the processing system at its
// full size, with no parameter changed: 64 clusters, 512 NTX, 8 master ports.
//
// Same environment and checks as tb_ntx_pim_top, but to keep the run short
// the convolution job runs on four clusters spread over the array
// (0, 21, 42 and 63) while the other 60 stay idle; the L2 exchange uses the
// same four cores.
//
// The testbench plays the RISC-V core of every cluster (tb_core_tasks.svh)
// and the HMC: each of the 8 master ports into the logic-base interconnect
// leads to a memory with random latency (1..20 cycles) and grant stalls,
// standing in for the vaults. The active clusters run the convolution job of
// tb_cluster_job.svh at the same time (input and filter data written into
// the HMC space, 2D DMA in with a queued second transfer, NTX set-up with
// broadcast writes, broadcast launch, IRQs, DMA out, results read back from
// the HMC space and checked), and then exchange words through the shared
// L2. Every mechanism is counted and must have happened at least once:
// broadcast writes, queued DMA transfers, NTX interrupts, TCDM bank
// conflicts, grant stalls in the SoC interconnect, L2 accesses, all master
// ports used, and all NTX of the active clusters busy at the same time. The
// NTX phase must stay within 1.5x of one MAC per cycle per NTX.
module tb_ntx_pim_top_full;
  import ntx_pkg::*;
  import tb_fp_pkg::*;

  localparam int NC = 64, NP = 8;
  localparam int NA = 4;                         // active clusters
  localparam int ACT [NA] = '{0, 21, 42, 63};

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_bcast = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic     [NC-1:0]       c_req, c_gnt, c_rvalid, dma_busy;
  mem_req_t [NC-1:0]       c_req_d;
  logic     [NC-1:0][31:0] c_rdata;
  logic     [NC-1:0][7:0]  n_irq, n_busy;
  logic     [NP-1:0]       p_req, p_gnt, p_rvalid;
  mem_req_t [NP-1:0]       p_req_d;
  logic     [NP-1:0][31:0] p_rdata;

  ntx_pim_top dut (.clk_i(clk), .rst_ni(rst_n),
    .core_req_i(c_req), .core_req_d_i(c_req_d), .core_gnt_o(c_gnt), .core_rvalid_o(c_rvalid),
    .core_rdata_o(c_rdata), .ntx_irq_o(n_irq), .ntx_busy_o(n_busy), .dma_busy_o(dma_busy),
    .mp_req_o(p_req), .mp_req_d_o(p_req_d), .mp_gnt_i(p_gnt), .mp_rvalid_i(p_rvalid),
    .mp_rdata_i(p_rdata));

  for (genvar p = 0; p < NP; p++) begin : g_hmc
    tb_mem_model #(.WORDS(65536), .MIN_LAT(1), .MAX_LAT(20), .STALL_PCT(10)) m (.clk_i(clk),
      .req_i(p_req[p]), .req_d_i(p_req_d[p]), .gnt_o(p_gnt[p]), .rvalid_o(p_rvalid[p]),
      .rdata_o(p_rdata[p]));
  end

  `include "tb_core_tasks.svh"
  `include "tb_cluster_job.svh"

  int conflicts = 0, soc_stalls = 0, max_busy = 0, l2_acc = 0, irqs = 0;
  int port_use [NP];
  logic [NC-1:0][7:0] irq_q;
  always @(posedge clk) begin
    int nb;
    if (|(dut.g_cl[0].i_cluster.i_ic.req_i & ~dut.g_cl[0].i_cluster.i_ic.gnt_o)) conflicts++;
    if (|(dut.i_soc_ic.req_i & ~dut.i_soc_ic.gnt_o)) soc_stalls++;
    if (dut.i_soc_ic.l2_req_o && dut.i_soc_ic.l2_gnt_i) l2_acc++;
    for (int p = 0; p < NP; p++) if (p_req[p] && p_gnt[p]) port_use[p]++;
    nb = $countones(n_busy);
    if (nb > max_busy) max_busy = nb;
    irqs += $countones(n_irq & ~irq_q);
    irq_q <= n_irq;
  end

  int ncyc [NC], mq [NC], mq_max;

  initial begin
    logic [31:0] v;
    c_req = '0; c_req_d = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int c = 0; c < NA; c++) begin
      fork
        automatic int ci = ACT[c];
        run_job(ci, 32'h8000_0000 + 32'(ci * 32'h4000), ncyc[ci], mq[ci]);
      join_none
    end
    wait fork;
    for (int a = 0; a < NA; a++) begin
      $display("cluster %0d: 8 NTX x %0d MACs in %0d cycles", ACT[a], JK * JJ, ncyc[ACT[a]]);
      checks++;
      if (ncyc[ACT[a]] > JK * JJ * 3 / 2) begin failures++; $display("FAIL cluster %0d NTX rate", ACT[a]); end
    end
    // L2: every active core writes its word, then reads its neighbour's
    for (int a = 0; a < NA; a++) cwr(ACT[a], L2_BASE + 32'(4 * a), 32'hC0DE_0000 + 32'(a));
    for (int a = 0; a < NA; a++) begin
      crd(ACT[a], L2_BASE + 32'(4 * ((a + 1) % NA)), v);
      checks++;
      if (v !== 32'hC0DE_0000 + 32'((a + 1) % NA)) begin failures++; $display("FAIL L2 word %0d: %h", a, v); end
    end
    mq_max = 0;
    for (int a = 0; a < NA; a++) if (mq[ACT[a]] > mq_max) mq_max = mq[ACT[a]];
    checks++;
    if (n_bcast == 0 || conflicts == 0 || soc_stalls == 0 || l2_acc == 0 || max_busy != 8 * NA ||
        irqs < 8 * NA || mq_max < 1) begin
      failures++;
      $display("FAIL coverage");
    end
    for (int p = 0; p < NP; p++) begin
      checks++;
      if (port_use[p] == 0) begin failures++; $display("FAIL master port %0d unused", p); end
    end
    $display("broadcasts %0d, IRQs %0d, bank-conflict cycles %0d, SoC stall cycles %0d, L2 accesses %0d, max NTX busy %0d",
             n_bcast, irqs, conflicts, soc_stalls, l2_acc, max_busy);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #3_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
