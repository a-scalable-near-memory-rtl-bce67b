// tb_ntx_cluster: self-checking testbench of one processing cluster (8 NTX,
// 128 KiB TCDM in 32 banks, logarithmic interconnect, DMA, cluster bus).
//
// The testbench plays the cluster's RISC-V core (tb_core_tasks.svh) and puts
// a memory with random latency (1..10 cycles) and grant stalls on the
// cluster's SoC port in place of the HMC. It runs the convolution job of
// tb_cluster_job.svh twice and checks, besides all results: broadcast writes
// were used, the DMA command queue held more than one transfer, all eight
// NTX were busy at the same time, TCDM bank conflicts occurred, and the
// eight NTX finished 8 x 288 MACs within 1.5x the ideal one MAC per cycle
// per NTX (the paper's banking factor keeps conflicts rare).
module tb_ntx_cluster;
  import ntx_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0, n_bcast = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  localparam int NC = 1;
  logic [0:0]       c_req, c_gnt, c_rvalid;
  mem_req_t [0:0]   c_req_d;
  logic [0:0][31:0] c_rdata;
  logic [0:0][7:0]  n_irq, n_busy;
  logic             dma_busy;
  logic             e_req, e_gnt, e_rvalid;
  mem_req_t         e_req_d;
  logic [31:0]      e_rdata;

  ntx_cluster dut (.clk_i(clk), .rst_ni(rst_n),
    .core_req_i(c_req[0]), .core_req_d_i(c_req_d[0]), .core_gnt_o(c_gnt[0]),
    .core_rvalid_o(c_rvalid[0]), .core_rdata_o(c_rdata[0]),
    .ntx_irq_o(n_irq[0]), .ntx_busy_o(n_busy[0]), .dma_busy_o(dma_busy),
    .ext_req_o(e_req), .ext_req_d_o(e_req_d), .ext_gnt_i(e_gnt), .ext_rvalid_i(e_rvalid),
    .ext_rdata_i(e_rdata));

  tb_mem_model #(.WORDS(8192), .MIN_LAT(1), .MAX_LAT(10), .STALL_PCT(15)) ext_m (.clk_i(clk),
    .req_i(e_req), .req_d_i(e_req_d), .gnt_o(e_gnt), .rvalid_o(e_rvalid), .rdata_o(e_rdata));

  `include "tb_core_tasks.svh"
  `include "tb_cluster_job.svh"

  int conflicts = 0, max_busy = 0;
  always @(posedge clk) begin
    int nb;
    if (|(dut.i_ic.req_i & ~dut.i_ic.gnt_o)) conflicts++;
    nb = $countones(n_busy[0]);
    if (nb > max_busy) max_busy = nb;
  end

  initial begin
    int nc, mq;
    c_req = '0; c_req_d = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 2; r++) begin
      run_job(0, 32'h8000_0000 + 32'(r * 32'h4000), nc, mq);
      $display("cluster job %0d: 8 NTX x %0d MACs in %0d cycles, DMA queue max %0d", r, JK * JJ, nc, mq);
      checks++;
      if (nc > (JK * JJ) * 3 / 2) begin failures++; $display("FAIL NTX rate: %0d cycles", nc); end
      checks++;
      if (mq < 1) begin failures++; $display("FAIL DMA queue never held a waiting transfer"); end
    end
    checks++;
    if (n_bcast == 0 || max_busy != 8 || conflicts == 0) begin
      failures++; $display("FAIL coverage: broadcasts %0d, max busy %0d, conflicts %0d", n_bcast, max_busy, conflicts);
    end
    $display("broadcasts %0d, max NTX busy %0d, cycles with bank conflicts %0d", n_bcast, max_busy, conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #20_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
