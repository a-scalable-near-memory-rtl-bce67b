// ntx_pim_top: the NTX processing system embedded in the logic base of a
// Hybrid Memory Cube.
//
// NUM_CLUSTERS processing clusters (default 64, the paper's "NTX 64 (big)"
// configuration: one RISC-V core and 8 NTX per cluster, 512 NTX in all), a
// shared 128 KiB L2 and the SoC interconnect that joins the clusters' ports
// with the L2 and with NUM_MPORTS master ports into the HMC's main logic-base
// interconnect. Through those ports the clusters' DMA engines reach the cube's
// DRAM vaults and serial links, which are existing HMC parts and not part of
// this RTL; so are the RISC-V cores, whose data ports and the NTX interrupts
// are ports of this module (index c = cluster c).
// Timing: a single clock for everything (the paper runs NTX at 1.5 GHz and
// the rest at 750 MHz).
//
// Tool notes: the reset is asynchronous in all flip-flops; it also appears in
// the `disable iff` of the bus assertions, which a linter reports as a
// synchronous use of the same net. The combinational-loop warning reported
// for the clusters' request/grant vectors is a false path: grants depend on
// requests, but no request depends on a grant of the same vector element.
module ntx_pim_top
  import ntx_pkg::*;
#(
  parameter int unsigned NUM_CLUSTERS = 64,
  parameter int unsigned NUM_NTX      = 8,
  parameter int unsigned NUM_MPORTS   = 8,
  parameter int unsigned L2_WORDS     = 32768
) (
  input  logic                                  clk_i,
  input  logic                                  rst_ni,
  // RISC-V core data ports, one per cluster
  input  logic     [NUM_CLUSTERS-1:0]           core_req_i,
  input  mem_req_t [NUM_CLUSTERS-1:0]           core_req_d_i,
  output logic     [NUM_CLUSTERS-1:0]           core_gnt_o,
  output logic     [NUM_CLUSTERS-1:0]           core_rvalid_o,
  output logic     [NUM_CLUSTERS-1:0][31:0]     core_rdata_o,
  output logic     [NUM_CLUSTERS-1:0][NUM_NTX-1:0] ntx_irq_o,
  output logic     [NUM_CLUSTERS-1:0][NUM_NTX-1:0] ntx_busy_o,
  output logic     [NUM_CLUSTERS-1:0]           dma_busy_o,
  // master ports into the main logic-base interconnect
  output logic     [NUM_MPORTS-1:0]             mp_req_o,
  output mem_req_t [NUM_MPORTS-1:0]             mp_req_d_o,
  input  logic     [NUM_MPORTS-1:0]             mp_gnt_i,
  input  logic     [NUM_MPORTS-1:0]             mp_rvalid_i,
  input  logic     [NUM_MPORTS-1:0][31:0]       mp_rdata_i
);

  logic     [NUM_CLUSTERS-1:0]       c_req, c_gnt, c_rvalid;
  mem_req_t [NUM_CLUSTERS-1:0]       c_req_d;
  logic     [NUM_CLUSTERS-1:0][31:0] c_rdata;

  for (genvar c = 0; c < NUM_CLUSTERS; c++) begin : g_cl
    ntx_cluster #(.NUM_NTX(NUM_NTX)) i_cluster (
      .clk_i, .rst_ni,
      .core_req_i    (core_req_i[c]),
      .core_req_d_i  (core_req_d_i[c]),
      .core_gnt_o    (core_gnt_o[c]),
      .core_rvalid_o (core_rvalid_o[c]),
      .core_rdata_o  (core_rdata_o[c]),
      .ntx_irq_o     (ntx_irq_o[c]),
      .ntx_busy_o    (ntx_busy_o[c]),
      .dma_busy_o    (dma_busy_o[c]),
      .ext_req_o     (c_req[c]),
      .ext_req_d_o   (c_req_d[c]),
      .ext_gnt_i     (c_gnt[c]),
      .ext_rvalid_i  (c_rvalid[c]),
      .ext_rdata_i   (c_rdata[c])
    );
  end

  logic        l2_req, l2_gnt, l2_rvalid;
  mem_req_t    l2_req_d;
  logic [31:0] l2_rdata;

  soc_interconnect #(.NM(NUM_CLUSTERS), .NP(NUM_MPORTS)) i_soc_ic (
    .clk_i, .rst_ni,
    .req_i (c_req), .req_d_i (c_req_d), .gnt_o (c_gnt), .rvalid_o (c_rvalid), .rdata_o (c_rdata),
    .l2_req_o (l2_req), .l2_req_d_o (l2_req_d), .l2_gnt_i (l2_gnt), .l2_rvalid_i (l2_rvalid),
    .l2_rdata_i (l2_rdata),
    .mp_req_o, .mp_req_d_o, .mp_gnt_i, .mp_rvalid_i, .mp_rdata_i
  );

  l2_mem #(.WORDS(L2_WORDS)) i_l2 (
    .clk_i, .rst_ni,
    .req_i (l2_req), .req_d_i (l2_req_d), .gnt_o (l2_gnt), .rvalid_o (l2_rvalid), .rdata_o (l2_rdata)
  );

endmodule
