// ntx_cluster: one processing cluster.
//
// Contents: NUM_NTX NTX co-processors (default 8, the paper's 1:8 core to
// NTX ratio), a TCDM of NB banks x BANK_WORDS words (default 32 x 1024 words
// = 128 KiB), the logarithmic interconnect joining the TCDM with its
// 2*NUM_NTX + 2 master ports (two per NTX, one for the core, one for the
// DMA), the DMA engine and the cluster bus. The RISC-V control core itself is
// not part of this RTL: its data port is the `core_*` slave port, and the NTX
// interrupts are brought out for it. Everything outside the cluster (L2,
// HMC memory) is reached through the `ext_*` master port.
//
// Interconnect master order: 0 = core, 1 = DMA, 2+2i+p = port p of NTX i.
//
// Tool note: the combinational loop reported through the request/grant
// vectors (NTX register requests, SoC port request) is false at bit level:
// every grant depends on requests, never the reverse for the same element;
// the vectors are only analysed as whole signals.
module ntx_cluster
  import ntx_pkg::*;
#(
  parameter int unsigned NUM_NTX    = 8,
  parameter int unsigned NB         = 32,
  parameter int unsigned BANK_WORDS = 1024
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  // RISC-V core data port
  input  logic                 core_req_i,
  input  mem_req_t             core_req_d_i,
  output logic                 core_gnt_o,
  output logic                 core_rvalid_o,
  output logic [31:0]          core_rdata_o,
  output logic [NUM_NTX-1:0]   ntx_irq_o,
  output logic [NUM_NTX-1:0]   ntx_busy_o,
  output logic                 dma_busy_o,
  // port into the SoC interconnect
  output logic                 ext_req_o,
  output mem_req_t             ext_req_d_o,
  input  logic                 ext_gnt_i,
  input  logic                 ext_rvalid_i,
  input  logic [31:0]          ext_rdata_i
);

  localparam int unsigned NM = 2 * NUM_NTX + 2;
  localparam int unsigned RW = $clog2(BANK_WORDS);

  logic     [NM-1:0]       m_req, m_gnt, m_rvalid;
  mem_req_t [NM-1:0]       m_req_d;
  logic     [NM-1:0][31:0] m_rdata;

  logic [NB-1:0]          b_req, b_we;
  logic [NB-1:0][3:0]     b_be;
  logic [NB-1:0][RW-1:0]  b_addr;
  logic [NB-1:0][31:0]    b_wdata, b_rdata;

  tcdm_interconnect #(.NM(NM), .NB(NB), .WORDS(BANK_WORDS)) i_ic (
    .clk_i, .rst_ni,
    .req_i (m_req), .req_d_i (m_req_d), .gnt_o (m_gnt), .rvalid_o (m_rvalid), .rdata_o (m_rdata),
    .bank_req_o (b_req), .bank_we_o (b_we), .bank_be_o (b_be), .bank_addr_o (b_addr),
    .bank_wdata_o (b_wdata), .bank_rdata_i (b_rdata)
  );

  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) i_bank (
      .clk_i, .req_i (b_req[b]), .we_i (b_we[b]), .be_i (b_be[b]), .addr_i (b_addr[b]),
      .wdata_i (b_wdata[b]), .rdata_o (b_rdata[b])
    );
  end

  // NTX co-processors
  logic     [NUM_NTX-1:0]       n_cfg_req, n_cfg_gnt, n_cfg_rvalid;
  mem_req_t                     n_cfg_req_d;
  logic     [NUM_NTX-1:0][31:0] n_cfg_rdata;

  for (genvar i = 0; i < NUM_NTX; i++) begin : g_ntx
    ntx i_ntx (
      .clk_i, .rst_ni,
      .cfg_req_i     (n_cfg_req[i]),
      .cfg_req_d_i   (n_cfg_req_d),
      .cfg_gnt_o     (n_cfg_gnt[i]),
      .cfg_rvalid_o  (n_cfg_rvalid[i]),
      .cfg_rdata_o   (n_cfg_rdata[i]),
      .irq_o         (ntx_irq_o[i]),
      .busy_o        (ntx_busy_o[i]),
      .tcdm_req_o    (m_req[2+2*i +: 2]),
      .tcdm_req_d_o  (m_req_d[2+2*i +: 2]),
      .tcdm_gnt_i    (m_gnt[2+2*i +: 2]),
      .tcdm_rvalid_i (m_rvalid[2+2*i +: 2]),
      .tcdm_rdata_i  (m_rdata[2+2*i +: 2])
    );
  end

  // DMA
  logic        d_cfg_req, d_cfg_gnt, d_cfg_rvalid;
  logic [31:0] d_cfg_rdata;
  logic        d_ext_req, d_ext_gnt, d_ext_rvalid;
  mem_req_t    d_ext_req_d;
  logic [31:0] d_ext_rdata;

  cluster_dma i_dma (
    .clk_i, .rst_ni,
    .cfg_req_i    (d_cfg_req),
    .cfg_req_d_i  (core_req_d_i),
    .cfg_gnt_o    (d_cfg_gnt),
    .cfg_rvalid_o (d_cfg_rvalid),
    .cfg_rdata_o  (d_cfg_rdata),
    .ext_req_o    (d_ext_req),
    .ext_req_d_o  (d_ext_req_d),
    .ext_gnt_i    (d_ext_gnt),
    .ext_rvalid_i (d_ext_rvalid),
    .ext_rdata_i  (d_ext_rdata),
    .tcdm_req_o   (m_req[1]),
    .tcdm_req_d_o (m_req_d[1]),
    .tcdm_gnt_i   (m_gnt[1]),
    .tcdm_rvalid_i(m_rvalid[1]),
    .tcdm_rdata_i (m_rdata[1]),
    .busy_o       (dma_busy_o)
  );

  cluster_bus #(.NUM_NTX(NUM_NTX)) i_bus (
    .clk_i, .rst_ni,
    .core_req_i, .core_req_d_i, .core_gnt_o, .core_rvalid_o, .core_rdata_o,
    .tcdm_req_o       (m_req[0]),
    .tcdm_req_d_o     (m_req_d[0]),
    .tcdm_gnt_i       (m_gnt[0]),
    .tcdm_rvalid_i    (m_rvalid[0]),
    .tcdm_rdata_i     (m_rdata[0]),
    .ntx_req_o        (n_cfg_req),
    .ntx_req_d_o      (n_cfg_req_d),
    .ntx_gnt_i        (n_cfg_gnt),
    .ntx_rvalid_i     (n_cfg_rvalid),
    .ntx_rdata_i      (n_cfg_rdata),
    .dma_cfg_req_o    (d_cfg_req),
    .dma_cfg_gnt_i    (d_cfg_gnt),
    .dma_cfg_rvalid_i (d_cfg_rvalid),
    .dma_cfg_rdata_i  (d_cfg_rdata),
    .dma_ext_req_i    (d_ext_req),
    .dma_ext_req_d_i  (d_ext_req_d),
    .dma_ext_gnt_o    (d_ext_gnt),
    .dma_ext_rvalid_o (d_ext_rvalid),
    .dma_ext_rdata_o  (d_ext_rdata),
    .ext_req_o, .ext_req_d_o, .ext_gnt_i, .ext_rvalid_i, .ext_rdata_i
  );

endmodule
