// cluster_bus: the cluster's peripheral and external bus.
//
// The core's data port is decoded by address (map in ntx_pkg):
//   TCDM range          -> the core's port on the TCDM logarithmic interconnect
//   PERIPH_BASE + i*256 -> register interface of NTX i
//   NTX_BCAST           -> all NTX register interfaces at once (writes only;
//                          each NTX accepts the write once, the core is granted
//                          when all have accepted; reads return 0)
//   DMA_BASE            -> DMA registers
//   anything else       -> out of the cluster on the SoC port
// A new core request is only accepted while earlier ones are outstanding if it
// goes to the same target, so responses stay in order. The DMA's external
// port and the core's external accesses share the cluster's SoC port through
// a round-robin arbiter. The broadcast address and the targets come from the
// paper; the address map and the ordering rule are this design's own.
module cluster_bus
  import ntx_pkg::*;
#(
  parameter int unsigned NUM_NTX = 8
) (
  input  logic                        clk_i,
  input  logic                        rst_ni,
  // core data port (slave)
  input  logic                        core_req_i,
  input  mem_req_t                    core_req_d_i,
  output logic                        core_gnt_o,
  output logic                        core_rvalid_o,
  output logic [31:0]                 core_rdata_o,
  // core port into the TCDM interconnect
  output logic                        tcdm_req_o,
  output mem_req_t                    tcdm_req_d_o,
  input  logic                        tcdm_gnt_i,
  input  logic                        tcdm_rvalid_i,
  input  logic [31:0]                 tcdm_rdata_i,
  // NTX register interfaces
  output logic     [NUM_NTX-1:0]      ntx_req_o,
  output mem_req_t                    ntx_req_d_o,
  input  logic     [NUM_NTX-1:0]      ntx_gnt_i,
  input  logic     [NUM_NTX-1:0]      ntx_rvalid_i,
  input  logic     [NUM_NTX-1:0][31:0] ntx_rdata_i,
  // DMA registers
  output logic                        dma_cfg_req_o,
  input  logic                        dma_cfg_gnt_i,
  input  logic                        dma_cfg_rvalid_i,
  input  logic [31:0]                 dma_cfg_rdata_i,
  // DMA external port (slave)
  input  logic                        dma_ext_req_i,
  input  mem_req_t                    dma_ext_req_d_i,
  output logic                        dma_ext_gnt_o,
  output logic                        dma_ext_rvalid_o,
  output logic [31:0]                 dma_ext_rdata_o,
  // cluster SoC port (master)
  output logic                        ext_req_o,
  output mem_req_t                    ext_req_d_o,
  input  logic                        ext_gnt_i,
  input  logic                        ext_rvalid_i,
  input  logic [31:0]                 ext_rdata_i
);

  typedef enum logic [2:0] {T_TCDM, T_NTX, T_BCAST, T_DMA, T_EXT, T_NONE} tgt_e;

  tgt_e        tgt, pend_tgt_q;
  logic [3:0]  pend_cnt_q;
  logic [31:0] a;
  logic [NUM_NTX-1:0] bc_done_q, bc_acc, ntx_ign_q;
  logic        bc_rvalid_q;
  logic        core_ext_req, core_ext_gnt, core_ext_rvalid;
  logic [31:0] core_ext_rdata;
  logic        can_issue, gnt;
  logic [$clog2(NUM_NTX)-1:0] nsel;

  assign a    = core_req_d_i.addr;
  assign nsel = a[8 +: $clog2(NUM_NTX)];

  always_comb begin
    if (a >= TCDM_BASE && a < TCDM_BASE + 32'h0002_0000)      tgt = T_TCDM;
    else if (a >= PERIPH_BASE && a < PERIPH_BASE + 32'(NUM_NTX * 256)) tgt = T_NTX;
    else if (a[31:8] == NTX_BCAST[31:8])                       tgt = T_BCAST;
    else if (a[31:8] == DMA_BASE[31:8])                        tgt = T_DMA;
    else                                                       tgt = T_EXT;
  end

  assign can_issue = core_req_i && (pend_cnt_q == '0 || (pend_tgt_q == tgt && pend_cnt_q < 4'd4));

  always_comb begin
    tcdm_req_o    = can_issue && tgt == T_TCDM;
    tcdm_req_d_o  = core_req_d_i;
    ntx_req_d_o   = core_req_d_i;
    ntx_req_o     = '0;
    if (can_issue && tgt == T_NTX) ntx_req_o[nsel] = 1'b1;
    if (can_issue && tgt == T_BCAST && core_req_d_i.we) ntx_req_o = ~bc_done_q;
    bc_acc        = ntx_req_o & ntx_gnt_i;
    dma_cfg_req_o = can_issue && tgt == T_DMA;
    core_ext_req  = can_issue && tgt == T_EXT;
    unique case (tgt)
      T_TCDM:  gnt = tcdm_gnt_i;
      T_NTX:   gnt = ntx_gnt_i[nsel];
      T_BCAST: gnt = !core_req_d_i.we || ((bc_done_q | bc_acc) == '1);
      T_DMA:   gnt = dma_cfg_gnt_i;
      default: gnt = core_ext_gnt;
    endcase
    core_gnt_o = can_issue && gnt;
  end

  // responses: at most one source is active at a time (ordering rule above)
  always_comb begin
    core_rvalid_o = tcdm_rvalid_i | dma_cfg_rvalid_i | core_ext_rvalid | bc_rvalid_q |
                    |(ntx_rvalid_i & ~ntx_ign_q);
    core_rdata_o  = '0;
    if (tcdm_rvalid_i)         core_rdata_o = tcdm_rdata_i;
    else if (dma_cfg_rvalid_i) core_rdata_o = dma_cfg_rdata_i;
    else if (core_ext_rvalid)  core_rdata_o = core_ext_rdata;
    else begin
      for (int i = 0; i < int'(NUM_NTX); i++)
        if (ntx_rvalid_i[i] && !ntx_ign_q[i]) core_rdata_o = ntx_rdata_i[i];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_cnt_q <= '0; pend_tgt_q <= T_NONE; bc_done_q <= '0; bc_rvalid_q <= 1'b0; ntx_ign_q <= '0;
    end else begin
      pend_cnt_q <= pend_cnt_q + 4'(core_gnt_o) - 4'(core_rvalid_o);
      if (core_gnt_o) pend_tgt_q <= tgt;
      // broadcast bookkeeping: the NTX responses to a broadcast are replaced
      // by one response of our own
      ntx_ign_q   <= (can_issue && tgt == T_BCAST) ? bc_acc : '0;
      bc_rvalid_q <= core_gnt_o && tgt == T_BCAST;
      if (can_issue && tgt == T_BCAST && core_req_d_i.we)
        bc_done_q <= core_gnt_o ? '0 : (bc_done_q | bc_acc);
    end
  end

  mem_arb #(.N(2), .MAX_OUT(4)) i_ext_arb (
    .clk_i, .rst_ni,
    .req_i    ({dma_ext_req_i, core_ext_req}),
    .req_d_i  ({dma_ext_req_d_i, core_req_d_i}),
    .gnt_o    ({dma_ext_gnt_o, core_ext_gnt}),
    .rvalid_o ({dma_ext_rvalid_o, core_ext_rvalid}),
    .rdata_o  ({dma_ext_rdata_o, core_ext_rdata}),
    .req_o    (ext_req_o),
    .req_d_o  (ext_req_d_o),
    .gnt_i    (ext_gnt_i),
    .rvalid_i (ext_rvalid_i),
    .rdata_i  (ext_rdata_i)
  );

endmodule
