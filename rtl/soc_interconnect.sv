// soc_interconnect: the interconnect of the processing system on the HMC logic
// base ("SoC Interconnect").
//
// Connects NM cluster ports (masters) to the shared L2 and to NP master ports
// into the HMC's main logic-base interconnect, through which the clusters
// reach all of the cube's memory and the serial links. Routing: addresses in
// the L2 range go to the L2; all others go to master port
// addr[5 +: log2(NP)], i.e. the main-interconnect ports are interleaved at
// 32-byte granularity (the HMC's minimum block size). Each target has a
// round-robin arbiter with an ID FIFO (mem_arb). A master may only have
// requests outstanding to one target at a time, which keeps its responses in
// order. The paper shows this block and its p master ports by name only;
// routing, arbitration and port count are this design's own choices.
//
// Tool note: the combinational loop reported through the per-target request
// matrix is false at bit level: a grant depends on the requests, but no
// request depends on a grant; the matrix is only analysed as a whole signal.
module soc_interconnect
  import ntx_pkg::*;
#(
  parameter int unsigned NM = 64,
  parameter int unsigned NP = 8
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  // cluster ports
  input  logic     [NM-1:0]       req_i,
  input  mem_req_t [NM-1:0]       req_d_i,
  output logic     [NM-1:0]       gnt_o,
  output logic     [NM-1:0]       rvalid_o,
  output logic     [NM-1:0][31:0] rdata_o,
  // L2
  output logic                  l2_req_o,
  output mem_req_t              l2_req_d_o,
  input  logic                  l2_gnt_i,
  input  logic                  l2_rvalid_i,
  input  logic     [31:0]       l2_rdata_i,
  // master ports into the main LoB interconnect
  output logic     [NP-1:0]       mp_req_o,
  output mem_req_t [NP-1:0]       mp_req_d_o,
  input  logic     [NP-1:0]       mp_gnt_i,
  input  logic     [NP-1:0]       mp_rvalid_i,
  input  logic     [NP-1:0][31:0] mp_rdata_i
);

  localparam int unsigned NS = NP + 1;
  localparam int unsigned SW = $clog2(NS + 1);
  localparam int unsigned PW = (NP > 1) ? $clog2(NP) : 1;

  logic [NM-1:0][SW-1:0] sel, pend_tgt_q;
  logic [NM-1:0][3:0]    pend_cnt_q;
  logic [NM-1:0]         ok;

  logic     [NS-1:0][NM-1:0]       s_req, s_gnt, s_rvalid;
  logic     [NS-1:0][NM-1:0][31:0] s_rdata;
  logic     [NS-1:0]               t_req, t_gnt, t_rvalid;
  mem_req_t [NS-1:0]               t_req_d;
  logic     [NS-1:0][31:0]         t_rdata;

  always_comb begin
    for (int m = 0; m < int'(NM); m++) begin
      if (req_d_i[m].addr >= L2_BASE && req_d_i[m].addr < L2_BASE + 32'h0002_0000) sel[m] = '0;
      else if (NP > 1) sel[m] = SW'(1) + SW'(req_d_i[m].addr[5 +: PW]);
      else             sel[m] = SW'(1);
      ok[m] = (pend_cnt_q[m] == '0) || (pend_tgt_q[m] == sel[m] && pend_cnt_q[m] < 4'd8);
      for (int s = 0; s < int'(NS); s++) s_req[s][m] = req_i[m] && ok[m] && (sel[m] == SW'(s));
    end
    gnt_o = '0; rvalid_o = '0; rdata_o = '0;
    for (int s = 0; s < int'(NS); s++) begin
      gnt_o    |= s_gnt[s];
      rvalid_o |= s_rvalid[s];
      for (int m = 0; m < int'(NM); m++) if (s_rvalid[s][m]) rdata_o[m] = s_rdata[s][m];
    end
  end

  for (genvar s = 0; s < NS; s++) begin : g_tgt
    mem_arb #(.N(NM), .MAX_OUT(8)) i_arb (
      .clk_i, .rst_ni,
      .req_i    (s_req[s]),
      .req_d_i  (req_d_i),
      .gnt_o    (s_gnt[s]),
      .rvalid_o (s_rvalid[s]),
      .rdata_o  (s_rdata[s]),
      .req_o    (t_req[s]),
      .req_d_o  (t_req_d[s]),
      .gnt_i    (t_gnt[s]),
      .rvalid_i (t_rvalid[s]),
      .rdata_i  (t_rdata[s])
    );
  end

  assign l2_req_o    = t_req[0];
  assign l2_req_d_o  = t_req_d[0];
  assign t_gnt[0]    = l2_gnt_i;
  assign t_rvalid[0] = l2_rvalid_i;
  assign t_rdata[0]  = l2_rdata_i;
  for (genvar p = 0; p < NP; p++) begin : g_mp
    assign mp_req_o[p]   = t_req[p+1];
    assign mp_req_d_o[p] = t_req_d[p+1];
    assign t_gnt[p+1]    = mp_gnt_i[p];
    assign t_rvalid[p+1] = mp_rvalid_i[p];
    assign t_rdata[p+1]  = mp_rdata_i[p];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      pend_cnt_q <= '0; pend_tgt_q <= '0;
    end else begin
      for (int m = 0; m < int'(NM); m++) begin
        pend_cnt_q[m] <= pend_cnt_q[m] + 4'(gnt_o[m]) - 4'(rvalid_o[m]);
        if (gnt_o[m]) pend_tgt_q[m] <= sel[m];
      end
    end
  end

endmodule
