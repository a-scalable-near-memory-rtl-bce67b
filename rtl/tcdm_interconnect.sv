// tcdm_interconnect: logarithmic interconnect between the cluster's master
// ports and the TCDM banks.
//
// Word-interleaved: bank = address bits [2 +: log2(NB)], row inside the bank =
// the next log2(WORDS) bits (addresses are taken modulo the TCDM size; the
// cluster bus only forwards TCDM addresses). Every bank has its own
// round-robin arbiter; all banks work in parallel, so masters that hit
// different banks are all served in the same cycle, while masters that hit
// the same bank conflict and all but one are stalled (no grant). The grant is
// combinational; the response (`rvalid`, and `rdata` for reads) follows one
// cycle later. With 18 masters and 32 banks this is the paper's banking
// factor of about 1.8. The arbitration policy (round robin) is this design's
// choice; the paper only names a low-latency logarithmic interconnect.
module tcdm_interconnect
  import ntx_pkg::*;
#(
  parameter int unsigned NM    = 18,
  parameter int unsigned NB    = 32,
  parameter int unsigned WORDS = 1024
) (
  input  logic                              clk_i,
  input  logic                              rst_ni,
  // masters
  input  logic     [NM-1:0]                 req_i,
  input  mem_req_t [NM-1:0]                 req_d_i,
  output logic     [NM-1:0]                 gnt_o,
  output logic     [NM-1:0]                 rvalid_o,
  output logic     [NM-1:0][31:0]           rdata_o,
  // banks
  output logic     [NB-1:0]                 bank_req_o,
  output logic     [NB-1:0]                 bank_we_o,
  output logic     [NB-1:0][3:0]            bank_be_o,
  output logic     [NB-1:0][$clog2(WORDS)-1:0] bank_addr_o,
  output logic     [NB-1:0][31:0]           bank_wdata_o,
  input  logic     [NB-1:0][31:0]           bank_rdata_i
);

  localparam int unsigned BW = $clog2(NB);
  localparam int unsigned RW = $clog2(WORDS);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NM-1:0][BW-1:0] bsel;
  logic [NB-1:0][MW-1:0] prio_q, win;
  logic [NB-1:0]         hit;
  logic [NM-1:0][BW-1:0] bank_q;

  for (genvar m = 0; m < NM; m++) begin : g_sel
    assign bsel[m] = req_d_i[m].addr[2 +: BW];
  end

  always_comb begin
    gnt_o = '0;
    for (int b = 0; b < NB; b++) begin
      hit[b] = 1'b0;
      win[b] = '0;
      for (int k = int'(NM) - 1; k >= 0; k--) begin
        int m;
        m = (int'(prio_q[b]) + k) % int'(NM);
        if (req_i[m] && bsel[m] == BW'(b)) begin
          hit[b] = 1'b1;
          win[b] = MW'(m);
        end
      end
      bank_req_o[b]   = hit[b];
      bank_we_o[b]    = req_d_i[win[b]].we;
      bank_be_o[b]    = req_d_i[win[b]].be;
      bank_addr_o[b]  = req_d_i[win[b]].addr[2+BW +: RW];
      bank_wdata_o[b] = req_d_i[win[b]].wdata;
      if (hit[b]) gnt_o[win[b]] = 1'b1;
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q <= '0; rvalid_o <= '0; bank_q <= '0;
    end else begin
      for (int b = 0; b < NB; b++)
        if (hit[b]) prio_q[b] <= (int'(win[b]) == int'(NM) - 1) ? '0 : win[b] + MW'(1);
      rvalid_o <= req_i & gnt_o;
      for (int m = 0; m < NM; m++) if (req_i[m] && gnt_o[m]) bank_q[m] <= bsel[m];
    end
  end

  for (genvar m = 0; m < NM; m++) begin : g_resp
    assign rdata_o[m] = bank_rdata_i[bank_q[m]];
  end

endmodule
