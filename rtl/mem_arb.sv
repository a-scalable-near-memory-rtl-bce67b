// mem_arb: N-to-1 arbiter for request/grant/response memory ports (helper).
//
// Round-robin arbitration among the requesting masters; the grant is
// combinational and only given when the downstream port grants. The index of
// every granted master is queued (ID FIFO, MAX_OUT entries) so the in-order
// responses of the downstream port are returned to the right master, whatever
// the downstream latency. Requests stall while MAX_OUT responses are pending.
//
// Tool notes: the ID FIFO's fill count is not needed and left open; the loop
// variable `m` in the priority search is a plain int of which only the low
// bits are used as an index.
module mem_arb
  import ntx_pkg::*;
#(
  parameter int unsigned N       = 2,
  parameter int unsigned MAX_OUT = 4
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic     [N-1:0]      req_i,
  input  mem_req_t [N-1:0]      req_d_i,
  output logic     [N-1:0]      gnt_o,
  output logic     [N-1:0]      rvalid_o,
  output logic     [N-1:0][31:0] rdata_o,
  output logic                  req_o,
  output mem_req_t              req_d_o,
  input  logic                  gnt_i,
  input  logic                  rvalid_i,
  input  logic     [31:0]       rdata_i
);

  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] prio_q, win, id_head;
  logic          any, id_full, id_empty;

  always_comb begin
    any = 1'b0;
    win = '0;
    for (int k = int'(N) - 1; k >= 0; k--) begin
      int m;
      m = (int'(prio_q) + k) % int'(N);
      if (req_i[m]) begin
        any = 1'b1;
        win = IW'(m);
      end
    end
    req_o   = any && !id_full;
    req_d_o = req_d_i[win];
    gnt_o   = '0;
    if (req_o && gnt_i) gnt_o[win] = 1'b1;
    for (int m = 0; m < int'(N); m++) begin
      rvalid_o[m] = rvalid_i && (id_head == IW'(m));
      rdata_o[m]  = rdata_i;
    end
  end

  fifo_v #(.T(logic [IW-1:0]), .DEPTH(MAX_OUT)) i_ids (
    .clk_i, .rst_ni, .push_i(req_o && gnt_i), .data_i(win), .pop_i(rvalid_i),
    .data_o(id_head), .full_o(id_full), .empty_o(id_empty), .count_o());

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) prio_q <= '0;
    else if (req_o && gnt_i) prio_q <= (int'(win) == int'(N) - 1) ? '0 : win + IW'(1);
  end

  a_resp_expected: assert property (@(posedge clk_i) disable iff (!rst_ni) rvalid_i |-> !id_empty);

endmodule
