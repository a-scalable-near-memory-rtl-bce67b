// tb_mem_model: behavioural memory slave for the testbenches.
//
// A WORDS x 32-bit memory with byte enables behind a request/grant/response
// port in the ntx_pkg convention. Grants are withheld at random
// (STALL_PCT percent of cycles) and every granted access is answered in
// order after a random latency of MIN_LAT..MAX_LAT cycles, which models the
// variable latency of the HMC memory behind the logic-base interconnect. The
// word index is (addr >> 2) modulo WORDS. The array `mem` is accessed
// hierarchically by the testbenches; `accesses` counts granted requests.
module tb_mem_model
  import ntx_pkg::*;
#(
  parameter int WORDS     = 4096,
  parameter int MIN_LAT   = 1,
  parameter int MAX_LAT   = 1,
  parameter int STALL_PCT = 0
) (
  input  logic        clk_i,
  input  logic        req_i,
  input  mem_req_t    req_d_i,
  output logic        gnt_o,
  output logic        rvalid_o,
  output logic [31:0] rdata_o
);
  logic [31:0] mem [WORDS];
  int          accesses = 0;
  bit          stall = 0;
  int          stall_pct = STALL_PCT;
  int          max_lat = MAX_LAT;

  // pending responses: due cycle and data
  int          due_q [$];
  logic [31:0] dat_q [$];
  int          cyc = 0;

  assign gnt_o = req_i && !stall;

  initial begin rvalid_o = 0; rdata_o = 0; end

  always @(posedge clk_i) begin
    int w, d;
    cyc++;
    if (req_i && gnt_o) begin
      accesses++;
      w = int'(req_d_i.addr >> 2) % WORDS;
      dat_q.push_back(mem[w]);
      if (req_d_i.we)
        for (int b = 0; b < 4; b++) if (req_d_i.be[b]) mem[w][8*b +: 8] = req_d_i.wdata[8*b +: 8];
      d = cyc + $urandom_range(max_lat, MIN_LAT) - 1;
      if (due_q.size() > 0 && due_q[$] >= d) d = due_q[$] + 1;
      due_q.push_back(d);
    end
    rvalid_o <= 1'b0;
    if (due_q.size() > 0 && due_q[0] <= cyc) begin
      void'(due_q.pop_front());
      rvalid_o <= 1'b1;
      rdata_o  <= dat_q.pop_front();
    end
    stall <= ($urandom_range(99) < stall_pct);
  end
endmodule
