// ntx_hwloops: the five nested hardware loops of NTX.
//
// Each loop is a 16-bit counter with a programmable iteration count N_i
// (register value N_i >= 1; the counter runs 0..N_i-1). Counter L0 advances on
// every `step` (it is only held back by a pipeline stall, i.e. step = 0);
// counter Li advances when all lower counters are at their maximum, i.e. it is
// enabled by the previous counter's "done". The "done" of L4 ends the loop nest.
// Loops at or above `outer_level` are inactive: they behave as N = 1.
//
// Outputs, all combinational for the current iteration:
//   wrap[0]   = step
//   wrap[i]   = counters 0..i-1 are at their maximum during this step
//               (wrap[4:0] is the paper's 5-bit enable vector)
//   wrap[5]   = this step is the very last iteration of the whole nest
//   dchain    = the same as wrap, but as if step were 1 (lets the controller
//               look ahead at where the next step ends without a loop)
//   cnt       = current counter values
// The counters are cleared by `clear` (one cycle, before the first step).
// Paper: 5 loops, 16-bit counters, enable chaining via "done", 5-bit enable
// output. Own choice: register holds the iteration count, not count-1.
module ntx_hwloops
  import ntx_pkg::*;
#(
  parameter int unsigned NUM_LOOPS = NTX_NUM_LOOPS,
  parameter int unsigned CNT_W     = NTX_CNT_W
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  input  logic                            clear_i,
  input  logic                            step_i,
  input  logic [NUM_LOOPS-1:0][CNT_W-1:0] loop_n_i,
  input  logic [$clog2(NUM_LOOPS+1)-1:0]  outer_level_i,
  output logic [NUM_LOOPS-1:0][CNT_W-1:0] cnt_o,
  output logic [NUM_LOOPS:0]              wrap_o,
  output logic [NUM_LOOPS:0]              dchain_o
);

  logic [NUM_LOOPS-1:0][CNT_W-1:0] cnt_q;
  logic [NUM_LOOPS-1:0]            done;

  always_comb begin
    for (int i = 0; i < NUM_LOOPS; i++) begin
      if (i >= int'(outer_level_i) || loop_n_i[i] <= 1) done[i] = 1'b1;
      else done[i] = (cnt_q[i] == loop_n_i[i] - CNT_W'(1));
    end
  end

  assign dchain_o[0] = 1'b1;
  for (genvar g = 1; g <= NUM_LOOPS; g++) begin : g_chain
    assign dchain_o[g] = dchain_o[g-1] & done[g-1];
  end
  assign wrap_o = dchain_o & {(NUM_LOOPS+1){step_i}};

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
    end else if (clear_i) begin
      cnt_q <= '0;
    end else begin
      for (int i = 0; i < NUM_LOOPS; i++)
        if (wrap_o[i]) cnt_q[i] <= done[i] ? '0 : cnt_q[i] + CNT_W'(1);
    end
  end

  assign cnt_o = cnt_q;

endmodule
