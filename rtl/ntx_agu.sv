// ntx_agu: one NTX address generator unit.
//
// A 32-bit address register and one adder. On `clear` the register is loaded
// with the base address. On every loop step the address is incremented by the
// step size p_i of the highest-index hardware loop that is enabled in that
// step (wrap vector from ntx_hwloops). With p_0 = s_0 and
// p_i = s_i - (N_{i-1}-1)*p_{i-1} this yields
//   A = base + i0*s0 + i1*s1 + i2*s2 + i3*s3 + i4*s4
// using a single addition per cycle. `addr_o` is the address for the current
// iteration (registered value). All of this follows the paper; only the
// clear/step handshake is this design's own.
module ntx_agu
  import ntx_pkg::*;
#(
  parameter int unsigned NUM_LOOPS = NTX_NUM_LOOPS,
  parameter int unsigned ADDR_W    = NTX_ADDR_W
) (
  input  logic                             clk_i,
  input  logic                             rst_ni,
  input  logic                             clear_i,
  input  logic [ADDR_W-1:0]                base_i,
  input  logic [NUM_LOOPS-1:0][ADDR_W-1:0] step_i,
  input  logic [NUM_LOOPS-1:0]             en_i,     // wrap[NUM_LOOPS-1:0]
  output logic [ADDR_W-1:0]                addr_o
);

  logic [ADDR_W-1:0] addr_q, inc;

  always_comb begin
    inc = '0;
    for (int i = 0; i < NUM_LOOPS; i++)
      if (en_i[i]) inc = step_i[i];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)           addr_q <= '0;
    else if (clear_i)      addr_q <= base_i;
    else if (en_i[0])      addr_q <= addr_q + inc;
  end

  assign addr_o = addr_q;

endmodule
