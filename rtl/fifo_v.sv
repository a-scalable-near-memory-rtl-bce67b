// fifo_v: small synchronous first-in first-out buffer (helper).
//
// Register-based, DEPTH entries of type T. Push when not full, pop when not
// empty; a push and a pop may happen in the same cycle. The head entry is
// visible on `data_o` whenever `empty_o` is low (first-word fall-through).
// `count_o` is the number of stored entries. Overflow and underflow are
// checked by assertions.
module fifo_v #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 4
) (
  input  logic                     clk_i,
  input  logic                     rst_ni,
  input  logic                     push_i,
  input  T                         data_i,
  input  logic                     pop_i,
  output T                         data_o,
  output logic                     full_o,
  output logic                     empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T                        mem_q [DEPTH];
  logic [PW-1:0]           rptr_q, wptr_q;
  logic [$clog2(DEPTH+1)-1:0] cnt_q;

  assign full_o  = (cnt_q == DEPTH[$clog2(DEPTH+1)-1:0]);
  assign empty_o = (cnt_q == '0);
  assign count_o = cnt_q;
  assign data_o  = mem_q[rptr_q];

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (p == PW'(DEPTH - 1)) ? '0 : p + PW'(1);
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rptr_q <= '0; wptr_q <= '0; cnt_q <= '0;
      for (int i = 0; i < int'(DEPTH); i++) mem_q[i] <= '0;
    end else begin
      if (push_i) begin
        mem_q[wptr_q] <= data_i;
        wptr_q        <= inc(wptr_q);
      end
      if (pop_i) rptr_q <= inc(rptr_q);
      cnt_q <= cnt_q + (push_i ? CW'(1) : CW'(0)) - (pop_i ? CW'(1) : CW'(0));
    end
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> (!full_o || pop_i));
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o);

endmodule
