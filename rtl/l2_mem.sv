// l2_mem: the shared L2 memory of the processing system.
//
// WORDS x 32-bit single-port memory with byte enables (default 32768 words =
// 128 KiB, the paper's L2 size), holding the cores' program and shared
// variables. Slave port in the ntx_pkg request/grant convention: always
// granted, response one cycle later. The address is taken modulo the size
// (the SoC interconnect only forwards the L2 range). Only the size and the
// role are from the paper.
module l2_mem
  import ntx_pkg::*;
#(
  parameter int unsigned WORDS = 32768
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        req_i,
  input  mem_req_t    req_d_i,
  output logic        gnt_o,
  output logic        rvalid_o,
  output logic [31:0] rdata_o
);

  localparam int unsigned AW = $clog2(WORDS);

  logic [31:0]   mem [WORDS];
  logic [AW-1:0] idx;

  assign gnt_o = req_i;
  assign idx   = req_d_i.addr[2 +: AW];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (req_d_i.we) begin
        for (int b = 0; b < 4; b++)
          if (req_d_i.be[b]) mem[idx][8*b +: 8] <= req_d_i.wdata[8*b +: 8];
      end else begin
        rdata_o <= mem[idx];
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) rvalid_o <= 1'b0;
    else         rvalid_o <= req_i;
  end

endmodule
