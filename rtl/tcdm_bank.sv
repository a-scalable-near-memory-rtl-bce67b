// tcdm_bank: one bank of the cluster's tightly coupled data memory (TCDM).
//
// A single-port SRAM of WORDS 32-bit words with byte enables, written as an
// array (maps to an SRAM macro in an ASIC flow). A read returns its data one
// cycle after the request ("single-cycle access"); `rdata_o` holds its value
// until the next read. The paper gives the total (128 kB in 32 banks), so the
// default is 1024 words (4 KiB) per bank; the macro itself is not described.
module tcdm_bank #(
  parameter int unsigned WORDS = 1024
) (
  input  logic                     clk_i,
  input  logic                     req_i,
  input  logic                     we_i,
  input  logic [3:0]               be_i,
  input  logic [$clog2(WORDS)-1:0] addr_i,
  input  logic [31:0]              wdata_i,
  output logic [31:0]              rdata_o
);

  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end

endmodule
