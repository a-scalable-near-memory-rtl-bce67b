// ntx_pkg: types and constants shared by the NTX co-processor, the processing
// cluster and the near-memory processing system.
//
// Memory-port convention used throughout (a request/grant/response bus):
//   * a master holds `req` high with a stable `mem_req_t` until `gnt` is high;
//     the request is transferred in the cycle where req && gnt;
//   * every granted request, read or write, produces exactly one response
//     cycle (`rvalid`) carrying `rdata` (don't-care for writes);
//   * responses return in the order the requests were granted.
// The TCDM answers exactly one cycle after the grant ("single-cycle access").
//
// NTX command set (opcodes) follows the command list of the paper's command
// table; the bit-level encoding of the command word is this design's own.
package ntx_pkg;

  // ---------------------------------------------------------------- memory bus
  typedef struct packed {
    logic [31:0] addr;
    logic        we;
    logic [3:0]  be;
    logic [31:0] wdata;
  } mem_req_t;

  // ---------------------------------------------------------------- NTX
  localparam int unsigned NTX_NUM_LOOPS = 5;   // hardware loops L0..L4
  localparam int unsigned NTX_NUM_AGUS  = 3;   // AGU0..AGU2
  localparam int unsigned NTX_CNT_W     = 16;  // 16-bit loop counters
  localparam int unsigned NTX_ADDR_W    = 32;  // 32-bit AGU address registers

  typedef enum logic [3:0] {
    OP_MAC     = 4'd1,  // x += a*b              (fused ReLU on store)
    OP_VADDSUB = 4'd2,  // x  = a +/- b          (two accumulator cycles)
    OP_VMULT   = 4'd3,  // x  = a*b
    OP_OUTERP  = 4'd4,  // x  = a*b, a fetched once per L0 sweep
    OP_MAXMIN  = 4'd5,  // running max/min of a, optional argmax/argmin
    OP_THTST   = 4'd6,  // x  = (a cmp b) ? 1.0 : 0.0
    OP_MASK    = 4'd7,  // x  = (a cmp b) ? a : 0.0
    OP_MASKMAC = 4'd8,  // x += (a cmp alu_reg) ? b : 0.0
    OP_COPY    = 4'd9   // x  = a (copy) or x = init value (memset)
  } ntx_op_e;

  typedef enum logic [1:0] {
    INIT_ZERO = 2'd0, INIT_AGU0 = 2'd1, INIT_AGU1 = 2'd2, INIT_AGU2 = 2'd3
  } ntx_init_src_e;

  typedef enum logic [1:0] {
    BSRC_AGU1 = 2'd0, BSRC_ZERO = 2'd1, BSRC_ONE = 2'd2
  } ntx_bsrc_e;

  typedef enum logic [2:0] {
    CMP_GT = 3'd0, CMP_GE = 3'd1, CMP_LT = 3'd2, CMP_LE = 3'd3,
    CMP_EQ = 3'd4, CMP_NE = 3'd5
  } ntx_cmp_e;

  // Command word, written to the command register (this design's encoding).
  typedef struct packed {
    logic [4:0]    rsvd;
    logic          flag;        // VADDSUB: subtract, MAXMIN: min, COPY: memset
    logic          argidx;      // MAXMIN: store the index instead of the value
    logic          relu;        // fused ReLU on the stored value
    ntx_cmp_e      cmp;         // comparator condition
    ntx_bsrc_e     bsrc;        // source of operand b
    ntx_init_src_e init_src;    // accumulator initialisation source
    logic [2:0]    store_level; // 0..5
    logic [2:0]    init_level;  // 0..5
    logic [2:0]    outer_level; // number of active loops, 1..5
    logic [3:0]    opcode;      // ntx_op_e
  } ntx_cmd_t;

  // Complete configuration copied into the shadow register on launch.
  typedef struct packed {
    ntx_cmd_t                                       cmd;
    logic [NTX_NUM_LOOPS-1:0][NTX_CNT_W-1:0]        loop_n;  // iteration counts N_i
    logic [NTX_NUM_AGUS-1:0][NTX_ADDR_W-1:0]        base;    // AGU base addresses
    logic [NTX_NUM_AGUS-1:0][NTX_NUM_LOOPS-1:0][NTX_ADDR_W-1:0] step; // step sizes p_i
  } ntx_cfg_t;

  // Register map of one NTX (byte offsets inside its 256-byte window).
  localparam logic [7:0] NTX_REG_STATUS  = 8'h00; // RO: bit0 busy, bit1 command pending
  localparam logic [7:0] NTX_REG_IRQ     = 8'h04; // bit0 irq flag (write 1 clears), bit1 irq enable
  localparam logic [7:0] NTX_REG_COMMAND = 8'h08; // write: launch with this command word
  localparam logic [7:0] NTX_REG_LOOP0   = 8'h10; // 0x10..0x20: N_0..N_4
  localparam logic [7:0] NTX_REG_BASE0   = 8'h30; // 0x30..0x38: AGU0..2 base
  localparam logic [7:0] NTX_REG_STEP0   = 8'h40; // 0x40..0x78: step[agu*5+loop]

  // Micro-instruction passed from the controller to the FPU via the command FIFO.
  typedef struct packed {
    logic init;      // (re)initialise accumulator / ALU register before this element
    logic init_mem;  // initial value is read from memory (port 0 data stream)
    logic use_a;     // operand a is in the port 0 data stream
    logic use_b;     // operand b is in the port 1 data stream
    logic store;     // write the result back after this element
  } ntx_uop_t;

  // ---------------------------------------------------------------- FP32 helpers
  localparam logic [31:0] FP_ONE  = 32'h3f80_0000;
  localparam logic [31:0] FP_ZERO = 32'h0000_0000;

  // Total order on FP32 bit patterns (NaN not treated specially): returns a
  // key whose unsigned order matches the numeric order; -0 and +0 compare equal.
  function automatic logic [31:0] fp_key(input logic [31:0] f);
    logic [31:0] g;
    g = (f[30:0] == '0) ? 32'h0 : f;
    return g[31] ? ~g : {1'b1, g[30:0]};
  endfunction

  function automatic logic fp_cmp(input logic [31:0] a, input logic [31:0] b,
                                  input ntx_cmp_e c);
    logic [31:0] ka, kb;
    ka = fp_key(a);
    kb = fp_key(b);
    unique case (c)
      CMP_GT:  return ka >  kb;
      CMP_GE:  return ka >= kb;
      CMP_LT:  return ka <  kb;
      CMP_LE:  return ka <= kb;
      CMP_EQ:  return ka == kb;
      CMP_NE:  return ka != kb;
      default: return 1'b0;
    endcase
  endfunction

  // ---------------------------------------------------------------- cluster map
  // Cluster-local address map (this design's choice; the paper gives none).
  localparam logic [31:0] TCDM_BASE   = 32'h1000_0000;  // 128 KiB TCDM
  localparam logic [31:0] PERIPH_BASE = 32'h1020_0000;  // NTX i at +i*0x100
  localparam logic [31:0] NTX_BCAST   = 32'h1020_0800;  // broadcast to all NTX
  localparam logic [31:0] DMA_BASE    = 32'h1020_1000;  // DMA registers
  localparam logic [31:0] L2_BASE     = 32'h1C00_0000;  // 128 KiB L2

  // DMA register offsets
  localparam logic [7:0] DMA_REG_EXT     = 8'h00; // external (HMC) byte address
  localparam logic [7:0] DMA_REG_TCDM    = 8'h04; // TCDM byte address
  localparam logic [7:0] DMA_REG_LEN     = 8'h08; // words per row
  localparam logic [7:0] DMA_REG_ROWS    = 8'h0C; // number of rows
  localparam logic [7:0] DMA_REG_EXT_ST  = 8'h10; // external row stride (bytes)
  localparam logic [7:0] DMA_REG_TCDM_ST = 8'h14; // TCDM row stride (bytes)
  localparam logic [7:0] DMA_REG_START   = 8'h18; // write: bit0 = direction (1: TCDM->ext), enqueue
  localparam logic [7:0] DMA_REG_STATUS  = 8'h1C; // RO: bit0 busy, [15:8] queued, [31:16] completed count

  typedef struct packed {
    logic        to_ext;
    logic [31:0] ext_addr;
    logic [31:0] tcdm_addr;
    logic [15:0] len;
    logic [15:0] rows;
    logic [31:0] ext_stride;
    logic [31:0] tcdm_stride;
  } dma_cmd_t;

endpackage
