// ntx: the NTX floating-point streaming co-processor.
//
// NTX executes one offloaded loop nest per command directly on the cluster's
// TCDM, without a register file. The core programs the register interface
// (ntx_regif) and writes the command register; the configuration is copied
// into a shadow register and the controller starts:
//   * the five hardware loops (ntx_hwloops) enumerate the iterations of the
//     loop nest; the three AGUs (ntx_agu) follow them and provide the
//     operand-a pointer (AGU0), the operand-b pointer (AGU1) and the
//     write-back pointer (AGU2); any AGU can also supply the address of the
//     accumulator's initial value;
//   * per iteration the sequencer pushes the needed read addresses into the
//     port 0 / port 1 read-address FIFOs (depth 5 each), the write address
//     into the store-address FIFO (depth 7) and a micro-instruction into the
//     command FIFO (depth 5). The accumulator is initialised in the first
//     iteration after the counters below `init_level` wrapped, and written
//     back in an iteration where the counters below `store_level` wrap;
//   * read data return into the RD0/RD1 FIFOs (depth 5), the FPU (ntx_fpu)
//     consumes them and pushes results into the store-data FIFO (depth 5);
//   * the write-back interleaver sends a store out on port 0 when port 0 has
//     no read to issue, otherwise on port 1, with priority over reads.
// The controller stalls (the loops hold) when a FIFO it needs is full. The
// command ends when the last iteration has been issued and every FIFO and
// the FPU have drained; then `irq_o` can fire and the next command starts.
//
// Timing: the TCDM answers one cycle after a grant; a read is only issued if
// its data FIFO has room, counting the read in flight. In steady state a MAC
// runs at one element per cycle. Block structure, loop/AGU scheme, FIFO
// depths and two 32-bit TCDM ports follow the paper; NTX and its register
// interface run on one clock here (the paper clocks NTX at twice the cluster
// frequency).
//
// Tool notes: the fill-count outputs of the address, store and command FIFOs
// are left open on purpose (only the read-data FIFOs' counts are needed for
// the in-flight check); the port-1 read-data FIFO's full flag is not needed,
// since a read is only issued when its count leaves room for it; only the L0 counter value is
// used (OUTERP fetches operand a when L0 is at 0), the other counter values
// stay internal.
module ntx
  import ntx_pkg::*;
(
  input  logic           clk_i,
  input  logic           rst_ni,
  // register interface (slave)
  input  logic           cfg_req_i,
  input  mem_req_t       cfg_req_d_i,
  output logic           cfg_gnt_o,
  output logic           cfg_rvalid_o,
  output logic [31:0]    cfg_rdata_o,
  output logic           irq_o,
  output logic           busy_o,
  // two TCDM master ports
  output logic [1:0]         tcdm_req_o,
  output mem_req_t [1:0]     tcdm_req_d_o,
  input  logic [1:0]         tcdm_gnt_i,
  input  logic [1:0]         tcdm_rvalid_i,
  input  logic [1:0][31:0]   tcdm_rdata_i
);

  localparam int unsigned CMD_DEPTH = 5, RA_DEPTH = 5, SA_DEPTH = 7, RD_DEPTH = 5, STD_DEPTH = 5;

  // ------------------------------------------------------------ register IF
  ntx_cfg_t cfg;
  ntx_cmd_t cmd;
  ntx_op_e  op;
  logic     start, done;

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e state_q;

  ntx_regif i_regif (
    .clk_i, .rst_ni,
    .req_i    (cfg_req_i),
    .req_d_i  (cfg_req_d_i),
    .gnt_o    (cfg_gnt_o),
    .rvalid_o (cfg_rvalid_o),
    .rdata_o  (cfg_rdata_o),
    .cfg_o    (cfg),
    .start_o  (start),
    .busy_i   (state_q != S_IDLE),
    .done_i   (done),
    .irq_o
  );

  assign cmd = cfg.cmd;
  assign op  = ntx_op_e'(cmd.opcode);

  // ------------------------------------------------------------ loops & AGUs
  logic                                   step;
  logic [NTX_NUM_LOOPS-1:0][NTX_CNT_W-1:0] cnt;
  logic [NTX_NUM_LOOPS:0]                 wrap, dchain;
  logic [NTX_NUM_AGUS-1:0][31:0]          agu_addr;

  ntx_hwloops i_loops (
    .clk_i, .rst_ni,
    .clear_i       (start),
    .step_i        (step),
    .loop_n_i      (cfg.loop_n),
    .outer_level_i (cmd.outer_level),
    .cnt_o         (cnt),
    .wrap_o        (wrap),
    .dchain_o      (dchain)
  );

  for (genvar g = 0; g < NTX_NUM_AGUS; g++) begin : g_agu
    ntx_agu i_agu (
      .clk_i, .rst_ni,
      .clear_i (start),
      .base_i  (cfg.base[g]),
      .step_i  (cfg.step[g]),
      .en_i    (wrap[NTX_NUM_LOOPS-1:0]),
      .addr_o  (agu_addr[g])
    );
  end

  // ------------------------------------------------------------ FIFOs
  logic        ra0_push, ra0_pop, ra0_full, ra0_empty;
  logic [31:0] ra0_din, ra0_dout;
  logic        ra1_push, ra1_pop, ra1_full, ra1_empty;
  logic [31:0] ra1_dout;
  logic        sa_push, sa_pop, sa_full, sa_empty;
  logic [31:0] sa_dout;
  logic        rd0_push, rd0_pop, rd0_full, rd0_empty;
  logic [31:0] rd0_dout;
  logic        rd1_push, rd1_pop, rd1_full, rd1_empty;
  logic [31:0] rd1_dout;
  logic        std_push, std_pop, std_full, std_empty;
  logic [31:0] std_din, std_dout;
  logic        cmd_push, cmd_pop, cmd_full, cmd_empty;
  ntx_uop_t    uop_din, uop_dout;
  logic [$clog2(RD_DEPTH+1)-1:0] rd0_cnt, rd1_cnt;

  fifo_v #(.T(logic [31:0]), .DEPTH(RA_DEPTH)) i_ra0 (.clk_i, .rst_ni, .push_i(ra0_push), .data_i(ra0_din),
    .pop_i(ra0_pop), .data_o(ra0_dout), .full_o(ra0_full), .empty_o(ra0_empty), .count_o());
  fifo_v #(.T(logic [31:0]), .DEPTH(RA_DEPTH)) i_ra1 (.clk_i, .rst_ni, .push_i(ra1_push), .data_i(agu_addr[1]),
    .pop_i(ra1_pop), .data_o(ra1_dout), .full_o(ra1_full), .empty_o(ra1_empty), .count_o());
  fifo_v #(.T(logic [31:0]), .DEPTH(SA_DEPTH)) i_sa (.clk_i, .rst_ni, .push_i(sa_push), .data_i(agu_addr[2]),
    .pop_i(sa_pop), .data_o(sa_dout), .full_o(sa_full), .empty_o(sa_empty), .count_o());
  fifo_v #(.T(logic [31:0]), .DEPTH(RD_DEPTH)) i_rd0 (.clk_i, .rst_ni, .push_i(rd0_push), .data_i(tcdm_rdata_i[0]),
    .pop_i(rd0_pop), .data_o(rd0_dout), .full_o(rd0_full), .empty_o(rd0_empty), .count_o(rd0_cnt));
  fifo_v #(.T(logic [31:0]), .DEPTH(RD_DEPTH)) i_rd1 (.clk_i, .rst_ni, .push_i(rd1_push), .data_i(tcdm_rdata_i[1]),
    .pop_i(rd1_pop), .data_o(rd1_dout), .full_o(rd1_full), .empty_o(rd1_empty), .count_o(rd1_cnt));
  fifo_v #(.T(logic [31:0]), .DEPTH(STD_DEPTH)) i_std (.clk_i, .rst_ni, .push_i(std_push), .data_i(std_din),
    .pop_i(std_pop), .data_o(std_dout), .full_o(std_full), .empty_o(std_empty), .count_o());
  fifo_v #(.T(ntx_uop_t), .DEPTH(CMD_DEPTH)) i_cmd (.clk_i, .rst_ni, .push_i(cmd_push), .data_i(uop_din),
    .pop_i(cmd_pop), .data_o(uop_dout), .full_o(cmd_full), .empty_o(cmd_empty), .count_o());

  // ------------------------------------------------------------ sequencer
  logic init_pend_q;   // next iteration starts a new accumulation
  logic init_iss_q;    // its initial-value address is already queued
  logic init, init_mem, use_a, use_b, store, uses_b_op;
  logic [31:0] init_addr;

  always_comb begin
    init      = init_pend_q || (cmd.init_level == 3'd0);
    init_mem  = init && (ntx_init_src_e'(cmd.init_src) != INIT_ZERO);
    uses_b_op = op inside {OP_MAC, OP_VADDSUB, OP_VMULT, OP_OUTERP, OP_THTST, OP_MASK, OP_MASKMAC};
    use_b     = uses_b_op && (ntx_bsrc_e'(cmd.bsrc) == BSRC_AGU1);
    if (op == OP_COPY)        use_a = !cmd.flag;
    else if (op == OP_OUTERP) use_a = (cnt[0] == '0);
    else                      use_a = 1'b1;
    store     = (cmd.store_level > 3'd5) ? 1'b0 : dchain[cmd.store_level];
    unique case (ntx_init_src_e'(cmd.init_src))
      INIT_AGU1: init_addr = agu_addr[1];
      INIT_AGU2: init_addr = agu_addr[2];
      default:   init_addr = agu_addr[0];
    endcase

    step     = 1'b0;
    ra0_push = 1'b0; ra0_din = agu_addr[0];
    ra1_push = 1'b0; sa_push = 1'b0; cmd_push = 1'b0;
    uop_din  = '{init: init, init_mem: init_mem, use_a: use_a, use_b: use_b, store: store};
    if (state_q == S_RUN) begin
      if (init_mem && !init_iss_q) begin
        // first sub-step: queue the initial value's address on port 0
        if (!ra0_full) begin
          ra0_push = 1'b1;
          ra0_din  = init_addr;
        end
      end else if (!cmd_full && !(use_a && ra0_full) && !(use_b && ra1_full) && !(store && sa_full)) begin
        step     = 1'b1;
        cmd_push = 1'b1;
        ra0_push = use_a;
        ra1_push = use_b;
        sa_push  = store;
      end
    end
  end

  // ------------------------------------------------------------ FPU
  logic fpu_busy, res_valid;

  ntx_fpu i_fpu (
    .clk_i, .rst_ni,
    .cmd_i       (cmd),
    .uop_valid_i (!cmd_empty),
    .uop_i       (uop_dout),
    .uop_ready_o (cmd_pop),
    .rd0_valid_i (!rd0_empty),
    .rd0_data_i  (rd0_dout),
    .rd0_pop_o   (rd0_pop),
    .rd1_valid_i (!rd1_empty),
    .rd1_data_i  (rd1_dout),
    .rd1_pop_o   (rd1_pop),
    .res_valid_o (res_valid),
    .res_data_o  (std_din),
    .res_ready_i (!std_full),
    .busy_o      (fpu_busy)
  );
  assign std_push = res_valid && !std_full;

  // ------------------------------------------------------------ TCDM ports
  typedef enum logic [1:0] {K_NONE, K_READ, K_WRITE} kind_e;
  kind_e [1:0] kind_q;
  logic rd0_can, rd1_can, wr_go, wr_on0, wr_on1;

  always_comb begin
    rd0_can = !ra0_empty && (32'(rd0_cnt) + ((kind_q[0] == K_READ) ? 32'd1 : 32'd0) < RD_DEPTH);
    rd1_can = !ra1_empty && (32'(rd1_cnt) + ((kind_q[1] == K_READ) ? 32'd1 : 32'd0) < RD_DEPTH);
    wr_go   = !sa_empty && !std_empty;
    wr_on0  = wr_go && !rd0_can;
    wr_on1  = wr_go && !wr_on0;
    tcdm_req_o[0]   = wr_on0 || rd0_can;
    tcdm_req_d_o[0] = '{addr: wr_on0 ? sa_dout : ra0_dout, we: wr_on0, be: 4'hf, wdata: std_dout};
    tcdm_req_o[1]   = wr_on1 || rd1_can;
    tcdm_req_d_o[1] = '{addr: wr_on1 ? sa_dout : ra1_dout, we: wr_on1, be: 4'hf, wdata: std_dout};
    ra0_pop = tcdm_gnt_i[0] && !wr_on0 && rd0_can;
    ra1_pop = tcdm_gnt_i[1] && !wr_on1 && rd1_can;
    sa_pop  = (tcdm_gnt_i[0] && wr_on0) || (tcdm_gnt_i[1] && wr_on1);
    std_pop = sa_pop;
    rd0_push = tcdm_rvalid_i[0] && (kind_q[0] == K_READ);
    rd1_push = tcdm_rvalid_i[1] && (kind_q[1] == K_READ);
  end

  // ------------------------------------------------------------ state
  logic drained;
  assign drained = cmd_empty && ra0_empty && ra1_empty && sa_empty && rd0_empty && rd1_empty &&
                   std_empty && !fpu_busy && (kind_q[0] == K_NONE) && (kind_q[1] == K_NONE);
  assign done   = (state_q == S_DRAIN) && drained;
  assign busy_o = (state_q != S_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; init_pend_q <= 1'b0; init_iss_q <= 1'b0;
      kind_q  <= '{K_NONE, K_NONE};
    end else begin
      for (int p = 0; p < 2; p++) begin
        if (tcdm_req_o[p] && tcdm_gnt_i[p]) kind_q[p] <= tcdm_req_d_o[p].we ? K_WRITE : K_READ;
        else                                kind_q[p] <= K_NONE;
      end
      if (ra0_push && !step) init_iss_q <= 1'b1;
      if (step) begin
        init_iss_q  <= 1'b0;
        init_pend_q <= (cmd.init_level > 3'd5) ? 1'b0 : wrap[cmd.init_level];
      end
      unique case (state_q)
        S_IDLE:  if (start) begin state_q <= S_RUN; init_pend_q <= 1'b1; init_iss_q <= 1'b0; end
        S_RUN:   if (step && wrap[NTX_NUM_LOOPS]) state_q <= S_DRAIN;
        S_DRAIN: if (drained) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // TCDM answers exactly one cycle after the grant
  a_rvalid_latency: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (kind_q[0] != K_NONE) == tcdm_rvalid_i[0]);
  a_no_rd_overflow: assert property (@(posedge clk_i) disable iff (!rst_ni)
    !(rd0_push && rd0_full && !rd0_pop));

endmodule
