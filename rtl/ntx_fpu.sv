// ntx_fpu: the NTX floating-point unit and its datapath control.
//
// Consumes one micro-instruction (ntx_uop_t) per loop-body iteration from the
// controller's command FIFO together with the operands that the controller
// requested from memory: the port 0 read-data stream carries the optional
// initial value followed by operand a, the port 1 stream carries operand b.
// Results leave through a valid/ready output towards the store-data FIFO.
//
// Contents (as in the paper's FPU block): the FMAC with wide accumulator
// (ntx_fmac), a comparator, the ALU register, a 16-bit index counter (for
// argmax/argmin) and a fused ReLU on stored results. Commands:
//   MAC      acc += a*b                         1 element/cycle
//   VADDSUB  x = a +/- b                        2 accumulator cycles/element
//   VMULT    x = a*b                            1 element/cycle (port-bound)
//   OUTERP   x = a*b, a held in the ALU register and only re-read when the
//            controller supplies a new one (use_a)
//   MAXMIN   running max (flag=0) or min (flag=1) of a in the ALU register,
//            index of the winner kept; store writes the value or, with
//            argidx, the 16-bit index as an unsigned integer word
//   THTST    x = (a cmp b) ? 1.0 : 0.0
//   MASK     x = (a cmp b) ? a : 0.0
//   MASKMAC  acc += (a cmp alu_reg) ? b : 0.0   (alu_reg = initial value)
//   COPY     x = a, or x = initial value with flag=1 (memset)
// The command list and throughputs are the paper's; the exact semantics of
// THTST, MASK, MASKMAC and of the initial value for MAXMIN/COPY are this
// design's reading of the one-line descriptions. Initialisation from memory
// costs one extra cycle; initialisation with zero is free. With zero
// initialisation MAXMIN takes the first element as its start value.
//
// Tool note: the FPU reads only the command fields that concern the
// datapath (opcode, compare, flags, ReLU, b source); the loop levels and
// the init source are used by the sequencer in ntx.
module ntx_fpu
  import ntx_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  input  ntx_cmd_t    cmd_i,        // stable while a command runs
  input  logic        uop_valid_i,
  input  ntx_uop_t    uop_i,
  output logic        uop_ready_o,
  input  logic        rd0_valid_i,
  input  logic [31:0] rd0_data_i,
  output logic        rd0_pop_o,
  input  logic        rd1_valid_i,
  input  logic [31:0] rd1_data_i,
  output logic        rd1_pop_o,
  output logic        res_valid_o,
  output logic [31:0] res_data_o,
  input  logic        res_ready_i,
  output logic        busy_o
);

  ntx_op_e op;
  assign op = ntx_op_e'(cmd_i.opcode);

  logic uses_fmac;
  assign uses_fmac = op inside {OP_MAC, OP_VADDSUB, OP_VMULT, OP_OUTERP, OP_MASKMAC};

  // per-uop progress
  logic init_done_q;   // memory init of current uop already performed
  logic half_q;        // VADDSUB: first (a) half done

  logic [31:0] alu_q;
  logic [15:0] idx_q, best_q;
  logic        first_q;            // MAXMIN: next element is the first

  // fmac control
  logic        f_step, f_clr, f_neg, f_snap, f_snap_rdy, f_res_valid;
  logic [31:0] f_a, f_b, f_res;

  // direct (non-FMAC) result register
  logic        d_valid_q;
  logic [31:0] d_data_q;
  logic        d_load;
  logic [31:0] d_next;

  // comparator
  logic [31:0] a_val, b_val, alu_eff;
  logic        cmp_res;

  logic need_init_mem, zinit, out_ok, have_a, have_b, fire;

  always_comb begin
    need_init_mem = uop_valid_i && uop_i.init && uop_i.init_mem && !init_done_q;
    zinit         = uop_i.init && !uop_i.init_mem;
    a_val         = rd0_data_i;
    unique case (ntx_bsrc_e'(cmd_i.bsrc))
      BSRC_ZERO: b_val = FP_ZERO;
      BSRC_ONE:  b_val = FP_ONE;
      default:   b_val = rd1_data_i;
    endcase
    alu_eff = zinit ? FP_ZERO : alu_q;
    if (op == OP_OUTERP && !uop_i.use_a) a_val = alu_q;
    unique case (op)
      OP_MASKMAC: cmp_res = fp_cmp(a_val, alu_eff, ntx_cmp_e'(cmd_i.cmp));
      OP_MAXMIN:  cmp_res = fp_cmp(a_val, alu_q, cmd_i.flag ? CMP_LT : CMP_GT);
      default:    cmp_res = fp_cmp(a_val, b_val, ntx_cmp_e'(cmd_i.cmp));
    endcase
    out_ok = uses_fmac ? f_snap_rdy : (!d_valid_q || res_ready_i);

    f_step = 1'b0; f_clr = 1'b0; f_neg = 1'b0; f_snap = 1'b0;
    f_a = a_val; f_b = b_val;
    rd0_pop_o = 1'b0; rd1_pop_o = 1'b0; uop_ready_o = 1'b0;
    d_load = 1'b0; d_next = '0;
    have_a = !uop_i.use_a || rd0_valid_i;
    have_b = !uop_i.use_b || rd1_valid_i;
    fire   = 1'b0;

    if (need_init_mem) begin
      // initialisation cycle: consume the initial value from port 0
      if (rd0_valid_i) begin
        rd0_pop_o = 1'b1;
        if (op inside {OP_MAC, OP_VADDSUB, OP_VMULT, OP_OUTERP}) begin
          f_step = 1'b1; f_clr = 1'b1; f_a = rd0_data_i; f_b = FP_ONE;
        end else if (op == OP_MASKMAC) begin
          f_step = 1'b1; f_clr = 1'b1; f_a = FP_ZERO; f_b = FP_ZERO;
        end
      end
    end else if (uop_valid_i) begin
      unique case (op)
        OP_VADDSUB: begin
          if (!half_q) begin
            if (have_a) begin
              rd0_pop_o = uop_i.use_a;
              f_step = 1'b1; f_clr = zinit; f_b = FP_ONE;
            end
          end else if (have_b && out_ok) begin
            rd1_pop_o = uop_i.use_b; f_step = 1'b1; f_a = b_val; f_b = FP_ONE;
            f_neg = cmd_i.flag; f_snap = uop_i.store; fire = 1'b1;
          end
        end
        default: begin
          if (have_a && have_b && (out_ok || !uop_i.store)) begin
            fire = 1'b1;
            rd0_pop_o = uop_i.use_a;
            rd1_pop_o = uop_i.use_b;
            unique case (op)
              OP_MAC, OP_VMULT, OP_OUTERP: begin
                f_step = 1'b1; f_clr = zinit; f_snap = uop_i.store;
              end
              OP_MASKMAC: begin
                f_step = 1'b1; f_clr = zinit; f_snap = uop_i.store;
                f_a = cmp_res ? b_val : FP_ZERO; f_b = FP_ONE;
              end
              OP_MAXMIN: begin
                d_load = uop_i.store;
              end
              OP_THTST: begin
                d_load = uop_i.store; d_next = cmp_res ? FP_ONE : FP_ZERO;
              end
              OP_MASK: begin
                d_load = uop_i.store; d_next = cmp_res ? a_val : FP_ZERO;
              end
              OP_COPY: begin
                d_load = uop_i.store; d_next = cmd_i.flag ? alu_eff : a_val;
              end
              default: ;
            endcase
          end
        end
      endcase
      uop_ready_o = fire;
    end
  end

  // MAXMIN update and ALU register / index counter
  logic        mm_take;
  logic [31:0] mm_val;
  logic [15:0] mm_best;
  always_comb begin
    mm_take = (uop_i.init && !uop_i.init_mem) || first_q || cmp_res;
    mm_val  = mm_take ? a_val : alu_q;
    mm_best = mm_take ? (uop_i.init ? 16'd0 : idx_q) : best_q;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      init_done_q <= 1'b0; half_q <= 1'b0;
      alu_q <= '0; idx_q <= '0; best_q <= '0; first_q <= 1'b0;
      d_valid_q <= 1'b0; d_data_q <= '0;
    end else begin
      // initialisation from memory
      if (need_init_mem && rd0_valid_i) begin
        init_done_q <= 1'b1;
        if (op inside {OP_MAXMIN, OP_MASKMAC, OP_COPY}) alu_q <= rd0_data_i;
        idx_q <= '0; best_q <= '0; first_q <= 1'b0;
      end
      if (op == OP_VADDSUB && uop_valid_i && !need_init_mem && !half_q && have_a)
        half_q <= 1'b1;
      if (fire) begin
        init_done_q <= 1'b0;
        half_q      <= 1'b0;
        unique case (op)
          OP_OUTERP: if (uop_i.use_a) alu_q <= rd0_data_i;
          OP_MAXMIN: begin
            alu_q   <= mm_val;
            best_q  <= mm_best;
            idx_q   <= (uop_i.init ? 16'd0 : idx_q) + 16'd1;
            first_q <= 1'b0;
          end
          OP_MASKMAC, OP_COPY: if (zinit) alu_q <= FP_ZERO;
          default: ;
        endcase
      end
      // direct results
      if (d_load) begin
        d_valid_q <= 1'b1;
        if (op == OP_MAXMIN) d_data_q <= cmd_i.argidx ? {16'd0, mm_best} : mm_val;
        else                 d_data_q <= d_next;
      end else if (res_ready_i) begin
        d_valid_q <= 1'b0;
      end
    end
  end

  ntx_fmac i_fmac (
    .clk_i, .rst_ni,
    .step_i       (f_step),
    .clr_i        (f_clr),
    .neg_i        (f_neg),
    .a_i          (f_a),
    .b_i          (f_b),
    .snap_i       (f_snap),
    .relu_i       (cmd_i.relu),
    .snap_ready_o (f_snap_rdy),
    .res_valid_o  (f_res_valid),
    .res_o        (f_res),
    .res_ready_i  (res_ready_i)
  );

  // fused ReLU on direct results (not on indices)
  logic [31:0] d_out;
  assign d_out = (cmd_i.relu && !(op == OP_MAXMIN && cmd_i.argidx) && d_data_q[31]) ? '0 : d_data_q;

  assign res_valid_o = f_res_valid | d_valid_q;
  assign res_data_o  = f_res_valid ? f_res : d_out;
  assign busy_o      = res_valid_o | init_done_q | half_q;

endmodule
