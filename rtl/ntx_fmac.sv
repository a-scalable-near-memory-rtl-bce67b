// ntx_fmac: NTX fused multiply-accumulate unit with a wide fixed-point
// partial carry-save (PCS) accumulator.
//
// How it works. Each accumulate step multiplies two FP32 operands exactly
// (24x24 -> 48-bit significand product), aligns the product to a wide two's
// complement fixed-point format and adds it to the accumulator without any
// rounding. The accumulator is split into two segments (ACC_W = 300 bits,
// SEG_W = 150): the low segment's carry-out is kept in a carry register and
// added into the high segment one step later, so no carry ripples through all
// 300 bits in one cycle (the paper's "partial carry-save arithmetic with 2
// segments"). Rounding is deferred: only when a result is requested (`snap`)
// is the accumulator captured, the carry resolved, normalised and rounded once
// to FP32 (round to nearest, ties to even) in a separate pipeline stage
// ("PCS Norm"). A fused ReLU can be applied to that result.
//
// Fixed-point format (own choice; the paper only says ~300 bits): LSB weight
// 2^-FRAC_W with FRAC_W = 170, sign bit weight 2^129. Product bits below 2^-170
// are truncated toward zero; a product or sum beyond the range sets a sticky
// overflow flag and the result becomes +/-infinity. Subnormal inputs are
// flushed to zero, subnormal results are flushed to zero, NaN/Inf inputs get no
// special treatment.
//
// Interface and timing:
//   step_i  : perform acc = (clr_i ? 0 : acc) + (neg_i ? -1 : 1) * a_i * b_i
//   snap_i  : (with step_i) capture the post-step accumulator for output;
//             allowed only when snap_ready_o; the rounded value appears on
//             res_o with res_valid_o from the next cycle until res_ready_i.
//   Throughput one step per cycle; result latency 1 cycle after the snap step.
module ntx_fmac #(
  parameter int unsigned ACC_W  = 300,
  parameter int unsigned SEG_W  = 150,
  parameter int unsigned FRAC_W = 170
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        step_i,
  input  logic        clr_i,
  input  logic        neg_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  input  logic        snap_i,
  input  logic        relu_i,
  output logic        snap_ready_o,
  output logic        res_valid_o,
  output logic [31:0] res_o,
  input  logic        res_ready_i
);

  localparam int unsigned HI_W = ACC_W - SEG_W;

  // ------------------------------------------------------------ product align
  logic [23:0]        ma, mb;
  logic [47:0]        prod;
  logic               psign;
  int                 sh;
  logic [ACC_W-1:0]   mag_al, addend;
  logic               povf;

  always_comb begin
    ma     = (a_i[30:23] == 8'd0) ? 24'd0 : {1'b1, a_i[22:0]};
    mb     = (b_i[30:23] == 8'd0) ? 24'd0 : {1'b1, b_i[22:0]};
    prod   = ma * mb;
    psign  = a_i[31] ^ b_i[31] ^ neg_i;
    // weight of prod bit 0 is 2^(ea+eb-300); its accumulator position:
    sh     = int'(a_i[30:23]) + int'(b_i[30:23]) - 300 + int'(FRAC_W);
    povf   = 1'b0;
    mag_al = '0;
    if (prod != '0) begin
      if (sh >= 0) begin
        mag_al = ACC_W'(prod) << sh;
        // overflow if any product bit lands at or above the sign bit
        povf   = (sh + 48 > int'(ACC_W) - 1) && ((prod >> (int'(ACC_W) - 1 - sh)) != '0);
      end else begin
        mag_al = ACC_W'(prod >> (-sh));
      end
    end
    addend = psign ? (~mag_al + ACC_W'(1)) : mag_al;
  end

  // ------------------------------------------------------------ PCS accumulator
  logic [SEG_W-1:0] lo_q, lo_d;
  logic [HI_W-1:0]  hi_q, hi_d;
  logic             c_q, c_d, ovf_q, ovf_d;

  always_comb begin
    logic [SEG_W:0] lo_sum;
    logic [SEG_W-1:0] blo;
    logic [HI_W-1:0]  bhi;
    logic [HI_W:0]    hi_x;
    logic             bc, bovf;
    blo  = clr_i ? '0 : lo_q;
    bhi  = clr_i ? '0 : hi_q;
    bc   = clr_i ? 1'b0 : c_q;
    bovf = clr_i ? 1'b0 : ovf_q;
    lo_sum = {1'b0, blo} + {1'b0, addend[SEG_W-1:0]};
    lo_d   = lo_sum[SEG_W-1:0];
    c_d    = lo_sum[SEG_W];
    hi_x   = {bhi[HI_W-1], bhi} + {addend[ACC_W-1], addend[ACC_W-1:SEG_W]} + (HI_W+1)'(bc);
    hi_d   = hi_x[HI_W-1:0];
    // signed overflow of the high segment
    ovf_d  = bovf | povf | (hi_x[HI_W] != hi_x[HI_W-1]);
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      lo_q <= '0; hi_q <= '0; c_q <= 1'b0; ovf_q <= 1'b0;
    end else if (step_i) begin
      lo_q <= lo_d; hi_q <= hi_d; c_q <= c_d; ovf_q <= ovf_d;
    end
  end

  // ------------------------------------------------------------ norm stage
  logic [SEG_W-1:0] s_lo_q;
  logic [HI_W-1:0]  s_hi_q;
  logic             s_c_q, s_ovf_q, s_relu_q, s_valid_q;

  assign snap_ready_o = !s_valid_q || res_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      s_valid_q <= 1'b0;
      s_lo_q <= '0; s_hi_q <= '0; s_c_q <= 1'b0; s_ovf_q <= 1'b0; s_relu_q <= 1'b0;
    end else begin
      if (step_i && snap_i) begin
        s_valid_q <= 1'b1;
        s_lo_q <= lo_d; s_hi_q <= hi_d; s_c_q <= c_d; s_ovf_q <= ovf_d; s_relu_q <= relu_i;
      end else if (res_ready_i) begin
        s_valid_q <= 1'b0;
      end
    end
  end

  // resolve the carry, normalise and round once
  always_comb begin
    logic [ACC_W-1:0] sum, mag, nrm;
    logic             sgn, guard, sticky, rup;
    int               p;
    int               e;
    logic [23:0]      mant;
    sum   = {s_hi_q, s_lo_q} + (ACC_W'(s_c_q) << SEG_W);
    sgn   = sum[ACC_W-1];
    mag   = sgn ? (~sum + ACC_W'(1)) : sum;
    p     = -1;
    for (int i = 0; i < int'(ACC_W); i++) if (mag[i]) p = i;
    nrm   = (p >= 0) ? (mag << (int'(ACC_W) - 1 - p)) : '0;
    guard = nrm[ACC_W-25];
    sticky = |nrm[ACC_W-26:0];
    mant  = {1'b0, nrm[ACC_W-2 -: 23]};
    rup   = guard && (sticky || mant[0]);
    mant  = mant + 24'(rup);
    e     = p - int'(FRAC_W) + 127 + int'(mant[23]);
    if (s_ovf_q)        res_o = {sgn, 8'hff, 23'd0};
    else if (p < 0)     res_o = 32'd0;
    else if (e >= 255)  res_o = {sgn, 8'hff, 23'd0};
    else if (e <= 0)    res_o = {sgn, 31'd0};
    else                res_o = {sgn, 8'(e), mant[22:0]};
    if (s_relu_q && res_o[31]) res_o = 32'd0;
  end

  assign res_valid_o = s_valid_q;

endmodule
