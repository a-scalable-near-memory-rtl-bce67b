// tb_ntx: self-checking testbench of one NTX co-processor.
//
// A behavioural TCDM with two ports (single-cycle, optionally random grant
// stalls to model bank conflicts) is attached to the NTX. The testbench
// programs commands through the register interface and compares the memory
// contents with results computed here in double precision and rounded to
// FP32 once (exact for the chosen small dyadic operands). Covered: MAC as a
// 1-D convolution (several outputs per command, AGU2 write-back, cycle
// count close to one MAC per cycle), MAC with the accumulator initialised
// from memory, VADDSUB (about two cycles per element), VMULT with fused ReLU,
// OUTERP, MAXMIN with argmax, THTST, MASK, MASKMAC, COPY and MEMSET, the
// command staging (next command written while one runs), the IRQ, and a run
// with random TCDM stalls.
module tb_ntx;
  import ntx_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;

  logic        cfg_req, cfg_gnt, cfg_rvalid, irq, busy;
  mem_req_t    cfg_req_d;
  logic [31:0] cfg_rdata;
  logic [1:0]       t_req, t_gnt, t_rvalid;
  mem_req_t [1:0]   t_req_d;
  logic [1:0][31:0] t_rdata;

  ntx dut (
    .clk_i (clk), .rst_ni (rst_n),
    .cfg_req_i (cfg_req), .cfg_req_d_i (cfg_req_d), .cfg_gnt_o (cfg_gnt),
    .cfg_rvalid_o (cfg_rvalid), .cfg_rdata_o (cfg_rdata), .irq_o (irq), .busy_o (busy),
    .tcdm_req_o (t_req), .tcdm_req_d_o (t_req_d), .tcdm_gnt_i (t_gnt),
    .tcdm_rvalid_i (t_rvalid), .tcdm_rdata_i (t_rdata)
  );

  // ---------------------------------------------------------------- TCDM model
  logic [31:0] mem [4096];
  int          stall_pct = 0;
  always_comb for (int p = 0; p < 2; p++) t_gnt[p] = t_req[p] && !stall_q[p];
  logic [1:0] stall_q;
  always_ff @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      stall_q[p]  <= ($urandom_range(99) < stall_pct);
      t_rvalid[p] <= t_req[p] && t_gnt[p];
      if (t_req[p] && t_gnt[p]) begin
        if (t_req_d[p].we) mem[t_req_d[p].addr[13:2]] <= t_req_d[p].wdata;
        else               t_rdata[p] <= mem[t_req_d[p].addr[13:2]];
      end
    end
  end

  // ---------------------------------------------------------------- register access
  // driven on the falling edge, so the DUT samples stable values
  task automatic wr(input logic [7:0] off, input logic [31:0] data);
    @(negedge clk);
    cfg_req   = 1'b1;
    cfg_req_d = '{addr: {24'h0, off}, we: 1'b1, be: 4'hf, wdata: data};
    #1;
    while (!cfg_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_req = 1'b0;
  endtask

  task automatic rd(input logic [7:0] off, output logic [31:0] data);
    @(negedge clk);
    cfg_req   = 1'b1;
    cfg_req_d = '{addr: {24'h0, off}, we: 1'b0, be: 4'hf, wdata: '0};
    #1;
    while (!cfg_gnt) begin @(negedge clk); #1; end
    @(negedge clk);
    cfg_req = 1'b0;
    while (!cfg_rvalid) @(negedge clk);
    data = cfg_rdata;
  endtask

  // program loops (counts), bases (word indices) and strides (in words); the
  // step sizes are p_i = s_i - sum_{k<i} (N_k - 1) * s_k, so that the address
  // of iteration (i0..i4) is base + sum i_k * s_k
  task automatic setup(input int n[5], input int base[3], input int s[3][5]);
    int p;
    for (int i = 0; i < 5; i++) wr(NTX_REG_LOOP0 + 8'(4*i), n[i]);
    for (int a = 0; a < 3; a++) begin
      wr(NTX_REG_BASE0 + 8'(4*a), base[a] * 4);
      for (int l = 0; l < 5; l++) begin
        p = s[a][l];
        for (int k = 0; k < l; k++) p -= (n[k] - 1) * s[a][k];
        wr(NTX_REG_STEP0 + 8'(4*(a*5+l)), p * 4);
      end
    end
  endtask

  function automatic logic [31:0] mkcmd(ntx_op_e op, int outer, int initl, int storel,
      ntx_init_src_e isrc = INIT_ZERO, ntx_bsrc_e bsrc = BSRC_AGU1, ntx_cmp_e cmp = CMP_GT,
      bit relu = 0, bit argidx = 0, bit flag = 0);
    ntx_cmd_t c;
    c = '0;
    c.opcode = op; c.outer_level = 3'(outer); c.init_level = 3'(initl); c.store_level = 3'(storel);
    c.init_src = isrc; c.bsrc = bsrc; c.cmp = cmp; c.relu = relu; c.argidx = argidx; c.flag = flag;
    return {4'd0, c};
  endfunction

  int t_start, t_end;
  int cyc = 0;
  always @(posedge clk) cyc++;

  task automatic launch_wait(input logic [31:0] c);
    wr(NTX_REG_COMMAND, c);
    t_start = cyc;
    while (!busy) @(negedge clk);
    while (busy) @(negedge clk);
    t_end = cyc;
  endtask

  task automatic check(input string what, input logic [31:0] got, input logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h (%f) expected %h (%f)", what, got, f2r(got), exp, f2r(exp));
    end
  endtask

  function automatic real rnd_val();
    return real'(int'($urandom_range(64)) - 32) / 8.0;
  endfunction

  // ---------------------------------------------------------------- tests
  localparam int A = 0, W = 512, O = 1024, X = 1536;

  initial begin
    int n[5], b[3], s[3][5];
    real acc, ra[], rb[];
    logic [31:0] v;
    int K, J, best;
    cfg_req = 0; cfg_req_d = '0;
    for (int i = 0; i < 4096; i++) mem[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);

    // -------- 1. MAC as a 1-D convolution: out[j] = sum_k a[j+k] * w[k]
    K = 9; J = 40;
    for (int i = 0; i < K + J; i++) mem[A+i] = r2f(rnd_val());
    for (int i = 0; i < K; i++)     mem[W+i] = r2f(rnd_val());
    n = '{K, J, 1, 1, 1}; b = '{A, W, O};
    s = '{'{1, 1, 0, 0, 0}, '{1, 0, 0, 0, 0}, '{0, 1, 0, 0, 0}};
    setup(n, b, s);
    wr(NTX_REG_IRQ, 32'h3);
    launch_wait(mkcmd(OP_MAC, 2, 1, 1));
    for (int j = 0; j < J; j++) begin
      acc = 0.0;
      for (int k = 0; k < K; k++) acc += f2r(mem[A+j+k]) * f2r(mem[W+k]);
      check($sformatf("conv[%0d]", j), mem[O+j], r2f(acc));
    end
    checks++;
    if (t_end - t_start > K*J + J + 20 || t_end - t_start < K*J) begin
      failures++; $display("FAIL MAC cycles %0d for %0d MACs", t_end - t_start, K*J);
    end
    $display("MAC: %0d MACs in %0d cycles", K*J, t_end - t_start);
    checks++; if (!irq) begin failures++; $display("FAIL irq not raised"); end
    rd(NTX_REG_IRQ, v); check("irq reg", v, 32'h3);
    wr(NTX_REG_IRQ, 32'h1);
    checks++; if (irq) begin failures++; $display("FAIL irq not cleared"); end

    // -------- 2. MAC with init from memory (AGU2): out[j] += a[j]*w[0]
    for (int j = 0; j < J; j++) mem[X+j] = mem[O+j];
    n = '{1, J, 1, 1, 1}; b = '{A, W, O};
    s = '{'{1, 1, 0, 0, 0}, '{0, 0, 0, 0, 0}, '{0, 1, 0, 0, 0}};
    setup(n, b, s);
    launch_wait(mkcmd(OP_MAC, 2, 1, 1, INIT_AGU2));
    for (int j = 0; j < J; j++)
      check($sformatf("mac-init[%0d]", j), mem[O+j], r2f(f2r(mem[X+j]) + f2r(mem[A+j]) * f2r(mem[W])));

    // -------- 3. VADDSUB (subtract): out[i] = a[i] - b[i], 2 cycles/element
    J = 32;
    for (int i = 0; i < J; i++) begin mem[A+i] = r2f(rnd_val()); mem[W+i] = r2f(rnd_val()); end
    n = '{J, 1, 1, 1, 1}; b = '{A, W, O};
    s = '{'{1, 0, 0, 0, 0}, '{1, 0, 0, 0, 0}, '{1, 0, 0, 0, 0}};
    setup(n, b, s);
    launch_wait(mkcmd(OP_VADDSUB, 1, 0, 0, .flag(1)));
    for (int i = 0; i < J; i++)
      check($sformatf("vsub[%0d]", i), mem[O+i], r2f(f2r(mem[A+i]) - f2r(mem[W+i])));
    checks++;
    if (t_end - t_start > 2*J + 20 || t_end - t_start < 2*J) begin
      failures++; $display("FAIL VADDSUB cycles %0d for %0d elements", t_end - t_start, J);
    end

    // -------- 4. VMULT with fused ReLU
    launch_wait(mkcmd(OP_VMULT, 1, 0, 0, .relu(1)));
    for (int i = 0; i < J; i++) begin
      acc = f2r(mem[A+i]) * f2r(mem[W+i]);
      check($sformatf("vmult-relu[%0d]", i), mem[O+i], acc < 0.0 ? 32'd0 : r2f(acc));
    end

    // -------- 5. THTST a > b, MASK a >= b, COPY
    launch_wait(mkcmd(OP_THTST, 1, 0, 0, .cmp(CMP_GT)));
    for (int i = 0; i < J; i++)
      check($sformatf("thtst[%0d]", i), mem[O+i], (f2r(mem[A+i]) > f2r(mem[W+i])) ? FP_ONE : FP_ZERO);
    launch_wait(mkcmd(OP_MASK, 1, 0, 0, .cmp(CMP_GE)));
    for (int i = 0; i < J; i++)
      check($sformatf("mask[%0d]", i), mem[O+i], (f2r(mem[A+i]) >= f2r(mem[W+i])) ? mem[A+i] : FP_ZERO);
    launch_wait(mkcmd(OP_COPY, 1, 0, 0));
    for (int i = 0; i < J; i++) check($sformatf("copy[%0d]", i), mem[O+i], mem[A+i]);

    // -------- 6. MEMSET from init value in memory (AGU1 points at a constant)
    mem[W+100] = r2f(2.5);
    n = '{J, 1, 1, 1, 1}; b = '{A, W+100, O};
    s = '{'{1, 0, 0, 0, 0}, '{0, 0, 0, 0, 0}, '{1, 0, 0, 0, 0}};
    setup(n, b, s);
    launch_wait(mkcmd(OP_COPY, 1, 2, 0, INIT_AGU1, .flag(1)));
    for (int i = 0; i < J; i++) check($sformatf("memset[%0d]", i), mem[O+i], r2f(2.5));

    // -------- 7. MAXMIN argmax per row (rows of 12), value and index
    K = 12; J = 6;
    for (int i = 0; i < K*J; i++) mem[A+i] = r2f(rnd_val());
    n = '{K, J, 1, 1, 1}; b = '{A, W, O};
    s = '{'{1, K, 0, 0, 0}, '{0, 0, 0, 0, 0}, '{0, 1, 0, 0, 0}};
    setup(n, b, s);
    launch_wait(mkcmd(OP_MAXMIN, 2, 1, 1));
    for (int j = 0; j < J; j++) begin
      best = 0;
      for (int k = 1; k < K; k++) if (f2r(mem[A+j*K+k]) > f2r(mem[A+j*K+best])) best = k;
      check($sformatf("max[%0d]", j), mem[O+j], mem[A+j*K+best]);
    end
    launch_wait(mkcmd(OP_MAXMIN, 2, 1, 1, .argidx(1)));
    for (int j = 0; j < J; j++) begin
      best = 0;
      for (int k = 1; k < K; k++) if (f2r(mem[A+j*K+k]) > f2r(mem[A+j*K+best])) best = k;
      check($sformatf("argmax[%0d]", j), mem[O+j], 32'(best));
    end
    launch_wait(mkcmd(OP_MAXMIN, 2, 1, 1, .flag(1)));
    for (int j = 0; j < J; j++) begin
      best = 0;
      for (int k = 1; k < K; k++) if (f2r(mem[A+j*K+k]) < f2r(mem[A+j*K+best])) best = k;
      check($sformatf("min[%0d]", j), mem[O+j], mem[A+j*K+best]);
    end

    // -------- 8. OUTERP: out[i][j] = a[i] * b[j] (a re-read once per L0 sweep)
    K = 8; J = 5;
    for (int i = 0; i < 16; i++) begin mem[A+i] = r2f(rnd_val()); mem[W+i] = r2f(rnd_val()); end
    n = '{K, J, 1, 1, 1}; b = '{A, W, O};
    s = '{'{0, 1, 0, 0, 0}, '{1, 0, 0, 0, 0}, '{1, K, 0, 0, 0}};
    setup(n, b, s);
    launch_wait(mkcmd(OP_OUTERP, 2, 0, 0));
    for (int i = 0; i < J; i++)
      for (int j = 0; j < K; j++)
        check($sformatf("outerp[%0d][%0d]", i, j), mem[O+i*K+j], r2f(f2r(mem[A+i]) * f2r(mem[W+j])));
    checks++;
    if (t_end - t_start > K*J + 20) begin failures++; $display("FAIL OUTERP cycles %0d", t_end - t_start); end

    // -------- 9. MASKMAC: sum of b where a == init value (maxpool backward style)
    K = 4; J = 4;
    for (int i = 0; i < K*J; i++) begin mem[A+i] = r2f(real'($urandom_range(3))); mem[W+i] = r2f(rnd_val()); end
    mem[X] = r2f(2.0);
    n = '{K, J, 1, 1, 1}; b = '{A, W, O};
    s = '{'{1, K, 0, 0, 0}, '{1, K, 0, 0, 0}, '{0, 1, 0, 0, 0}};
    setup(n, b, s);
    wr(NTX_REG_BASE0 + 8'd4, W*4);
    // init value from AGU2's address is the output; place the threshold there
    for (int j = 0; j < J; j++) mem[O+j] = r2f(2.0);
    launch_wait(mkcmd(OP_MASKMAC, 2, 1, 1, INIT_AGU2, .cmp(CMP_EQ)));
    for (int j = 0; j < J; j++) begin
      acc = 0.0;
      for (int k = 0; k < K; k++) if (f2r(mem[A+j*K+k]) == 2.0) acc += f2r(mem[W+j*K+k]);
      check($sformatf("maskmac[%0d]", j), mem[O+j], r2f(acc));
    end

    // -------- 10. staging: next command prepared and issued while one runs;
    //              random TCDM stalls; 3-level loop nest
    stall_pct = 30;
    K = 5; J = 6;
    for (int i = 0; i < 128; i++) mem[A+i] = r2f(rnd_val());
    for (int i = 0; i < 16; i++)  mem[W+i] = r2f(rnd_val());
    // out[c][j] = sum_k a[c*32 + j + k] * w[k], c = 0..2 (L2)
    n = '{K, J, 3, 1, 1}; b = '{A, W, O};
    s = '{'{1, 1, 32, 0, 0}, '{1, 0, 0, 0, 0}, '{0, 1, J, 0, 0}};
    setup(n, b, s);
    wr(NTX_REG_COMMAND, mkcmd(OP_MAC, 3, 1, 1));
    // stage a second command (different output base) while the first runs
    wr(NTX_REG_BASE0 + 8'd8, X*4);
    rd(NTX_REG_STATUS, v);
    checks++; if (v[0] !== 1'b1) begin failures++; $display("FAIL status not busy"); end
    wr(NTX_REG_COMMAND, mkcmd(OP_MAC, 3, 1, 1, .relu(1)));  // stalls until the first is done
    while (!busy) @(negedge clk);
    while (busy) @(negedge clk);
    for (int c = 0; c < 3; c++)
      for (int j = 0; j < J; j++) begin
        acc = 0.0;
        for (int k = 0; k < K; k++) acc += f2r(mem[A+c*32+j+k]) * f2r(mem[W+k]);
        check($sformatf("nest[%0d][%0d]", c, j), mem[O+c*J+j], r2f(acc));
        check($sformatf("nest-relu[%0d][%0d]", c, j), mem[X+c*J+j], acc < 0.0 ? 32'd0 : r2f(acc));
      end

    // -------- 11. precision: a sum that a float32 FPU would round; deferred
    //              rounding gives the exactly rounded result
    stall_pct = 0;
    mem[A+0] = r2f(16777216.0); mem[A+1] = r2f(1.0); mem[A+2] = r2f(1.0); mem[A+3] = r2f(-16777216.0);
    for (int i = 0; i < 4; i++) mem[W+i] = FP_ONE;
    n = '{4, 1, 1, 1, 1}; b = '{A, W, O};
    s = '{'{1, 0, 0, 0, 0}, '{1, 0, 0, 0, 0}, '{0, 0, 0, 0, 0}};
    setup(n, b, s);
    launch_wait(mkcmd(OP_MAC, 1, 1, 1));
    check("wide-accumulator", mem[O], r2f(2.0));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
