// tb_ntx_fpu: self-checking testbench of the NTX FPU (FMAC, comparator, ALU
// register, index counter, ReLU) in isolation from the memory ports.
//
// The testbench plays the NTX controller: it feeds micro-instructions and the
// two operand streams through valid/ready handshakes with random bubbles and
// random result back-pressure, and compares every result with a value
// computed here (double precision, rounded once to FP32; exact for the
// small dyadic operands used). Commands covered: MAC (zero and memory
// initialisation), VADDSUB (add and subtract), VMULT with fused ReLU,
// OUTERP, MAXMIN/argmax and argmin, THTST, MASK, MASKMAC and MEMSET.
// Rates checked with all streams valid: MAC one element per cycle, VADDSUB
// two cycles per element (the paper's 0.5 op/cycle).
module tb_ntx_fpu;
  import ntx_pkg::*;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  ntx_cmd_t    cmd;
  logic        uop_valid, uop_ready, rd0_valid, rd0_pop, rd1_valid, rd1_pop;
  logic        res_valid, res_ready, busy;
  ntx_uop_t    uop;
  logic [31:0] rd0_data, rd1_data, res_data;

  ntx_fpu dut (.clk_i(clk), .rst_ni(rst_n), .cmd_i(cmd),
    .uop_valid_i(uop_valid), .uop_i(uop), .uop_ready_o(uop_ready),
    .rd0_valid_i(rd0_valid), .rd0_data_i(rd0_data), .rd0_pop_o(rd0_pop),
    .rd1_valid_i(rd1_valid), .rd1_data_i(rd1_data), .rd1_pop_o(rd1_pop),
    .res_valid_o(res_valid), .res_data_o(res_data), .res_ready_i(res_ready), .busy_o(busy));

  // ---------------------------------------------------------------- stream drivers
  ntx_uop_t    uq[$];
  logic [31:0] q0[$], q1[$], eq[$];
  int          bubble = 0;         // percent of cycles a stream holds back
  int          bp = 0;             // percent of cycles results are refused
  bit          v_u, v_0, v_1;
  int          nres = 0, last_res = 0;
  string       tname;

  always_comb begin
    uop_valid = v_u && uq.size() > 0;
    uop       = uq.size() > 0 ? uq[0] : '0;
    rd0_valid = v_0 && q0.size() > 0;
    rd0_data  = q0.size() > 0 ? q0[0] : '0;
    rd1_valid = v_1 && q1.size() > 0;
    rd1_data  = q1.size() > 0 ? q1[0] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (uop_valid && uop_ready) void'(uq.pop_front());
    if (rd0_valid && rd0_pop) void'(q0.pop_front());
    if (rd1_valid && rd1_pop) void'(q1.pop_front());
    if (rd0_pop && !rd0_valid) begin failures++; $display("FAIL %s: pop of empty rd0", tname); end
    if (rd1_pop && !rd1_valid) begin failures++; $display("FAIL %s: pop of empty rd1", tname); end
    if (res_valid && res_ready) begin
      logic [31:0] e;
      checks++;
      e = eq.size() > 0 ? eq.pop_front() : 32'hdead_beef;
      if (res_data !== e) begin
        failures++;
        $display("FAIL %s result %0d: got %h expected %h", tname, nres, res_data, e);
      end
      nres++;
      last_res = cyc;
    end
  end

  always @(negedge clk) begin
    v_u = $urandom_range(99) >= bubble;
    v_0 = $urandom_range(99) >= bubble;
    v_1 = $urandom_range(99) >= bubble;
    res_ready = $urandom_range(99) >= bp;
  end

  // ---------------------------------------------------------------- helpers
  function automatic logic [31:0] rop();
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(127 + $urandom_range(12) - 6);
    f[22:0]  = {6'($urandom), 17'd0};
    return f;
  endfunction

  function automatic ntx_cmd_t mk(ntx_op_e op, bit flag = 0, ntx_cmp_e c = CMP_GT,
                                  bit relu = 0, bit argidx = 0);
    ntx_cmd_t r;
    r = '0;
    r.opcode = op; r.flag = flag; r.cmp = c; r.relu = relu; r.argidx = argidx;
    r.bsrc = BSRC_AGU1;
    return r;
  endfunction

  function automatic ntx_uop_t mu(bit init, bit init_mem, bit use_a, bit use_b, bit store);
    ntx_uop_t u;
    u.init = init; u.init_mem = init_mem; u.use_a = use_a; u.use_b = use_b; u.store = store;
    return u;
  endfunction

  task automatic drain(input string n);
    int t0;
    t0 = cyc;
    while ((uq.size() > 0 || eq.size() > 0 || busy) && cyc - t0 < 5000) @(negedge clk);
    checks++;
    if (uq.size() || eq.size() || q0.size() || q1.size()) begin
      failures++;
      $display("FAIL %s: left uops %0d results %0d rd0 %0d rd1 %0d", n, uq.size(), eq.size(),
               q0.size(), q1.size());
      uq.delete(); eq.delete(); q0.delete(); q1.delete();
    end
    repeat (2) @(negedge clk);
  endtask

  // one pass of every command; returns after all results were checked
  task automatic all_cmds();
    real acc, x;
    logic [31:0] a, b, init, best;
    int bi, len;
    // MAC, zero init
    tname = "MAC"; cmd = mk(OP_MAC);
    for (int o = 0; o < 6; o++) begin
      len = $urandom_range(12, 1); acc = 0.0;
      for (int k = 0; k < len; k++) begin
        a = rop(); b = rop(); q0.push_back(a); q1.push_back(b); acc += f2r(a) * f2r(b);
        uq.push_back(mu(k == 0, 0, 1, 1, k == len - 1));
      end
      eq.push_back(r2f(acc));
    end
    drain(tname);
    // MAC, init from memory, ReLU
    tname = "MAC-init-relu"; cmd = mk(OP_MAC, 0, CMP_GT, 1);
    for (int o = 0; o < 6; o++) begin
      init = rop(); q0.push_back(init); acc = f2r(init);
      for (int k = 0; k < 5; k++) begin
        a = rop(); b = rop(); q0.push_back(a); q1.push_back(b); acc += f2r(a) * f2r(b);
        uq.push_back(mu(k == 0, k == 0, 1, 1, k == 4));
      end
      eq.push_back(acc < 0.0 ? 32'd0 : r2f(acc));
    end
    drain(tname);
    // VADDSUB
    for (int f = 0; f < 2; f++) begin
      tname = f ? "VSUB" : "VADD"; cmd = mk(OP_VADDSUB, f);
      for (int k = 0; k < 10; k++) begin
        a = rop(); b = rop(); q0.push_back(a); q1.push_back(b);
        eq.push_back(r2f(f ? f2r(a) - f2r(b) : f2r(a) + f2r(b)));
        uq.push_back(mu(1, 0, 1, 1, 1));
      end
      drain(tname);
    end
    // VMULT with ReLU
    tname = "VMULT-relu"; cmd = mk(OP_VMULT, 0, CMP_GT, 1);
    for (int k = 0; k < 10; k++) begin
      a = rop(); b = rop(); q0.push_back(a); q1.push_back(b);
      x = f2r(a) * f2r(b);
      eq.push_back(x < 0.0 ? 32'd0 : r2f(x));
      uq.push_back(mu(1, 0, 1, 1, 1));
    end
    drain(tname);
    // OUTERP: a re-read every 4th element
    tname = "OUTERP"; cmd = mk(OP_OUTERP);
    for (int k = 0; k < 12; k++) begin
      if (k % 4 == 0) begin a = rop(); q0.push_back(a); end
      b = rop(); q1.push_back(b);
      eq.push_back(r2f(f2r(a) * f2r(b)));
      uq.push_back(mu(1, 0, k % 4 == 0, 1, 1));
    end
    drain(tname);
    // MAXMIN: max value, argmax, argmin
    for (int v = 0; v < 3; v++) begin
      tname = v == 0 ? "MAX" : v == 1 ? "ARGMAX" : "ARGMIN";
      cmd = mk(OP_MAXMIN, v == 2, CMP_GT, 0, v != 0);
      len = $urandom_range(20, 2);
      for (int k = 0; k < len; k++) begin
        a = rop(); q0.push_back(a);
        if (k == 0 || (v == 2 ? f2r(a) < f2r(best) : f2r(a) > f2r(best))) begin best = a; bi = k; end
        uq.push_back(mu(k == 0, 0, 1, 0, k == len - 1));
      end
      eq.push_back(v == 0 ? best : 32'(bi));
      drain(tname);
    end
    // THTST (a >= b) and MASK (a < b)
    tname = "THTST"; cmd = mk(OP_THTST, 0, CMP_GE);
    for (int k = 0; k < 10; k++) begin
      a = rop(); b = (k % 3 == 0) ? a : rop(); q0.push_back(a); q1.push_back(b);
      eq.push_back(f2r(a) >= f2r(b) ? FP_ONE : FP_ZERO);
      uq.push_back(mu(1, 0, 1, 1, 1));
    end
    drain(tname);
    tname = "MASK"; cmd = mk(OP_MASK, 0, CMP_LT);
    for (int k = 0; k < 10; k++) begin
      a = rop(); b = rop(); q0.push_back(a); q1.push_back(b);
      eq.push_back(f2r(a) < f2r(b) ? a : FP_ZERO);
      uq.push_back(mu(1, 0, 1, 1, 1));
    end
    drain(tname);
    // MASKMAC: acc += (a > threshold) ? b : 0, threshold from memory
    tname = "MASKMAC"; cmd = mk(OP_MASKMAC, 0, CMP_GT);
    for (int o = 0; o < 4; o++) begin
      init = rop(); q0.push_back(init); acc = 0.0;
      for (int k = 0; k < 8; k++) begin
        a = rop(); b = rop(); q0.push_back(a); q1.push_back(b);
        if (f2r(a) > f2r(init)) acc += f2r(b);
        uq.push_back(mu(k == 0, k == 0, 1, 1, k == 7));
      end
      eq.push_back(r2f(acc));
    end
    drain(tname);
    // MEMSET: value from memory, no operand a
    tname = "MEMSET"; cmd = mk(OP_COPY, 1);
    init = rop(); q0.push_back(init);
    for (int k = 0; k < 8; k++) begin
      uq.push_back(mu(k == 0, k == 0, 0, 0, 1));
      eq.push_back(init);
    end
    drain(tname);
    // COPY
    tname = "COPY"; cmd = mk(OP_COPY, 0);
    for (int k = 0; k < 8; k++) begin
      a = rop(); q0.push_back(a); eq.push_back(a);
      uq.push_back(mu(1, 0, 1, 0, 1));
    end
    drain(tname);
  endtask

  task automatic rate(input ntx_op_e op, input int n, input int exp_cyc);
    int t0;
    logic [31:0] a, b;
    tname = op == OP_MAC ? "rate-MAC" : "rate-VADD";
    cmd = mk(op);
    bubble = 0; bp = 0;
    @(negedge clk);
    t0 = cyc;
    for (int k = 0; k < n; k++) begin
      a = rop(); b = rop(); q0.push_back(a); q1.push_back(b);
      uq.push_back(mu(1, 0, 1, 1, 1));
      eq.push_back(op == OP_MAC ? r2f(f2r(a) * f2r(b)) : r2f(f2r(a) + f2r(b)));
    end
    drain(tname);
    checks++;
    if (last_res - t0 > exp_cyc) begin
      failures++;
      $display("FAIL %s: %0d elements took %0d cycles (limit %0d)", tname, n, last_res - t0, exp_cyc);
    end else $display("%s: %0d elements, last result after %0d cycles", tname, n, last_res - t0);
  endtask

  initial begin
    cmd = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    bubble = 0; bp = 0;  all_cmds();
    bubble = 30; bp = 30; all_cmds();
    rate(OP_MAC, 64, 64 + 2);
    rate(OP_VADDSUB, 32, 2 * 32 + 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #2_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
