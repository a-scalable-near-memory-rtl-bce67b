// tb_ntx_agu: self-checking testbench of the NTX address generation unit.
//
// The AGU is driven by a real ntx_hwloops instance (as inside the NTX), with
// random loop counts and strides s_i converted into AGU steps
// p_i = s_i - sum_{k<i} (N_k - 1) * s_k. Every cycle the address is compared
// with base + sum_k i_k * s_k computed from the loop indices, i.e. the AGU
// must produce one new address per step with a single addition. Also checks
// that clear loads the base and that no step leaves the address unchanged.
module tb_ntx_agu;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, step;
  logic [4:0][15:0] n;
  logic [4:0][15:0] cnt;
  logic [5:0]       wrap, dchain;
  logic [31:0]      base, addr;
  logic [4:0][31:0] p;

  ntx_hwloops loops (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .step_i(step),
    .loop_n_i(n), .outer_level_i(3'd5), .cnt_o(cnt), .wrap_o(wrap), .dchain_o(dchain));
  ntx_agu dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .base_i(base),
    .step_i(p), .en_i(wrap[4:0]), .addr_o(addr));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int s[5], total, exp_a;
    logic [31:0] prev;
    clear = 0; step = 0; n = '0; base = 0; p = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 30; t++) begin
      total = 1;
      base = 32'($urandom_range(1 << 20)) << 2;
      for (int i = 0; i < 5; i++) begin
        n[i] = 16'($urandom_range(4, 1));
        s[i] = ($urandom_range(64) - 32) * 4;
        total *= n[i];
      end
      for (int i = 0; i < 5; i++) begin
        int q;
        q = s[i];
        for (int k = 0; k < i; k++) q -= (n[k] - 1) * s[k];
        p[i] = 32'(q);
      end
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      check(addr == base, "clear loads the base");
      for (int st = 0; st < total; ) begin
        step = ($urandom_range(4) != 0);
        prev = addr;
        @(negedge clk);
        if (step) st++; else check(addr == prev, "no step keeps the address");
        step = 0;
        if (st < total) begin
          exp_a = int'(base);
          for (int i = 0; i < 5; i++) exp_a += int'(cnt[i]) * s[i];
          check(addr == 32'(exp_a), $sformatf("t%0d step%0d addr %h exp %h", t, st, addr, exp_a));
        end
      end
    end
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
