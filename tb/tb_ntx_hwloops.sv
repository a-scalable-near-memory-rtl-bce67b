// tb_ntx_hwloops: self-checking testbench of the NTX hardware loop nest.
//
// Programs random loop counts (1..4 per level) and random outer levels, then
// advances the nest with randomly gapped step pulses. A software model of
// the five counters (innermost first, each counter advancing when all inner
// ones are done) is compared with cnt_o, wrap_o and dchain_o after every
// step. Checks the cycle count the paper implies: the whole nest takes
// exactly prod(N_i) steps, one per enabled cycle, and the terminal wrap
// (wrap_o[NUM_LOOPS]) fires exactly once at the end.
module tb_ntx_hwloops;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic clear, step;
  logic [4:0][15:0] n;
  logic [2:0]       lvl;
  logic [4:0][15:0] cnt;
  logic [5:0]       wrap, dchain;

  ntx_hwloops dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .step_i(step),
    .loop_n_i(n), .outer_level_i(lvl), .cnt_o(cnt), .wrap_o(wrap), .dchain_o(dchain));

  int m[5];

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  initial begin
    int total, steps, term;
    clear = 0; step = 0; n = '0; lvl = 5;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      total = 1;
      for (int i = 0; i < 5; i++) n[i] = 16'($urandom_range(4, 1));
      lvl = 3'($urandom_range(5, 1));
      for (int i = 0; i < int'(lvl); i++) total *= n[i];
      @(negedge clk); clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < 5; i++) m[i] = 0;
      steps = 0; term = 0;
      while (steps < total) begin
        step = ($urandom_range(3) != 0);
        #1;
        if (step) begin
          // model: done flags and expected outputs before the edge
          bit d[5]; bit ch;
          for (int i = 0; i < 5; i++) d[i] = (i >= int'(lvl)) || (n[i] <= 1) || (m[i] == n[i] - 1);
          ch = 1;
          for (int i = 0; i <= 5; i++) begin
            check(dchain[i] == ch && wrap[i] == ch, $sformatf("t%0d step%0d level%0d chain", t, steps, i));
            if (i < 5) begin
              if (ch) m[i] = d[i] ? 0 : m[i] + 1;
              ch = ch & d[i];
            end
          end
          if (wrap[5]) term++;
          steps++;
        end else begin
          check(wrap == '0, "wrap without step");
        end
        @(negedge clk);
        for (int i = 0; i < 5; i++) check(cnt[i] == 16'(m[i]), $sformatf("t%0d cnt[%0d]", t, i));
        step = 0;
      end
      check(term == 1, $sformatf("t%0d terminal wrap after %0d steps (fired %0d)", t, total, term));
      check(cnt == '0, "counters back at zero after the nest");
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
