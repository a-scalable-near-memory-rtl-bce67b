// tb_ntx_fmac: self-checking testbench of the NTX FMAC with the wide
// partial-carry-save accumulator.
//
// Streams random dot products (1..16 terms, operands with 8-bit significands
// and exponents in +/-12, random signs and subtract requests) into the unit
// and compares each snapped result with the exact sum computed in double
// precision and rounded once to FP32 (exact for these operands, so a single
// deferred rounding must reproduce it bit for bit). Also checks the fused
// ReLU, a catastrophic-cancellation case that only an exact accumulator
// gets right (2^60 + 1 - 2^60 = 1), back-pressure on the result port, and
// the rate: back-to-back dot products take one cycle per term with the
// result one cycle after the last term.
module tb_ntx_fmac;
  import tb_fp_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        step, clr, neg, snap, relu, snap_ready, res_valid, res_ready;
  logic [31:0] a, b, res;

  ntx_fmac dut (.clk_i(clk), .rst_ni(rst_n), .step_i(step), .clr_i(clr), .neg_i(neg),
    .a_i(a), .b_i(b), .snap_i(snap), .relu_i(relu), .snap_ready_o(snap_ready),
    .res_valid_o(res_valid), .res_o(res), .res_ready_i(res_ready));

  logic [31:0] expq[$];
  int          nres = 0, last_res_cyc = 0, cyc = 0;
  always @(posedge clk) cyc++;
  always @(posedge clk) if (rst_n && res_valid && res_ready) begin
    logic [31:0] e;
    checks++;
    e = expq.pop_front();
    if (res !== e) begin
      failures++;
      $display("FAIL result %0d: got %h expected %h", nres, res, e);
    end
    nres++;
    last_res_cyc = cyc;
  end

  function automatic logic [31:0] rnd_op();
    logic [31:0] f;
    f[31]    = 1'($urandom);
    f[30:23] = 8'(127 + $urandom_range(24) - 12);
    f[22:0]  = {7'($urandom), 16'd0};
    return f;
  endfunction

  // one dot product; gap_pct: chance of an idle cycle between terms
  task automatic dot(input int len, input bit do_relu, input int gap_pct);
    real acc = 0.0;
    acc = 0.0;
    for (int k = 0; k < len; k++) begin
      while ($urandom_range(99) < gap_pct) begin step = 0; @(negedge clk); end
      a = rnd_op(); b = rnd_op(); neg = 1'($urandom);
      acc = neg ? acc - f2r(a) * f2r(b) : acc + f2r(a) * f2r(b);
      clr = (k == 0); snap = (k == len - 1); relu = do_relu; step = 1;
      if (snap) begin
        #1;
        while (!snap_ready) begin step = 0; @(negedge clk); step = 1; #1; end
        expq.push_back((do_relu && acc < 0.0) ? 32'd0 : r2f(acc));
      end
      @(negedge clk);
    end
    step = 0; snap = 0;
  endtask

  initial begin
    int start, ndot;
    bit rnd_done;
    rnd_done = 0;
    step = 0; clr = 0; neg = 0; snap = 0; relu = 0; a = 0; b = 0; res_ready = 1;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    // random dot products with random gaps, random back-pressure
    fork
      begin
        for (int t = 0; t < 300; t++) dot($urandom_range(16, 1), (t % 5) == 0, 20);
        rnd_done = 1;
      end
      begin
        while (!rnd_done) begin
          @(negedge clk); res_ready = ($urandom_range(3) != 0);
        end
        res_ready = 1;
      end
    join
    res_ready = 1;
    repeat (4) @(negedge clk);
    // cancellation: 2^60 * 1 + 1 * 1 - 2^60 * 1 = 1
    step = 1; clr = 1; snap = 0; relu = 0; neg = 0; a = 32'h5d80_0000; b = 32'h3f80_0000; @(negedge clk);
    clr = 0; a = 32'h3f80_0000; @(negedge clk);
    neg = 1; a = 32'h5d80_0000; snap = 1; expq.push_back(32'h3f80_0000); @(negedge clk);
    step = 0; snap = 0; neg = 0;
    repeat (4) @(negedge clk);
    // rate: 20 back-to-back dot products of 8 terms, no gaps, no back-pressure
    ndot = nres;
    start = cyc;
    for (int t = 0; t < 20; t++) dot(8, 0, 0);
    repeat (3) @(negedge clk);
    checks++;
    if (nres - ndot != 20 || last_res_cyc - start != 20 * 8 + 1) begin
      failures++;
      $display("FAIL rate: %0d results, last after %0d cycles (expected %0d)",
               nres - ndot, last_res_cyc - start, 20 * 8 + 1);
    end else $display("FMAC: 160 terms, last result after %0d cycles", last_res_cyc - start);
    checks++;
    if (expq.size() != 0) begin failures++; $display("FAIL %0d results missing", expq.size()); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
