// tb_ntx_regif: self-checking testbench of the NTX register interface.
//
// A small engine model raises busy for a random number of cycles after each
// start pulse and then pulses done. The testbench checks: read-back of every
// staging register (loop counts, bases, steps, command), the response one
// cycle after the grant, that a command write copies the staging area into
// the shadow configuration and pulses start exactly once, that rewriting the
// staging area during a run leaves the running configuration untouched,
// that a second command write is held off (no grant) until the running
// command is done, the status bits, and the IRQ flag (set by done, output
// gated by the enable bit, cleared by writing 1).
module tb_ntx_regif;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic        req, gnt, rvalid, start, busy, done, irq;
  mem_req_t    req_d;
  logic [31:0] rdata;
  ntx_cfg_t    cfg;

  ntx_regif dut (.clk_i(clk), .rst_ni(rst_n), .req_i(req), .req_d_i(req_d), .gnt_o(gnt),
    .rvalid_o(rvalid), .rdata_o(rdata), .cfg_o(cfg), .start_o(start), .busy_i(busy),
    .done_i(done), .irq_o(irq));

  // engine model
  int run_len = 10, busy_cnt = 0, starts = 0;
  always @(posedge clk) begin
    done <= 1'b0;
    if (start) begin busy <= 1'b1; busy_cnt <= run_len; starts++; end
    else if (busy_cnt > 1) busy_cnt <= busy_cnt - 1;
    else if (busy && busy_cnt == 1) begin busy <= 1'b0; busy_cnt <= 0; done <= 1'b1; end
  end

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  // bus access; returns the read data, the grant wait and checks rvalid timing
  task automatic acc(input bit we, input logic [7:0] off, input logic [31:0] wd,
                     output logic [31:0] rd, output int wait_cyc);
    @(negedge clk);
    req = 1; req_d = '{addr: {24'h0, off}, we: we, be: 4'hf, wdata: wd};
    wait_cyc = 0;
    #1;
    while (!gnt) begin @(negedge clk); #1; wait_cyc++; end
    @(negedge clk);
    req = 0;
    check(rvalid, "rvalid one cycle after grant");
    rd = rdata;
  endtask

  logic [31:0] shadow_exp [64];
  logic [31:0] val [64];

  function automatic logic [31:0] cfg_word(ntx_cfg_t c, int off);
    if (off == NTX_REG_COMMAND) return {4'd0, c.cmd};
    for (int i = 0; i < 5; i++) if (off == NTX_REG_LOOP0 + 4*i) return {16'd0, c.loop_n[i]};
    for (int i = 0; i < 3; i++) if (off == NTX_REG_BASE0 + 4*i) return c.base[i];
    for (int a = 0; a < 3; a++) for (int l = 0; l < 5; l++)
      if (off == NTX_REG_STEP0 + 4*(a*5+l)) return c.step[a][l];
    return 0;
  endfunction

  int offs[$];

  initial begin
    logic [31:0] rd;
    int w, s0;
    req = 0; req_d = '0; busy = 0; done = 0;
    for (int i = 0; i < 5; i++) offs.push_back(NTX_REG_LOOP0 + 4*i);
    for (int i = 0; i < 3; i++) offs.push_back(NTX_REG_BASE0 + 4*i);
    for (int i = 0; i < 15; i++) offs.push_back(NTX_REG_STEP0 + 4*i);
    repeat (3) @(negedge clk);
    rst_n = 1;
    acc(1, NTX_REG_IRQ, 32'h2, rd, w);            // enable the IRQ output
    for (int r = 0; r < 4; r++) begin
      // fill staging with random values, read them back
      foreach (offs[i]) begin
        val[i] = $urandom;
        if (offs[i] < NTX_REG_BASE0) val[i] = {16'd0, val[i][15:0]};
        acc(1, 8'(offs[i]), val[i], rd, w);
      end
      foreach (offs[i]) begin
        acc(0, 8'(offs[i]), 0, rd, w);
        check(rd == val[i], $sformatf("read-back of offset %h", offs[i]));
      end
      // launch
      s0 = starts;
      run_len = $urandom_range(160, 100);
      val[40] = {4'd0, 28'($urandom)};
      acc(1, NTX_REG_COMMAND, val[40], rd, w);
      check(w == 0, "first command write granted at once");
      @(negedge clk);
      check(starts == s0 + 1, "one start pulse");
      check(cfg_word(cfg, NTX_REG_COMMAND) == val[40], "shadow command");
      foreach (offs[i]) check(cfg_word(cfg, offs[i]) == val[i], $sformatf("shadow offset %h", offs[i]));
      acc(0, NTX_REG_STATUS, 0, rd, w);
      check(rd[0] == 1'b1, "status busy");
      // prepare the next command while running: shadow must not change
      foreach (offs[i]) acc(1, 8'(offs[i]), ~val[i] & (offs[i] < NTX_REG_BASE0 ? 32'hffff : '1), rd, w);
      foreach (offs[i]) check(cfg_word(cfg, offs[i]) == val[i], $sformatf("shadow kept during run %h", offs[i]));
      // second command write is held until the first is done
      acc(1, NTX_REG_COMMAND, val[40] ^ 32'h1, rd, w);
      check(w > 0, $sformatf("second command waited %0d cycles for the first", w));
      check(irq == 1'b1, "irq after the first command");
      @(negedge clk);
      check(starts == s0 + 2, "second start pulse");
      foreach (offs[i]) check(cfg_word(cfg, offs[i]) == (~val[i] & (offs[i] < NTX_REG_BASE0 ? 32'hffff : '1)),
                              $sformatf("new shadow offset %h", offs[i]));
      acc(1, NTX_REG_IRQ, 32'h3, rd, w);          // clear, keep enabled
      check(irq == 1'b0, "irq cleared");
      while (busy) @(negedge clk);
      @(negedge clk);
      check(irq == 1'b1, "irq after the second command");
      acc(0, NTX_REG_STATUS, 0, rd, w);
      check(rd[1:0] == 2'b00, "status idle");
      acc(1, NTX_REG_IRQ, 32'h1, rd, w);          // clear and disable
      acc(0, NTX_REG_IRQ, 0, rd, w);
      check(rd[1:0] == 2'b00 && irq == 0, "irq disabled and cleared");
      acc(1, NTX_REG_IRQ, 32'h2, rd, w);
    end
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
