// tb_cluster_dma: self-checking testbench of the cluster DMA engine.
//
// The DMA's TCDM port sees a single-cycle memory with random grant stalls
// (bank conflicts); its external port sees a memory with random latency
// (1..12 cycles) and stalls, standing in for the HMC. The testbench programs
// random 2D transfers in both directions through the register port, posting
// several at once into the command queue, and checks the destination data
// word by word (and that nothing outside the tiles changed). It also reads
// back the registers, checks the completion counter, and checks the paper's
// peak DMA rate of one 32-bit word (4 bytes) per cycle with zero-stall
// single-cycle memories on both sides.
module tb_cluster_dma;
  import ntx_pkg::*;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic        cfg_req, cfg_gnt, cfg_rvalid, busy;
  mem_req_t    cfg_req_d;
  logic [31:0] cfg_rdata;
  logic        e_req, e_gnt, e_rvalid, t_req, t_gnt, t_rvalid;
  mem_req_t    e_req_d, t_req_d;
  logic [31:0] e_rdata, t_rdata;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n),
    .cfg_req_i(cfg_req), .cfg_req_d_i(cfg_req_d), .cfg_gnt_o(cfg_gnt),
    .cfg_rvalid_o(cfg_rvalid), .cfg_rdata_o(cfg_rdata),
    .ext_req_o(e_req), .ext_req_d_o(e_req_d), .ext_gnt_i(e_gnt),
    .ext_rvalid_i(e_rvalid), .ext_rdata_i(e_rdata),
    .tcdm_req_o(t_req), .tcdm_req_d_o(t_req_d), .tcdm_gnt_i(t_gnt),
    .tcdm_rvalid_i(t_rvalid), .tcdm_rdata_i(t_rdata), .busy_o(busy));

  tb_mem_model #(.WORDS(8192), .MIN_LAT(1), .MAX_LAT(12), .STALL_PCT(20)) ext_mem (
    .clk_i(clk), .req_i(e_req), .req_d_i(e_req_d), .gnt_o(e_gnt), .rvalid_o(e_rvalid), .rdata_o(e_rdata));
  tb_mem_model #(.WORDS(4096), .MIN_LAT(1), .MAX_LAT(1), .STALL_PCT(20)) tcdm_mem (
    .clk_i(clk), .req_i(t_req), .req_d_i(t_req_d), .gnt_o(t_gnt), .rvalid_o(t_rvalid), .rdata_o(t_rdata));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", msg); end
  endtask

  task automatic acc(input bit we, input logic [7:0] off, input logic [31:0] wd, output logic [31:0] rd);
    @(negedge clk);
    cfg_req = 1; cfg_req_d = '{addr: DMA_BASE + {24'h0, off}, we: we, be: 4'hf, wdata: wd};
    #1;
    while (!cfg_gnt) begin @(negedge clk); #1; end
    @(posedge clk);
    @(negedge clk);
    cfg_req = 0;
    while (!cfg_rvalid) @(posedge clk);
    rd = cfg_rdata;
  endtask

  typedef struct { int ext, tcdm, len, rows, est, tst; bit to_ext; } xfer_t;
  xfer_t xq[$];

  task automatic post(input xfer_t x);
    logic [31:0] rd;
    acc(1, DMA_REG_EXT, EXT_OFF + 32'(x.ext * 4), rd);
    acc(1, DMA_REG_TCDM, TCDM_BASE + 32'(x.tcdm * 4), rd);
    acc(1, DMA_REG_LEN, x.len, rd);
    acc(1, DMA_REG_ROWS, x.rows, rd);
    acc(1, DMA_REG_EXT_ST, x.est * 4, rd);
    acc(1, DMA_REG_TCDM_ST, x.tst * 4, rd);
    acc(1, DMA_REG_START, {31'd0, x.to_ext}, rd);
  endtask

  localparam logic [31:0] EXT_OFF = 32'h8000_0000;
  logic [31:0] ref_ext [8192];
  logic [31:0] ref_tcdm [4096];

  function automatic void apply(input xfer_t x);
    for (int r = 0; r < x.rows; r++)
      for (int c = 0; c < x.len; c++)
        if (x.to_ext) ref_ext[x.ext + r * x.est + c] = ref_tcdm[x.tcdm + r * x.tst + c];
        else          ref_tcdm[x.tcdm + r * x.tst + c] = ref_ext[x.ext + r * x.est + c];
  endfunction

  task automatic compare(input string n);
    int bad = 0;
    for (int i = 0; i < 8192; i++) if (ext_mem.mem[i] !== ref_ext[i]) bad++;
    for (int i = 0; i < 4096; i++) if (tcdm_mem.mem[i] !== ref_tcdm[i]) bad++;
    check(bad == 0, $sformatf("%s: %0d words differ", n, bad));
  endtask

  task automatic wait_done(input int n_done);
    logic [31:0] rd;
    do begin
      repeat (20) @(negedge clk);
      acc(0, DMA_REG_STATUS, 0, rd);
    end while (int'(rd[31:16]) < n_done);
  endtask

  initial begin
    logic [31:0] rd;
    xfer_t x;
    int ndone, t0, t1;
    cfg_req = 0; cfg_req_d = '0;
    for (int i = 0; i < 8192; i++) begin ext_mem.mem[i] = $urandom; ref_ext[i] = ext_mem.mem[i]; end
    for (int i = 0; i < 4096; i++) begin tcdm_mem.mem[i] = $urandom; ref_tcdm[i] = tcdm_mem.mem[i]; end
    repeat (3) @(negedge clk);
    rst_n = 1;
    // register read-back
    acc(1, DMA_REG_EXT, 32'h1234_5678, rd); acc(0, DMA_REG_EXT, 0, rd);
    check(rd == 32'h1234_5678, "EXT read-back");
    acc(1, DMA_REG_TCDM_ST, 32'h40, rd); acc(0, DMA_REG_TCDM_ST, 0, rd);
    check(rd == 32'h40, "TCDM stride read-back");
    ndone = 0;
    // batches of queued random 2D transfers (tiles do not overlap within a batch)
    for (int bt = 0; bt < 6; bt++) begin
      for (int k = 0; k < 4; k++) begin
        x.len = $urandom_range(16, 1); x.rows = $urandom_range(6, 1);
        x.est = x.len + $urandom_range(20); x.tst = x.len + $urandom_range(4);
        x.ext = k * 2000 + $urandom_range(100); x.tcdm = k * 1000 + $urandom_range(100);
        x.to_ext = 1'($urandom);
        apply(x);
        post(x);
      end
      acc(0, DMA_REG_STATUS, 0, rd);
      check(rd[0] == 1'b1, "busy while transfers are queued");
      ndone += 4;
      wait_done(ndone);
      compare($sformatf("batch %0d", bt));
    end
    // peak rate: one 256-word row to and from memories without stalls or latency
    ext_mem.stall_pct = 0; tcdm_mem.stall_pct = 0; ext_mem.max_lat = 1;
    for (int dir = 0; dir < 2; dir++) begin
      x = '{ext: 100, tcdm: 2000, len: 256, rows: 1, est: 256, tst: 256, to_ext: dir};
      apply(x);
      post(x);
      t0 = cyc;
      @(posedge clk);
      while (busy) @(posedge clk);
      t1 = cyc;
      check(t1 - t0 <= 256 + 8, $sformatf("rate: 256 words (1 KiB) took %0d cycles", t1 - t0));
      $display("DMA: 256 words in %0d cycles (dir %0d)", t1 - t0, dir);
      compare("rate transfer");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5_000_000;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
