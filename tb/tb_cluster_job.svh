// tb_cluster_job.svh: one complete convolution job on one cluster, shared by
// the cluster and top testbenches (included inside the testbench module,
// after tb_core_tasks.svh).
//
// Flow, as the paper describes the use of a cluster: the core writes eight
// input vectors x_i (K+J words) and eight K-tap filters into the HMC memory
// space, posts two 2D DMA transfers at once (the second waits in the DMA
// command queue), programs the loop
// counts and strides of all eight NTX with broadcast writes and their base
// addresses one by one, launches all eight with one broadcast command write,
// waits for the eight interrupts, moves the 8 x J results back with one 2D
// DMA transfer and reads them from the HMC memory space through its own
// port. Each result out_i[j] = sum_k x_i[j+k] * w_i[k] is compared with the
// exact value. The TCDM rows are placed so that the 16 operand streams start
// in different banks (word offsets 66*i and 1040+34*i). Returns the cycles the eight NTX took (launch to last IRQ)
// and the largest DMA queue fill seen.

  localparam int JK = 9, JJ = 32;

  // operands of the job running on each cluster (kept per cluster at module
  // level, since the jobs of several clusters run concurrently)
  real jx [NC][8][JK+JJ];
  real jw [NC][8][JK];

  task automatic run_job(input int ci, input logic [31:0] ext, output int ntx_cycles, output int max_q);
    real acc;
    int n[5], s[3][5], t0, mq, d0;
    logic [31:0] v;
    logic [31:0] x_ext, w_ext, o_ext, x_t, w_t, o_t;
    x_ext = ext; w_ext = ext + 32'h800; o_ext = ext + 32'hC00;
    x_t = TCDM_BASE; w_t = TCDM_BASE + 32'h1000; o_t = TCDM_BASE + 32'h2000;
    // input data into the HMC space (through the core's external path)
    for (int f = 0; f < 8; f++)
      for (int i = 0; i < JK + JJ; i++) begin
        jx[ci][f][i] = real'(int'($urandom_range(64)) - 32) / 8.0;
        cwr(ci, x_ext + 32'(4 * (64 * f + i)), r2f(jx[ci][f][i]));
      end
    for (int f = 0; f < 8; f++)
      for (int k = 0; k < JK; k++) begin
        jw[ci][f][k] = real'(int'($urandom_range(64)) - 32) / 8.0;
        cwr(ci, w_ext + 32'(4 * (16 * f + k)), r2f(jw[ci][f][k]));
      end
    crd(ci, DMA_BASE + DMA_REG_STATUS, v);
    d0 = int'(v[31:16]);
    // DMA in: inputs (8 rows of JK+JJ words) and filters (8 rows of JK words)
    dma_post(ci, x_ext, x_t, JK + JJ, 8, 64, 66, 1'b0);
    dma_post(ci, w_ext, w_t + 32'd64, JK, 8, 16, 34, 1'b0);
    dma_wait(ci, d0 + 2, mq);
    max_q = mq;
    // NTX set-up: common loops/strides and IRQ enable by broadcast, own bases
    n = '{JK, JJ, 1, 1, 1};
    s = '{'{1, 1, 0, 0, 0}, '{1, 0, 0, 0, 0}, '{0, 1, 0, 0, 0}};
    ntx_loops(ci, -1, n, s);
    cwr(ci, ntx_reg(-1, NTX_REG_IRQ), 32'h3);
    for (int f = 0; f < 8; f++)
      ntx_bases(ci, f, x_t + 32'(4 * 66 * f), w_t + 32'(64 + 4 * 34 * f), o_t + 32'(4 * JJ * f));
    // launch all eight at once and wait for their interrupts
    cwr(ci, ntx_reg(-1, NTX_REG_COMMAND), mac_cmd(2, 1, 1));
    t0 = cyc;
    while (n_irq[ci] != 8'hff) @(negedge clk);
    ntx_cycles = cyc - t0;
    cwr(ci, ntx_reg(-1, NTX_REG_IRQ), 32'h3);
    checks++;
    if (n_irq[ci] != 8'h00) begin failures++; $display("FAIL c%0d: IRQs not cleared", ci); end
    // results back to the HMC space: 8 rows of JJ words
    dma_post(ci, o_ext, o_t, JJ, 8, JJ, JJ, 1'b1);
    dma_wait(ci, d0 + 3, mq);
    for (int f = 0; f < 8; f++)
      for (int j = 0; j < JJ; j++) begin
        acc = 0.0;
        for (int k = 0; k < JK; k++) acc += jx[ci][f][j+k] * jw[ci][f][k];
        crd(ci, o_ext + 32'(4 * (JJ * f + j)), v);
        checks++;
        if (v !== r2f(acc)) begin
          failures++;
          $display("FAIL c%0d out[%0d][%0d]: got %h expected %h", ci, f, j, v, r2f(acc));
        end
      end
    // one result also read directly from the TCDM
    crd(ci, o_t + 32'(4 * (JJ + 3)), v);
    acc = 0.0;
    for (int k = 0; k < JK; k++) acc += jx[ci][1][3+k] * jw[ci][1][k];
    checks++;
    if (v !== r2f(acc)) begin failures++; $display("FAIL c%0d TCDM read", ci); end
  endtask
