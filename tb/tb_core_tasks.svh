// tb_core_tasks.svh: core-side driver tasks shared by the cluster and top
// testbenches (included inside the testbench module).
//
// They stand in for the RISC-V control core of cluster `ci`: single loads and
// stores on its data port (request held until granted, then wait for the
// response), NTX programming (staging registers, command launch, broadcast)
// and DMA programming. The including module provides the arrays c_req,
// c_req_d, c_gnt, c_rvalid, c_rdata indexed by cluster, a clock `clk`, the
// counters `checks` and `failures`, and `n_bcast` (broadcast writes issued).

  task automatic cwr(input int ci, input logic [31:0] addr, input logic [31:0] data);
    @(negedge clk);
    c_req[ci] = 1'b1;
    c_req_d[ci] = '{addr: addr, we: 1'b1, be: 4'hf, wdata: data};
    #1;
    while (!c_gnt[ci]) begin @(negedge clk); #1; end
    @(negedge clk);
    c_req[ci] = 1'b0;
    while (!c_rvalid[ci]) @(negedge clk);
    if (addr[31:8] == NTX_BCAST[31:8]) n_bcast++;
  endtask

  task automatic crd(input int ci, input logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    c_req[ci] = 1'b1;
    c_req_d[ci] = '{addr: addr, we: 1'b0, be: 4'hf, wdata: '0};
    #1;
    while (!c_gnt[ci]) begin @(negedge clk); #1; end
    @(negedge clk);
    c_req[ci] = 1'b0;
    while (!c_rvalid[ci]) @(negedge clk);
    data = c_rdata[ci];
  endtask

  function automatic logic [31:0] ntx_reg(input int ntx, input logic [7:0] off);
    // ntx < 0 selects the broadcast address
    if (ntx < 0) return NTX_BCAST + {24'd0, off};
    return PERIPH_BASE + 32'(ntx * 256) + {24'd0, off};
  endfunction

  // loops and step sizes (strides s in words -> steps p_i = s_i - sum_{k<i} (N_k-1) s_k)
  task automatic ntx_loops(input int ci, input int ntx, input int n[5], input int s[3][5]);
    int p;
    for (int i = 0; i < 5; i++) cwr(ci, ntx_reg(ntx, NTX_REG_LOOP0 + 8'(4*i)), n[i]);
    for (int a = 0; a < 3; a++)
      for (int l = 0; l < 5; l++) begin
        p = s[a][l];
        for (int k = 0; k < l; k++) p -= (n[k] - 1) * s[a][k];
        cwr(ci, ntx_reg(ntx, NTX_REG_STEP0 + 8'(4*(a*5+l))), p * 4);
      end
  endtask

  task automatic ntx_bases(input int ci, input int ntx, input logic [31:0] b0, input logic [31:0] b1,
                           input logic [31:0] b2);
    cwr(ci, ntx_reg(ntx, NTX_REG_BASE0), b0);
    cwr(ci, ntx_reg(ntx, NTX_REG_BASE0 + 8'd4), b1);
    cwr(ci, ntx_reg(ntx, NTX_REG_BASE0 + 8'd8), b2);
  endtask

  function automatic logic [31:0] mac_cmd(input int outer, input int initl, input int storel);
    ntx_cmd_t c;
    c = '0;
    c.opcode = OP_MAC; c.outer_level = 3'(outer); c.init_level = 3'(initl); c.store_level = 3'(storel);
    c.bsrc = BSRC_AGU1;
    return {4'd0, c};
  endfunction

  // post one 2D DMA transfer (addresses in bytes, lengths in words, strides in words)
  task automatic dma_post(input int ci, input logic [31:0] ext, input logic [31:0] tcdm, input int len,
                          input int rows, input int est, input int tst, input bit to_ext);
    cwr(ci, DMA_BASE + DMA_REG_EXT, ext);
    cwr(ci, DMA_BASE + DMA_REG_TCDM, tcdm);
    cwr(ci, DMA_BASE + DMA_REG_LEN, len);
    cwr(ci, DMA_BASE + DMA_REG_ROWS, rows);
    cwr(ci, DMA_BASE + DMA_REG_EXT_ST, est * 4);
    cwr(ci, DMA_BASE + DMA_REG_TCDM_ST, tst * 4);
    cwr(ci, DMA_BASE + DMA_REG_START, {31'd0, to_ext});
  endtask

  // wait until the DMA has completed `n` transfers in total; returns the
  // largest queue fill seen while polling
  task automatic dma_wait(input int ci, input int n, output int max_q);
    logic [31:0] st;
    max_q = 0;
    do begin
      crd(ci, DMA_BASE + DMA_REG_STATUS, st);
      if (int'(st[15:8]) > max_q) max_q = int'(st[15:8]);
    end while (int'(st[31:16]) < n);
  endtask
