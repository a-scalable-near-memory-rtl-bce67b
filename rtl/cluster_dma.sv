// cluster_dma: the cluster's DMA engine for two-dimensional transfers between
// the TCDM and the HMC memory space.
//
// The core programs a transfer through memory-mapped registers (offsets in
// ntx_pkg): external address, TCDM address, words per row, number of rows,
// and a row stride on each side; writing the START register with the
// direction enqueues the transfer in a command queue (depth QDEPTH), so the
// core can post further transfers while one is running. Such 2D transfers
// copy a tile stripe by stripe (the paper: "transferring two-dimensional
// planes of data", one consecutive stripe per row).
//
// The engine has a read side and a write side joined by a data buffer of
// BUF_DEPTH words. The read side issues reads on the source port as long as
// the buffer has room for all reads in flight, so the variable latency of the
// external memory is hidden; the write side writes buffered words to the
// destination port. One 32-bit word moves per cycle at best (4 bytes/cycle,
// the paper's peak DMA rate r_d). A transfer completes when its last write is
// acknowledged; STATUS counts completed transfers.
// Own choices: register map, queue depth, buffer depth, word granularity
// (addresses and lengths are whole 32-bit words), one active transfer at a
// time (the queue supplies the next one back to back).
//
// Tool notes: the byte enables of register writes are ignored (registers are
// written as whole words); the DMA buffer's full flag is not used because the
// read side already reserves room for every read in flight (the buffer count
// is checked instead); the start addresses in the active descriptor `cur_q`
// are not read after the start, because the working pointers live in
// separate registers.
module cluster_dma
  import ntx_pkg::*;
#(
  parameter int unsigned QDEPTH    = 4,
  parameter int unsigned BUF_DEPTH = 8
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  // register slave port
  input  logic        cfg_req_i,
  input  mem_req_t    cfg_req_d_i,
  output logic        cfg_gnt_o,
  output logic        cfg_rvalid_o,
  output logic [31:0] cfg_rdata_o,
  // external (HMC memory space) master port
  output logic        ext_req_o,
  output mem_req_t    ext_req_d_o,
  input  logic        ext_gnt_i,
  input  logic        ext_rvalid_i,
  input  logic [31:0] ext_rdata_i,
  // TCDM master port
  output logic        tcdm_req_o,
  output mem_req_t    tcdm_req_d_o,
  input  logic        tcdm_gnt_i,
  input  logic        tcdm_rvalid_i,
  input  logic [31:0] tcdm_rdata_i,
  output logic        busy_o
);

  localparam int unsigned CW = $clog2(BUF_DEPTH + 1) + 1;

  // ------------------------------------------------------------ registers
  dma_cmd_t    stage_q, cur_q;
  logic        q_push, q_pop, q_full, q_empty;
  dma_cmd_t    q_head;
  logic [$clog2(QDEPTH+1)-1:0] q_cnt;
  logic [15:0] done_cnt_q;
  logic [7:0]  off;
  logic        active_q;

  assign off       = cfg_req_d_i.addr[7:0];
  assign cfg_gnt_o = cfg_req_i && !(cfg_req_d_i.we && off == DMA_REG_START && q_full);
  assign q_push    = cfg_req_i && cfg_gnt_o && cfg_req_d_i.we && off == DMA_REG_START;

  dma_cmd_t q_in;
  always_comb begin
    q_in        = stage_q;
    q_in.to_ext = cfg_req_d_i.wdata[0];
  end

  fifo_v #(.T(dma_cmd_t), .DEPTH(QDEPTH)) i_q (
    .clk_i, .rst_ni, .push_i(q_push), .data_i(q_in), .pop_i(q_pop), .data_o(q_head),
    .full_o(q_full), .empty_o(q_empty), .count_o(q_cnt));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stage_q <= '0; cfg_rvalid_o <= 1'b0; cfg_rdata_o <= '0;
    end else begin
      cfg_rvalid_o <= cfg_req_i && cfg_gnt_o;
      if (cfg_req_i && cfg_gnt_o) begin
        unique case (off)
          DMA_REG_EXT:     cfg_rdata_o <= stage_q.ext_addr;
          DMA_REG_TCDM:    cfg_rdata_o <= stage_q.tcdm_addr;
          DMA_REG_LEN:     cfg_rdata_o <= {16'd0, stage_q.len};
          DMA_REG_ROWS:    cfg_rdata_o <= {16'd0, stage_q.rows};
          DMA_REG_EXT_ST:  cfg_rdata_o <= stage_q.ext_stride;
          DMA_REG_TCDM_ST: cfg_rdata_o <= stage_q.tcdm_stride;
          DMA_REG_STATUS:  cfg_rdata_o <= {done_cnt_q, 8'(q_cnt), 7'd0, active_q};
          default:         cfg_rdata_o <= '0;
        endcase
        if (cfg_req_d_i.we) begin
          unique case (off)
            DMA_REG_EXT:     stage_q.ext_addr    <= cfg_req_d_i.wdata;
            DMA_REG_TCDM:    stage_q.tcdm_addr   <= cfg_req_d_i.wdata;
            DMA_REG_LEN:     stage_q.len         <= cfg_req_d_i.wdata[15:0];
            DMA_REG_ROWS:    stage_q.rows        <= cfg_req_d_i.wdata[15:0];
            DMA_REG_EXT_ST:  stage_q.ext_stride  <= cfg_req_d_i.wdata;
            DMA_REG_TCDM_ST: stage_q.tcdm_stride <= cfg_req_d_i.wdata;
            default: ;
          endcase
        end
      end
    end
  end

  // ------------------------------------------------------------ engine
  logic [15:0] rcol_q, rrow_q, wcol_q, wrow_q;
  logic [31:0] rrow_addr_q, raddr_q, wrow_addr_q, waddr_q;
  logic        rdone_q, wdone_q;
  logic [CW-1:0] rinfl_q, winfl_q;

  logic        b_push, b_pop, b_full, b_empty;
  logic [31:0] b_dout, b_din;
  logic [$clog2(BUF_DEPTH+1)-1:0] b_cnt;

  fifo_v #(.T(logic [31:0]), .DEPTH(BUF_DEPTH)) i_buf (
    .clk_i, .rst_ni, .push_i(b_push), .data_i(b_din), .pop_i(b_pop), .data_o(b_dout),
    .full_o(b_full), .empty_o(b_empty), .count_o(b_cnt));

  logic     src_req, dst_req, src_gnt, dst_gnt, src_rvalid, dst_rvalid;
  mem_req_t src_d, dst_d;
  logic [31:0] src_rdata;

  always_comb begin
    src_req = active_q && !rdone_q && (CW'(b_cnt) + rinfl_q < CW'(BUF_DEPTH));
    src_d   = '{addr: raddr_q, we: 1'b0, be: 4'hf, wdata: '0};
    dst_req = active_q && !wdone_q && !b_empty;
    dst_d   = '{addr: waddr_q, we: 1'b1, be: 4'hf, wdata: b_dout};
    if (cur_q.to_ext) begin
      tcdm_req_o = src_req; tcdm_req_d_o = src_d;
      ext_req_o  = dst_req; ext_req_d_o  = dst_d;
      src_gnt = tcdm_gnt_i; src_rvalid = tcdm_rvalid_i; src_rdata = tcdm_rdata_i;
      dst_gnt = ext_gnt_i;  dst_rvalid = ext_rvalid_i;
    end else begin
      ext_req_o  = src_req; ext_req_d_o  = src_d;
      tcdm_req_o = dst_req; tcdm_req_d_o = dst_d;
      src_gnt = ext_gnt_i;  src_rvalid = ext_rvalid_i;  src_rdata = ext_rdata_i;
      dst_gnt = tcdm_gnt_i; dst_rvalid = tcdm_rvalid_i;
    end
    b_push = active_q && src_rvalid;
    b_din  = src_rdata;
    b_pop  = dst_req && dst_gnt;
    q_pop  = !active_q && !q_empty;
  end

  // source / destination pointers for the current transfer
  logic [31:0] src_base, dst_base, src_stride, dst_stride;
  assign src_base   = q_head.to_ext ? q_head.tcdm_addr : q_head.ext_addr;
  assign dst_base   = q_head.to_ext ? q_head.ext_addr  : q_head.tcdm_addr;
  assign src_stride = cur_q.to_ext ? cur_q.tcdm_stride : cur_q.ext_stride;
  assign dst_stride = cur_q.to_ext ? cur_q.ext_stride  : cur_q.tcdm_stride;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      active_q <= 1'b0; cur_q <= '0; done_cnt_q <= '0;
      rcol_q <= '0; rrow_q <= '0; wcol_q <= '0; wrow_q <= '0;
      rrow_addr_q <= '0; raddr_q <= '0; wrow_addr_q <= '0; waddr_q <= '0;
      rdone_q <= 1'b0; wdone_q <= 1'b0; rinfl_q <= '0; winfl_q <= '0;
    end else begin
      rinfl_q <= rinfl_q + CW'(src_req && src_gnt) - CW'(src_rvalid);
      winfl_q <= winfl_q + CW'(dst_req && dst_gnt) - CW'(dst_rvalid);
      if (q_pop) begin
        active_q <= 1'b1;
        cur_q    <= q_head;
        rcol_q <= '0; rrow_q <= '0; wcol_q <= '0; wrow_q <= '0;
        raddr_q <= src_base; rrow_addr_q <= src_base;
        waddr_q <= dst_base; wrow_addr_q <= dst_base;
        rdone_q <= (q_head.len == '0) || (q_head.rows == '0);
        wdone_q <= (q_head.len == '0) || (q_head.rows == '0);
      end else if (active_q) begin
        if (src_req && src_gnt) begin
          if (rcol_q == cur_q.len - 16'd1) begin
            rcol_q      <= '0;
            rrow_q      <= rrow_q + 16'd1;
            rrow_addr_q <= rrow_addr_q + src_stride;
            raddr_q     <= rrow_addr_q + src_stride;
            if (rrow_q == cur_q.rows - 16'd1) rdone_q <= 1'b1;
          end else begin
            rcol_q  <= rcol_q + 16'd1;
            raddr_q <= raddr_q + 32'd4;
          end
        end
        if (dst_req && dst_gnt) begin
          if (wcol_q == cur_q.len - 16'd1) begin
            wcol_q      <= '0;
            wrow_q      <= wrow_q + 16'd1;
            wrow_addr_q <= wrow_addr_q + dst_stride;
            waddr_q     <= wrow_addr_q + dst_stride;
            if (wrow_q == cur_q.rows - 16'd1) wdone_q <= 1'b1;
          end else begin
            wcol_q  <= wcol_q + 16'd1;
            waddr_q <= waddr_q + 32'd4;
          end
        end
        if (rdone_q && wdone_q && winfl_q == '0 && rinfl_q == '0 && !(dst_req && dst_gnt)) begin
          active_q   <= 1'b0;
          done_cnt_q <= done_cnt_q + 16'd1;
        end
      end
    end
  end

  assign busy_o = active_q || !q_empty;

endmodule
