// ntx_regif: NTX register interface with command staging area and shadow copy.
//
// The configuration registers (loop counts N_0..N_4, three AGU base addresses
// and 3x5 AGU step sizes) form a memory-mapped "staging area" that the
// controlling core reads and writes directly; it persists across commands, so
// unchanged fields need not be rewritten. Writing the command register copies
// the whole staging area plus the written command word into the shadow
// register (`cfg_o`) and pulses `start_o`; the core can then immediately
// prepare the next command in the staging area while the current one runs.
// If a command is still executing when the next command word arrives, the
// write is not granted until the engine has finished (the core stalls). A
// status register reports busy, and an IRQ flag is set at the end of every
// command (write 1 to clear, bit 1 enables the interrupt output).
//
// Bus: request/grant slave (ntx_pkg memory-port convention), response one
// cycle after the grant. Register offsets are listed in ntx_pkg. Staging,
// shadow, launch on command write and the C/S/IRQ block follow the paper; the
// offsets, the stall-on-busy rule and the IRQ details are this design's own.
//
// Tool note: byte enables of register writes are ignored; registers are
// written as whole words.
module ntx_regif
  import ntx_pkg::*;
(
  input  logic        clk_i,
  input  logic        rst_ni,
  // slave port
  input  logic        req_i,
  input  mem_req_t    req_d_i,
  output logic        gnt_o,
  output logic        rvalid_o,
  output logic [31:0] rdata_o,
  // engine side
  output ntx_cfg_t    cfg_o,
  output logic        start_o,
  input  logic        busy_i,
  input  logic        done_i,
  output logic        irq_o
);

  ntx_cfg_t    stage_q, shadow_q;
  logic        irq_q, irq_en_q, running_q;
  logic [7:0]  off;
  logic        is_cmd;
  logic [31:0] rdata_d;

  assign off    = req_d_i.addr[7:0];
  assign is_cmd = (off == NTX_REG_COMMAND);
  assign gnt_o  = req_i && !(is_cmd && req_d_i.we && (running_q || busy_i));

  always_comb begin
    rdata_d = '0;
    unique case (off)
      NTX_REG_STATUS:  rdata_d = {30'd0, running_q, running_q | busy_i};
      NTX_REG_IRQ:     rdata_d = {30'd0, irq_en_q, irq_q};
      NTX_REG_COMMAND: rdata_d = {4'd0, stage_q.cmd};
      default: begin
        for (int i = 0; i < NTX_NUM_LOOPS; i++)
          if (off == NTX_REG_LOOP0 + 8'(4*i)) rdata_d = {16'd0, stage_q.loop_n[i]};
        for (int i = 0; i < NTX_NUM_AGUS; i++)
          if (off == NTX_REG_BASE0 + 8'(4*i)) rdata_d = stage_q.base[i];
        for (int a = 0; a < NTX_NUM_AGUS; a++)
          for (int l = 0; l < NTX_NUM_LOOPS; l++)
            if (off == NTX_REG_STEP0 + 8'(4*(a*NTX_NUM_LOOPS+l))) rdata_d = stage_q.step[a][l];
      end
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stage_q <= '0; shadow_q <= '0;
      irq_q <= 1'b0; irq_en_q <= 1'b0; running_q <= 1'b0;
      start_o <= 1'b0; rvalid_o <= 1'b0; rdata_o <= '0;
    end else begin
      start_o  <= 1'b0;
      rvalid_o <= req_i && gnt_o;
      if (done_i) begin
        running_q <= 1'b0;
        irq_q     <= 1'b1;
      end
      if (req_i && gnt_o) begin
        rdata_o <= rdata_d;
        if (req_d_i.we) begin
          if (is_cmd) begin
            shadow_q     <= stage_q;
            shadow_q.cmd <= ntx_cmd_t'(req_d_i.wdata[27:0]);
            stage_q.cmd  <= ntx_cmd_t'(req_d_i.wdata[27:0]);
            start_o      <= 1'b1;
            running_q    <= 1'b1;
          end else if (off == NTX_REG_IRQ) begin
            if (req_d_i.wdata[0]) irq_q <= 1'b0;
            irq_en_q <= req_d_i.wdata[1];
          end else begin
            for (int i = 0; i < NTX_NUM_LOOPS; i++)
              if (off == NTX_REG_LOOP0 + 8'(4*i)) stage_q.loop_n[i] <= req_d_i.wdata[15:0];
            for (int i = 0; i < NTX_NUM_AGUS; i++)
              if (off == NTX_REG_BASE0 + 8'(4*i)) stage_q.base[i] <= req_d_i.wdata;
            for (int a = 0; a < NTX_NUM_AGUS; a++)
              for (int l = 0; l < NTX_NUM_LOOPS; l++)
                if (off == NTX_REG_STEP0 + 8'(4*(a*NTX_NUM_LOOPS+l)))
                  stage_q.step[a][l] <= req_d_i.wdata;
          end
        end
      end
    end
  end

  assign cfg_o = shadow_q;
  assign irq_o = irq_q & irq_en_q;

endmodule
