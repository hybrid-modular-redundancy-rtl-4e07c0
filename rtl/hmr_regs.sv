// hmr_regs -- memory-mapped configuration and status registers of the HMR unit.
//
// Reached through the cluster's peripheral interconnect, so any core or an external host can
// configure the unit. Simple request/grant port: a request is granted in the same cycle and
// answered with rvalid/rdata one cycle later (writes ignore byte enables: word access only).
// Register map (byte offsets):
//   0x000 AVAIL      RO  [0] DMR available, [1] TMR available, [2] rapid recovery built,
//                        [3] DMR enforced, [4] TMR enforced, [15:8] number of cores
//   0x004 DMR_ENABLE RW  one bit per DMR group: request lockstep of that group
//   0x008 TMR_ENABLE RW  one bit per TMR group
//   0x00C DMR_CONFIG RW  configuration bits of all DMR groups (CFG_* in hmr_pkg)
//   0x010 TMR_CONFIG RW  configuration bits of all TMR groups
//   0x014 CORE_MODE  RO  2 bits per core: 0 independent, 1 DMR, 2 TMR (cores 0..15)
//   0x018 DMR_STATE  RO  2 bits per DMR group controller state
//   0x01C TMR_STATE  RO  2 bits per TMR group controller state
//   0x100+4c SP[c]   RW  stack pointer storage register of core c
//   0x200+4c MISM[c] RO  mismatch counter of core c; any write clears it
// A core can belong to only one group: enabling a TMR group drops the enable of every DMR
// group sharing a core with it, and vice versa (the last write wins). Writes to SP[c] also
// produce one-cycle events (non-zero stored / zero stored) for the group controllers.
// With DmrFixed or TmrFixed set, every group of that mode is locked permanently: the enable
// outputs are tied to all ones and writes to both enable registers are ignored (TmrFixed
// wins if both are set, since every core then belongs to a TMR group).
// The existence of configuration, SP and error-statistics registers follows the paper; the
// map, the bus protocol and the exclusivity rule are this design's choices.
module hmr_regs
  import hmr_pkg::*;
#(
  parameter int unsigned NumCores      = 12,
  parameter bit          DmrSupported  = 1'b1,
  parameter bit          TmrSupported  = 1'b1,
  parameter bit          RapidRecovery = 1'b1,
  parameter bit          DmrFixed      = 1'b0,
  parameter bit          TmrFixed      = 1'b0,
  localparam int unsigned NumDmr = NumCores / 2,
  localparam int unsigned NumTmr = NumCores / 3,
  localparam int unsigned NumDmrW = (NumDmr > 0) ? NumDmr : 1,
  localparam int unsigned NumTmrW = (NumTmr > 0) ? NumTmr : 1
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  reg_req_t                   reg_req_i,
  output reg_rsp_t                   reg_rsp_o,
  output logic [NumDmrW-1:0]         dmr_enable_o,
  output logic [NumTmrW-1:0]         tmr_enable_o,
  output logic [CfgWidth-1:0]        dmr_cfg_o,
  output logic [CfgWidth-1:0]        tmr_cfg_o,
  input  hmr_mode_e [NumCores-1:0]   core_mode_i,
  input  grp_state_e [NumDmrW-1:0]   dmr_state_i,
  input  grp_state_e [NumTmrW-1:0]   tmr_state_i,
  output logic [NumCores-1:0]        sp_nonzero_o,
  output logic [NumCores-1:0]        sp_stored_o,   // pulse: non-zero written to SP[c]
  output logic [NumCores-1:0]        sp_cleared_o,  // pulse: zero written to SP[c]
  output logic [NumCores-1:0][31:0]  sp_o,
  input  logic [NumCores-1:0]        mismatch_inc_i
);

  // Configuration reset value: rapid recovery on if built, all clears enabled, immediate
  // resynchronisation.
  localparam logic [CfgWidth-1:0] CfgReset =
      CfgWidth'((RapidRecovery ? 1 : 0) << CFG_RAPID_RECOVERY) |
      CfgWidth'(1 << CFG_SPLIT_SETBACK) | CfgWidth'(1 << CFG_LOCK_SETBACK) |
      CfgWidth'(1 << CFG_RELOAD_SETBACK);

  // Modes enforced permanently by parameter.
  localparam bit TmrForced = TmrFixed && TmrSupported && (NumTmr > 0);
  localparam bit DmrForced = DmrFixed && DmrSupported && (NumDmr > 0) && !TmrForced;
  localparam bit EnWritable = !TmrForced && !DmrForced;

  // Core membership masks of every group.
  function automatic logic [NumCores-1:0] dmr_cores(int unsigned d);
    logic [NumCores-1:0] m;
    m = '0;
    m[d] = 1'b1;
    m[d + NumDmr] = 1'b1;
    return m;
  endfunction

  function automatic logic [NumCores-1:0] tmr_cores(int unsigned t);
    logic [NumCores-1:0] m;
    m = '0;
    m[t] = 1'b1;
    m[t + NumTmr] = 1'b1;
    m[t + 2 * NumTmr] = 1'b1;
    return m;
  endfunction

  logic [NumDmrW-1:0]        dmr_en_q, dmr_en_d;
  logic [NumTmrW-1:0]        tmr_en_q, tmr_en_d;
  logic [CfgWidth-1:0]       dmr_cfg_q, tmr_cfg_q;
  logic [NumCores-1:0][31:0] sp_q;
  logic [NumCores-1:0][31:0] mism_q;
  logic                      rvalid_q;
  logic [31:0]               rdata_q, rdata_d;

  logic wr, rd;
  assign wr = reg_req_i.req && reg_req_i.we;
  assign rd = reg_req_i.req && !reg_req_i.we;

  // Which core an SP / mismatch access addresses (valid when *_hit is set).
  logic                        sp_hit, mism_hit;
  int unsigned                 idx;
  always_comb begin
    sp_hit   = (reg_req_i.addr[RegAddrWidth-1:8] == REG_SP_BASE[RegAddrWidth-1:8]) &&
               (int'(reg_req_i.addr[7:2]) < NumCores);
    mism_hit = (reg_req_i.addr[RegAddrWidth-1:8] == REG_MISM_BASE[RegAddrWidth-1:8]) &&
               (int'(reg_req_i.addr[7:2]) < NumCores);
    idx      = sp_hit || mism_hit ? 32'(reg_req_i.addr[7:2]) : 0;
  end

  // Group enables with mutual exclusion between overlapping DMR and TMR groups.
  always_comb begin
    logic [NumCores-1:0] cores;
    cores    = '0;
    dmr_en_d = dmr_en_q;
    tmr_en_d = tmr_en_q;
    if (wr && reg_req_i.addr == REG_DMR_ENABLE && DmrSupported && NumDmr > 0 && EnWritable) begin
      dmr_en_d = reg_req_i.wdata[NumDmrW-1:0];
      cores = '0;
      for (int unsigned d = 0; d < NumDmr; d++) if (dmr_en_d[d]) cores |= dmr_cores(d);
      for (int unsigned t = 0; t < NumTmr; t++) if ((tmr_cores(t) & cores) != '0) tmr_en_d[t] = 1'b0;
    end
    if (wr && reg_req_i.addr == REG_TMR_ENABLE && TmrSupported && NumTmr > 0 && EnWritable) begin
      tmr_en_d = reg_req_i.wdata[NumTmrW-1:0];
      cores = '0;
      for (int unsigned t = 0; t < NumTmr; t++) if (tmr_en_d[t]) cores |= tmr_cores(t);
      for (int unsigned d = 0; d < NumDmr; d++) if ((dmr_cores(d) & cores) != '0) dmr_en_d[d] = 1'b0;
    end
  end

  // Read multiplexer.
  always_comb begin
    rdata_d = '0;
    if (sp_hit) begin
      rdata_d = sp_q[idx];
    end else if (mism_hit) begin
      rdata_d = mism_q[idx];
    end else begin
      unique case (reg_req_i.addr)
        REG_AVAIL:      rdata_d = {16'h0, 8'(NumCores), 3'h0, TmrForced, DmrForced, RapidRecovery,
                                   TmrSupported, DmrSupported};
        REG_DMR_ENABLE: rdata_d = 32'(dmr_enable_o);
        REG_TMR_ENABLE: rdata_d = 32'(tmr_enable_o);
        REG_DMR_CONFIG: rdata_d = 32'(dmr_cfg_q);
        REG_TMR_CONFIG: rdata_d = 32'(tmr_cfg_q);
        REG_CORE_MODE:  for (int unsigned c = 0; c < NumCores && c < 16; c++) rdata_d[2*c +: 2] = core_mode_i[c];
        REG_DMR_STATE:  for (int unsigned d = 0; d < NumDmr && d < 16; d++) rdata_d[2*d +: 2] = dmr_state_i[d];
        REG_TMR_STATE:  for (int unsigned t = 0; t < NumTmr && t < 16; t++) rdata_d[2*t +: 2] = tmr_state_i[t];
        default:        rdata_d = '0;
      endcase
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dmr_en_q     <= '0;
      tmr_en_q     <= '0;
      dmr_cfg_q    <= CfgReset & ~CfgWidth'(1 << CFG_DELAY_RESYNCH);
      tmr_cfg_q    <= CfgReset;
      sp_q         <= '0;
      mism_q       <= '0;
      rvalid_q     <= 1'b0;
      rdata_q      <= '0;
      sp_stored_o  <= '0;
      sp_cleared_o <= '0;
    end else begin
      dmr_en_q     <= dmr_en_d;
      tmr_en_q     <= tmr_en_d;
      rvalid_q     <= reg_req_i.req;
      rdata_q      <= rd ? rdata_d : '0;
      sp_stored_o  <= '0;
      sp_cleared_o <= '0;
      if (wr && reg_req_i.addr == REG_DMR_CONFIG) dmr_cfg_q <= reg_req_i.wdata[CfgWidth-1:0];
      if (wr && reg_req_i.addr == REG_TMR_CONFIG) tmr_cfg_q <= reg_req_i.wdata[CfgWidth-1:0];
      if (wr && sp_hit) begin
        sp_q[idx] <= reg_req_i.wdata;
        if (reg_req_i.wdata != '0) sp_stored_o[idx]  <= 1'b1;
        else                       sp_cleared_o[idx] <= 1'b1;
      end
      for (int unsigned c = 0; c < NumCores; c++) begin
        if (wr && mism_hit && idx == c) mism_q[c] <= '0;
        else if (mismatch_inc_i[c] && mism_q[c] != '1)   mism_q[c] <= mism_q[c] + 32'd1;
      end
    end
  end

  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) sp_nonzero_o[c] = (sp_q[c] != '0);
  end

  assign sp_o         = sp_q;
  assign dmr_enable_o = DmrForced ? NumDmrW'((1 << NumDmr) - 1) : (DmrSupported && !TmrForced) ? dmr_en_q : '0;
  assign tmr_enable_o = TmrForced ? NumTmrW'((1 << NumTmr) - 1) : (TmrSupported && !DmrForced) ? tmr_en_q : '0;
  assign dmr_cfg_o    = RapidRecovery ? dmr_cfg_q : (dmr_cfg_q & ~CfgWidth'(1 << CFG_RAPID_RECOVERY));
  assign tmr_cfg_o    = RapidRecovery ? tmr_cfg_q : (tmr_cfg_q & ~CfgWidth'(1 << CFG_RAPID_RECOVERY));

  assign reg_rsp_o.gnt    = reg_req_i.req;
  assign reg_rsp_o.rvalid = rvalid_q;
  assign reg_rsp_o.rdata  = rdata_q;

endmodule
