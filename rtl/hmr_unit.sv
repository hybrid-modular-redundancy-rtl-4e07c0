// hmr_unit -- Hybrid Modular Redundancy unit of a multi-core cluster (top of this design).
//
// The unit wraps the NumCores cores of the cluster: every signal between a core and the
// cluster (instruction port, data port, interrupts, debug, status) passes through it, so
// the cores themselves stay unmodified apart from exposing their state write ports for
// rapid recovery. At run time any DMR group (cores d and d+N/2) or TMR group (cores t,
// t+N/3, t+2N/3) can be locked or split independently:
//   * split-lock muxes give the cores of a locked group the inputs of its main core and
//     select, per system port, the core's own outputs, the DCLS checker or TCLS voter result,
//     or zero for helper ports;
//   * one DCLS checker per DMR group compares, and gates on mismatch; one TCLS voter per TMR
//     group votes and names the faulty core. Once a locked DMR group has mismatched, its
//     outputs stay gated (and its backup stays frozen) until its rapid recovery ends, the
//     group is cleared or it is split, even if the two cores agree again in between; this
//     sticky gate is this design's reading of "the outputs remain gated";
//   * one controller per group implements the split/lock/unload/reload state machine, raises
//     the synchronisation interrupt (to be routed through the cluster's event unit) and
//     issues synchronous clears;
//   * one rapid recovery engine per DMR group index (shared by the TMR group with the same
//     main core) keeps an ECC-protected backup of the group's state and restores it in
//     hardware after a mismatch or when a group is (re)locked;
//   * the configuration registers are reached through a peripheral register port.
// Everything compared by a checker or voter is the core's output bundle plus its state
// write stream, so the backup only ever takes values the group agreed on. All checking is
// combinational; control reacts one cycle after a mismatch. Structure and grouping follow
// the paper; the register map, the per-group configuration bits and the sharing of one
// recovery engine between a DMR and a TMR group are this design's choices. DmrFixed and
// TmrFixed tie the group enables on, which gives the permanently enforced DMR or TMR unit
// the paper mentions; how it is done is this design's choice.
module hmr_unit
  import hmr_pkg::*;
#(
  parameter int unsigned NumCores      = 12,
  parameter bit          DmrSupported  = 1'b1,
  parameter bit          TmrSupported  = 1'b1,
  parameter bit          RapidRecovery = 1'b1,
  parameter bit          DmrFixed      = 1'b0,  // lock every DMR group permanently
  parameter bit          TmrFixed      = 1'b0,  // lock every TMR group permanently
  parameter bit          RecoveryEcc   = 1'b1,  // ECC on the recovery registers
  localparam int unsigned NumDmr  = NumCores / 2,
  localparam int unsigned NumTmr  = NumCores / 3,
  localparam int unsigned NumDmrW = (NumDmr > 0) ? NumDmr : 1,
  localparam int unsigned NumTmrW = (NumTmr > 0) ? NumTmr : 1
) (
  input  logic                            clk_i,
  input  logic                            rst_ni,
  // configuration port from the peripheral interconnect
  input  reg_req_t                        reg_req_i,
  output reg_rsp_t                        reg_rsp_o,
  // system side: one port per core position
  input  core_in_t       [NumCores-1:0]   sys_in_i,
  output core_out_t      [NumCores-1:0]   sys_out_o,
  // core side
  output core_in_t       [NumCores-1:0]   core_in_o,
  input  core_out_t      [NumCores-1:0]   core_out_i,
  input  core_state_wr_t [NumCores-1:0]   core_bkp_i,
  output core_state_wr_t [NumCores-1:0]   core_rec_o,
  output logic           [NumCores-1:0]   core_synch_rst_o,
  // towards the event unit and the system
  output logic           [NumCores-1:0]   sync_irq_o,
  output logic           [NumDmrW-1:0]    dmr_error_o,
  output logic           [NumTmrW-1:0]    tmr_error_o,
  output logic           [NumDmrW-1:0]    rr_busy_o,
  output logic           [NumDmrW-1:0]    rr_ecc_err_o
);

  core_cmp_t [NumCores-1:0] cmp;
  for (genvar c = 0; c < NumCores; c++) begin : gen_cmp
    assign cmp[c].out   = core_out_i[c];
    assign cmp[c].state = core_bkp_i[c];
  end

  // ---------------------------------------------------------------------------------------
  // Configuration registers
  // ---------------------------------------------------------------------------------------
  logic [NumDmrW-1:0]        dmr_enable;
  logic [NumTmrW-1:0]        tmr_enable;
  logic [CfgWidth-1:0]       dmr_cfg, tmr_cfg;
  hmr_mode_e [NumCores-1:0]  core_mode;
  grp_state_e [NumDmrW-1:0]  dmr_state;
  grp_state_e [NumTmrW-1:0]  tmr_state;
  logic [NumCores-1:0]       sp_nonzero, sp_stored, sp_cleared, mismatch_inc;

  hmr_regs #(
    .NumCores      (NumCores),
    .DmrSupported  (DmrSupported),
    .TmrSupported  (TmrSupported),
    .RapidRecovery (RapidRecovery),
    .DmrFixed      (DmrFixed),
    .TmrFixed      (TmrFixed)
  ) i_regs (
    .clk_i, .rst_ni,
    .reg_req_i,
    .reg_rsp_o,
    .dmr_enable_o   (dmr_enable),
    .tmr_enable_o   (tmr_enable),
    .dmr_cfg_o      (dmr_cfg),
    .tmr_cfg_o      (tmr_cfg),
    .core_mode_i    (core_mode),
    .dmr_state_i    (dmr_state),
    .tmr_state_i    (tmr_state),
    .sp_nonzero_o   (sp_nonzero),
    .sp_stored_o    (sp_stored),
    .sp_cleared_o   (sp_cleared),
    .sp_o           (),
    .mismatch_inc_i (mismatch_inc)
  );

  // ---------------------------------------------------------------------------------------
  // Checkers, voters and group controllers
  // ---------------------------------------------------------------------------------------
  core_cmp_t [NumDmrW-1:0] dmr_cmp;
  core_cmp_t [NumTmrW-1:0] tmr_cmp;
  logic [NumDmrW-1:0] dmr_mism, dmr_locked, dmr_err, dmr_gate, dmr_irq, dmr_clr_all, dmr_clr_help, dmr_rr_start;
  logic [NumTmrW-1:0] tmr_mism, tmr_locked, tmr_err, tmr_irq, tmr_clr_all, tmr_clr_help, tmr_rr_start;
  logic [NumTmrW-1:0][2:0] tmr_fault_id;
  logic [NumDmrW-1:0] rr_busy, rr_clear, rr_debug;
  core_state_wr_t [NumDmrW-1:0] rr_rec;

  for (genvar d = 0; d < NumDmr; d++) begin : gen_dmr
    if (DmrSupported) begin : gen_on
      hmr_dmr_checker #(.Width(CmpWidth)) i_checker (
        .main_i   (cmp[d]),
        .helper_i (cmp[d + NumDmr]),
        .check_i  ({CmpWidth{1'b1}}),
        .data_o   (dmr_cmp[d]),
        .error_o  (dmr_mism[d])
      );
      assign dmr_err[d] = dmr_mism[d] && dmr_locked[d];

      // Once a pair has mismatched, its outputs stay gated until the group has been
      // repaired (end of a rapid recovery, or a synchronous clear of the whole group) or
      // split, even if the two cores happen to agree again in between.
      logic gate_q, busy_q;
      always_ff @(posedge clk_i or negedge rst_ni) begin
        if (!rst_ni) begin
          gate_q <= 1'b0;
          busy_q <= 1'b0;
        end else begin
          busy_q <= rr_busy[d];
          if (!dmr_locked[d] || dmr_clr_all[d] || (busy_q && !rr_busy[d])) gate_q <= 1'b0;
          else if (dmr_err[d])                                               gate_q <= 1'b1;
        end
      end
      assign dmr_gate[d] = gate_q;

      hmr_group_ctrl #(.Triple(1'b0)) i_ctrl (
        .clk_i, .rst_ni,
        .lock_req_i      (dmr_enable[d]),
        .idle_i          (!sys_in_i[d].fetch_enable),
        .error_i         (dmr_err[d]),
        .fault_id_i      (3'b000),
        .sp_stored_i     (sp_stored[d]),
        .sp_all_stored_i (sp_nonzero[d] && sp_nonzero[d + NumDmr]),
        .sp_cleared_i    (sp_cleared[d]),
        .cfg_i           (dmr_cfg),
        .rr_busy_i       (rr_busy[d]),
        .locked_o        (dmr_locked[d]),
        .irq_o           (dmr_irq[d]),
        .clear_all_o     (dmr_clr_all[d]),
        .clear_helpers_o (dmr_clr_help[d]),
        .rr_start_o      (dmr_rr_start[d]),
        .state_o         (dmr_state[d])
      );
    end else begin : gen_off
      assign dmr_cmp[d]      = '0;
      assign dmr_mism[d]     = 1'b0;
      assign dmr_err[d]      = 1'b0;
      assign dmr_gate[d]     = 1'b0;
      assign dmr_locked[d]   = 1'b0;
      assign dmr_irq[d]      = 1'b0;
      assign dmr_clr_all[d]  = 1'b0;
      assign dmr_clr_help[d] = 1'b0;
      assign dmr_rr_start[d] = 1'b0;
      assign dmr_state[d]    = GRP_SPLIT;
    end
  end

  for (genvar t = 0; t < NumTmr; t++) begin : gen_tmr
    if (TmrSupported) begin : gen_on
      hmr_tmr_voter #(.Width(CmpWidth)) i_voter (
        .a_i        (cmp[t]),
        .b_i        (cmp[t + NumTmr]),
        .c_i        (cmp[t + 2 * NumTmr]),
        .data_o     (tmr_cmp[t]),
        .mismatch_o (tmr_mism[t]),
        .fault_id_o (tmr_fault_id[t])
      );
      assign tmr_err[t] = tmr_mism[t] && tmr_locked[t];

      hmr_group_ctrl #(.Triple(1'b1)) i_ctrl (
        .clk_i, .rst_ni,
        .lock_req_i      (tmr_enable[t]),
        .idle_i          (!sys_in_i[t].fetch_enable),
        .error_i         (tmr_err[t]),
        .fault_id_i      (tmr_fault_id[t]),
        .sp_stored_i     (sp_stored[t]),
        .sp_all_stored_i (sp_nonzero[t] && sp_nonzero[t + NumTmr] && sp_nonzero[t + 2 * NumTmr]),
        .sp_cleared_i    (sp_cleared[t]),
        .cfg_i           (tmr_cfg),
        .rr_busy_i       (rr_busy[t]),
        .locked_o        (tmr_locked[t]),
        .irq_o           (tmr_irq[t]),
        .clear_all_o     (tmr_clr_all[t]),
        .clear_helpers_o (tmr_clr_help[t]),
        .rr_start_o      (tmr_rr_start[t]),
        .state_o         (tmr_state[t])
      );
    end else begin : gen_off
      assign tmr_cmp[t]      = '0;
      assign tmr_mism[t]     = 1'b0;
      assign tmr_fault_id[t] = '0;
      assign tmr_err[t]      = 1'b0;
      assign tmr_locked[t]   = 1'b0;
      assign tmr_irq[t]      = 1'b0;
      assign tmr_clr_all[t]  = 1'b0;
      assign tmr_clr_help[t] = 1'b0;
      assign tmr_rr_start[t] = 1'b0;
      assign tmr_state[t]    = GRP_SPLIT;
    end
  end

  // ---------------------------------------------------------------------------------------
  // Per-core mode and split-lock muxing
  // ---------------------------------------------------------------------------------------
  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      core_mode[c] = MODE_IND;
      if (NumTmr > 0 && c < 3 * NumTmr && tmr_locked[c % NumTmrW]) core_mode[c] = MODE_TMR;
      else if (NumDmr > 0 && c < 2 * NumDmr && dmr_locked[c % NumDmrW]) core_mode[c] = MODE_DMR;
    end
  end

  core_out_t [NumDmrW-1:0] dmr_out;
  core_out_t [NumTmrW-1:0] tmr_out;
  core_in_t  [NumCores-1:0] mux_in;
  for (genvar d = 0; d < NumDmrW; d++) begin : gen_dmr_out
    assign dmr_out[d] = dmr_gate[d] ? '0 : dmr_cmp[d].out;
  end
  for (genvar t = 0; t < NumTmrW; t++) begin : gen_tmr_out
    assign tmr_out[t] = tmr_cmp[t].out;
  end

  hmr_split_lock_mux #(.NumCores(NumCores)) i_mux (
    .core_mode_i (core_mode),
    .sys_in_i,
    .core_in_o   (mux_in),
    .core_out_i,
    .dmr_out_i   (dmr_out[NumDmr-1:0]),
    .tmr_out_i   (tmr_out[NumTmr-1:0]),
    .sys_out_o
  );

  // ---------------------------------------------------------------------------------------
  // Rapid recovery engines, one per DMR group index
  // ---------------------------------------------------------------------------------------
  for (genvar r = 0; r < NumDmrW; r++) begin : gen_rr
    if (RapidRecovery && r < NumDmr) begin : gen_on
      logic           tmr_sel, dmr_sel, error, start, halted;
      core_state_wr_t bkp;
      assign tmr_sel = (r < NumTmr) && tmr_locked[r % NumTmrW];
      assign dmr_sel = !tmr_sel && dmr_locked[r];
      always_comb begin
        if (tmr_sel) begin
          bkp    = tmr_cmp[r % NumTmrW].state;
          error  = tmr_mism[r % NumTmrW];
          start  = tmr_rr_start[r % NumTmrW];
          halted = core_out_i[r].debug_halt && core_out_i[(r + NumTmr) % NumCores].debug_halt &&
                   core_out_i[(r + 2 * NumTmr) % NumCores].debug_halt;
        end else if (dmr_sel) begin
          bkp    = dmr_cmp[r].state;
          error  = dmr_mism[r] || dmr_gate[r];
          start  = dmr_rr_start[r];
          halted = core_out_i[r].debug_halt && core_out_i[r + NumDmr].debug_halt;
        end else begin
          bkp    = core_bkp_i[r];  // split: keep backing up the main core alone
          error  = 1'b0;
          start  = 1'b0;
          halted = core_out_i[r].debug_halt;
        end
      end

      hmr_rapid_recovery #(.EccEnable(RecoveryEcc)) i_rr (
        .clk_i, .rst_ni,
        .bkp_i       (bkp),
        .error_i     (error),
        .start_i     (start),
        .halted_i    (halted),
        .rec_o       (rr_rec[r]),
        .clear_o     (rr_clear[r]),
        .debug_req_o (rr_debug[r]),
        .busy_o      (rr_busy[r]),
        .ecc_err_o   (rr_ecc_err_o[r])
      );
    end else begin : gen_off
      assign rr_rec[r]       = '0;
      assign rr_clear[r]     = 1'b0;
      assign rr_debug[r]     = 1'b0;
      assign rr_busy[r]      = 1'b0;
      assign rr_ecc_err_o[r] = 1'b0;
    end
  end

  // ---------------------------------------------------------------------------------------
  // Core-side control: synchronous clears, debug requests, restore streams, interrupts
  // ---------------------------------------------------------------------------------------
  always_comb begin
    for (int unsigned c = 0; c < NumCores; c++) begin
      int unsigned t, d;
      t = (NumTmr > 0) ? c % NumTmrW : 0;
      d = (NumDmr > 0) ? c % NumDmrW : 0;
      core_in_o[c]        = mux_in[c];
      core_rec_o[c]       = '0;
      core_synch_rst_o[c] = 1'b0;
      sync_irq_o[c]       = 1'b0;
      if (NumTmr > 0 && c < 3 * NumTmr) begin
        core_synch_rst_o[c] |= tmr_clr_all[t] || (c >= NumTmr && tmr_clr_help[t]);
        sync_irq_o[c]       |= tmr_irq[t];
      end
      if (NumDmr > 0 && c < 2 * NumDmr) begin
        core_synch_rst_o[c] |= dmr_clr_all[d] || (c >= NumDmr && dmr_clr_help[d]);
        sync_irq_o[c]       |= dmr_irq[d];
      end
      if (core_mode[c] == MODE_TMR) begin
        core_synch_rst_o[c]       |= rr_clear[t];
        core_in_o[c].debug_req[0] |= rr_debug[t];
        core_rec_o[c]              = rr_rec[t];
      end else if (core_mode[c] == MODE_DMR) begin
        core_synch_rst_o[c]       |= rr_clear[d];
        core_in_o[c].debug_req[0] |= rr_debug[d];
        core_rec_o[c]              = rr_rec[d];
      end
    end
  end

  // Error statistics: count each new mismatch against the core(s) involved.
  logic [NumDmrW-1:0] dmr_err_q;
  logic [NumTmrW-1:0] tmr_err_q;
  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      dmr_err_q <= '0;
      tmr_err_q <= '0;
    end else begin
      dmr_err_q <= dmr_err;
      tmr_err_q <= tmr_err;
    end
  end

  always_comb begin
    mismatch_inc = '0;
    for (int unsigned t = 0; t < NumTmr; t++) begin
      if (tmr_err[t] && !tmr_err_q[t]) begin
        for (int unsigned k = 0; k < 3; k++) if (tmr_fault_id[t][k]) mismatch_inc[t + k * NumTmr] = 1'b1;
      end
    end
    for (int unsigned d = 0; d < NumDmr; d++) begin
      if (dmr_err[d] && !dmr_err_q[d]) begin
        mismatch_inc[d]          = 1'b1;
        mismatch_inc[d + NumDmr] = 1'b1;
      end
    end
  end

  assign dmr_error_o = dmr_err;
  assign tmr_error_o = tmr_err;
  assign rr_busy_o   = rr_busy;

endmodule
