// hmr_group_ctrl -- split-lock and software re-synchronisation controller of one group.
//
// One instance runs per DMR group and per TMR group. States (paper's TCLS controller):
//   SPLIT  : the cores run independently. When the configuration asks for the group to be
//            locked, the synchronisation interrupt is raised until every core of the group
//            has stored a non-zero stack pointer in its SP register ("lock & SP stored");
//            the group then locks and goes to RELOAD (software reload), or straight to LOCKED
//            with a rapid-recovery fill. If the main core is not fetching yet (configuration
//            before boot) the group locks at once.
//   LOCKED : lockstep operation. Clearing the lock request splits the group (to SPLIT),
//            with an optional synchronous clear of the helper cores ("partial reset").
//            A mismatch starts rapid recovery if enabled; otherwise a TMR group goes to
//            UNLOAD. With delayed resynchronisation the first faulty core (fault ID) is only
//            recorded and the other two keep running; a mismatch of another core then forces
//            the UNLOAD. A DMR
//            group stays locked with its outputs gated by the checker.
//   UNLOAD : the interrupt makes the cores store their state; the main core's SP write
//            moves to RELOAD, optionally clearing all cores ("reset").
//   RELOAD : the cores reload the saved state; an error clears them again if configured;
//            writing zero to the main core's SP register returns to LOCKED.
// Clear and rapid-recovery start outputs are registered one-cycle pulses issued on the
// transitions. The states and transitions are the paper's; the configuration bits that make
// each clear optional, the direct lock before boot and the rapid-recovery shortcuts are
// this design's reading of the text.
module hmr_group_ctrl
  import hmr_pkg::*;
#(
  parameter bit Triple = 1'b1
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  logic                lock_req_i,      // group enabled in the configuration
  input  logic                idle_i,          // main core not fetching (before boot)
  input  logic                error_i,         // checker / voter mismatch while locked
  input  logic [2:0]          fault_id_i,      // TMR: cores disagreeing with the majority
  input  logic                sp_stored_i,     // non-zero write to the main core's SP register
  input  logic                sp_all_stored_i, // every core of the group holds a non-zero SP
  input  logic                sp_cleared_i,    // zero write to the main core's SP register
  input  logic [CfgWidth-1:0] cfg_i,
  input  logic                rr_busy_i,       // rapid recovery routine running
  output logic                locked_o,
  output logic                irq_o,
  output logic                clear_all_o,
  output logic                clear_helpers_o,
  output logic                rr_start_o,
  output grp_state_e          state_o
);

  grp_state_e state_q, state_d;
  logic [2:0] err_seen_q, err_seen_d;  // cores already known to be faulty (delayed resynch)
  logic       clear_all_d, clear_helpers_d, rr_start_d;

  always_comb begin
    state_d         = state_q;
    err_seen_d      = err_seen_q;
    clear_all_d     = 1'b0;
    clear_helpers_d = 1'b0;
    rr_start_d      = 1'b0;
    unique case (state_q)
      GRP_SPLIT: begin
        if (lock_req_i) begin
          if (idle_i) begin
            state_d     = GRP_LOCKED;
            clear_all_d = cfg_i[CFG_LOCK_SETBACK];
          end else if (sp_all_stored_i) begin
            if (cfg_i[CFG_RAPID_RECOVERY]) begin
              state_d    = GRP_LOCKED;
              rr_start_d = 1'b1;
            end else begin
              state_d     = GRP_RELOAD;
              clear_all_d = cfg_i[CFG_LOCK_SETBACK];
            end
          end
        end
      end
      GRP_LOCKED: begin
        if (!lock_req_i) begin
          state_d         = GRP_SPLIT;
          err_seen_d      = '0;
          clear_helpers_d = cfg_i[CFG_SPLIT_SETBACK];
        end else if (error_i && !rr_busy_i && !rr_start_o) begin
          if (cfg_i[CFG_RAPID_RECOVERY]) begin
            rr_start_d = 1'b1;
          end else if (Triple) begin
            if (cfg_i[CFG_DELAY_RESYNCH] && (err_seen_q == '0)) begin
              err_seen_d = fault_id_i;
            end else if (cfg_i[CFG_DELAY_RESYNCH] && ((fault_id_i & ~err_seen_q) == '0)) begin
              err_seen_d = err_seen_q;  // the same core is still diverged: keep running
            end else begin
              state_d = GRP_UNLOAD;
            end
          end
        end
      end
      GRP_UNLOAD: begin
        if (sp_stored_i) begin
          state_d     = GRP_RELOAD;
          clear_all_d = cfg_i[CFG_LOCK_SETBACK];
        end
      end
      GRP_RELOAD: begin
        if (!lock_req_i) begin
          state_d    = GRP_SPLIT;
          err_seen_d = '0;
        end else if (sp_cleared_i) begin
          state_d    = GRP_LOCKED;
          err_seen_d = '0;
        end else if (error_i && cfg_i[CFG_RELOAD_SETBACK] && !clear_all_o) begin
          clear_all_d = 1'b1;
        end
      end
      default: state_d = GRP_SPLIT;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q         <= GRP_SPLIT;
      err_seen_q      <= '0;
      clear_all_o     <= 1'b0;
      clear_helpers_o <= 1'b0;
      rr_start_o      <= 1'b0;
    end else begin
      state_q         <= state_d;
      err_seen_q      <= err_seen_d;
      clear_all_o     <= clear_all_d;
      clear_helpers_o <= clear_helpers_d;
      rr_start_o      <= rr_start_d;
    end
  end

  assign locked_o = (state_q != GRP_SPLIT);
  assign irq_o    = (state_q == GRP_UNLOAD) || (state_q == GRP_SPLIT && lock_req_i && !idle_i);
  assign state_o  = state_q;

endmodule
