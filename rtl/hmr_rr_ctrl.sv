// hmr_rr_ctrl -- rapid recovery routine controller with the register-file address generator.
//
// Four states, as in the paper: IDLE waits for start_i (raised by the group controller on
// a checker/voter mismatch); CLEAR drives a one-cycle synchronous clear of the group's
// cores; HALT raises the debug request and waits until every core of the group reports
// halted; RESTORE holds the debug request while the address generator walks the recovery
// RF two registers per cycle (x1/x2, x3/x4, ..., x31), so all 31 registers are written back
// over the core's two RF write ports in 16 cycles, while PC and CSRs are written in
// parallel; then back to IDLE, which releases the debug request and lets the cores resume.
// Timing from the cycle the mismatch appears: 1 cycle to register the start in the group
// controller, 1 in IDLE, 1 in CLEAR, debug request from the 4th cycle, the core's halt
// latency, then 16 restore cycles: 24 cycles with a core that halts 4 cycles after the
// request, which is the figure the paper reports. The states and the two-port restore are
// the paper's; the exact cycle split is this design's.
module hmr_rr_ctrl
  import hmr_pkg::*;
#(
  parameter int unsigned NumRegs = 31,
  localparam int unsigned AddrWidth   = $clog2(NumRegs + 1),
  localparam int unsigned NumSteps    = (NumRegs + 1) / 2,
  localparam int unsigned StepWidth   = (NumSteps > 1) ? $clog2(NumSteps) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic                      start_i,
  input  logic                      halted_i,
  output rr_state_e                 state_o,
  output logic                      busy_o,
  output logic                      clear_o,
  output logic                      debug_req_o,
  output logic [1:0]                rf_we_o,
  output logic [1:0][AddrWidth-1:0] rf_addr_o,
  output logic                      pc_we_o,
  output logic                      csr_we_o
);

  rr_state_e            state_q, state_d;
  logic [StepWidth-1:0] step_q, step_d;

  always_comb begin
    state_d = state_q;
    step_d  = step_q;
    unique case (state_q)
      RR_IDLE:    if (start_i) state_d = RR_CLEAR;
      RR_CLEAR:   state_d = RR_HALT;
      RR_HALT: begin
        step_d = '0;
        if (halted_i) state_d = RR_RESTORE;
      end
      RR_RESTORE: begin
        step_d = step_q + 1'b1;
        if (int'(step_q) == NumSteps - 1) state_d = RR_IDLE;
      end
      default:    state_d = RR_IDLE;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= RR_IDLE;
      step_q  <= '0;
    end else begin
      state_q <= state_d;
      step_q  <= step_d;
    end
  end

  // RF address generator: two consecutive registers per restore step.
  always_comb begin
    rf_addr_o[0] = AddrWidth'(2 * int'(step_q) + 1);
    rf_addr_o[1] = AddrWidth'(2 * int'(step_q) + 2);
    rf_we_o[0]   = (state_q == RR_RESTORE);
    rf_we_o[1]   = (state_q == RR_RESTORE) && (2 * int'(step_q) + 2 <= NumRegs);
  end

  assign state_o     = state_q;
  assign busy_o      = (state_q != RR_IDLE);
  assign clear_o     = (state_q == RR_CLEAR);
  assign debug_req_o = (state_q == RR_HALT) || (state_q == RR_RESTORE);
  assign pc_we_o     = (state_q == RR_RESTORE);
  assign csr_we_o    = (state_q == RR_RESTORE);

endmodule
