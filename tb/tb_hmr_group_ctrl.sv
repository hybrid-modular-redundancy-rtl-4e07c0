// tb_hmr_group_ctrl -- walks a TMR controller and a DMR controller through every transition
// of the split / lock / unload / reload state machine and checks states, interrupt, clear
// pulses and rapid-recovery starts cycle by cycle.
`timescale 1ns/1ps
module tb_hmr_group_ctrl;
  import hmr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic lock_req, idle, error, sp_stored, sp_all, sp_cleared, rr_busy;
  logic [2:0] fid;
  logic [CfgWidth-1:0] cfg;
  logic locked, irq, clr_all, clr_help, rr_start;
  grp_state_e state;
  logic d_locked, d_irq, d_clr_all, d_clr_help, d_rr_start;
  grp_state_e d_state;
  int checks = 0, failures = 0;

  hmr_group_ctrl #(.Triple(1'b1)) dut (
    .clk_i (clk), .rst_ni (rst_n), .lock_req_i (lock_req), .idle_i (idle), .error_i (error),
    .fault_id_i (fid), .sp_stored_i (sp_stored), .sp_all_stored_i (sp_all), .sp_cleared_i (sp_cleared),
    .cfg_i (cfg), .rr_busy_i (rr_busy), .locked_o (locked), .irq_o (irq), .clear_all_o (clr_all),
    .clear_helpers_o (clr_help), .rr_start_o (rr_start), .state_o (state)
  );
  hmr_group_ctrl #(.Triple(1'b0)) dut_dmr (
    .clk_i (clk), .rst_ni (rst_n), .lock_req_i (lock_req), .idle_i (idle), .error_i (error),
    .fault_id_i (3'b000), .sp_stored_i (sp_stored), .sp_all_stored_i (sp_all), .sp_cleared_i (sp_cleared),
    .cfg_i (cfg), .rr_busy_i (rr_busy), .locked_o (d_locked), .irq_o (d_irq), .clear_all_o (d_clr_all),
    .clear_helpers_o (d_clr_help), .rr_start_o (d_rr_start), .state_o (d_state)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask
  task automatic cyc(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    lock_req = 0; idle = 0; error = 0; sp_stored = 0; sp_all = 0; sp_cleared = 0; rr_busy = 0; fid = 0;
    cfg = CfgWidth'((1 << CFG_SPLIT_SETBACK) | (1 << CFG_LOCK_SETBACK) | (1 << CFG_RELOAD_SETBACK));
    cyc(2);
    rst_n = 1;
    cyc(1);
    check(state == GRP_SPLIT && !locked && !irq, "reset state SPLIT");
    // lock request while running: interrupt until every SP is stored
    lock_req = 1;
    #1;
    check(irq && d_irq, "lock request raises the interrupt");
    cyc(3);
    check(state == GRP_SPLIT, "waits for the SPs");
    sp_all = 1;
    cyc(1);
    check(state == GRP_RELOAD && locked && clr_all && d_state == GRP_RELOAD, "lock & SP stored -> RELOAD with clear");
    cyc(1);
    check(!clr_all, "clear is a one-cycle pulse");
    // error during RELOAD clears again
    error = 1;
    cyc(1);
    error = 0;
    check(clr_all && state == GRP_RELOAD, "error in RELOAD clears again");
    sp_cleared = 1;
    cyc(1);
    sp_cleared = 0;
    check(state == GRP_LOCKED && d_state == GRP_LOCKED, "SP cleared -> LOCKED");
    // error in LOCKED: TMR goes to UNLOAD, DMR stays
    error = 1; fid = 3'b100;
    cyc(1);
    error = 0; fid = 0;
    check(state == GRP_UNLOAD && irq, "TMR error -> UNLOAD with interrupt");
    check(d_state == GRP_LOCKED && !d_irq, "DMR without rapid recovery stays LOCKED");
    cyc(3);
    check(state == GRP_UNLOAD, "UNLOAD waits for the SP");
    sp_stored = 1;
    cyc(1);
    sp_stored = 0;
    check(state == GRP_RELOAD && clr_all, "SP stored -> RELOAD with reset");
    sp_cleared = 1;
    cyc(1);
    sp_cleared = 0;
    check(state == GRP_LOCKED, "back to LOCKED");
    // delayed resynchronisation
    cfg[CFG_DELAY_RESYNCH] = 1;
    error = 1; fid = 3'b010;
    cyc(3);
    check(state == GRP_LOCKED, "first faulty core tolerated");
    fid = 3'b011;
    cyc(1);
    error = 0; fid = 0;
    check(state == GRP_UNLOAD, "second faulty core forces UNLOAD");
    sp_stored = 1; cyc(1); sp_stored = 0;
    sp_cleared = 1; cyc(1); sp_cleared = 0;
    check(state == GRP_LOCKED, "recovered");
    cfg[CFG_DELAY_RESYNCH] = 0;
    // rapid recovery on error
    cfg[CFG_RAPID_RECOVERY] = 1;
    error = 1;
    cyc(1);
    check(rr_start && d_rr_start && state == GRP_LOCKED, "error starts rapid recovery, stays LOCKED");
    rr_busy = 1;
    cyc(1);
    check(!rr_start, "rapid recovery start is one pulse");
    cyc(3);
    check(!rr_start, "no restart while recovery is busy");
    error = 0; rr_busy = 0;
    // split with partial reset
    lock_req = 0;
    cyc(1);
    check(state == GRP_SPLIT && clr_help && !clr_all && !locked, "split -> SPLIT with partial reset");
    // lock with rapid-recovery fill
    lock_req = 1; sp_all = 1;
    cyc(1);
    check(state == GRP_LOCKED && rr_start && !clr_all, "lock with fill goes straight to LOCKED");
    // split without partial reset
    cfg[CFG_SPLIT_SETBACK] = 0;
    lock_req = 0;
    cyc(1);
    check(state == GRP_SPLIT && !clr_help, "split without setback");
    // lock before boot
    sp_all = 0; idle = 1; lock_req = 1;
    #1;
    check(!irq, "no interrupt before boot");
    cyc(1);
    check(state == GRP_LOCKED && clr_all, "lock before boot is immediate");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
