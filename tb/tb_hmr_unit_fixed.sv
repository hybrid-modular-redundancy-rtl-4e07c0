// tb_hmr_unit_fixed -- HMR unit with a redundancy mode enforced permanently by parameter.
//
// Two 6-core units run side by side, each with six behavioural core models: one built with
// TmrFixed (TMR groups {0,2,4} and {1,3,5} always locked), one with DmrFixed (DMR groups
// {0,3}, {1,4}, {2,5} always locked; this one is also built without ECC on its recovery
// registers, so rapid recovery is exercised in that variant too). Both share one register request bus and answer on
// their own response port. The cores are held before boot for a few cycles after reset, so
// every group locks directly; the test then checks:
//   * CORE_MODE and the group states read back TMR/LOCKED or DMR/LOCKED for every core;
//   * AVAIL reports the enforced mode;
//   * the cores of every group run in lockstep and only the main core's port is driven;
//   * writing zero to both enable registers changes nothing;
//   * a register upset in a TMR helper and in a DMR helper is repaired by rapid recovery and
//     the groups stay locked.
// Each of these mechanisms is counted, and one that never happened counts as a failure.
// The 6-core size is this testbench's choice, to keep it short.
`timescale 1ns/1ps
module tb_hmr_unit_fixed;
  import hmr_pkg::*;

  localparam int unsigned N = 6;
  localparam logic [31:0] BootAddr = 32'h1C00_0080;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t reg_req;
  reg_rsp_t [1:0] reg_rsp;
  logic [N-1:0] fetch_en;
  logic [1:0][N-1:0] inject;
  logic [4:0]  inject_reg;
  logic [31:0] inject_mask;

  // index 0: TMR enforced, index 1: DMR enforced
  core_in_t       [1:0][N-1:0] sys_in, core_in;
  core_out_t      [1:0][N-1:0] sys_out, core_out;
  core_state_wr_t [1:0][N-1:0] core_bkp, core_rec;
  logic           [1:0][N-1:0] synch_rst, sync_irq;
  logic [N/2-1:0] dmr_error_t, rr_busy_t, dmr_error_d, rr_busy_d, ecc_t, ecc_d;
  logic [N/3-1:0] tmr_error_t, tmr_error_d;

  hmr_unit #(.NumCores(N), .TmrFixed(1'b1)) dut_tmr (
    .clk_i (clk), .rst_ni (rst_n), .reg_req_i (reg_req), .reg_rsp_o (reg_rsp[0]),
    .sys_in_i (sys_in[0]), .sys_out_o (sys_out[0]), .core_in_o (core_in[0]),
    .core_out_i (core_out[0]), .core_bkp_i (core_bkp[0]), .core_rec_o (core_rec[0]),
    .core_synch_rst_o (synch_rst[0]), .sync_irq_o (sync_irq[0]),
    .dmr_error_o (dmr_error_t), .tmr_error_o (tmr_error_t), .rr_busy_o (rr_busy_t),
    .rr_ecc_err_o (ecc_t)
  );
  hmr_unit #(.NumCores(N), .DmrFixed(1'b1), .RecoveryEcc(1'b0)) dut_dmr (
    .clk_i (clk), .rst_ni (rst_n), .reg_req_i (reg_req), .reg_rsp_o (reg_rsp[1]),
    .sys_in_i (sys_in[1]), .sys_out_o (sys_out[1]), .core_in_o (core_in[1]),
    .core_out_i (core_out[1]), .core_bkp_i (core_bkp[1]), .core_rec_o (core_rec[1]),
    .core_synch_rst_o (synch_rst[1]), .sync_irq_o (sync_irq[1]),
    .dmr_error_o (dmr_error_d), .tmr_error_o (tmr_error_d), .rr_busy_o (rr_busy_d),
    .rr_ecc_err_o (ecc_d)
  );

  for (genvar u = 0; u < 2; u++) begin : gen_unit
    for (genvar c = 0; c < N; c++) begin : gen_core
      hmr_core_model #(.HaltLatency(4)) u_core (
        .clk_i         (clk),
        .rst_ni        (rst_n),
        .synch_rst_i   (synch_rst[u][c]),
        .in_i          (core_in[u][c]),
        .out_o         (core_out[u][c]),
        .bkp_o         (core_bkp[u][c]),
        .rec_i         (core_rec[u][c]),
        .inject_i      (inject[u][c]),
        .inject_pc_i   (1'b0),
        .inject_reg_i  (inject_reg),
        .inject_mask_i (inject_mask)
      );
      always_comb begin
        sys_in[u][c]              = '0;
        sys_in[u][c].fetch_enable = fetch_en[c];
        sys_in[u][c].boot_addr    = BootAddr;
        sys_in[u][c].core_id      = 32'(c);
        sys_in[u][c].instr_gnt    = 1'b1;
        sys_in[u][c].instr_rvalid = 1'b1;
        sys_in[u][c].instr_rdata  = 32'h0000_0013;
        sys_in[u][c].data_gnt     = 1'b1;
        sys_in[u][c].data_rvalid  = 1'b1;
      end
    end
  end

  int checks = 0, failures = 0;
  int m_tmr_lock, m_dmr_lock, m_ignored, m_tmr_rr, m_dmr_rr;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  task automatic cyc(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic reg_write(input logic [11:0] addr, input logic [31:0] data);
    reg_req = '{req: 1'b1, addr: addr, we: 1'b1, wdata: data};
    cyc(1);
    reg_req = '0;
  endtask

  // reads both units at once
  task automatic reg_read(input logic [11:0] addr, output logic [31:0] t, output logic [31:0] d);
    reg_req = '{req: 1'b1, addr: addr, we: 1'b0, wdata: '0};
    cyc(1);
    reg_req = '0;
    t = reg_rsp[0].rdata;
    d = reg_rsp[1].rdata;
  endtask

  function automatic bit tmr_ok();
    bit ok = 1'b1;
    for (int g = 0; g < 2; g++) begin
      ok &= core_out[0][g] == core_out[0][g+2] && core_out[0][g] == core_out[0][g+4];
      ok &= core_bkp[0][g] == core_bkp[0][g+2] && core_bkp[0][g] == core_bkp[0][g+4];
      ok &= sys_out[0][g] == core_out[0][g] && sys_out[0][g+2] == '0 && sys_out[0][g+4] == '0;
    end
    return ok && tmr_error_t == '0;
  endfunction

  function automatic bit dmr_ok();
    bit ok = 1'b1;
    for (int g = 0; g < 3; g++) begin
      ok &= core_out[1][g] == core_out[1][g+3] && core_bkp[1][g] == core_bkp[1][g+3];
      ok &= sys_out[1][g] == core_out[1][g] && sys_out[1][g+3] == '0;
    end
    return ok && dmr_error_d == '0;
  endfunction

  function automatic logic [31:0] modes(input hmr_mode_e m);
    logic [31:0] v = '0;
    for (int c = 0; c < N; c++) v[2*c +: 2] = m;
    return v;
  endfunction

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] t, d;
    int n;
    bit busy_t, busy_d;
    reg_req = '0; fetch_en = '0; inject = '0; inject_reg = '0; inject_mask = '0;
    cyc(3);
    rst_n = 1'b1;
    cyc(4);
    fetch_en = '1;
    cyc(20);

    // ---- locked from reset ---------------------------------------------------------------
    reg_read(REG_CORE_MODE, t, d);
    check(t == modes(MODE_TMR), "TMR enforced: every core in TMR mode");
    check(d == modes(MODE_DMR), "DMR enforced: every core in DMR mode");
    reg_read(REG_TMR_STATE, t, d);
    check(t[3:0] == {GRP_LOCKED, GRP_LOCKED}, "TMR enforced: both groups LOCKED");
    reg_read(REG_DMR_STATE, t, d);
    check(d[5:0] == {GRP_LOCKED, GRP_LOCKED, GRP_LOCKED}, "DMR enforced: all groups LOCKED");
    reg_read(REG_AVAIL, t, d);
    check(t == 32'h0000_0617 && d == 32'h0000_060F, "AVAIL shows the enforced mode");
    check(tmr_ok(), "TMR groups in lockstep with helper ports silent");
    check(core_out[0][0].instr_req && core_out[0][0].instr_addr != BootAddr, "TMR cores running");
    if (t == 32'h0000_0617 && tmr_ok()) m_tmr_lock++;
    check(dmr_ok(), "DMR groups in lockstep with helper ports silent");
    if (d == 32'h0000_060F && dmr_ok()) m_dmr_lock++;

    // ---- enable writes have no effect ----------------------------------------------------
    reg_write(REG_TMR_ENABLE, 32'h0);
    reg_write(REG_DMR_ENABLE, 32'h0);
    cyc(10);
    reg_read(REG_CORE_MODE, t, d);
    check(t == modes(MODE_TMR) && d == modes(MODE_DMR), "enable writes ignored");
    check(sync_irq == '0 && synch_rst == '0, "no interrupt or clear after enable writes");
    if (t == modes(MODE_TMR) && d == modes(MODE_DMR)) m_ignored++;

    // ---- upsets repaired by rapid recovery -----------------------------------------------
    inject_reg  = 5'd9;
    inject_mask = 32'h0000_0100;
    inject[0][2] = 1'b1;   // helper of TMR group 0
    inject[1][4] = 1'b1;   // helper of DMR group 1
    cyc(1);
    inject = '0;
    n = 0; busy_t = 1'b0; busy_d = 1'b0;
    while (n < 100) begin
      busy_t |= rr_busy_t[0];
      busy_d |= rr_busy_d[1];
      cyc(1); n++;
    end
    check(tmr_ok(), "TMR group repaired after the upset");
    check(dmr_ok(), "DMR group repaired after the upset");
    check(ecc_t == '0 && ecc_d == '0, "no ECC error");
    reg_read(REG_CORE_MODE, t, d);
    check(t == modes(MODE_TMR) && d == modes(MODE_DMR), "groups still locked after recovery");
    check(busy_t && busy_d && rr_busy_t == '0 && rr_busy_d == '0, "both recoveries ran and ended");
    if (tmr_ok() && busy_t) m_tmr_rr++;
    if (dmr_ok() && busy_d) m_dmr_rr++;

    $display("mechanisms: tmr_lock=%0d dmr_lock=%0d writes_ignored=%0d tmr_rr=%0d dmr_rr=%0d",
             m_tmr_lock, m_dmr_lock, m_ignored, m_tmr_rr, m_dmr_rr);
    check(m_tmr_lock > 0, "mechanism: TMR locked from reset");
    check(m_dmr_lock > 0, "mechanism: DMR locked from reset");
    check(m_ignored > 0, "mechanism: enable writes ignored");
    check(m_tmr_rr > 0, "mechanism: TMR rapid recovery");
    check(m_dmr_rr > 0, "mechanism: DMR rapid recovery");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
