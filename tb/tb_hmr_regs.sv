// tb_hmr_regs -- register file test: reset values, read-back, DMR/TMR exclusivity, SP
// events, mismatch counters, state readout and the one-cycle read latency. Two more
// instances, with TMR and with DMR enforced permanently, share the same register port and
// are checked for tied enables and ignored enable writes.
`timescale 1ns/1ps
module tb_hmr_regs;
  import hmr_pkg::*;
  localparam int unsigned N = 12;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t req;
  reg_rsp_t rsp;
  logic [5:0] dmr_en;
  logic [3:0] tmr_en;
  logic [CfgWidth-1:0] dmr_cfg, tmr_cfg;
  hmr_mode_e [N-1:0] mode;
  grp_state_e [5:0] dmr_state;
  grp_state_e [3:0] tmr_state;
  logic [N-1:0] sp_nz, sp_st, sp_cl, inc;
  logic [N-1:0][31:0] sp;
  int checks = 0, failures = 0;

  reg_rsp_t rsp_t, rsp_d;
  logic [5:0] dmr_en_t, dmr_en_d;
  logic [3:0] tmr_en_t, tmr_en_d;
  hmr_regs #(.NumCores(N), .TmrFixed(1'b1)) dut_tmr_fixed (
    .clk_i (clk), .rst_ni (rst_n), .reg_req_i (req), .reg_rsp_o (rsp_t),
    .dmr_enable_o (dmr_en_t), .tmr_enable_o (tmr_en_t), .dmr_cfg_o (), .tmr_cfg_o (),
    .core_mode_i (mode), .dmr_state_i (dmr_state), .tmr_state_i (tmr_state),
    .sp_nonzero_o (), .sp_stored_o (), .sp_cleared_o (), .sp_o (), .mismatch_inc_i (inc)
  );
  hmr_regs #(.NumCores(N), .DmrFixed(1'b1)) dut_dmr_fixed (
    .clk_i (clk), .rst_ni (rst_n), .reg_req_i (req), .reg_rsp_o (rsp_d),
    .dmr_enable_o (dmr_en_d), .tmr_enable_o (tmr_en_d), .dmr_cfg_o (), .tmr_cfg_o (),
    .core_mode_i (mode), .dmr_state_i (dmr_state), .tmr_state_i (tmr_state),
    .sp_nonzero_o (), .sp_stored_o (), .sp_cleared_o (), .sp_o (), .mismatch_inc_i (inc)
  );

  hmr_regs #(.NumCores(N)) dut (
    .clk_i (clk), .rst_ni (rst_n), .reg_req_i (req), .reg_rsp_o (rsp),
    .dmr_enable_o (dmr_en), .tmr_enable_o (tmr_en), .dmr_cfg_o (dmr_cfg), .tmr_cfg_o (tmr_cfg),
    .core_mode_i (mode), .dmr_state_i (dmr_state), .tmr_state_i (tmr_state),
    .sp_nonzero_o (sp_nz), .sp_stored_o (sp_st), .sp_cleared_o (sp_cl), .sp_o (sp),
    .mismatch_inc_i (inc)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask
  task automatic cyc(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask
  task automatic wr(input logic [11:0] a, input logic [31:0] d);
    req = '{req: 1'b1, addr: a, we: 1'b1, wdata: d};
    #1;
    check(rsp.gnt, "write granted at once");
    cyc(1);
    req = '0;
  endtask
  task automatic rd(input logic [11:0] a, output logic [31:0] d);
    req = '{req: 1'b1, addr: a, we: 1'b0, wdata: '0};
    cyc(1);
    req = '0;
    check(rsp.rvalid, "read answered one cycle later");
    d = rsp.rdata;
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] d;
    req = '0; inc = '0;
    mode = '0; dmr_state = '0; tmr_state = '0;
    cyc(2);
    rst_n = 1;
    cyc(1);
    rd(REG_AVAIL, d);
    check(d == 32'h0000_0C07, "AVAIL");
    check(rsp_t.rdata == 32'h0000_0C17 && rsp_d.rdata == 32'h0000_0C0F, "AVAIL of enforced instances");
    check(tmr_en_t == 4'hF && dmr_en_t == 6'h0, "TMR enforced: all TMR groups locked from reset");
    check(dmr_en_d == 6'h3F && tmr_en_d == 4'h0, "DMR enforced: all DMR groups locked from reset");
    rd(REG_TMR_CONFIG, d);
    check(d == 32'h0F, "TMR_CONFIG reset value");
    rd(REG_DMR_CONFIG, d);
    check(d == 32'h0F, "DMR_CONFIG reset value");
    wr(REG_TMR_ENABLE, 32'h5);           // TMR groups 0 {0,4,8} and 2 {2,6,10}
    check(tmr_en == 4'h5, "TMR enable written");
    wr(REG_DMR_ENABLE, 32'h2);           // DMR group 1 {1,7}: no overlap
    check(dmr_en == 6'h2 && tmr_en == 4'h5, "non-overlapping groups coexist");
    wr(REG_DMR_ENABLE, 32'h6);           // DMR group 2 {2,8}: overlaps TMR 0 and 2
    check(dmr_en == 6'h6 && tmr_en == 4'h0, "overlapping DMR group drops TMR groups");
    wr(REG_TMR_ENABLE, 32'h2);           // TMR group 1 {1,5,9}: overlaps DMR 1
    check(tmr_en == 4'h2 && dmr_en == 6'h4, "overlapping TMR group drops DMR group");
    rd(REG_TMR_ENABLE, d);
    check(d == 32'h2, "TMR enable readback");
    // SP registers
    wr(REG_SP_BASE + 12'd20, 32'hABCD_0000);
    check(sp_st[5] && !sp_cl[5] && sp_nz[5], "non-zero SP write event");
    cyc(1);
    check(!sp_st[5], "event is one pulse");
    rd(REG_SP_BASE + 12'd20, d);
    check(d == 32'hABCD_0000 && sp[5] == 32'hABCD_0000, "SP readback");
    wr(REG_SP_BASE + 12'd20, 32'h0);
    check(sp_cl[5] && !sp_nz[5], "zero SP write event");
    // mismatch counters
    inc = 12'b1000_0000_0001;
    cyc(3);
    inc = '0;
    rd(REG_MISM_BASE + 12'd44, d);
    check(d == 32'd3, "mismatch counter of core 11");
    rd(REG_MISM_BASE + 12'd0, d);
    check(d == 32'd3, "mismatch counter of core 0");
    wr(REG_MISM_BASE + 12'd0, 32'h0);
    rd(REG_MISM_BASE + 12'd0, d);
    check(d == 32'd0, "write clears a mismatch counter");
    // state readout
    mode[3] = MODE_TMR; dmr_state[1] = GRP_RELOAD; tmr_state[3] = GRP_UNLOAD;
    rd(REG_CORE_MODE, d);
    check(d == 32'h0000_0080, "CORE_MODE");
    rd(REG_DMR_STATE, d);
    check(d == 32'h0000_000C, "DMR_STATE");
    rd(REG_TMR_STATE, d);
    check(d == 32'h0000_0080, "TMR_STATE");
    wr(REG_TMR_CONFIG, 32'h13);
    check(tmr_cfg == 5'h13, "config write");
    // the enforced instances saw every enable write above and must have ignored them
    check(tmr_en_t == 4'hF && dmr_en_t == 6'h0, "TMR enforced: enable writes ignored");
    check(dmr_en_d == 6'h3F && tmr_en_d == 4'h0, "DMR enforced: enable writes ignored");
    rd(REG_TMR_ENABLE, d);
    check(rsp_t.rdata == 32'hF && rsp_d.rdata == 32'h0, "enforced TMR_ENABLE readout");
    rd(REG_DMR_ENABLE, d);
    check(rsp_t.rdata == 32'h0 && rsp_d.rdata == 32'h3F, "enforced DMR_ENABLE readout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
