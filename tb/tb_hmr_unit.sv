// tb_hmr_unit -- end-to-end test of the HMR unit with its default parameters (12 cores,
// DMR, TMR and rapid recovery all built), driving it with 12 behavioural core models.
//
// The testbench plays the role of the cluster software and of the host: it writes the
// configuration registers, answers the synchronisation interrupt by storing and clearing SP
// registers, and injects upsets into single cores. It walks through: independent operation,
// TMR lock before boot, TMR rapid recovery (24-cycle latency checked), TMR software
// unload/reload, delayed resynchronisation, a DMR mission-critical entry via software
// reload, DMR output gating on a mismatch, DMR rapid recovery, a split with helper clear
// (mission-critical exit), a split without clear (performance section entry) and a lock
// with hardware fill (performance section exit). Each mechanism is counted; one that never
// happened counts as a failure.
`timescale 1ns/1ps
module tb_hmr_unit;
  import hmr_pkg::*;

  localparam int unsigned N  = 12;
  localparam int unsigned ND = N / 2;
  localparam int unsigned NT = N / 3;
  localparam logic [31:0] BootAddr = 32'h1C00_0080;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  reg_req_t reg_req;
  reg_rsp_t reg_rsp;
  core_in_t       [N-1:0] sys_in, core_in;
  core_out_t      [N-1:0] sys_out, core_out;
  core_state_wr_t [N-1:0] core_bkp, core_rec;
  logic [N-1:0]  synch_rst, sync_irq;
  logic [ND-1:0] dmr_error, rr_busy, rr_ecc_err;
  logic [NT-1:0] tmr_error;
  logic [N-1:0]  inject, inject_pc;
  logic [4:0]    inject_reg;
  logic [31:0]   inject_mask;
  logic [N-1:0]  fetch_en;

  hmr_unit dut (
    .clk_i            (clk),
    .rst_ni           (rst_n),
    .reg_req_i        (reg_req),
    .reg_rsp_o        (reg_rsp),
    .sys_in_i         (sys_in),
    .sys_out_o        (sys_out),
    .core_in_o        (core_in),
    .core_out_i       (core_out),
    .core_bkp_i       (core_bkp),
    .core_rec_o       (core_rec),
    .core_synch_rst_o (synch_rst),
    .sync_irq_o       (sync_irq),
    .dmr_error_o      (dmr_error),
    .tmr_error_o      (tmr_error),
    .rr_busy_o        (rr_busy),
    .rr_ecc_err_o     (rr_ecc_err)
  );

  logic [N-1:0][31:0] pc;
  for (genvar c = 0; c < N; c++) begin : gen_core
    hmr_core_model #(.HaltLatency(4)) u_core (
      .clk_i         (clk),
      .rst_ni        (rst_n),
      .synch_rst_i   (synch_rst[c]),
      .in_i          (core_in[c]),
      .out_o         (core_out[c]),
      .bkp_o         (core_bkp[c]),
      .rec_i         (core_rec[c]),
      .inject_i      (inject[c]),
      .inject_pc_i   (inject_pc[c]),
      .inject_reg_i  (inject_reg),
      .inject_mask_i (inject_mask)
    );
    assign pc[c] = core_out[c].instr_addr;

    always_comb begin
      sys_in[c]              = '0;
      sys_in[c].fetch_enable = fetch_en[c];
      sys_in[c].boot_addr    = BootAddr;
      sys_in[c].core_id      = 32'(c);
      sys_in[c].instr_gnt    = 1'b1;
      sys_in[c].instr_rvalid = 1'b1;
      sys_in[c].instr_rdata  = 32'h0000_0013;
      sys_in[c].data_gnt     = 1'b1;
      sys_in[c].data_rvalid  = 1'b1;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // mechanism counters
  int m_ind, m_tmr_boot_lock, m_tmr_rr, m_tmr_sw, m_delay, m_dmr_sw_entry, m_dmr_gate,
      m_dmr_rr, m_split_clear, m_perf_split, m_rr_lock_entry, m_helper_zero;

  task automatic cyc(input int n);
    repeat (n) @(posedge clk);
    #1;
  endtask

  task automatic reg_write(input logic [11:0] addr, input logic [31:0] data);
    reg_req.req   = 1'b1;
    reg_req.we    = 1'b1;
    reg_req.addr  = addr;
    reg_req.wdata = data;
    cyc(1);
    reg_req = '0;
  endtask

  task automatic reg_read(input logic [11:0] addr, output logic [31:0] data);
    reg_req.req  = 1'b1;
    reg_req.we   = 1'b0;
    reg_req.addr = addr;
    cyc(1);
    reg_req = '0;
    data = reg_rsp.rdata;
  endtask

  task automatic upset(input int c, input bit on_pc, input logic [4:0] r, input logic [31:0] mask);
    inject[c]    = 1'b1;
    inject_pc[c] = on_pc;
    inject_reg   = r;
    inject_mask  = mask;
    cyc(1);
    inject    = '0;
    inject_pc = '0;
  endtask

  // Cycles from the first cycle a group error is seen until the recovery engine is idle again.
  task automatic measure_recovery(input int r, input bit tmr, output int n);
    int guard;
    bit seen_busy;
    guard = 0;
    while (!(tmr ? tmr_error[r] : dmr_error[r]) && guard < 200) begin cyc(1); guard++; end
    n = 0;
    seen_busy = 0;
    while (guard < 400) begin
      cyc(1);
      n++;
      guard++;
      if (rr_busy[r]) seen_busy = 1;
      else if (seen_busy) break;
    end
  endtask

  function automatic bit group_equal3(int a, int b, int c);
    return pc[a] == pc[b] && pc[b] == pc[c] && core_bkp[a] == core_bkp[b] && core_bkp[b] == core_bkp[c];
  endfunction

  // watchdog
  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [31:0] rd;
    int n, errs;
    reg_req   = '0;
    inject    = '0;
    inject_pc = '0;
    inject_reg  = '0;
    inject_mask = '0;
    fetch_en  = '0;
    cyc(3);
    rst_n = 1'b1;
    cyc(2);

    // ---- TMR group 0 (cores 0, 4, 8) locked before boot ----------------------------------
    reg_read(REG_AVAIL, rd);
    check(rd == 32'h0000_0C07, "AVAIL register");
    reg_write(REG_TMR_ENABLE, 32'h1);
    cyc(2);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_LOCKED, "TMR group 0 locks at once before boot");
    if (rd[1:0] == GRP_LOCKED) m_tmr_boot_lock++;
    fetch_en = '1;
    cyc(50);
    // independent cores keep their own ports
    errs = 0;
    for (int c = 0; c < N; c++) begin
      if (c % NT == 0) continue;
      if (sys_out[c] != core_out[c]) errs++;
      if (core_in[c].core_id != 32'(c)) errs++;
    end
    check(errs == 0, "independent cores use their own ports");
    if (errs == 0) m_ind++;
    check(group_equal3(0, 4, 8), "TMR group 0 runs in lockstep");
    check(sys_out[4] == '0 && sys_out[8] == '0, "TMR helper ports are zero");
    check(sys_out[0] == core_out[0], "TMR main port carries the voted outputs");
    check(core_in[8].core_id == 0 && core_in[4].core_id == 0, "TMR helpers see the main core ID");
    if (sys_out[4] == '0 && sys_out[8] == '0) m_helper_zero++;
    check(tmr_error == '0 && dmr_error == '0, "no mismatch while fault-free");

    // ---- TMR rapid recovery: upset of core 8's PC -----------------------------------------
    upset(8, 1'b1, 5'd0, 32'h0000_0100);
    measure_recovery(0, 1'b1, n);
    $display("TMR rapid recovery latency: %0d cycles", n);
    check(n == 24, "TMR rapid recovery takes 24 cycles");
    cyc(2);
    check(group_equal3(0, 4, 8), "TMR group resynchronised after rapid recovery");
    cyc(60);
    check(tmr_error[0] == 1'b0, "no mismatch after rapid recovery");
    if (n == 24 && group_equal3(0, 4, 8)) m_tmr_rr++;

    // an upset in a register shows up when the register is used, and is recovered too
    upset(4, 1'b0, 5'd9, 32'h0004_0000);
    measure_recovery(0, 1'b1, n);
    check(n == 24, "TMR rapid recovery of a register upset takes 24 cycles");
    cyc(40);
    check(group_equal3(0, 4, 8) && tmr_error[0] == 1'b0, "TMR group clean after register upset");
    reg_read(REG_MISM_BASE + 12'd16, rd);
    check(rd == 32'd1, "mismatch counter of core 4 counts one event");
    reg_read(REG_MISM_BASE + 12'd32, rd);
    check(rd == 32'd1, "mismatch counter of core 8 counts one event");

    // ---- TMR software recovery: unload / reload -------------------------------------------
    reg_write(REG_TMR_CONFIG, 32'((1 << CFG_LOCK_SETBACK) | (1 << CFG_RELOAD_SETBACK) | (1 << CFG_SPLIT_SETBACK)));
    upset(4, 1'b1, 5'd0, 32'h0000_0040);
    cyc(3);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_UNLOAD, "TMR error without rapid recovery enters UNLOAD");
    check(sync_irq[0] && sync_irq[4] && sync_irq[8] && !sync_irq[1], "UNLOAD interrupts the group's cores only");
    check(sys_out[0].instr_addr == pc[0] && pc[0] == pc[8], "voter hides the faulty core during UNLOAD");
    // software: store SP of the main core
    reg_write(REG_SP_BASE + 12'd0, 32'h1000_0F00);
    cyc(1);
    check(synch_rst[0] && synch_rst[4] && synch_rst[8], "UNLOAD -> RELOAD clears the locked cores");
    cyc(2);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_RELOAD, "SP stored moves to RELOAD");
    check(group_equal3(0, 4, 8), "cores identical after the synchronous clear");
    cyc(20);
    reg_write(REG_SP_BASE + 12'd0, 32'h0);
    cyc(2);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_LOCKED, "SP cleared returns to LOCKED");
    if (rd[1:0] == GRP_LOCKED) m_tmr_sw++;
    cyc(20);
    check(tmr_error[0] == 1'b0 && group_equal3(0, 4, 8), "TMR group clean after software recovery");

    // ---- delayed resynchronisation --------------------------------------------------------
    reg_write(REG_TMR_CONFIG, 32'((1 << CFG_LOCK_SETBACK) | (1 << CFG_DELAY_RESYNCH)));
    upset(8, 1'b1, 5'd0, 32'h0000_0200);
    cyc(10);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_LOCKED && tmr_error[0], "first mismatch is tolerated with delayed resynch");
    check(pc[0] == pc[4] && sys_out[0].instr_addr == pc[0], "two good cores keep running");
    upset(4, 1'b1, 5'd0, 32'h0000_0400);
    cyc(3);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_UNLOAD, "second faulty core forces UNLOAD");
    if (rd[1:0] == GRP_UNLOAD) m_delay++;
    reg_write(REG_SP_BASE + 12'd0, 32'h1000_0F00);
    cyc(5);
    reg_write(REG_SP_BASE + 12'd0, 32'h0);
    cyc(5);
    check(tmr_error[0] == 1'b0 && group_equal3(0, 4, 8), "TMR group clean after delayed resynch recovery");

    // ---- performance section: split without helper clear ----------------------------------
    reg_write(REG_TMR_CONFIG, 32'((1 << CFG_RAPID_RECOVERY) | (1 << CFG_LOCK_SETBACK)));
    reg_write(REG_TMR_ENABLE, 32'h0);
    check(synch_rst == '0, "split without setback clears no core");
    cyc(3);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_SPLIT, "group split");
    check(sys_out[4] == core_out[4] && sys_out[8] == core_out[8] && sys_out[4].instr_req, "split helpers drive their own ports");
    if (rd[1:0] == GRP_SPLIT && sys_out[8].instr_req) m_perf_split++;
    cyc(30);

    // ---- performance section exit: lock with hardware fill --------------------------------
    reg_write(REG_TMR_ENABLE, 32'h1);
    cyc(1);
    check(sync_irq[0] && sync_irq[4] && sync_irq[8], "lock request interrupts the group");
    reg_write(REG_SP_BASE + 12'd16, 32'h1000_0E00);
    reg_write(REG_SP_BASE + 12'd32, 32'h1000_0D00);
    check(rr_busy[0] == 1'b0, "no fill before every core stored its SP");
    reg_write(REG_SP_BASE + 12'd0, 32'h1000_0F00);
    n = 0;
    while (!rr_busy[0] && n < 10) begin cyc(1); n++; end
    n = 0;
    while (rr_busy[0] && n < 100) begin cyc(1); n++; end
    cyc(2);
    reg_read(REG_TMR_STATE, rd);
    check(rd[1:0] == GRP_LOCKED, "lock with fill ends LOCKED");
    check(group_equal3(0, 4, 8), "hardware fill copies the main core's state to the helpers");
    cyc(30);
    check(tmr_error[0] == 1'b0, "no mismatch after hardware fill");
    if (group_equal3(0, 4, 8) && tmr_error[0] == 1'b0) m_rr_lock_entry++;
    for (int c = 0; c < N; c += 4) reg_write(REG_SP_BASE + 12'(4 * c), 32'h0);

    // ---- DMR group 1 (cores 1, 7): mission-critical entry with software reload -----------
    reg_write(REG_DMR_CONFIG, 32'((1 << CFG_SPLIT_SETBACK) | (1 << CFG_LOCK_SETBACK)));
    reg_write(REG_DMR_ENABLE, 32'h2);
    cyc(1);
    check(sync_irq[1] && sync_irq[7] && !sync_irq[2], "DMR lock request interrupts cores 1 and 7");
    reg_write(REG_SP_BASE + 12'd4, 32'h1000_0C00);
    reg_write(REG_SP_BASE + 12'd28, 32'h1000_0B00);
    cyc(1);
    check(synch_rst[1] && synch_rst[7], "lock entry clears both DMR cores");
    cyc(2);
    reg_read(REG_DMR_STATE, rd);
    check(rd[3:2] == GRP_RELOAD, "DMR group in RELOAD");
    reg_write(REG_SP_BASE + 12'd4, 32'h0);
    cyc(2);
    reg_read(REG_DMR_STATE, rd);
    check(rd[3:2] == GRP_LOCKED, "DMR group LOCKED");
    reg_read(REG_CORE_MODE, rd);
    check(rd[3:2] == MODE_DMR && rd[15:14] == MODE_DMR && rd[1:0] == MODE_TMR, "CORE_MODE readout");
    cyc(20);
    check(pc[1] == pc[7] && sys_out[7] == '0 && sys_out[1] == core_out[1] && !dmr_error[1], "DMR pair in lockstep");
    if (pc[1] == pc[7] && sys_out[7] == '0) m_dmr_sw_entry++;

    // ---- DMR mismatch without rapid recovery: outputs gated -------------------------------
    upset(7, 1'b1, 5'd0, 32'h0000_0010);
    cyc(1);
    check(dmr_error[1] && sys_out[1] == '0, "DMR mismatch gates the pair's outputs");
    if (dmr_error[1] && sys_out[1] == '0) m_dmr_gate++;
    cyc(5);
    reg_read(REG_DMR_STATE, rd);
    check(rd[3:2] == GRP_LOCKED && dmr_error[1], "DMR stays locked and gated without recovery");

    // ---- DMR rapid recovery ---------------------------------------------------------------
    reg_write(REG_DMR_CONFIG, 32'((1 << CFG_RAPID_RECOVERY) | (1 << CFG_SPLIT_SETBACK) | (1 << CFG_LOCK_SETBACK)));
    n = 0;
    while (!rr_busy[1] && n < 10) begin cyc(1); n++; end
    n = 0;
    while (rr_busy[1] && n < 100) begin cyc(1); n++; end
    cyc(2);
    check(pc[1] == pc[7] && !dmr_error[1], "DMR pair recovered by rapid recovery");
    upset(1, 1'b0, 5'd3, 32'h8000_0000);
    measure_recovery(1, 1'b0, n);
    $display("DMR rapid recovery latency: %0d cycles", n);
    check(n == 24, "DMR rapid recovery takes 24 cycles");
    cyc(40);
    check(pc[1] == pc[7] && !dmr_error[1] && sys_out[1].instr_req, "DMR pair clean after rapid recovery");
    if (n == 24 && pc[1] == pc[7]) m_dmr_rr++;

    // ---- mission-critical exit: split with helper clear -----------------------------------
    reg_write(REG_DMR_ENABLE, 32'h0);
    cyc(1);
    check(synch_rst[7] && !synch_rst[1], "split clears the helper core only");
    if (synch_rst[7] && !synch_rst[1]) m_split_clear++;
    cyc(2);
    check(sys_out[7] == core_out[7] && core_in[7].core_id == 32'd7, "helper back on its own port and ID");
    check(pc[7] != pc[1], "helper restarted from boot while the main core continues");

    // ---- exclusivity: a DMR group overlapping TMR group 0 drops it -----------------------
    reg_write(REG_DMR_ENABLE, 32'h1);   // cores 0 and 6: overlaps TMR group 0
    reg_read(REG_TMR_ENABLE, rd);
    check(rd == 32'h0, "enabling DMR group 0 drops TMR group 0");
    reg_write(REG_DMR_ENABLE, 32'h0);

    // mechanism summary
    $display("mechanisms: ind=%0d tmr_boot_lock=%0d tmr_rr=%0d tmr_sw=%0d delay=%0d perf_split=%0d rr_lock_entry=%0d dmr_sw_entry=%0d dmr_gate=%0d dmr_rr=%0d split_clear=%0d helper_zero=%0d",
             m_ind, m_tmr_boot_lock, m_tmr_rr, m_tmr_sw, m_delay, m_perf_split, m_rr_lock_entry,
             m_dmr_sw_entry, m_dmr_gate, m_dmr_rr, m_split_clear, m_helper_zero);
    check(m_ind > 0, "mechanism: independent mode");
    check(m_tmr_boot_lock > 0, "mechanism: TMR lock before boot");
    check(m_tmr_rr > 0, "mechanism: TMR rapid recovery");
    check(m_tmr_sw > 0, "mechanism: TMR software recovery");
    check(m_delay > 0, "mechanism: delayed resynchronisation");
    check(m_perf_split > 0, "mechanism: performance-section split");
    check(m_rr_lock_entry > 0, "mechanism: lock with hardware fill");
    check(m_dmr_sw_entry > 0, "mechanism: DMR entry with software reload");
    check(m_dmr_gate > 0, "mechanism: DMR output gating");
    check(m_dmr_rr > 0, "mechanism: DMR rapid recovery");
    check(m_split_clear > 0, "mechanism: split with helper clear");
    check(m_helper_zero > 0, "mechanism: zeroed helper ports");
    check(rr_ecc_err == '0, "no ECC error in the recovery registers");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
