// tb_hmr_fault_campaign -- random fault-injection campaign on the full-size HMR unit.
//
// Twelve behavioural core models are attached to the unit with its default parameters.
// The cluster is configured with TMR group 0 (cores 0, 4, 8), DMR groups 1, 3 and 5
// (cores 1/7, 3/9, 5/11) and cores 2, 6, 10 independent. Single bit upsets are then
// injected one at a time, at random, into the PC or a register of a random protected core,
// and the campaign checks that no corrupted value ever reaches the system:
//   * a fault-free reference core per protected group follows the group's system port;
//     every instruction address the group issues must be either the reference's next
//     address (first execution: data address and write data must equal the reference) or
//     an address issued before (re-execution after a rollback: the values must equal the
//     first execution). Anything else is a corrupted output;
//   * every rapid recovery must take 24 cycles from the first mismatching cycle;
//   * after each injection the group must be back in lockstep with no error flagged.
// The first phase uses rapid recovery everywhere; the second switches the TMR group to
// software recovery, with the testbench playing the interrupt service routine (store SP,
// then clear SP after the reload). Upsets that are overwritten before they are read are
// counted as masked, as in a real campaign. Counts of injections, detections, masked
// upsets, recoveries of each kind and re-executed addresses are printed; a mechanism that
// never happened counts as a failure. The campaign size is this testbench's choice.
`timescale 1ns/1ps
module tb_hmr_fault_campaign;
  import hmr_pkg::*;

  localparam int unsigned N  = 12;
  localparam int unsigned ND = N / 2;
  localparam int unsigned NT = N / 3;
  localparam int unsigned NumRapid    = 240;  // injections with rapid recovery everywhere
  localparam int unsigned NumSoftware = 60;   // injections with TMR software recovery
  localparam logic [31:0] BootAddr = 32'h1C00_0080;
  localparam logic [31:0] SpValue  = 32'h1000_0FF0;
  // protected groups: index 0 = TMR group 0, 1..3 = DMR groups 1, 3, 5
  localparam int unsigned NG = 4;
  localparam int Main [NG] = '{0, 1, 3, 5};

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
  logic          started;

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

  // ---------------------------------------------------------------------------------------
  // Fault-free reference cores, one per protected group, stepped along the group's stream.
  core_in_t       [NG-1:0] ref_in;
  core_out_t      [NG-1:0] ref_out;
  core_state_wr_t [NG-1:0] ref_bkp;
  logic           [NG-1:0] ref_step;

  for (genvar g = 0; g < NG; g++) begin : gen_ref
    always_comb begin
      ref_step[g]           = sys_out[Main[g]].instr_req && (sys_out[Main[g]].instr_addr == ref_out[g].instr_addr);
      ref_in[g]             = '0;
      ref_in[g].fetch_enable = ref_step[g];
      ref_in[g].boot_addr   = BootAddr;
      ref_in[g].core_id     = 32'(Main[g]);
    end
    hmr_core_model #(.HaltLatency(4)) u_ref (
      .clk_i         (clk),
      .rst_ni        (rst_n),
      .synch_rst_i   (synch_rst[Main[g]] && !started),
      .in_i          (ref_in[g]),
      .out_o         (ref_out[g]),
      .bkp_o         (ref_bkp[g]),
      .rec_i         ('0),
      .inject_i      (1'b0),
      .inject_pc_i   (1'b0),
      .inject_reg_i  (5'd0),
      .inject_mask_i (32'd0)
    );
  end

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL: %s (t=%0t)", what, $time);
    end
  endtask

  // campaign statistics
  int n_inject, n_detected, n_masked, n_tmr_rr, n_dmr_rr, n_tmr_sw, n_first, n_replay, n_pc_upsets;

  // Stream monitor: every issued address is the reference's next one or a re-execution.
  logic [63:0] seen [NG][logic [31:0]];
  always @(negedge clk) begin
    if (rst_n && started) begin
      for (int g = 0; g < NG; g++) begin
        core_out_t o;
        o = sys_out[Main[g]];
        if (o.instr_req) begin
          if (ref_step[g]) begin
            check(o.data_addr == ref_out[g].data_addr && o.data_wdata == ref_out[g].data_wdata &&
                  o.data_req == ref_out[g].data_req, $sformatf("group %0d first execution of %h matches the fault-free reference (%h/%h vs %h/%h)", g, o.instr_addr, o.data_addr, o.data_wdata, ref_out[g].data_addr, ref_out[g].data_wdata));
            seen[g][o.instr_addr] = {o.data_addr, o.data_wdata};
            n_first++;
          end else if (seen[g].exists(o.instr_addr)) begin
            check(seen[g][o.instr_addr] == {o.data_addr, o.data_wdata}, "re-execution repeats the first execution");
            n_replay++;
          end else begin
            check(1'b0, $sformatf("group %0d issued an address outside its program order: %h", g, o.instr_addr));
          end
        end
      end
    end
  end

  // Recovery latency monitor, one per protected group's engine.
  logic        tmr_rapid;
  int          lat_cnt [NG];
  bit          lat_on  [NG];
  bit          lat_busy[NG];
  logic [NG-1:0] prev_err;
  always @(negedge clk) begin
    if (!rst_n) begin
      prev_err <= '0;
    end else begin
      for (int g = 0; g < NG; g++) begin
        logic err, busy;
        err  = (g == 0) ? tmr_error[0] : dmr_error[Main[g]];
        busy = rr_busy[Main[g]];
        if (lat_on[g]) begin
          lat_cnt[g]++;
          if (busy) lat_busy[g] = 1'b1;
          else if (lat_busy[g]) begin
            check(lat_cnt[g] == 24, $sformatf("rapid recovery of group %0d took %0d cycles, expected 24", g, lat_cnt[g]));
            lat_on[g] = 1'b0;
            if (g == 0) n_tmr_rr++;
            else        n_dmr_rr++;
          end
        end else if (err && !prev_err[g] && !busy && (g != 0 || tmr_rapid)) begin
          lat_on[g]   = 1'b1;
          lat_busy[g] = 1'b0;
          lat_cnt[g]  = 0;
        end
        prev_err[g] <= err;
      end
    end
  end

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

  function automatic bit in_lockstep(int g);
    if (g == 0)
      return core_bkp[0] == core_bkp[4] && core_bkp[4] == core_bkp[8] &&
             core_out[0] == core_out[4] && core_out[4] == core_out[8];
    return core_bkp[Main[g]] == core_bkp[Main[g] + ND] && core_out[Main[g]] == core_out[Main[g] + ND];
  endfunction

  function automatic int pick_core(int g, int k);
    if (g == 0) return k % 3 * NT;           // 0, 4 or 8
    return Main[g] + (k % 2) * ND;           // main or helper
  endfunction

  // watchdog
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    reg_req     = '0;
    inject      = '0;
    inject_pc   = '0;
    inject_reg  = '0;
    inject_mask = '0;
    fetch_en    = '0;
    started     = 1'b0;
    tmr_rapid   = 1'b1;
    cyc(3);
    rst_n = 1'b1;
    cyc(2);
    // lock the protected groups before boot, then start every core
    reg_write(REG_TMR_ENABLE, 32'h1);
    reg_write(REG_DMR_ENABLE, 32'b10_1010);
    cyc(3);
    started  = 1'b1;
    fetch_en = '1;
    cyc(40);
    for (int g = 0; g < NG; g++) check(in_lockstep(g), "groups in lockstep after boot");

    for (int i = 0; i < int'(NumRapid + NumSoftware); i++) begin
      int g, c, wait_cycles;
      bit on_pc, detected, sp_stored;
      if (i == int'(NumRapid)) begin
        // second phase: TMR groups recover in software (lock and reload setbacks kept)
        reg_write(REG_TMR_CONFIG, 32'(CfgWidth'(1 << CFG_LOCK_SETBACK) | CfgWidth'(1 << CFG_RELOAD_SETBACK)));
        tmr_rapid = 1'b0;
        cyc(5);
      end
      g     = (i >= int'(NumRapid)) ? 0 : int'($urandom_range(NG - 1));
      c     = pick_core(g, int'($urandom_range(5)));
      on_pc = ($urandom_range(7) == 0);
      n_inject++;
      if (on_pc) n_pc_upsets++;
      // single upset
      inject[c]    = 1'b1;
      inject_pc[c] = on_pc;
      inject_reg   = 5'($urandom_range(31, 1));
      inject_mask  = 32'(1) << $urandom_range(31);
      if (on_pc) inject_mask = 32'(1) << $urandom_range(31, 2);
      cyc(1);
      inject    = '0;
      inject_pc = '0;
      // let it surface, be recovered (or be overwritten)
      detected    = 1'b0;
      sp_stored   = 1'b0;
      wait_cycles = 0;
      while (wait_cycles < 150) begin
        if ((g == 0 && tmr_error[0]) || (g != 0 && dmr_error[Main[g]])) detected = 1'b1;
        if (!tmr_rapid && sync_irq[0] && !sp_stored) begin
          // unload routine: the voted state is saved, the main core stores its SP
          cyc(3);
          reg_write(12'(REG_SP_BASE), SpValue);
          sp_stored = 1'b1;
          cyc(6);
          // reload routine done: SP register cleared, back to LOCKED
          reg_write(12'(REG_SP_BASE), 32'h0);
          n_tmr_sw++;
          wait_cycles += 10;
        end
        cyc(1);
        wait_cycles++;
      end
      if (detected) n_detected++;
      else          n_masked++;
      check(in_lockstep(g), $sformatf("group %0d back in lockstep after upset %0d", g, i));
      check(tmr_error == '0 && dmr_error == '0, "no error flagged after recovery");
      check(rr_busy == '0, "recovery engines idle");
      check(sys_out[4] == '0 && sys_out[8] == '0 && sys_out[7] == '0 && sys_out[9] == '0 && sys_out[11] == '0,
            "helper ports stay silent");
    end

    $display("campaign: injections=%0d (pc=%0d) detected=%0d masked=%0d tmr_rapid=%0d dmr_rapid=%0d tmr_software=%0d first_exec=%0d re_exec=%0d",
             n_inject, n_pc_upsets, n_detected, n_masked, n_tmr_rr, n_dmr_rr, n_tmr_sw, n_first, n_replay);
    check(n_detected > 0, "mechanism: detected upsets");
    check(n_masked > 0, "mechanism: masked upsets");
    check(n_tmr_rr > 0, "mechanism: TMR rapid recovery");
    check(n_dmr_rr > 0, "mechanism: DMR rapid recovery");
    check(n_tmr_sw > 0, "mechanism: TMR software recovery");
    check(n_replay > 0, "mechanism: re-execution after rollback");
    check(n_first > 1000, "the groups made progress");
    check(rr_ecc_err == '0, "no ECC error in the recovery registers");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
