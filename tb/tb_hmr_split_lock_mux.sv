// tb_hmr_split_lock_mux -- checks the interleaved grouping of the 6-core split-lock example:
// DMR pairs {0,3} {1,4} {2,5}, TMR triples {0,2,4} {1,3,5}, for input distribution and for
// output selection (own outputs, checker, voter or zero), also with mixed modes.
`timescale 1ns/1ps
module tb_hmr_split_lock_mux;
  import hmr_pkg::*;
  localparam int unsigned N = 6;
  hmr_mode_e [N-1:0]   mode;
  core_in_t  [N-1:0]   sys_in, core_in;
  core_out_t [N-1:0]   core_out, sys_out;
  core_out_t [N/2-1:0] dmr_out;
  core_out_t [N/3-1:0] tmr_out;
  int checks = 0, failures = 0;

  hmr_split_lock_mux #(.NumCores(N)) dut (
    .core_mode_i (mode), .sys_in_i (sys_in), .core_in_o (core_in), .core_out_i (core_out),
    .dmr_out_i (dmr_out), .tmr_out_i (tmr_out), .sys_out_o (sys_out)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int c = 0; c < N; c++) begin
      sys_in[c]   = '0;
      sys_in[c].core_id   = 32'(c);
      sys_in[c].boot_addr = 32'h100 * c;
      core_out[c] = '0;
      core_out[c].instr_addr = 32'h1000 + c;
      core_out[c].instr_req  = 1'b1;
    end
    for (int d = 0; d < N/2; d++) begin dmr_out[d] = '0; dmr_out[d].data_addr = 32'hD000 + d; end
    for (int t = 0; t < N/3; t++) begin tmr_out[t] = '0; tmr_out[t].data_addr = 32'hE000 + t; end

    // all independent
    mode = {N{MODE_IND}};
    #1;
    for (int c = 0; c < N; c++) begin
      check(core_in[c].core_id == 32'(c), "independent: own inputs");
      check(sys_out[c] == core_out[c], "independent: own outputs");
    end
    // all DMR: core 0 with core 3
    mode = {N{MODE_DMR}};
    #1;
    for (int c = 0; c < N; c++) begin
      check(core_in[c].core_id == 32'(c % 3), "DMR: inputs of the main core");
      if (c < 3) check(sys_out[c].data_addr == 32'hD000 + c, "DMR: checker result on main port");
      else       check(sys_out[c] == '0, "DMR: helper port is zero");
    end
    // all TMR: core 0 with cores 2 and 4
    mode = {N{MODE_TMR}};
    #1;
    for (int c = 0; c < N; c++) begin
      check(core_in[c].core_id == 32'(c % 2), "TMR: inputs of the main core");
      if (c < 2) check(sys_out[c].data_addr == 32'hE000 + c, "TMR: voter result on main port");
      else       check(sys_out[c] == '0, "TMR: helper port is zero");
    end
    check(core_in[4].boot_addr == 32'h0 && core_in[3].boot_addr == 32'h100, "TMR: whole input bundle shared");
    // mixed: TMR group 1 {1,3,5} locked, cores 0,2,4 independent
    mode = '{MODE_TMR, MODE_IND, MODE_TMR, MODE_IND, MODE_TMR, MODE_IND};
    #1;
    check(core_in[5].core_id == 1 && core_in[3].core_id == 1 && core_in[4].core_id == 4, "mixed inputs");
    check(sys_out[1].data_addr == 32'hE001 && sys_out[3] == '0 && sys_out[0] == core_out[0] && sys_out[2] == core_out[2],
          "mixed outputs");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
