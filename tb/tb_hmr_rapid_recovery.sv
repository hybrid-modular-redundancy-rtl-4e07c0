// tb_hmr_rapid_recovery -- streams random register, PC and CSR writes into one recovery
// engine, keeps a reference copy, blocks the copy during a mismatch and in the start cycle
// that follows it (driven with fresh writes), then runs a recovery
// and checks that the restore stream carries exactly the last agreed state, with the
// expected duration (1 CLEAR + 1 HALT-entry + halt latency + 16 RESTORE cycles).
`timescale 1ns/1ps
module tb_hmr_rapid_recovery;
  import hmr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  core_state_wr_t bkp, rec;
  logic error, start, halted, clear, dbg, busy, ecc_err;
  logic [31:0] rf_model [32];
  logic [31:0] pc_model;
  csr_set_t    csr_model;
  int checks = 0, failures = 0;

  hmr_rapid_recovery dut (
    .clk_i (clk), .rst_ni (rst_n), .bkp_i (bkp), .error_i (error), .start_i (start),
    .halted_i (halted), .rec_o (rec), .clear_o (clear), .debug_req_o (dbg), .busy_o (busy),
    .ecc_err_o (ecc_err)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bkp = '0; error = 0; start = 0; halted = 0;
    for (int i = 0; i < 32; i++) rf_model[i] = '0;
    pc_model = '0; csr_model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int round = 0; round < 4; round++) begin
      int n, lat;
      logic [31:0] seen [32];
      logic [31:0] seen_mask;
      for (int i = 0; i < 300; i++) begin
        @(negedge clk);
        error = ($urandom_range(15) == 0);
        for (int p = 0; p < 2; p++) begin
          bkp.rf[p].we    = $urandom_range(1);
          bkp.rf[p].addr  = 5'($urandom);
          bkp.rf[p].wdata = $urandom;
        end
        bkp.pc_we  = $urandom_range(1);
        bkp.pc     = $urandom;
        bkp.csr_we = $urandom_range(3) == 0;
        bkp.csr    = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
        if (!error) begin
          for (int p = 0; p < 2; p++) if (bkp.rf[p].we && bkp.rf[p].addr != 0) rf_model[bkp.rf[p].addr] = bkp.rf[p].wdata;
          if (bkp.pc_we) pc_model = bkp.pc;
          if (bkp.csr_we) csr_model = bkp.csr;
        end
      end
      // a mismatch: the engine is started; nothing is backed up any more
      @(negedge clk);
      error = 1;
      @(negedge clk);
      // start cycle: the mismatch is already gone, but nothing may be backed up any more
      error = 0;
      start = 1;
      for (int p = 0; p < 2; p++) begin
        bkp.rf[p].we    = 1'b1;
        bkp.rf[p].addr  = 5'($urandom_range(31, 1));
        bkp.rf[p].wdata = $urandom;
      end
      bkp.pc_we  = 1'b1;
      bkp.pc     = $urandom;
      bkp.csr_we = 1'b1;
      bkp.csr    = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      @(negedge clk);
      start = 0;
      error = 1;
      lat = 2 + round;
      n = 1;
      seen_mask = '0;
      while (n < 100) begin
        if (dbg && !halted) begin
          repeat (lat - 1) begin @(negedge clk); n++; end
          halted = 1;
        end
        if (rec.pc_we) begin
          check(rec.pc == pc_model, "restored PC is the last agreed PC");
          check(rec.csr == csr_model, "restored CSRs are the last agreed CSRs");
        end
        for (int p = 0; p < 2; p++) if (rec.rf[p].we) begin
          seen[rec.rf[p].addr] = rec.rf[p].wdata;
          seen_mask[rec.rf[p].addr] = 1'b1;
        end
        @(negedge clk);
        n++;
        if (!busy) break;
      end
      halted = 0;
      error = 0;
      check(n == 2 + lat + 16, "recovery duration");
      check(seen_mask == 32'hFFFF_FFFE, "every register restored");
      for (int r = 1; r < 32; r++) check(seen[r] == rf_model[r], "restored register value");
      check(!ecc_err, "no ECC error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
