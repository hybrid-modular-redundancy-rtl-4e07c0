// tb_hmr_rr_ctrl -- follows the recovery routine state by state: one CLEAR cycle, debug
// request until halted, then exactly 16 RESTORE cycles writing x1..x31 two per cycle, PC
// and CSRs throughout, and back to IDLE. Repeated with several halt latencies.
`timescale 1ns/1ps
module tb_hmr_rr_ctrl;
  import hmr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic start, halted, busy, clear, dbg, pc_we, csr_we;
  logic [1:0] we;
  logic [1:0][4:0] addr;
  rr_state_e state;
  int checks = 0, failures = 0;

  hmr_rr_ctrl dut (
    .clk_i (clk), .rst_ni (rst_n), .start_i (start), .halted_i (halted), .state_o (state),
    .busy_o (busy), .clear_o (clear), .debug_req_o (dbg), .rf_we_o (we), .rf_addr_o (addr),
    .pc_we_o (pc_we), .csr_we_o (csr_we)
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
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; halted = 0;
    cyc(2);
    rst_n = 1;
    cyc(1);
    check(state == RR_IDLE && !busy && !dbg, "idle after reset");
    for (int lat = 1; lat <= 6; lat++) begin
      logic [31:0] written;
      int restore_cycles;
      start = 1;
      cyc(1);
      start = 0;
      check(state == RR_CLEAR && clear && busy && !dbg, "CLEAR state clears the cores");
      cyc(1);
      check(state == RR_HALT && !clear && dbg, "HALT state requests debug");
      for (int k = 1; k < lat; k++) begin
        cyc(1);
        check(state == RR_HALT && dbg && we == 0, "waits in HALT until halted");
      end
      halted = 1;
      cyc(1);
      written = '0;
      restore_cycles = 0;
      while (state == RR_RESTORE && restore_cycles < 40) begin
        check(dbg && pc_we && csr_we, "debug held, PC and CSRs restored in parallel");
        check(we[0] && addr[0] == 5'(2 * restore_cycles + 1), "port 0 address");
        if (we[1]) check(addr[1] == 5'(2 * restore_cycles + 2), "port 1 address");
        for (int p = 0; p < 2; p++) if (we[p]) written[addr[p]] = 1'b1;
        restore_cycles++;
        cyc(1);
      end
      check(restore_cycles == 16, "restore takes 16 cycles");
      check(written == 32'hFFFF_FFFE, "x1..x31 each restored");
      check(state == RR_IDLE && !dbg && !busy, "back to IDLE, debug released");
      halted = 0;
      cyc(2);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
