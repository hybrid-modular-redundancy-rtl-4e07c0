// tb_hmr_recovery_rf -- random writes through both ports (with x0 writes, same-address
// collisions and disabled cycles) against a reference array, then reads of every register
// through both read ports.
`timescale 1ns/1ps
module tb_hmr_recovery_rf;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en;
  logic [1:0] we, err;
  logic [1:0][4:0] waddr, raddr;
  logic [1:0][31:0] wdata, rdata;
  logic [31:0] model [32];
  int checks = 0, failures = 0;

  hmr_recovery_rf dut (
    .clk_i (clk), .rst_ni (rst_n), .en_i (en), .we_i (we), .waddr_i (waddr), .wdata_i (wdata),
    .raddr_i (raddr), .rdata_o (rdata), .ecc_err_o (err)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    en = 0; we = 0; waddr = '0; wdata = '0; raddr = '0;
    for (int i = 0; i < 32; i++) model[i] = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 1500; i++) begin
      @(negedge clk);
      en = ($urandom_range(9) != 0);
      for (int p = 0; p < 2; p++) begin
        we[p]    = $urandom_range(1);
        waddr[p] = 5'($urandom);
        wdata[p] = $urandom;
      end
      if (i % 17 == 0) waddr[1] = waddr[0];
      // reference: port 1 wins, x0 never written
      if (en) for (int p = 0; p < 2; p++) if (we[p] && waddr[p] != 0) model[waddr[p]] = wdata[p];
      raddr[0] = 5'($urandom);
      raddr[1] = 5'($urandom);
      @(posedge clk);
      #1;
      for (int p = 0; p < 2; p++) begin
        check(rdata[p] == model[raddr[p]], "read data matches reference");
        check(err[p] == 1'b0, "no ECC error");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
