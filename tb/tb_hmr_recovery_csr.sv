// tb_hmr_recovery_csr -- the backup CSR set is captured as a whole when enabled and written,
// and held otherwise.
`timescale 1ns/1ps
module tb_hmr_recovery_csr;
  import hmr_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en, we, err;
  csr_set_t csr_in, csr_out, expected;
  int checks = 0, failures = 0;

  hmr_recovery_csr dut (
    .clk_i (clk), .rst_ni (rst_n), .en_i (en), .csr_we_i (we), .csr_i (csr_in), .csr_o (csr_out), .ecc_err_o (err)
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
    en = 0; we = 0; csr_in = '0; expected = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      en = $urandom_range(3) != 0;
      we = $urandom_range(3) != 0;
      csr_in = {$urandom, $urandom, $urandom, $urandom, $urandom, $urandom};
      if (en && we) expected = csr_in;
      @(posedge clk);
      #1;
      check(csr_out == expected, "backup CSRs");
      check(csr_out.mepc == expected.mepc, "backup MEPC");
      check(!err, "no ECC error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
