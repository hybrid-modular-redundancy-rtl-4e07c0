// tb_hmr_recovery_pc -- the backup PC follows pc_i when enabled and written, and holds its
// value when the write is disabled (mismatch) or not requested.
`timescale 1ns/1ps
module tb_hmr_recovery_pc;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic en, we, err;
  logic [31:0] pc_in, pc_out, expected;
  int checks = 0, failures = 0;

  hmr_recovery_pc dut (
    .clk_i (clk), .rst_ni (rst_n), .en_i (en), .pc_we_i (we), .pc_i (pc_in), .pc_o (pc_out), .ecc_err_o (err)
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
    en = 0; we = 0; pc_in = 0; expected = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    #1;
    check(pc_out == 0, "reset value");
    for (int i = 0; i < 800; i++) begin
      @(negedge clk);
      en    = $urandom_range(3) != 0;
      we    = $urandom_range(3) != 0;
      pc_in = $urandom;
      if (en && we) expected = pc_in;
      @(posedge clk);
      #1;
      check(pc_out == expected, "backup PC");
      check(!err, "no ECC error");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
