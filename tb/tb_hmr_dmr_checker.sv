// tb_hmr_dmr_checker -- random test of the DCLS checker: forwarding on match, zero output
// and error on a mismatch in a checked bit, no error on a mismatch in a masked bit.
`timescale 1ns/1ps
module tb_hmr_dmr_checker;
  localparam int unsigned W = 40;
  logic [W-1:0] main_v, helper_v, mask_v, data;
  logic         error;
  int checks = 0, failures = 0;

  hmr_dmr_checker #(.Width(W)) dut (
    .main_i (main_v), .helper_i (helper_v), .check_i (mask_v), .data_o (data), .error_o (error)
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
    for (int i = 0; i < 500; i++) begin
      int bitpos;
      main_v   = {$urandom, $urandom};
      mask_v   = '1;
      bitpos   = $urandom_range(W - 1);
      helper_v = main_v;
      if (i % 3 == 1) helper_v[bitpos] = ~helper_v[bitpos];
      if (i % 3 == 2) begin
        helper_v[bitpos] = ~helper_v[bitpos];
        mask_v[bitpos]   = 1'b0;
      end
      #1;
      if (i % 3 == 1) begin
        check(error == 1'b1, "mismatch raises error");
        check(data == '0, "mismatch gates output to zero");
      end else begin
        check(error == 1'b0, "match / masked bit gives no error");
        check(data == main_v, "match forwards the main core");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
