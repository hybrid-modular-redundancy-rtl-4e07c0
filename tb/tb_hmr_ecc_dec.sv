// tb_hmr_ecc_dec -- SECDED round trip: random words are encoded, 0, 1 or 2 random bits of
// the code word are flipped, and the decoder must return the word (0 or 1 flips) and flag
// single / double errors correctly. Also tests a 16-bit instance, and a pair built with
// ECC deselected, which must pass the data through with zero parity bits and no flags.
`timescale 1ns/1ps
module tb_hmr_ecc_dec;
  localparam int unsigned CW = 32 + hmr_pkg::ecc_parity_bits(32) + 1;
  localparam int unsigned CW16 = 16 + hmr_pkg::ecc_parity_bits(16) + 1;
  logic [31:0]   data, dec;
  logic [CW-1:0] code, corrupt;
  logic          serr, derr;
  logic [15:0]   data16, dec16;
  logic [CW16-1:0] code16, corrupt16;
  logic          serr16, derr16;
  logic [CW-1:0] code_off, corrupt_off;
  logic [31:0]   dec_off;
  logic          serr_off, derr_off;
  int checks = 0, failures = 0;
  hmr_ecc_enc #(.DataWidth(32), .Enable(1'b0)) i_enc_off (.data_i(data), .code_o(code_off));
  hmr_ecc_dec #(.DataWidth(32), .Enable(1'b0)) dut_off (
    .code_i(corrupt_off), .data_o(dec_off), .single_err_o(serr_off), .double_err_o(derr_off));

  hmr_ecc_enc #(.DataWidth(32)) i_enc (.data_i(data), .code_o(code));
  hmr_ecc_dec #(.DataWidth(32)) dut (.code_i(corrupt), .data_o(dec), .single_err_o(serr), .double_err_o(derr));
  hmr_ecc_enc #(.DataWidth(16)) i_enc16 (.data_i(data16), .code_o(code16));
  hmr_ecc_dec #(.DataWidth(16)) dut16 (.code_i(corrupt16), .data_o(dec16), .single_err_o(serr16), .double_err_o(derr16));

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
    check(CW == 39, "32-bit SECDED code word is 39 bits");
    for (int i = 0; i < 900; i++) begin
      int p1, p2;
      data   = $urandom;
      data16 = 16'($urandom);
      #1;
      corrupt   = code;
      corrupt16 = code16;
      corrupt_off = code_off;
      p1 = $urandom_range(CW - 1);
      p2 = (p1 + 1 + $urandom_range(CW - 2)) % CW;
      if (i % 3 >= 1) begin corrupt[p1] ^= 1'b1; corrupt16[p1 % CW16] ^= 1'b1; corrupt_off[p1] ^= 1'b1; end
      if (i % 3 == 2) begin corrupt[p2] ^= 1'b1; corrupt16[p2 % CW16] ^= 1'b1; end
      #1;
      unique case (i % 3)
        0: begin
          check(dec == data && !serr && !derr, "clean word");
          check(dec16 == data16 && !serr16 && !derr16, "clean 16-bit word");
          check(dec_off == data && !serr_off && !derr_off, "ECC off: data passed through");
          check({code_off[32], code_off[16], code_off[8], code_off[4], code_off[2], code_off[1],
                 code_off[0]} == '0, "ECC off: parity bits zero");
        end
        1: begin
          check(dec == data && serr && !derr, "single error corrected");
          check(dec16 == data16 && serr16 && !derr16, "16-bit single error corrected");
          check(!serr_off && !derr_off, "ECC off: no flags");
        end
        2: check(derr && !serr, "double error detected");
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
