// tb_hmr_tmr_voter -- random test of the TCLS voter against a bit-by-bit reference vote,
// with zero, one or two corrupted inputs, checking the output, mismatch and fault ID.
`timescale 1ns/1ps
module tb_hmr_tmr_voter;
  localparam int unsigned W = 48;
  logic [W-1:0] a, b, c, data, ref_v;
  logic         mism;
  logic [2:0]   fid, ref_fid;
  int checks = 0, failures = 0;

  hmr_tmr_voter #(.Width(W)) dut (
    .a_i (a), .b_i (b), .c_i (c), .data_o (data), .mismatch_o (mism), .fault_id_o (fid)
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
    for (int i = 0; i < 600; i++) begin
      logic [W-1:0] base;
      base = {$urandom, $urandom};
      a = base; b = base; c = base;
      unique case (i % 5)
        0: ;
        1: a[$urandom_range(W-1)] ^= 1'b1;
        2: b = b ^ W'({$urandom, $urandom});
        3: c[$urandom_range(W-1)] ^= 1'b1;
        4: begin a = {$urandom, $urandom}; b = {$urandom, $urandom}; c = {$urandom, $urandom}; end
      endcase
      // reference: count ones per bit
      for (int k = 0; k < W; k++) ref_v[k] = (int'(a[k]) + int'(b[k]) + int'(c[k])) >= 2;
      ref_fid = {c != ref_v, b != ref_v, a != ref_v};
      #1;
      check(data == ref_v, "majority output");
      check(fid == ref_fid, "fault ID");
      check(mism == (a != b || b != c), "mismatch flag");
      if (i % 5 == 0) check(data == base && !mism, "identical inputs pass unchanged");
      if (i % 5 == 1 || i % 5 == 3) check(data == base, "single corrupted input is outvoted");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
