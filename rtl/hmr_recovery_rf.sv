// hmr_recovery_rf -- ECC-protected backup copy of the main core's register file.
//
// Holds x1..x31 (x0 is constant zero), each entry stored as a SECDED code word. The two
// write ports mirror the two register-file write ports of the main core: whenever the
// core writes its register file, the same write lands here in the same cycle, unless
// en_i is low (a mismatch was detected or a recovery is running, so the backup must not
// take a possibly faulty value). If both ports write the same register, port 1 wins.
// Two combinational read ports, addressed by the recovery controller, decode and correct
// single-bit errors; ecc_err_o flags any corrected or uncorrectable read. The backup
// function, the ECC protection and the two ports follow the paper; the code, the write
// collision rule and the asynchronous read are this design's choices.
// EccEnable = 0 builds the same storage without ECC (parity bits tied to zero, no flags).
module hmr_recovery_rf
  import hmr_pkg::*;
#(
  parameter int unsigned DataWidth = 32,
  parameter bit          EccEnable = 1'b1,  // ECC selected at design time
  parameter int unsigned NumRegs   = 31,
  localparam int unsigned AddrWidth = $clog2(NumRegs + 1),
  localparam int unsigned CodeWidth = DataWidth + ecc_parity_bits(DataWidth) + 1
) (
  input  logic                                clk_i,
  input  logic                                rst_ni,
  input  logic                                en_i,
  input  logic [1:0]                          we_i,
  input  logic [1:0][AddrWidth-1:0]           waddr_i,
  input  logic [1:0][DataWidth-1:0]           wdata_i,
  input  logic [1:0][AddrWidth-1:0]           raddr_i,
  output logic [1:0][DataWidth-1:0]           rdata_o,
  output logic [1:0]                          ecc_err_o
);

  logic [CodeWidth-1:0] mem_q [NumRegs];
  logic [1:0][CodeWidth-1:0] wcode, rcode;
  logic [1:0] single_err, double_err;

  for (genvar p = 0; p < 2; p++) begin : gen_port
    hmr_ecc_enc #(.DataWidth(DataWidth), .Enable(EccEnable)) i_enc (
      .data_i (wdata_i[p]),
      .code_o (wcode[p])
    );

    assign rcode[p] = (raddr_i[p] != '0 && int'(raddr_i[p]) <= NumRegs) ? mem_q[raddr_i[p] - 1] : '0;

    hmr_ecc_dec #(.DataWidth(DataWidth), .Enable(EccEnable)) i_dec (
      .code_i       (rcode[p]),
      .data_o       (rdata_o[p]),
      .single_err_o (single_err[p]),
      .double_err_o (double_err[p])
    );
    assign ecc_err_o[p] = single_err[p] | double_err[p];
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      for (int unsigned r = 0; r < NumRegs; r++) mem_q[r] <= '0;
    end else if (en_i) begin
      for (int unsigned p = 0; p < 2; p++) begin
        if (we_i[p] && waddr_i[p] != '0 && int'(waddr_i[p]) <= NumRegs) mem_q[waddr_i[p] - 1] <= wcode[p];
      end
    end
  end

endmodule
