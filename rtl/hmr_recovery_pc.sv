// hmr_recovery_pc -- ECC-protected backup of the main core's program counter.
//
// Every cycle in which the core reports a new program counter (the one of the instruction
// entering execution, pc_we_i) the value is encoded and stored, unless en_i is low because
// a mismatch was detected or a recovery is running. The stored word is decoded (single-bit
// errors corrected) and offered to the recovery controller. One-cycle write, combinational
// read. Follows the paper's recovery PC; the SECDED code is this design's choice.
// EccEnable = 0 builds the same storage without ECC (parity bits tied to zero, no flags).
module hmr_recovery_pc #(
  parameter int unsigned DataWidth = 32,
  parameter bit          EccEnable = 1'b1,  // ECC selected at design time
  localparam int unsigned CodeWidth = DataWidth + hmr_pkg::ecc_parity_bits(DataWidth) + 1
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 en_i,
  input  logic                 pc_we_i,
  input  logic [DataWidth-1:0] pc_i,
  output logic [DataWidth-1:0] pc_o,
  output logic                 ecc_err_o
);

  logic [CodeWidth-1:0] code_d, code_q;
  logic                 single_err, double_err;

  hmr_ecc_enc #(.DataWidth(DataWidth), .Enable(EccEnable)) i_enc (.data_i(pc_i), .code_o(code_d));

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                code_q <= '0;
    else if (en_i && pc_we_i)   code_q <= code_d;
  end

  hmr_ecc_dec #(.DataWidth(DataWidth), .Enable(EccEnable)) i_dec (
    .code_i       (code_q),
    .data_o       (pc_o),
    .single_err_o (single_err),
    .double_err_o (double_err)
  );

  assign ecc_err_o = single_err | double_err;

endmodule
