// hmr_recovery_csr -- ECC-protected backup of the main core's control and status registers.
//
// Keeps one SECDED-encoded copy of each CSR in hmr_pkg::csr_set_t (mstatus, mie, mtvec,
// mscratch, mepc, mcause). When the core reports its CSR values (csr_we_i) they are all
// captured in one cycle, unless en_i is low (mismatch detected or recovery running). The
// decoded copy is restored in parallel with the register file. Backup and ECC follow the
// paper; the set of CSRs and the code are this design's choices, since the paper names only
// MEPC explicitly.
// EccEnable = 0 builds the same storage without ECC (parity bits tied to zero, no flags).
module hmr_recovery_csr
  import hmr_pkg::*;
#(
  parameter int unsigned DataWidth = XLEN,
  parameter bit          EccEnable = 1'b1,  // ECC selected at design time
  localparam int unsigned CodeWidth = DataWidth + ecc_parity_bits(DataWidth) + 1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     en_i,
  input  logic     csr_we_i,
  input  csr_set_t csr_i,
  output csr_set_t csr_o,
  output logic     ecc_err_o
);

  logic [NumCsr-1:0][XLEN-1:0]      csr_in, csr_out;
  logic [NumCsr-1:0][CodeWidth-1:0] code_d, code_q;
  logic [NumCsr-1:0]                single_err, double_err;

  assign csr_in = csr_i;

  for (genvar i = 0; i < NumCsr; i++) begin : gen_csr
    hmr_ecc_enc #(.DataWidth(DataWidth), .Enable(EccEnable)) i_enc (.data_i(csr_in[i]), .code_o(code_d[i]));
    hmr_ecc_dec #(.DataWidth(DataWidth), .Enable(EccEnable)) i_dec (
      .code_i       (code_q[i]),
      .data_o       (csr_out[i]),
      .single_err_o (single_err[i]),
      .double_err_o (double_err[i])
    );
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)               code_q <= '0;
    else if (en_i && csr_we_i) code_q <= code_d;
  end

  assign csr_o     = csr_out;
  assign ecc_err_o = |(single_err | double_err);

endmodule
