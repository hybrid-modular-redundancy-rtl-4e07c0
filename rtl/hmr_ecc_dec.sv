// hmr_ecc_dec -- SECDED (extended Hamming) decoder matching hmr_ecc_enc.
//
// The syndrome is the XOR of the positions of all set bits of the code word; together with
// the overall parity it classifies the word: syndrome 0 and parity good -> no error;
// parity bad -> single error at position 'syndrome' (0 = the parity bit itself), which is
// corrected; syndrome non-zero and parity good -> double error, reported as uncorrectable.
// Purely combinational. Used on every read of the recovery PC, RF and CSRs, whose ECC
// protection the paper states without giving the code; the code is this design's choice.
// With Enable = 0 the data bits are taken as stored, with no correction and no flags.
module hmr_ecc_dec #(
  parameter int unsigned DataWidth = 32,
  parameter bit          Enable    = 1'b1,
  localparam int unsigned ParityBits = hmr_pkg::ecc_parity_bits(DataWidth),
  localparam int unsigned CodeWidth  = DataWidth + ParityBits + 1
) (
  input  logic [CodeWidth-1:0] code_i,
  output logic [DataWidth-1:0] data_o,
  output logic                 single_err_o,  // corrected single-bit error
  output logic                 double_err_o   // uncorrectable double-bit error
);

  always_comb begin
    logic [CodeWidth-1:0]  cw;
    logic [ParityBits-1:0] syndrome;
    logic                  parity_bad;
    int unsigned           d;
    syndrome = '0;
    for (int unsigned pos = 1; pos < CodeWidth; pos++) begin
      if (code_i[pos]) syndrome ^= ParityBits'(pos);
    end
    parity_bad   = Enable && (^code_i);
    single_err_o = parity_bad;
    double_err_o = Enable && !parity_bad && (syndrome != '0);
    cw = code_i;
    if (parity_bad && (int'(syndrome) < CodeWidth)) cw[syndrome] = ~cw[syndrome];
    data_o = '0;
    d      = 0;
    for (int unsigned pos = 1; pos < CodeWidth; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        data_o[d] = cw[pos];
        d++;
      end
    end
  end

endmodule
