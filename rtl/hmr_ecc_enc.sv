// hmr_ecc_enc -- SECDED (extended Hamming) encoder for the ECC-protected recovery registers.
//
// The data word is spread over the non-power-of-two positions 1..DataWidth+P of a Hamming
// code word; the P parity bits sit at the power-of-two positions and bit 0 holds the parity
// of the whole word. The result corrects any single-bit and detects any double-bit error.
// Purely combinational. The paper only states that the recovery PC, RF and CSRs are
// protected with internal ECC; the choice of an extended Hamming code is this design's.
// With Enable = 0 (ECC deselected at design time) the data bits keep their positions and
// every parity bit is zero, so the word is stored unprotected.
module hmr_ecc_enc #(
  parameter int unsigned DataWidth = 32,
  parameter bit          Enable    = 1'b1,
  localparam int unsigned ParityBits = hmr_pkg::ecc_parity_bits(DataWidth),
  localparam int unsigned CodeWidth  = DataWidth + ParityBits + 1
) (
  input  logic [DataWidth-1:0] data_i,
  output logic [CodeWidth-1:0] code_o
);

  always_comb begin
    logic [CodeWidth-1:0] cw;
    int unsigned          d;
    cw = '0;
    d  = 0;
    // place the data bits
    for (int unsigned pos = 1; pos < CodeWidth; pos++) begin
      if ((pos & (pos - 1)) != 0) begin
        cw[pos] = data_i[d];
        d++;
      end
    end
    // Hamming parity bits
    for (int unsigned p = 0; p < ParityBits && Enable; p++) begin
      logic par;
      par = 1'b0;
      for (int unsigned pos = 1; pos < CodeWidth; pos++) begin
        if ((pos & (1 << p)) != 0) par ^= cw[pos];
      end
      cw[1 << p] = par;
    end
    // overall parity
    cw[0] = Enable ? ^cw[CodeWidth-1:1] : 1'b0;
    code_o = cw;
  end

endmodule
