// secded_enc: (72,64) SECDED encoder for one burst beat.
//
// Each beat of a DDR3 burst carries 64 data bits from the eight data chips and
// 8 check bits from the ninth (ECC) chip, as in a commodity ECC DIMM. The code
// is an extended Hamming code: seven Hamming check bits cover the 64 data bits
// placed at the non-power-of-two positions 1..71 (see diva_pkg::secded_dpos),
// and an eighth bit makes the parity of the whole 72-bit word even.
//
// Interface: data (64) in, code (72) out, code = {overall parity, check[6:0],
// data}. Purely combinational, no clock.
//
// The paper asks for SECDED with the check bits in a separate chip; the choice
// of an extended Hamming code and the bit layout are this design's own.
module secded_enc
  import diva_pkg::*;
(
  input  logic [DATA_W-1:0] data,
  output logic [CW_W-1:0]   code
);

  logic [6:0] chk;

  always_comb begin
    chk  = secded_check(data);
    code = {^{chk, data}, chk, data};
  end

endmodule
