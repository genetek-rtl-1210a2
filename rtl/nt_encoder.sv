// nt_encoder: translates one 32-bit memory word holding four ASCII
// characters into four 2-bit nucleotide codes.
//
// The accelerator keeps sequences in system memory as ASCII text and
// stores them on chip with two bits per base. Character k of the word sits
// in byte k (little-endian, first character in bits 7:0) and its code goes
// to codes[2k+1:2k], so the codes keep the character order.
// Purely combinational. The code table (A=00, C=01, T=10, G=11) follows the
// paper; the byte order is this design's choice (it matches a little-endian
// host writing the text with a plain memory copy).
module nt_encoder
  import genetek_pkg::*;
(
  input  logic [31:0] word,
  output logic [7:0]  codes
);
  always_comb begin
    for (int k = 0; k < 4; k++) begin
      codes[2*k +: 2] = ascii_to_nt(word[8*k +: 8]);
    end
  end
endmodule
