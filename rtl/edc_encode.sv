// edc_encode: adds the 7 error detection and correction bits to a 32-bit word.
//
// Purely combinational. The 32-bit data word becomes a 39-bit word for the DRAM bus:
// a Hamming code over 38 positions (6 check bits at the power-of-two positions) plus
// one bit of overall parity, which together correct any single-bit error and detect any
// double-bit error (SEC-DED). The 32+7 split is the design's; the choice of a Hamming
// SEC-DED code and its bit layout (see nga_pkg::edc_enc) is this implementation's.
module edc_encode
  import nga_pkg::*;
(
  input  logic [DATA_W-1:0] data,
  output logic [CODE_W-1:0] code
);
  always_comb code = edc_enc(data);
endmodule
