// edc_decode: checks a 39-bit word read from DRAM, corrects a single-bit error and
// flags a double-bit error.
//
// Purely combinational. The 6-bit Hamming syndrome is the XOR of the positions of all
// set bits among codeword positions 1..38; the overall parity bit separates the cases:
//   syndrome 0, parity good  -> no error
//   parity bad               -> single error at position `syndrome` (0 means the parity
//                               bit itself), corrected in `data`
//   syndrome !=0, parity good-> double error, `dbl_err`, data passed uncorrected
// A syndrome that points past position 38 with bad parity cannot come from one flipped
// bit and is also reported as `dbl_err`. Layout as in nga_pkg::edc_enc.
module edc_decode
  import nga_pkg::*;
(
  input  logic [CODE_W-1:0] code,
  output logic [DATA_W-1:0] data,
  output logic              sgl_err,   // a single-bit error was corrected
  output logic              dbl_err,   // uncorrectable error
  output logic [5:0]        syndrome
);
  logic [CODE_W-1:0] fixed;
  logic              par_bad;

  always_comb begin
    syndrome = '0;
    for (int unsigned p = 1; p < CODE_W; p++)
      if (code[p-1]) syndrome ^= 6'(p);
    par_bad = ^code;
    fixed   = code;
    sgl_err = 1'b0;
    dbl_err = 1'b0;
    if (par_bad) begin
      if (syndrome == 6'd0) begin
        fixed[CODE_W-1] = ~code[CODE_W-1];
        sgl_err = 1'b1;
      end else if (int'(syndrome) < CODE_W) begin
        fixed[syndrome - 6'd1] = ~code[syndrome - 6'd1];
        sgl_err = 1'b1;
      end else begin
        dbl_err = 1'b1;
      end
    end else if (syndrome != 6'd0) begin
      dbl_err = 1'b1;
    end
    data = '0;
    begin
      int unsigned k;
      k = 0;
      for (int unsigned p = 1; p < CODE_W; p++) begin
        if ((p & (p - 1)) != 0) begin
          data[k] = fixed[p-1];
          k++;
        end
      end
    end
  end
endmodule
