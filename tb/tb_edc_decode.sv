// tb_edc_decode: checks the SEC-DED decoder (with the encoder) against an independent
// reference. For random words it encodes, then flips no bit, every single bit position
// in turn, or two random distinct bits, and checks the decoder's data and flags. The
// reference check bits are computed here by a direct rule (check bit j = parity of data
// bits whose codeword position has bit j set), written separately from the RTL.
`timescale 1ns/1ps
module tb_edc_decode;
  import nga_pkg::*;
  logic [31:0] data, dout;
  logic [38:0] code, bad;
  logic        sgl, dbl;
  logic [5:0]  syn;
  int checks = 0, failures = 0;

  edc_encode u_enc (.data(data), .code(code));
  edc_decode u_dec (.code(bad), .data(dout), .sgl_err(sgl), .dbl_err(dbl), .syndrome(syn));

  // reference encoder: positions 1..38 ordered, data bits at non powers of two
  function automatic logic [38:0] ref_enc(logic [31:0] d);
    logic [38:0] c;
    int pos [32];
    int k = 0;
    c = '0;
    for (int p = 1; p <= 38; p++) if (p != 1 && p != 2 && p != 4 && p != 8 && p != 16 && p != 32) begin
      pos[k] = p; c[p-1] = d[k]; k++;
    end
    for (int j = 0; j < 6; j++) begin
      logic s = 0;
      for (int i = 0; i < 32; i++) if (pos[i][j]) s ^= d[i];
      c[(1<<j)-1] = s;
    end
    c[38] = ^c[37:0];
    return c;
  endfunction

  task automatic chk(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 10) $display("FAIL %s data=%h code=%h bad=%h dout=%h s=%0b d=%0b", what, data, code, bad, dout, sgl, dbl);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      data = (n == 0) ? 32'h0 : (n == 1) ? 32'hFFFF_FFFF : $urandom;
      bad  = ref_enc(data);
      #1;
      chk(code == bad, "encoder");
      chk(dout == data && !sgl && !dbl, "clean");
      for (int b = 0; b < 39; b++) begin
        bad = ref_enc(data);
        bad[b] = ~bad[b];
        #1;
        chk(dout == data && sgl && !dbl, "single");
      end
      for (int t = 0; t < 5; t++) begin
        int b1, b2;
        b1 = $urandom_range(38);
        b2 = (b1 + 1 + $urandom_range(37)) % 39;
        bad = ref_enc(data);
        bad[b1] = ~bad[b1];
        bad[b2] = ~bad[b2];
        #1;
        chk(dbl && !sgl, "double");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
