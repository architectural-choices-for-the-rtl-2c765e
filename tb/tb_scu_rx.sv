// tb_scu_rx: drives frames built here onto the serial input of one receiver: a random
// mix of data, global and acknowledge frames, with random idle gaps (none at all between
// some frames), in both bit orders, some with a flipped payload or parity bit. Checks
// each received header and word, the parity error flag, the timing of `wvalid` (one cycle
// after the parity bit) and the per-bit outputs (`fs`, `bv`, `bval`, `bidx`) offered to
// the on-the-fly combine unit, which must offer data bits only, never acknowledge bits.
`timescale 1ns/1ps
module tb_scu_rx;
  import nga_pkg::*;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;

  logic msb_first, sin, fs, bv, bval, wvalid, perr;
  logic [4:0] bidx;
  logic [1:0] hdr;
  logic [31:0] word;
  int checks = 0, failures = 0;

  scu_rx dut (.clk, .rst_n, .msb_first, .sin, .fs, .bv, .bval, .bidx, .wvalid, .hdr,
              .word, .perr);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  initial begin
    #2ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // frame bits in wire order; returns the length
  function automatic int build(output bit f[36], input logic [1:0] h, input logic [31:0] w,
                               input bit msb);
    int n;
    bit p;
    f[0] = 1; f[1] = h[1]; f[2] = h[0];
    p = h[1] ^ h[0];
    if (h == HDR_ACK) begin
      f[3] = w[1]; f[4] = w[0]; p ^= w[1] ^ w[0]; n = 6;
    end else begin
      for (int i = 0; i < 32; i++) f[3 + i] = msb ? w[31 - i] : w[i];
      p ^= ^w; n = 36;
    end
    f[n - 1] = p;
    return n;
  endfunction

  int perrs = 0, acks = 0;
  initial begin
    msb_first = 0; sin = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 80; n++) begin
      logic [31:0] w;
      logic [1:0] h;
      bit f[36];
      int len, gap;
      bit corrupt;
      w = $urandom;
      h = 2'($urandom_range(3));
      if (h == HDR_ACK) w = {30'd0, w[1:0]};
      corrupt = ($urandom_range(4) == 0);
      gap = ($urandom_range(2) == 0) ? 0 : $urandom_range(1, 5);
      @(negedge clk);
      msb_first = (n >= 40);
      len = build(f, h, w, msb_first);
      if (corrupt) f[$urandom_range(3, len - 1)] ^= 1'b1;
      for (int b = 0; b < len; b++) begin
        sin = f[b];
        #1;
        if (b == 0) chk(fs && !bv, "start seen");
        else if (b < 3) chk(!fs && !bv, "header not offered");
        else if (b < len - 1 && h != HDR_ACK)
          chk(bv && !fs && bval == f[b] && bidx == 5'(b - 3), $sformatf("bit %0d offered", b - 3));
        else chk(!bv, "ack or parity not offered");
        @(negedge clk);
      end
      // wvalid one cycle after the parity bit, sampled here
      sin = 1'b0;
      #1;
      chk(wvalid && hdr == h, $sformatf("frame %0d received", n));
      if (!corrupt) chk(word == w, $sformatf("word %0d", n));
      chk(perr == corrupt, "parity flag");
      if (perr) perrs++;
      if (hdr == HDR_ACK) acks++;
      // one idle bit has already been sent, add the rest
      repeat (gap > 1 ? gap - 1 : 0) @(negedge clk);
    end
    chk(perrs > 0 && acks > 0, "parity errors and acknowledges seen");
    // frames with no idle bit at all between them
    for (int n = 0; n < 6; n++) begin
      bit f[36];
      int len;
      logic [31:0] w;
      logic [1:0] h;
      w = $urandom;
      h = 2'($urandom_range(3));
      if (h == HDR_ACK) w = {30'd0, w[1:0]};
      msb_first = 0;
      len = build(f, h, w, 1'b0);
      for (int b = 0; b < len; b++) begin sin = f[b]; @(negedge clk); end
      fork
        automatic logic [31:0] wexp = w;
        automatic logic [1:0] hexp = h;
        begin #1; chk(wvalid && word == wexp && hdr == hexp && !perr, "back to back"); end
      join_none
    end
    sin = 0;
    repeat (3) @(negedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
