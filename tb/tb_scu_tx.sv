// tb_scu_tx: loads a random mix of data, global and acknowledge frames into one
// transmitter, as soon as it can take them (so many frames follow each other with no
// idle bit), in both bit orders, and checks the serial line bit by bit against frames
// built here: start bit, two header bits, payload, even parity over header and payload.
// Stream mode is checked too: bits handed in one per cycle must appear on the line as a
// global frame, one cycle after they are handed in, with the parity added.
`timescale 1ns/1ps
module tb_scu_tx;
  import nga_pkg::*;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;

  logic msb_first, load, s_start, s_bv, s_bit, sout, busy;
  logic [1:0] hdr;
  logic [31:0] word;
  int checks = 0, failures = 0;

  scu_tx dut (.clk, .rst_n, .msb_first, .load, .hdr, .word, .s_start, .s_bv, .s_bit,
              .sout, .busy);

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

  // expected line, one entry per bit time
  bit expq[$];

  task automatic push_frame(logic [1:0] h, logic [31:0] w, bit msb);
    bit p;
    p = h[1] ^ h[0];
    expq.push_back(1'b1);
    expq.push_back(h[1]);
    expq.push_back(h[0]);
    if (h == HDR_ACK) begin
      expq.push_back(w[1]); expq.push_back(w[0]);
      p ^= w[1] ^ w[0];
    end else begin
      for (int i = 0; i < 32; i++) expq.push_back(msb ? w[31 - i] : w[i]);
      p ^= ^w;
    end
    expq.push_back(p);
  endtask

  // compare the line with the expected bits, every cycle
  bit checking = 0;
  int nbits = 0;
  always @(negedge clk) if (checking) begin
    bit e;
    e = (expq.size() > 0) ? expq.pop_front() : 1'b0;
    chk(sout === e, $sformatf("line bit %0d", nbits));
    nbits++;
  end

  int kinds [4];
  initial begin
    msb_first = 0; load = 0; s_start = 0; s_bv = 0; s_bit = 0; word = 0; hdr = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    checking = 1;
    #1;
    for (int m = 0; m < 2; m++) begin
      msb_first = m[0];
      for (int n = 0; n < 40; n++) begin
        logic [1:0] h;
        logic [31:0] w;
        h = 2'($urandom_range(3));
        w = $urandom;
        // wait for the transmitter, sometimes longer
        while (busy) begin @(negedge clk); #1; end
        repeat ($urandom_range(3) == 0 ? $urandom_range(1, 4) : 0) begin @(negedge clk); #1; end
        load = 1; hdr = h; word = w;
        push_frame(h, w, msb_first);
        kinds[h]++;
        @(negedge clk); #1;
        load = 0;
      end
      while (busy || expq.size() > 0) begin @(negedge clk); #1; end
      repeat (3) begin @(negedge clk); #1; end
      chk(!busy && !sout, "idle after frames");
    end
    // stream mode: s_start, two header bit times, then 32 bits handed in one per cycle
    msb_first = 0;
    for (int n = 0; n < 4; n++) begin
      logic [31:0] v;
      v = $urandom;
      load = 0; s_start = 1;
      push_frame(HDR_GLOBAL, v, 1'b0);
      @(negedge clk); #1;
      s_start = 0;
      repeat (2) begin @(negedge clk); #1; end
      for (int b = 0; b < 32; b++) begin
        s_bv = 1; s_bit = v[b];
        @(negedge clk); #1;
      end
      s_bv = 0; s_bit = 0;
      while (busy || expq.size() > 0) begin @(negedge clk); #1; end
      chk(!busy, "stream done");
    end
    repeat (2) begin @(negedge clk); #1; end
    checking = 0;
    for (int k = 0; k < 4; k++) chk(kinds[k] > 5, $sformatf("frames of header %0d sent", k));
    chk(nbits > 1500, "line checked throughout");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
