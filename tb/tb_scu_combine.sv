// tb_scu_combine: feeds the combine unit an incoming bit stream as a receiver would
// present it, for random local and incoming words, and checks each output bit as it is
// produced (same cycle as the incoming bit) and the final result against values worked
// out here: the 32-bit sum for OP_ADD (least significant bit first), the signed maximum
// for OP_MAX (most significant bit first, including ties and sign differences) and the
// incoming word for OP_BCAST. Also checks that an unarmed unit ignores a frame.
`timescale 1ns/1ps
module tb_scu_combine;
  import nga_pkg::*;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;

  logic arm, msb_first, fs, bv, bval, o_start, o_bv, o_bit, claim, done;
  scu_op_e op;
  logic [4:0] bidx;
  logic [31:0] local_word, result;
  int checks = 0, failures = 0;

  scu_combine dut (.clk, .rst_n, .arm, .op, .local_word, .msb_first, .fs, .bv, .bval, .bidx,
                   .o_start, .o_bv, .o_bit, .claim, .done, .result);

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(scu_op_e o, logic [31:0] loc, logic [31:0] inw, bit armed);
    logic [31:0] expect_w;
    bit msb;
    msb = (o == OP_MAX);
    unique case (o)
      OP_ADD:  expect_w = loc + inw;
      OP_MAX:  expect_w = ($signed(loc) > $signed(inw)) ? loc : inw;
      default: expect_w = inw;
    endcase
    @(negedge clk);
    msb_first = msb;
    if (armed) begin
      op = o; local_word = loc; arm = 1;
      @(negedge clk);
      arm = 0;
      chk(claim, "claim when armed");
    end
    repeat ($urandom_range(0, 3)) @(negedge clk);
    fs = 1;
    #1;
    chk(o_start == armed, "o_start");
    @(negedge clk);
    fs = 0;
    for (int b = 0; b < 32; b++) begin
      int pos;
      pos = msb ? 31 - b : b;
      bv = 1; bidx = 5'(b); bval = inw[pos];
      #1;
      if (armed) chk(o_bv && o_bit == expect_w[pos], $sformatf("op %s bit %0d", o.name(), b));
      else chk(!o_bv, "unarmed: no output");
      @(negedge clk);
    end
    bv = 0;
    #1;
    if (armed) begin
      chk(done, "done");
      chk(result == expect_w, $sformatf("%s result %h exp %h", o.name(), result, expect_w));
      chk(!claim, "released");
    end else chk(!done, "no done when unarmed");
  endtask

  initial begin
    arm = 0; msb_first = 0; fs = 0; bv = 0; bval = 0; bidx = 0; op = OP_ADD; local_word = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 40; n++) run(OP_ADD, $urandom, $urandom, 1);
    run(OP_ADD, 32'hFFFF_FFFF, 32'h1, 1);
    for (int n = 0; n < 40; n++) run(OP_MAX, $urandom, $urandom, 1);
    run(OP_MAX, 32'h8000_0000, 32'h7FFF_FFFF, 1);
    run(OP_MAX, 32'h0000_0005, 32'hFFFF_FFFB, 1);
    run(OP_MAX, 32'h1234_5678, 32'h1234_5678, 1);
    run(OP_MAX, 32'hFFFF_FFF0, 32'hFFFF_FFF1, 1);
    for (int n = 0; n < 10; n++) run(OP_BCAST, $urandom, $urandom, 1);
    run(OP_ADD, 32'h5, 32'h6, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
