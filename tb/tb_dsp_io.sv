// tb_dsp_io: the DSP I/O controller with fake units behind it. Each fake register unit
// answers with its own tag in the data and the offset it was given, after a wait that
// the testbench sets; a fake memory answers DRAM accesses. Checks that every region of
// the address map reaches the right unit with the right offset, that only that unit
// sees the access, that ready and read data come back from it (including zero-wait
// completion and wait states), the status registers, the sticky flags for an unmapped
// address and an uncorrectable memory word, and that they clear.
`timescale 1ns/1ps
module tb_dsp_io;
  import nga_pkg::*;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;

  logic strb, rw, rdy;
  logic [23:0] addr;
  logic [31:0] wdata, rdata;
  mem_req_t mreq;
  mem_rsp_t mrsp, mrsp_raw;
  reg_req_t cbd_req, cbc_req, scu_req;
  reg_rsp_t cbd_rsp, cbc_rsp, scu_rsp;
  int checks = 0, failures = 0;
  int unit_wait = 0;
  logic force_uncorr = 0;

  dsp_io dut (.clk, .rst_n, .strb, .rw, .addr, .wdata, .rdata, .rdy, .mreq, .mrsp,
              .cbd_req, .cbd_rsp, .cbc_req, .cbc_rsp, .scu_req, .scu_rsp,
              .sec_count(16'd3), .ded_count(16'd4), .err_addr(19'h5_1234));
  mem_fake #(.LAT(3)) u_mem (.clk, .req(mreq), .rsp(mrsp_raw));
  always_comb begin
    mrsp = mrsp_raw;
    mrsp.uncorr = mrsp_raw.done && force_uncorr;
  end

  // fake register units: ready after unit_wait cycles of a held request
  int cnt [3];
  always @(posedge clk) begin
    cnt[0] <= cbd_req.valid && !cbd_rsp.rdy ? cnt[0] + 1 : 0;
    cnt[1] <= cbc_req.valid && !cbc_rsp.rdy ? cnt[1] + 1 : 0;
    cnt[2] <= scu_req.valid && !scu_rsp.rdy ? cnt[2] + 1 : 0;
  end
  always_comb begin
    cbd_rsp.rdy = cbd_req.valid && cnt[0] >= unit_wait;
    cbc_rsp.rdy = cbc_req.valid && cnt[1] >= unit_wait;
    scu_rsp.rdy = scu_req.valid && cnt[2] >= unit_wait;
    cbd_rsp.rdata = {8'hD0, 16'd0, cbd_req.addr};
    cbc_rsp.rdata = {8'hC0, 16'd0, cbc_req.addr};
    scu_rsp.rdata = {8'h5C, 16'd0, scu_req.addr};
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  int waits;
  logic [3:0] seen;   // which targets saw the access {mem, scu, cbc, cbd}
  task automatic bus(logic r, logic [23:0] a, logic [31:0] wd, output logic [31:0] rd);
    strb = 1; rw = r; addr = a; wdata = wd;
    waits = 0;
    #1;
    seen = {mreq.valid, scu_req.valid, cbc_req.valid, cbd_req.valid};
    while (!rdy) begin @(posedge clk); #1; waits++; end
    rd = rdata;
    @(posedge clk); #1;
    strb = 0;
  endtask

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rd;
  initial begin
    strb = 0; rw = 1; addr = 0; wdata = 0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    for (int w = 0; w < 3; w++) begin
      unit_wait = w;
      bus(1, 24'h80_0007, 0, rd);
      chk(rd == 32'hD000_0007 && seen == 4'b0001 && waits == w, "circular buffer data");
      bus(1, 24'h80_0102, 0, rd);
      chk(rd == 32'hC000_0002 && seen == 4'b0010 && waits == w, "circular buffer control");
      bus(0, 24'h80_0213, 32'h55, rd);
      chk(seen == 4'b0100 && waits == w, "scu write");
      bus(1, 24'h80_0211, 0, rd);
      chk(rd == 32'h5C00_0011 && seen == 4'b0100, "scu read");
    end
    // DRAM: write then read
    bus(0, 24'h01_2345, 32'hDEAD_BEEF, rd);
    chk(seen == 4'b1000 && waits == 3, "dram write");
    chk(u_mem.peek(32'h1_2345) == 32'hDEAD_BEEF, "dram word stored");
    bus(1, 24'h01_2345, 0, rd);
    chk(rd == 32'hDEAD_BEEF && waits == 3, "dram read");
    // status registers
    bus(1, 24'h80_0300, 0, rd); chk(rd == 3 && waits == 0, "sec count");
    bus(1, 24'h80_0301, 0, rd); chk(rd == 4, "ded count");
    bus(1, 24'h80_0302, 0, rd); chk(rd == 32'h5_1234, "error address");
    bus(1, 24'h80_0303, 0, rd); chk(rd == 0, "flags clear");
    // unmapped address completes at once and sets a flag
    bus(1, 24'hC0_0000, 0, rd);
    chk(rd == 0 && waits == 0 && seen == 0, "unmapped");
    force_uncorr = 1;
    bus(1, 24'h00_0010, 0, rd);
    force_uncorr = 0;
    bus(1, 24'h80_0303, 0, rd); chk(rd == 3, "flags set");
    bus(0, 24'h80_0303, 0, rd);
    bus(1, 24'h80_0303, 0, rd); chk(rd == 0, "flags cleared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
