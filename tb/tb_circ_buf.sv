// tb_circ_buf: the circular buffer against a fake DRAM that answers each read after
// MEMLAT cycles with a word computed from the address (f(a) = a*2654435761 + 17).
// Checks: a prefetch of 18 words (one SU(3) matrix) fills the chosen entries with the
// right words; a protected read of an entry not yet filled waits and then returns the
// right word, and the wait ends in the cycle after the word arrives; reads of filled
// entries complete with zero wait states; the prefetch wraps round entry 31 to 0; the
// CB_ADDR register advances by the count; a second command waits while one runs; with
// protection off a read of an unfilled entry completes at once.
`timescale 1ns/1ps
module tb_circ_buf;
  import nga_pkg::*;
  localparam int MEMLAT = 6;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;

  reg_req_t ctl_req, dat_req;
  reg_rsp_t ctl_rsp, dat_rsp;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic stall;
  int checks = 0, failures = 0;

  circ_buf dut (.clk, .rst_n, .ctl_req, .ctl_rsp, .dat_req, .dat_rsp, .mreq, .mrsp, .stall);

  function automatic logic [31:0] f(logic [17:0] a);
    return 32'(a) * 32'd2654435761 + 32'd17;
  endfunction

  int cnt = 0;
  int mem_reads = 0;
  always_ff @(posedge clk) begin
    mrsp <= '0;
    if (mreq.valid && !mrsp.done) begin
      if (cnt == MEMLAT - 1) begin
        cnt <= 0;
        mrsp.done  <= 1;
        mrsp.rdata <= f(mreq.addr);
        mem_reads  <= mem_reads + 1;
      end else cnt <= cnt + 1;
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  int waits;
  task automatic ctl(input logic we, input logic [7:0] ad, input logic [31:0] wd, output logic [31:0] rd);
    ctl_req.valid = 1; ctl_req.we = we; ctl_req.addr = ad; ctl_req.wdata = wd;
    waits = 0;
    #1;
    while (!ctl_rsp.rdy) begin @(posedge clk); #1; waits++; end
    rd = ctl_rsp.rdata;
    @(posedge clk); #1;
    ctl_req = '0;
  endtask

  task automatic rdent(input int idx, output logic [31:0] rd);
    dat_req.valid = 1; dat_req.we = 0; dat_req.addr = 8'(idx); dat_req.wdata = 0;
    waits = 0;
    #1;
    while (!dat_rsp.rdy) begin @(posedge clk); #1; waits++; end
    rd = dat_rsp.rdata;
    @(posedge clk); #1;
    dat_req = '0;
  endtask

  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rd;
  initial begin
    ctl_req = '0; dat_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    // prefetch 18 words from 0x1000 into entries 20..(20+17)%32 = 20..5
    ctl(1, CB_ADDR, 32'h1000, rd);
    ctl(1, CB_CMD, {18'd0, 6'd18, 3'd0, 5'd20}, rd);
    // entry 20 is the first to arrive: read it at once, must wait
    rdent(20, rd);
    chk(rd == f(18'h1000), "first word");
    chk(waits >= MEMLAT - 1 && waits <= MEMLAT + 1, $sformatf("first wait %0d", waits));
    // a later entry of the same prefetch: wait then right value
    rdent(5, rd);
    chk(rd == f(18'h1000 + 17), "wrapped last word");
    chk(waits > 0, "waited for entry 5");
    // everything now valid: zero wait states
    for (int k = 0; k < 18; k++) begin
      rdent((20 + k) % 32, rd);
      chk(rd == f(18'(32'h1000 + k)), $sformatf("entry %0d", (20 + k) % 32));
      chk(waits == 0, "zero wait");
    end
    chk(mem_reads == 18, "18 DRAM reads");
    ctl(0, CB_ADDR, 0, rd);
    chk(rd == 32'h1012, "address advanced");
    // two commands back to back: the second waits for the first
    ctl(1, CB_CMD, {18'd0, 6'd8, 3'd0, 5'd0}, rd);
    ctl(1, CB_CMD, {18'd0, 6'd8, 3'd0, 5'd8}, rd);
    chk(waits >= 7 * MEMLAT, $sformatf("second command waited %0d", waits));
    rdent(15, rd);
    chk(rd == f(18'h1012 + 15), "second prefetch data");
    // protection off: unfilled entry returns at once
    ctl(1, CB_PROT, 0, rd);
    ctl(1, CB_CMD, {18'd0, 6'd4, 3'd0, 5'd28}, rd);
    rdent(31, rd);
    chk(waits == 0, "unprotected read no wait");
    ctl(0, CB_CMD, 0, rd);
    chk(rd[31] == 1'b1, "busy while fetching");
    repeat (40) @(posedge clk);
    #1;
    ctl(0, CB_CMD, 0, rd);
    chk(rd[31] == 1'b0, "idle after fetching");
    rdent(31, rd);
    chk(rd == f(18'h1022 + 3), "unprotected read after fill");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
