// tb_dram_ctrl: the DRAM I/O and EDC unit against the behavioural DRAM model.
// Writes random words to random addresses and reads them back; checks the codeword the
// DRAM holds against a reference SEC-DED encoder written here; checks the read latency
// (request to `done` in T_RCD + T_CAS + 1 cycles when no refresh intervenes); flips one
// stored bit and checks the read is corrected, counted and written back to DRAM; flips
// two bits and checks the uncorrectable flag and count; and counts CAS-before-RAS
// refreshes against the refresh interval.
`timescale 1ns/1ps
module tb_dram_ctrl;
  import nga_pkg::*;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;   // 25 MHz

  mem_req_t req;
  mem_rsp_t rsp;
  logic [9:0] a;
  logic ras_n, cas_n, we_n, oe_n, dq_oe;
  logic [38:0] dq_o, dq_i;
  logic [15:0] sec_count, ded_count;
  logic [18:0] err_addr;
  int checks = 0, failures = 0;

  dram_ctrl dut (.clk, .rst_n, .req, .rsp, .dram_a(a), .dram_ras_n(ras_n), .dram_cas_n(cas_n),
                 .dram_we_n(we_n), .dram_oe_n(oe_n), .dram_dq_o(dq_o), .dram_dq_oe(dq_oe),
                 .dram_dq_i(dq_i), .sec_count, .ded_count, .err_addr);
  dram_model #(.ROW_W(10), .COL_W(9), .W(39)) u_mem (.a, .ras_n, .cas_n, .we_n, .oe_n, .d(dq_o), .q(dq_i));

  function automatic logic [38:0] ref_enc(logic [31:0] d);
    logic [38:0] c;
    int pos [32];
    int k = 0;
    c = '0;
    for (int p = 1; p <= 38; p++) if ((p & (p - 1)) != 0) begin
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

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  int lat;
  task automatic access(input logic we, input logic [18:0] ad, input logic [31:0] wd,
                        output logic [31:0] rd, output logic unc);
    req.valid = 1; req.we = we; req.addr = ad; req.wdata = wd;
    lat = 0;
    do begin @(posedge clk); #1; lat++; end while (!rsp.done);
    rd = rsp.rdata; unc = rsp.uncorr;
    req = '0;
  endtask

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] words [64];
  logic [18:0] addrs [64];
  logic [31:0] rd;
  logic unc;
  int exact = 0, reads = 0, exact_w = 0;
  longint t0;

  initial begin
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;
    t0 = $time;
    for (int i = 0; i < 64; i++) begin
      words[i] = $urandom;
      addrs[i] = 19'(i * 8209 + 7);   // spread over all 512k words
      access(1, addrs[i], words[i], rd, unc);
      // back-to-back accesses: one every 1 + T_RCD + T_CAS + T_RP = 7 cycles
      if (i > 0) begin
        if (lat == 7) exact_w++;
      end
      chk(u_mem.peek(addrs[i]) == ref_enc(words[i]), "stored codeword");
    end
    for (int i = 0; i < 64; i++) begin
      repeat (3) @(posedge clk);
      #1;
      access(0, addrs[i], 0, rd, unc);
      chk(rd == words[i] && !unc, "read back");
      if (lat != 5) $display("read latency %0d at %0t", lat, $time);
      reads++;
      if (lat == 5) exact++;
      chk(lat <= 5 + 8, "latency bound");
    end
    chk(exact >= 56, $sformatf("latency 5 cycles (%0d of %0d)", exact, reads));
    // single-bit errors: corrected, counted, scrubbed
    for (int i = 0; i < 39; i++) begin
      int k = i % 64;
      u_mem.flip(addrs[k], i);
      access(0, addrs[k], 0, rd, unc);
      chk(rd == words[k] && !unc, "corrected");
      chk(sec_count == 16'(i + 1), $sformatf("counted bit %0d", i));
      chk(err_addr == addrs[k], "error address");
      repeat (30) @(posedge clk);
      chk(u_mem.peek(addrs[k]) == ref_enc(words[k]), "scrubbed");
    end
    chk(sec_count == 16'd39, $sformatf("sec count %0d", sec_count));
    // double-bit errors: flagged
    for (int i = 0; i < 10; i++) begin
      u_mem.flip(addrs[i], i);
      u_mem.flip(addrs[i], 38 - i);
      access(0, addrs[i], 0, rd, unc);
      chk(unc, "uncorrectable flagged");
    end
    chk(ded_count == 16'd10, "ded count");
    chk(sec_count == 16'd39, "no false correction");
    // refresh rate
    repeat (4000) @(posedge clk);
    begin
      longint cyc;
      int expect_ref;
      cyc = ($time - t0) / 40;
      expect_ref = int'(cyc / 390);
      chk(u_mem.refreshes >= expect_ref - 1 && u_mem.refreshes <= expect_ref + 1,
          $sformatf("refreshes %0d expected %0d", u_mem.refreshes, expect_ref));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
