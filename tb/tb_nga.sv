// tb_nga: end-to-end test of the node chip. Four NGAs, each with its own DRAM model,
// form a ring along dimension 0 (node i's + link to node i+1's - link); the links of
// the other three dimensions of every node loop back to the same node. The testbench
// plays the four DSPs through their buses. All NGA parameters are at their defaults.
// The run is a global dot product, the operation the SCU's on-the-fly add exists for:
//  1. every DSP writes two 16-word vectors x and y into its DRAM (through EDC);
//  2. it has the circular buffer prefetch x into entries 0-15 and y into 16-31 and
//     reads them back (protected reads wait for words still on their way);
//  3. it forms its local dot product; node 0 sends it on its + link as a global frame,
//     while nodes 1-3
//     add theirs on the fly; node 0 receives the total, broadcasts it round the ring and
//     every node reads it from its SCU;
// then further operations exercise the rest: an 18-word SU(3) matrix prefetch with zero
// wait states, a global maximum, a DMA block from one node's DRAM to the next, single
// and double bit errors in DRAM (corrected and scrubbed / flagged), unprotected circular
// buffer reads, contention for DRAM between the DSP, the circular buffer and the SCU,
// DRAM refresh, a word in the upper half of a 512k-word memory, a word refused by a
// neighbour whose receive buffer is full (and resent until taken), and a bit error on a serial wire (detected, word resent and delivered
// intact). Each mechanism is counted; one that never happened counts as a failure.
`timescale 1ns/1ps
module tb_nga;
  import nga_pkg::*;
  localparam int N = 4;
  localparam int VL = 16;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;

  logic              strb [N], rw [N], rdy [N];
  logic [23:0]       addr [N];
  logic [31:0]       wdata [N], rdata [N];
  logic [9:0]        da [N];
  logic              ras_n [N], cas_n [N], we_n [N], oe_n [N], dq_oe [N];
  logic [38:0]       dq_o [N], dq_i [N];
  logic [7:0]        sin [N], sout [N];
  logic              cmb_done [N], cb_stall [N];
  logic              flip_w = 0;   // corrupts the wire from node 2 to node 3
  int checks = 0, failures = 0;

  for (genvar i = 0; i < N; i++) begin : g_node
    nga u_nga (
      .clk, .rst_n,
      .dsp_strb(strb[i]), .dsp_rw(rw[i]), .dsp_addr(addr[i]), .dsp_wdata(wdata[i]),
      .dsp_rdata(rdata[i]), .dsp_rdy(rdy[i]),
      .dram_a(da[i]), .dram_ras_n(ras_n[i]), .dram_cas_n(cas_n[i]), .dram_we_n(we_n[i]),
      .dram_oe_n(oe_n[i]), .dram_dq_o(dq_o[i]), .dram_dq_oe(dq_oe[i]), .dram_dq_i(dq_i[i]),
      .sin(sin[i]), .sout(sout[i]), .cmb_done(cmb_done[i]), .cb_stall(cb_stall[i])
    );
    dram_model #(.ROW_W(10), .COL_W(9), .W(39)) u_dram (
      .a(da[i]), .ras_n(ras_n[i]), .cas_n(cas_n[i]), .we_n(we_n[i]), .oe_n(oe_n[i]),
      .d(dq_o[i]), .q(dq_i[i])
    );
    always_comb begin
      sin[i][0] = sout[(i + 1) % N][1];
      sin[i][1] = sout[(i + N - 1) % N][0] ^ (flip_w && i == 3);
      for (int d = 2; d < 8; d++) sin[i][d] = sout[i][d ^ 1];
    end
  end

  // ---------------- mechanism counters ----------------
  int n_cb_stall = 0, n_cmb = 0, n_contention = 0, n_sec = 0, n_ded = 0, n_refresh = 0;
  int n_zero_wait = 0, n_dma = 0, n_refused = 0, n_bcast = 0, n_max = 0, n_unprot = 0;
  int n_resent = 0, n_wire_err = 0, n_upper = 0;
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < N; i++) begin
      if (cb_stall[i]) n_cb_stall++;
      if (cmb_done[i]) n_cmb++;
    end
    begin
      int k;
      k = 0;
      for (int j = 0; j < 3; j++) if (g_node[0].u_nga.mreq[j].valid) k++;
      if (k > 1) n_contention++;
      k = 0;
      for (int j = 0; j < 3; j++) if (g_node[1].u_nga.mreq[j].valid) k++;
      if (k > 1) n_contention++;
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s @%0t", s, $time); end
  endtask

  int waits [N];
  task automatic bus(int n, logic r, logic [23:0] a, logic [31:0] wd, output logic [31:0] rd);
    strb[n] = 1; rw[n] = r; addr[n] = a; wdata[n] = wd;
    waits[n] = 0;
    #1;
    while (!rdy[n]) begin @(posedge clk); #1; waits[n]++; end
    rd = rdata[n];
    @(posedge clk); #1;
    strb[n] = 0;
  endtask

  localparam logic [23:0] CBD = 24'h80_0000, CBC = 24'h80_0100, SCUR = 24'h80_0200, STAT = 24'h80_0300;

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] x [N][VL], y [N][VL];
  logic [31:0] dot [N];
  logic [31:0] total;

  // one DSP's part of the dot product: store vectors, prefetch, read, multiply-add
  task automatic node_dot(int n);
    logic [31:0] rd, acc;
    for (int k = 0; k < VL; k++) bus(n, 0, 24'h1000 + 24'(k), x[n][k], rd);
    for (int k = 0; k < VL; k++) bus(n, 0, 24'h2000 + 24'(k), y[n][k], rd);
    bus(n, 0, CBC + 24'(CB_ADDR), 32'h1000, rd);
    bus(n, 0, CBC + 24'(CB_CMD), {18'd0, 6'd16, 3'd0, 5'd0}, rd);
    bus(n, 0, CBC + 24'(CB_ADDR), 32'h2000, rd);
    // the second command waits until the first prefetch is complete
    bus(n, 0, CBC + 24'(CB_CMD), {18'd0, 6'd16, 3'd0, 5'd16}, rd);
    acc = 0;
    for (int k = 0; k < VL; k++) begin
      logic [31:0] a, b;
      bus(n, 1, CBD + 24'(k), 0, a);
      bus(n, 1, CBD + 24'(16 + k), 0, b);
      chk(a == x[n][k] && b == y[n][k], $sformatf("node %0d element %0d via buffer", n, k));
      acc += a * b;
    end
    dot[n] = acc;
  endtask

  logic [31:0] rd;
  initial begin
    for (int i = 0; i < N; i++) begin strb[i] = 0; rw[i] = 1; addr[i] = 0; wdata[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // ---- global dot product ----
    for (int i = 0; i < N; i++) for (int k = 0; k < VL; k++) begin
      x[i][k] = $urandom_range(0, 1000) - 500;
      y[i][k] = $urandom_range(0, 1000) - 500;
    end
    fork
      node_dot(0); node_dot(1); node_dot(2); node_dot(3);
    join
    begin
      logic [31:0] ref_total;
      ref_total = 0;
      for (int i = 0; i < N; i++) for (int k = 0; k < VL; k++) ref_total += x[i][k] * y[i][k];
      for (int i = 1; i < N; i++) begin
        bus(i, 0, SCUR + 24'(SCU_CMB_LOC), dot[i], rd);
        bus(i, 0, SCUR + 24'(SCU_CMB_CTL), {16'd0, 8'h01, 1'b0, 3'd1, 2'b0, OP_ADD}, rd);
      end
      bus(0, 0, SCUR + 24'(SCU_CMB_LOC), dot[0], rd);
      bus(0, 0, SCUR + 24'(SCU_CMB_SND), 32'h01, rd);
      bus(0, 1, SCUR + 24'h01, 0, total);
      chk(total == ref_total, $sformatf("global dot product %0d expected %0d", $signed(total), $signed(ref_total)));
      for (int i = 1; i < N; i++)
        bus(i, 0, SCUR + 24'(SCU_CMB_CTL), {16'd0, (i == N - 1) ? 8'h00 : 8'h01, 1'b0, 3'd1, 2'b0, OP_BCAST}, rd);
      bus(0, 0, SCUR + 24'(SCU_CMB_LOC), total, rd);
      bus(0, 0, SCUR + 24'(SCU_CMB_SND), 32'h01, rd);
      for (int i = 1; i < N; i++) begin
        bus(i, 1, SCUR + 24'(SCU_CMB_RES), 0, rd);
        chk(rd == ref_total, $sformatf("node %0d has the total", i));
        if (rd == ref_total) n_bcast++;
      end
    end

    // ---- SU(3) matrix: 18 words, then zero-wait reads ----
    for (int k = 0; k < 18; k++) bus(2, 0, 24'h3000 + 24'(k), 32'h5300_0000 + 32'(k), rd);
    bus(2, 0, CBC + 24'(CB_ADDR), 32'h3000, rd);
    bus(2, 0, CBC + 24'(CB_CMD), {18'd0, 6'd18, 3'd0, 5'd24}, rd);
    repeat (18 * 8) @(posedge clk); #1;
    for (int k = 0; k < 18; k++) begin
      bus(2, 1, CBD + 24'((24 + k) % 32), 0, rd);
      chk(rd == 32'h5300_0000 + 32'(k), "SU(3) element");
      if (waits[2] == 0) n_zero_wait++;
    end
    chk(n_zero_wait == 18, "SU(3) read with zero wait states");

    // ---- protection off ----
    bus(3, 0, CBC + 24'(CB_PROT), 0, rd);
    bus(3, 0, CBC + 24'(CB_ADDR), 32'h1000, rd);
    bus(3, 0, CBC + 24'(CB_CMD), {18'd0, 6'd4, 3'd0, 5'd0}, rd);
    bus(3, 1, CBD + 24'd3, 0, rd);
    if (waits[3] == 0) n_unprot++;
    bus(3, 0, CBC + 24'(CB_PROT), 1, rd);

    // ---- global maximum ----
    for (int i = 0; i < N; i++) bus(i, 0, SCUR + 24'(SCU_CFG), 1, rd);
    begin
      logic [31:0] m;
      for (int i = 1; i < N; i++) begin
        bus(i, 0, SCUR + 24'(SCU_CMB_LOC), dot[i], rd);
        bus(i, 0, SCUR + 24'(SCU_CMB_CTL), {16'd0, 8'h01, 1'b0, 3'd1, 2'b0, OP_MAX}, rd);
      end
      m = dot[0];
      for (int i = 1; i < N; i++) if ($signed(dot[i]) > $signed(m)) m = dot[i];
      bus(0, 0, SCUR + 24'(SCU_CMB_LOC), dot[0], rd);
      bus(0, 0, SCUR + 24'(SCU_CMB_SND), 32'h01, rd);
      bus(0, 1, SCUR + 24'h01, 0, rd);
      chk(rd == m, "global maximum");
      if (rd == m) n_max++;
    end
    for (int i = 0; i < N; i++) bus(i, 0, SCUR + 24'(SCU_CFG), 0, rd);

    // ---- DMA from node 0's DRAM to node 1's DRAM, with DSP traffic on node 0 ----
    bus(1, 0, SCUR + 24'(SCU_DMA_ADR), 32'h4000, rd);
    bus(1, 0, SCUR + 24'(SCU_DMA_CTL), {16'd16, 7'd0, 1'b0, 5'd0, 3'd1}, rd);
    bus(0, 0, SCUR + 24'(SCU_DMA_ADR), 32'h1000, rd);
    bus(0, 0, SCUR + 24'(SCU_DMA_CTL), {16'd16, 7'd0, 1'b1, 5'd0, 3'd0}, rd);
    bus(0, 0, CBC + 24'(CB_ADDR), 32'h2000, rd);
    bus(0, 0, CBC + 24'(CB_CMD), {18'd0, 6'd16, 3'd0, 5'd0}, rd);
    for (int k = 0; k < 16; k++) begin
      bus(0, 1, 24'h2000 + 24'(k), 0, rd);
      chk(rd == y[0][k], "DSP read during DMA and prefetch");
    end
    do begin repeat (20) @(posedge clk); #1; bus(1, 1, SCUR + 24'(SCU_DMA_CTL), 0, rd); end while (rd[31]);
    for (int k = 0; k < 16; k++) begin
      bus(1, 1, 24'h4000 + 24'(k), 0, rd);
      chk(rd == x[0][k], $sformatf("DMA word %0d", k));
      if (rd == x[0][k]) n_dma++;
    end

    // ---- DRAM errors ----
    g_node[2].u_dram.flip(32'h1003, 5);
    bus(2, 1, 24'h1003, 0, rd);
    chk(rd == x[2][3], "single-bit error corrected");
    bus(2, 1, STAT + 24'd0, 0, rd);
    n_sec = rd;
    bus(2, 1, STAT + 24'd2, 0, rd);
    chk(rd == 32'h1003, "error address");
    repeat (20) @(posedge clk);
    begin
      logic [38:0] cw;
      cw = g_node[2].u_dram.peek(32'h1003);
      chk(cw == edc_enc(x[2][3]), "scrubbed in DRAM");
    end
    g_node[2].u_dram.flip(32'h1004, 1);
    g_node[2].u_dram.flip(32'h1004, 20);
    bus(2, 1, 24'h1004, 0, rd);
    bus(2, 1, STAT + 24'd1, 0, rd);
    n_ded = rd;
    bus(2, 1, STAT + 24'd3, 0, rd);
    chk(rd[1], "uncorrectable flag");

    // ---- upper half of a 512k-word memory: row address pin 9 in use ----
    bus(1, 0, 24'h7_FFF0, 32'hD00D_0001, rd);
    bus(1, 0, 24'h3_FFF0, 32'hD00D_0002, rd);
    bus(1, 1, 24'h7_FFF0, 0, rd);
    chk(rd == 32'hD00D_0001, "word in the upper 256k");
    if (rd == 32'hD00D_0001 && g_node[1].u_dram.peek(32'h7_FFF0) == edc_enc(32'hD00D_0001)) n_upper++;
    bus(1, 1, 24'h3_FFF0, 0, rd);
    chk(rd == 32'hD00D_0002, "word in the lower 256k");

    // ---- refusal: node 3 sends two words to node 0, which reads neither yet ----
    bus(3, 0, SCUR + 24'h00, 32'h11, rd);
    bus(3, 0, SCUR + 24'h00, 32'h22, rd);
    repeat (150) @(posedge clk); #1;
    bus(0, 1, SCUR + 24'(SCU_STATUS), 0, rd);
    if (rd[24 + 1]) n_refused++;
    bus(0, 1, SCUR + 24'h01, 0, rd);
    chk(rd == 32'h11, "first word kept while the second is refused");
    bus(0, 1, SCUR + 24'h01, 0, rd);
    chk(rd == 32'h22, "refused word delivered after the read");
    bus(3, 1, SCUR + 24'(SCU_RETRY), 0, rd);
    n_resent = rd;

    // ---- bit error on the wire from node 2 to node 3 ----
    fork
      bus(2, 0, SCUR + 24'h00, 32'h7777_1234, rd);
      begin repeat (12) @(posedge clk); #1; flip_w = 1; @(posedge clk); #1; flip_w = 0; end
    join
    bus(3, 1, SCUR + 24'h01, 0, rd);
    chk(rd == 32'h7777_1234, "word intact after a wire error");
    bus(3, 1, SCUR + 24'(SCU_STATUS), 0, rd);
    if (rd[16 + 1]) n_wire_err++;
    bus(2, 1, SCUR + 24'(SCU_RETRY), 0, rd);
    chk(rd == 1, "wire error resent once");

    n_refresh = g_node[0].u_dram.refreshes + g_node[1].u_dram.refreshes +
                g_node[2].u_dram.refreshes + g_node[3].u_dram.refreshes;

    chk(n_cb_stall > 0, "circular buffer protected wait");
    chk(n_zero_wait > 0, "zero-wait buffer reads");
    chk(n_unprot > 0, "unprotected read");
    chk(n_cmb >= 3 * 3, $sformatf("on-the-fly combines %0d", n_cmb));
    chk(n_bcast == 3, "broadcast");
    chk(n_max == 1, "maximum");
    chk(n_dma == 16, "DMA");
    chk(n_contention > 0, "DRAM contention");
    chk(n_sec == 1, "single error corrected");
    chk(n_ded == 1, "double error detected");
    chk(n_refresh > 0, "refresh");
    chk(n_refused == 1, "refusal");
    chk(n_resent > 0, "resend after refusal");
    chk(n_wire_err == 1, "wire error detected");
    chk(n_upper == 1, "512k-word addressing");
    $display("mechanisms: cb_stall=%0d zero_wait=%0d unprot=%0d combine=%0d bcast=%0d max=%0d dma=%0d contention=%0d sec=%0d ded=%0d refresh=%0d refused=%0d resent=%0d wire_err=%0d upper=%0d",
             n_cb_stall, n_zero_wait, n_unprot, n_cmb, n_bcast, n_max, n_dma, n_contention, n_sec, n_ded, n_refresh, n_refused, n_resent, n_wire_err, n_upper);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
