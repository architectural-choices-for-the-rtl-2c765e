// tb_cg_step: the communication and reduction part of one conjugate gradient update,
// the benchmark kernel of the machine, run on four node chips in a ring. The lattice is
// one-dimensional and periodic: 64 sites, 16 per node, site g = 16 * node + k. The
// operator is A p(g) = 4 p(g) - p(g - 1) - p(g + 1), on 32-bit integers. Each node:
//  1. holds p and r in its DRAM;
//  2. exchanges boundaries: its DSP sends all of p on the + link, where the next node's
//     DMA channel stores it in DRAM, and sends p(0) on the - link, where the previous
//     node's DSP reads it; the two directions share wires, so data frames and
//     acknowledges of the other direction are interleaved on every wire;
//  3. streams p through the circular buffer, forms A p and writes it to DRAM;
//  4. forms its parts of the dot products (p, A p) and (r, r); both are summed on the fly
//     round the ring and broadcast back, so every node gets alpha = (r, r) / (p, A p);
//  5. updates x += alpha p and r -= alpha A p in DRAM.
// Every word of A p, both global sums at every node and the updated x and r are checked
// against a reference computed here; the cycles of each phase are printed.
`timescale 1ns/1ps
module tb_cg_step;
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
      sin[i][1] = sout[(i + N - 1) % N][0];
      for (int d = 2; d < 8; d++) sin[i][d] = sout[i][d ^ 1];
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 15) $display("FAIL %s @%0t", s, $time); end
  endtask

  task automatic bus(int n, logic r, logic [23:0] a, logic [31:0] wd, output logic [31:0] rd);
    strb[n] = 1; rw[n] = r; addr[n] = a; wdata[n] = wd;
    #1;
    while (!rdy[n]) begin @(posedge clk); #1; end
    rd = rdata[n];
    @(posedge clk); #1;
    strb[n] = 0;
  endtask

  localparam logic [23:0] CBD = 24'h80_0000, CBC = 24'h80_0100, SCUR = 24'h80_0200;
  localparam logic [23:0] P = 24'h1000, R = 24'h1100, X = 24'h1200, AP = 24'h1300,
                          PBELOW = 24'h1400;

  initial begin
    #20ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] p [N * VL], r [N * VL], x [N * VL], ap [N * VL];
  logic [31:0] pup [N];                 // p(0) of the node above, as received
  logic [31:0] loc_pap [N], loc_rr [N];
  logic [31:0] got_pap [N], got_rr [N];

  // sum vals round the ring on the fly and broadcast the total; res[i] is what node i gets
  task automatic global_sum(input logic [31:0] vals [N], output logic [31:0] res [N]);
    logic [31:0] rd, total;
    for (int i = 1; i < N; i++) begin
      bus(i, 0, SCUR + 24'(SCU_CMB_LOC), vals[i], rd);
      bus(i, 0, SCUR + 24'(SCU_CMB_CTL), {16'd0, 8'h01, 1'b0, 3'd1, 2'b0, OP_ADD}, rd);
    end
    bus(0, 0, SCUR + 24'(SCU_CMB_LOC), vals[0], rd);
    bus(0, 0, SCUR + 24'(SCU_CMB_SND), 32'h01, rd);
    bus(0, 1, SCUR + 24'h01, 0, total);
    res[0] = total;
    for (int i = 1; i < N; i++)
      bus(i, 0, SCUR + 24'(SCU_CMB_CTL), {16'd0, (i == N - 1) ? 8'h00 : 8'h01, 1'b0, 3'd1, 2'b0, OP_BCAST}, rd);
    bus(0, 0, SCUR + 24'(SCU_CMB_LOC), total, rd);
    bus(0, 0, SCUR + 24'(SCU_CMB_SND), 32'h01, rd);
    for (int i = 1; i < N; i++) bus(i, 1, SCUR + 24'(SCU_CMB_RES), 0, res[i]);
  endtask

  // step 2, one node: send p up by words, p(0) down, receive p from below by DMA
  task automatic exchange(int n);
    logic [31:0] rd;
    bus(n, 0, SCUR + 24'(SCU_DMA_ADR), 32'(PBELOW), rd);
    bus(n, 0, SCUR + 24'(SCU_DMA_CTL), {16'(VL), 7'd0, 1'b0, 5'd0, 3'd1}, rd);
    bus(n, 0, SCUR + 24'h01, p[n * VL], rd);
    for (int k = 0; k < VL; k++) bus(n, 0, SCUR + 24'h00, p[n * VL + k], rd);
    bus(n, 1, SCUR + 24'h00, 0, pup[n]);
    do begin repeat (10) @(posedge clk); #1; bus(n, 1, SCUR + 24'(SCU_DMA_CTL), 0, rd); end
    while (rd[31]);
  endtask

  // step 3, one node: p through the circular buffer, A p to DRAM, local dot products
  task automatic apply(int n);
    logic [31:0] rd, pk, left, right, v, below_top, acc_pap, acc_rr;
    bus(n, 0, CBC + 24'(CB_ADDR), 32'(P), rd);
    bus(n, 0, CBC + 24'(CB_CMD), {18'd0, 6'(VL), 3'd0, 5'd0}, rd);
    bus(n, 0, CBC + 24'(CB_ADDR), 32'(R), rd);
    bus(n, 0, CBC + 24'(CB_CMD), {18'd0, 6'(VL), 3'd0, 5'd16}, rd);
    bus(n, 1, PBELOW + 24'(VL - 1), 0, below_top);
    acc_pap = 0;
    acc_rr = 0;
    for (int k = 0; k < VL; k++) begin
      bus(n, 1, CBD + 24'(k), 0, pk);
      if (k == 0) left = below_top; else bus(n, 1, CBD + 24'(k - 1), 0, left);
      if (k == VL - 1) right = pup[n]; else bus(n, 1, CBD + 24'(k + 1), 0, right);
      v = 4 * pk - left - right;
      bus(n, 0, AP + 24'(k), v, rd);
      acc_pap += pk * v;
      bus(n, 1, CBD + 24'(16 + k), 0, rd);
      acc_rr += rd * rd;
    end
    loc_pap[n] = acc_pap;
    loc_rr[n] = acc_rr;
  endtask

  // step 5, one node
  task automatic update(int n, logic [31:0] alpha);
    logic [31:0] rd, v;
    for (int k = 0; k < VL; k++) begin
      bus(n, 1, X + 24'(k), 0, v);
      bus(n, 0, X + 24'(k), v + alpha * p[n * VL + k], rd);
      bus(n, 1, R + 24'(k), 0, v);
      bus(n, 1, AP + 24'(k), 0, rd);
      bus(n, 0, R + 24'(k), v - alpha * rd, rd);
    end
  endtask

  logic [31:0] rd;
  longint t0;
  initial begin
    logic [31:0] ref_pap, ref_rr, alpha;
    for (int i = 0; i < N; i++) begin strb[i] = 0; rw[i] = 1; addr[i] = 0; wdata[i] = 0; end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // step 1: r = b (random), x = 0, p = r
    for (int g = 0; g < N * VL; g++) begin
      r[g] = $urandom_range(0, 200) - 100;
      p[g] = r[g];
      x[g] = 0;
    end
    for (int n = 0; n < N; n++) begin
      fork
        automatic int nn = n;
        automatic logic [31:0] wr;
        for (int k = 0; k < VL; k++) begin
          bus(nn, 0, P + 24'(k), p[nn * VL + k], wr);
          bus(nn, 0, R + 24'(k), r[nn * VL + k], wr);
          bus(nn, 0, X + 24'(k), 0, wr);
        end
      join_none
    end
    wait fork;

    // reference
    ref_pap = 0;
    ref_rr = 0;
    for (int g = 0; g < N * VL; g++) begin
      ap[g] = 4 * p[g] - p[(g + N * VL - 1) % (N * VL)] - p[(g + 1) % (N * VL)];
      ref_pap += p[g] * ap[g];
      ref_rr += r[g] * r[g];
    end
    alpha = (ref_pap == 0) ? 0 : 32'($signed(ref_rr) / $signed(ref_pap));
    if (alpha == 0) alpha = 1;   // keep the update visible for small random data

    // step 2
    t0 = $time;
    for (int n = 0; n < N; n++) fork automatic int nn = n; exchange(nn); join_none
    wait fork;
    $display("boundary exchange: %0d cycles", ($time - t0) / 40);
    for (int n = 0; n < N; n++) begin
      chk(pup[n] == p[((n + 1) % N) * VL], $sformatf("node %0d p(0) from above", n));
      for (int k = 0; k < VL; k++) begin
        bus(n, 1, PBELOW + 24'(k), 0, rd);
        chk(rd == p[((n + N - 1) % N) * VL + k], $sformatf("node %0d p(%0d) from below by DMA", n, k));
      end
    end

    // step 3
    t0 = $time;
    for (int n = 0; n < N; n++) fork automatic int nn = n; apply(nn); join_none
    wait fork;
    $display("A p and local products: %0d cycles", ($time - t0) / 40);
    for (int n = 0; n < N; n++)
      for (int k = 0; k < VL; k++) begin
        bus(n, 1, AP + 24'(k), 0, rd);
        chk(rd == ap[n * VL + k], $sformatf("node %0d A p(%0d)", n, k));
      end

    // step 4
    t0 = $time;
    global_sum(loc_pap, got_pap);
    global_sum(loc_rr, got_rr);
    $display("two global sums with broadcast: %0d cycles", ($time - t0) / 40);
    for (int n = 0; n < N; n++) begin
      chk(got_pap[n] == ref_pap, $sformatf("node %0d (p, A p)", n));
      chk(got_rr[n] == ref_rr, $sformatf("node %0d (r, r)", n));
    end

    // step 5: every node forms alpha from what it received
    for (int n = 0; n < N; n++) fork
      automatic int nn = n;
      automatic logic [31:0] a = (got_pap[n] == 0) ? 0 : 32'($signed(got_rr[n]) / $signed(got_pap[n]));
      update(nn, (a == 0) ? 32'd1 : a);
    join_none
    wait fork;
    for (int n = 0; n < N; n++)
      for (int k = 0; k < VL; k++) begin
        bus(n, 1, X + 24'(k), 0, rd);
        chk(rd == alpha * p[n * VL + k], $sformatf("node %0d x(%0d)", n, k));
        bus(n, 1, R + 24'(k), 0, rd);
        chk(rd == r[n * VL + k] - alpha * ap[n * VL + k], $sformatf("node %0d r(%0d)", n, k));
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
