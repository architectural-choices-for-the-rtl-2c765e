// tb_scu: four SCUs joined in a ring along dimension 0 (node i's + link to node i+1's -
// link); the links of the other dimensions of each node loop back to the node itself.
// Each node has a fake memory. Exercised through the register interface:
//  - a word sent to a neighbour arrives intact after one frame time (36 + 1 cycles);
//  - a global sum: node 0 sends its value as a global frame, nodes 1-3 add theirs on
//    the fly and node 0
//    receives the total; the whole ring takes one frame time plus one cycle per node,
//    far less than four frame times; the total is then broadcast and every node reads it;
//  - the same for the signed maximum with most-significant-bit-first links;
//  - a DMA block of 8 words from node 2's memory arrives, by DMA, in node 1's memory;
//  - a word sent while the neighbour's last one is unread is refused (refused bit set)
//    and resent by the sender until it is taken, so no word is lost;
//  - a bit flipped in a data frame sets the parity error bit, and the word is resent
//    and arrives intact;
//  - a bit flipped in an acknowledge makes the sender resend after its timeout; the
//    receiver takes the repeat as a duplicate, so the word arrives exactly once;
//  - the retransmission counter counts each resend.
`timescale 1ns/1ps
module tb_scu;
  import nga_pkg::*;
  localparam int N = 4;
  logic clk = 0, rst_n = 0;
  always #20 clk = ~clk;

  logic [7:0] sin [N], sout [N];
  reg_req_t  req [N];
  reg_rsp_t  rsp [N];
  mem_req_t  mreq [N];
  mem_rsp_t  mrsp [N];
  logic      cdone [N];
  logic      flip_wire = 0;    // corrupts the wire from node 0 to node 1
  logic      flip_back = 0;    // corrupts the wire from node 1 to node 0
  int checks = 0, failures = 0;

  for (genvar i = 0; i < N; i++) begin : g_node
    scu u_scu (.clk, .rst_n, .sin(sin[i]), .sout(sout[i]), .req(req[i]), .rsp(rsp[i]),
               .mreq(mreq[i]), .mrsp(mrsp[i]), .cmb_done(cdone[i]));
    mem_fake #(.LAT(4)) u_mem (.clk, .req(mreq[i]), .rsp(mrsp[i]));
    always_comb begin
      sin[i][0] = sout[(i + 1) % N][1] ^ (flip_back && i == 0); // + link from the node above
      sin[i][1] = sout[(i + N - 1) % N][0] ^ (flip_wire && i == 1); // - link from below
      for (int d = 2; d < 8; d++) sin[i][d] = sout[i][d ^ 1];
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  int waits;
  task automatic acc(int n, logic we, logic [7:0] ad, logic [31:0] wd, output logic [31:0] rd);
    req[n].valid = 1; req[n].we = we; req[n].addr = ad; req[n].wdata = wd;
    waits = 0;
    #1;
    while (!rsp[n].rdy) begin @(posedge clk); #1; waits++; end
    rd = rsp[n].rdata;
    @(posedge clk); #1;
    req[n] = '0;
  endtask

  initial begin
    #5ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] rd;
  logic [31:0] v [N];
  longint t0, t1;
  initial begin
    for (int i = 0; i < N; i++) req[i] = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk); #1;

    // neighbour transfer, both senses
    t0 = $time;
    acc(0, 1, 8'h00, 32'hCAFE_0001, rd);          // node 0, + link
    acc(1, 0, 8'h01, 0, rd);                       // node 1, - link
    t1 = $time;
    chk(rd == 32'hCAFE_0001, "neighbour word");
    chk((t1 - t0) / 40 >= 37 && (t1 - t0) / 40 <= 40, $sformatf("neighbour time %0d", (t1 - t0) / 40));
    acc(3, 1, 8'h01, 32'h1234_4321, rd);          // node 3, - link -> node 2 + link
    acc(2, 0, 8'h00, 0, rd);
    chk(rd == 32'h1234_4321, "neighbour word minus sense");
    acc(1, 1, 8'h04, 32'h0BAD_F00D, rd);          // dimension 2 loops back
    acc(1, 0, 8'h05, 0, rd);
    chk(rd == 32'h0BAD_F00D, "loopback link");

    // global sum around the ring
    for (int i = 0; i < N; i++) v[i] = $urandom;
    for (int i = 1; i < N; i++) begin
      acc(i, 1, SCU_CMB_LOC, v[i], rd);
      acc(i, 1, SCU_CMB_CTL, {16'd0, 8'h01, 1'b0, 3'd1, 2'b0, OP_ADD}, rd);
    end
    acc(0, 1, SCU_CMB_LOC, v[0], rd);
    t0 = $time;
    acc(0, 1, SCU_CMB_SND, 32'h01, rd);
    acc(0, 0, 8'h01, 0, rd);
    t1 = $time;
    chk(rd == v[0] + v[1] + v[2] + v[3], "global sum");
    chk((t1 - t0) / 40 <= 36 + N + 3, $sformatf("sum latency %0d cycles", (t1 - t0) / 40));
    for (int i = 1; i < N; i++) begin
      acc(i, 0, SCU_CMB_RES, 0, rd);
      chk(rd == v[0] + (i >= 1 ? v[1] : 0) + (i >= 2 ? v[2] : 0) + (i >= 3 ? v[3] : 0), "partial sum");
    end
    // broadcast the total
    begin
      logic [31:0] s;
      s = v[0] + v[1] + v[2] + v[3];
      for (int i = 1; i < N; i++)
        acc(i, 1, SCU_CMB_CTL, {16'd0, (i == N - 1) ? 8'h00 : 8'h01, 1'b0, 3'd1, 2'b0, OP_BCAST}, rd);
      acc(0, 1, SCU_CMB_LOC, s, rd);
      acc(0, 1, SCU_CMB_SND, 32'h01, rd);
      for (int i = 1; i < N; i++) begin
        acc(i, 0, SCU_CMB_RES, 0, rd);
        chk(rd == s, $sformatf("broadcast at node %0d", i));
      end
    end

    // global maximum, most significant bit first
    for (int i = 0; i < N; i++) acc(i, 1, SCU_CFG, 1, rd);
    for (int r = 0; r < 3; r++) begin
      logic [31:0] m;
      for (int i = 0; i < N; i++) v[i] = (r == 1) ? 32'hF000_0000 | $urandom : $urandom;
      m = v[0];
      for (int i = 1; i < N; i++) if ($signed(v[i]) > $signed(m)) m = v[i];
      for (int i = 1; i < N; i++) begin
        acc(i, 1, SCU_CMB_LOC, v[i], rd);
        acc(i, 1, SCU_CMB_CTL, {16'd0, 8'h01, 1'b0, 3'd1, 2'b0, OP_MAX}, rd);
      end
      acc(0, 1, SCU_CMB_LOC, v[0], rd);
      acc(0, 1, SCU_CMB_SND, 32'h01, rd);
      acc(0, 0, 8'h01, 0, rd);
      chk(rd == m, $sformatf("global max %h exp %h", rd, m));
    end
    for (int i = 0; i < N; i++) acc(i, 1, SCU_CFG, 0, rd);

    // DMA: node 2 sends 8 words from 0x100 on its - link, node 1 stores them at 0x200
    for (int k = 0; k < 8; k++) g_node[2].u_mem.poke(32'h100 + k, 32'h5000_0000 + 32'(k * 7));
    acc(1, 1, SCU_DMA_ADR, 32'h200, rd);
    acc(1, 1, SCU_DMA_CTL, {16'd8, 7'd0, 1'b0, 5'd0, 3'd0}, rd);
    acc(2, 1, SCU_DMA_ADR, 32'h100, rd);
    acc(2, 1, SCU_DMA_CTL, {16'd8, 7'd0, 1'b1, 5'd0, 3'd1}, rd);
    do begin repeat (10) @(posedge clk); #1; acc(1, 0, SCU_DMA_CTL, 0, rd); end while (rd[31]);
    for (int k = 0; k < 8; k++)
      chk(g_node[1].u_mem.peek(32'h200 + k) == 32'h5000_0000 + 32'(k * 7), $sformatf("DMA word %0d", k));
    acc(2, 0, SCU_DMA_CTL, 0, rd);
    chk(!rd[31] && rd[15:0] == 0, "sender DMA done");

    // refusal: two words to node 1 without reading; the second waits at node 0
    acc(0, 0, SCU_RETRY, 0, rd);
    chk(rd == 0, "no retransmissions yet");
    acc(0, 1, 8'h00, 32'h1, rd);
    acc(0, 1, 8'h00, 32'h2, rd);
    repeat (200) @(posedge clk); #1;
    acc(1, 0, SCU_STATUS, 0, rd);
    chk(rd[24 + 1] && rd[1], "refusal flagged");
    acc(0, 0, SCU_STATUS, 0, rd);
    chk(rd[8 + 0], "sender still holds the word");
    acc(0, 0, SCU_RETRY, 0, rd);
    chk(rd >= 2, $sformatf("refused word resent (%0d)", rd));
    acc(1, 0, 8'h01, 0, rd);
    chk(rd == 32'h1, "first word kept");
    acc(1, 0, 8'h01, 0, rd);
    chk(rd == 32'h2, "second word delivered after the read");
    acc(1, 1, SCU_STATUS, 0, rd);
    acc(1, 0, SCU_STATUS, 0, rd);
    chk(rd[31:16] == 0 && rd[7:0] == 0, "status cleared");

    // parity error in a data frame: flagged, word resent and delivered intact
    acc(0, 0, SCU_RETRY, 0, rd);
    t0 = rd;
    fork
      acc(0, 1, 8'h00, 32'h0F0F_0F0F, rd);
      begin repeat (10) @(posedge clk); #1; flip_wire = 1; @(posedge clk); #1; flip_wire = 0; end
    join
    acc(1, 0, 8'h01, 0, rd);
    chk(rd == 32'h0F0F_0F0F, "word intact after a wire error");
    acc(1, 0, SCU_STATUS, 0, rd);
    chk(rd[16 + 1], "parity error flagged");
    acc(0, 0, SCU_RETRY, 0, rd);
    chk(rd == t0 + 1, "one retransmission");
    acc(1, 1, SCU_STATUS, 0, rd);

    // corrupted acknowledge: resent after the timeout, taken once
    acc(0, 0, SCU_RETRY, 0, rd);
    t0 = rd;
    repeat (20) @(posedge clk); #1;   // the last acknowledge has gone
    fork
      acc(0, 1, 8'h00, 32'hA5A5_0001, rd);
      begin
        wait (g_node[1].u_scu.tx_busy[1]);
        repeat (3) @(posedge clk); #1; flip_back = 1; @(posedge clk); #1; flip_back = 0;
      end
    join
    repeat (250) @(posedge clk); #1;
    acc(0, 0, SCU_STATUS, 0, rd);
    chk(!rd[8 + 0], "word acknowledged after the resend");
    acc(0, 0, SCU_RETRY, 0, rd);
    chk(rd == t0 + 1, $sformatf("resent once after the timeout (%0d, %0d)", rd, t0));
    acc(1, 0, 8'h01, 0, rd);
    chk(rd == 32'hA5A5_0001, "word after a lost acknowledge");
    acc(1, 0, SCU_STATUS, 0, rd);
    chk(!rd[1], "duplicate discarded");
    acc(0, 1, 8'h00, 32'hA5A5_0002, rd);
    acc(1, 0, 8'h01, 0, rd);
    chk(rd == 32'hA5A5_0002, "next word after the duplicate");
    acc(0, 0, SCU_STATUS, 0, rd);
    chk(rd[23:16] == 0, "acknowledge errors not reported as data errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
