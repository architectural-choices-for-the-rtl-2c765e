// tb_mem_arbiter: three requesters issue random reads and writes to a fake memory that
// answers after a random 1-4 cycles with data derived from the address. Checks: every
// response goes to the requester that asked, carries that requester's data, no grant
// is taken away before `done`, and with all three waiting the grants rotate 0,1,2.
`timescale 1ns/1ps
module tb_mem_arbiter;
  import nga_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  mem_req_t [2:0] req;
  mem_req_t rq [3];
  always_comb for (int i = 0; i < 3; i++) req[i] = rq[i];
  mem_rsp_t [2:0] rsp;
  mem_req_t mreq;
  mem_rsp_t mrsp;
  logic [2:0] grant;
  int checks = 0, failures = 0;

  mem_arbiter #(.N(3)) dut (.clk, .rst_n, .req, .rsp, .mreq, .mrsp, .grant);

  // fake memory: answers after a random delay, done for one cycle
  int unsigned wait_q = 0;
  logic busy_q = 0;
  always_ff @(posedge clk) begin
    mrsp <= '0;
    if (!busy_q && mreq.valid && !mrsp.done) begin
      busy_q <= 1;
      wait_q <= $urandom_range(1, 4);
    end else if (busy_q) begin
      if (wait_q == 1) begin
        busy_q      <= 0;
        mrsp.done   <= 1;
        mrsp.rdata  <= {14'h0, mreq.addr} ^ 32'h5A5A_0000;
      end
      wait_q <= wait_q - 1;
    end
  end

  task automatic chk(bit c, string s);
    checks++;
    if (!c) begin failures++; if (failures < 10) $display("FAIL %s @%0t", s, $time); end
  endtask

  int served [3];
  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // each requester: random transactions
  for (genvar i = 0; i < 3; i++) begin : g_req
    initial begin
      rq[i] = '0;
      @(posedge rst_n);
      repeat (60) begin
        repeat ($urandom_range(0, 3)) @(posedge clk);
        rq[i].valid <= 1;
        rq[i].we    <= $urandom_range(1);
        rq[i].addr  <= MEM_AW'({i[1:0], 16'($urandom)});
        @(posedge clk);
        while (!rsp[i].done) begin
          chk(rq[i].valid, "held");
          @(posedge clk);
        end
        chk(rsp[i].rdata == ({14'h0, req[i].addr} ^ 32'h5A5A_0000), $sformatf("data to %0d", i));
        served[i]++;
        rq[i].valid <= 0;
      end
    end
  end

  // no response reaches a requester that is not the current owner / not asking
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < 3; i++) if (rsp[i].done) chk(req[i].valid && grant[i], "done to owner");
    if (mrsp.done) chk($onehot(grant), "onehot grant");
  end

  // rotation check with all three waiting
  logic [1:0] order [$];
  always @(posedge clk) if (rst_n && mrsp.done) order.push_back(grant[0] ? 2'd0 : grant[1] ? 2'd1 : 2'd2);

  initial begin
    rst_n = 0;
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (served[0] == 60 && served[1] == 60 && served[2] == 60);
    chk(1, "all served");
    // phase 2: all three request continuously; grants must rotate
    repeat (5) @(posedge clk);
    order.delete();
    fork
      for (int i = 0; i < 3; i++) begin
        automatic int k = i;
        fork
          begin
            repeat (4) begin
              rq[k].valid <= 1; rq[k].we <= 0; rq[k].addr <= MEM_AW'(k);
              @(posedge clk);
              while (!rsp[k].done) @(posedge clk);
              rq[k].valid <= 0;
            end
          end
        join_none
      end
    join
    repeat (200) @(posedge clk);
    chk(order.size() == 12, $sformatf("12 served (%0d)", order.size()));
    for (int n = 1; n < order.size() - 2; n++)
      chk(order[n] == 2'((order[n-1] + 1) % 3), "round robin");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
