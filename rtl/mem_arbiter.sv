// mem_arbiter: shares the single DRAM port among several requesters.
//
// The NGA has one DRAM and three users of it: the DSP's direct accesses, the circular
// buffer's prefetches and the SCU's DMA. That the NGA arbitrates memory accesses is the
// design's; the policy is this implementation's: round-robin, so that no requester can
// be starved, and a grant held from the cycle it is given until the controller returns
// `done`. When idle the arbiter grants in the same cycle a request appears (no added
// latency). Requester i keeps its request steady until its own `done`.
module mem_arbiter
  import nga_pkg::*;
#(
  parameter int unsigned N = 3
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  mem_req_t [N-1:0]     req,
  output mem_rsp_t [N-1:0]     rsp,
  output mem_req_t             mreq,     // towards the DRAM controller
  input  mem_rsp_t             mrsp,
  output logic [N-1:0]         grant     // one-hot, which requester owns the port
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic          busy_q;
  logic [IW-1:0] owner_q, last_q, pick;
  logic          any;

  // round-robin choice, starting after the last one served
  always_comb begin
    pick = last_q;
    any  = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!any && req[c].valid) begin
        pick = IW'(c);
        any  = 1'b1;
      end
    end
  end

  logic [IW-1:0] cur;
  logic          active;
  always_comb begin
    cur    = busy_q ? owner_q : pick;
    active = busy_q | any;
    grant  = '0;
    if (active) grant[cur] = 1'b1;
    mreq   = active ? req[cur] : '0;
    for (int unsigned i = 0; i < N; i++) begin
      rsp[i]      = mrsp;
      rsp[i].done = mrsp.done && active && (cur == IW'(i));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q  <= 1'b0;
      owner_q <= '0;
      last_q  <= IW'(N - 1);
    end else begin
      if (active && mrsp.done) begin
        busy_q <= 1'b0;
        last_q <= cur;
      end else if (!busy_q && any) begin
        busy_q  <= 1'b1;
        owner_q <= pick;
      end
    end
  end

  // a request once granted must stay up until its transaction ends
  property p_hold;
    @(posedge clk) disable iff (!rst_n) (busy_q && !mrsp.done) |-> req[owner_q].valid;
  endproperty
  a_hold: assert property (p_hold);
endmodule
