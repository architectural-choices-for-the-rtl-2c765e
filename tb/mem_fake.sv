// mem_fake: simple memory behind a mem_req_t/mem_rsp_t port for testbenches. Answers a
// request LAT cycles after it appears (done for one cycle); words never written read as
// their own address plus 0xA0000000. Tasks give the testbench direct access.
module mem_fake
  import nga_pkg::*;
#(
  parameter int unsigned LAT = 4
) (
  input  logic     clk,
  input  mem_req_t req,
  output mem_rsp_t rsp
);
  logic [31:0] mem [int unsigned];
  int unsigned cnt = 0;
  int unsigned accesses = 0;

  initial rsp = '0;

  always @(posedge clk) begin
    rsp <= '0;
    if (req.valid && !rsp.done) begin
      if (cnt == LAT - 1) begin
        cnt <= 0;
        accesses <= accesses + 1;
        rsp.done <= 1'b1;
        if (req.we) mem[req.addr] = req.wdata;
        else rsp.rdata <= mem.exists(req.addr) ? mem[req.addr] : 32'hA000_0000 + 32'(req.addr);
      end else cnt <= cnt + 1;
    end
  end

  function automatic logic [31:0] peek(int unsigned a);
    return mem.exists(a) ? mem[a] : 32'hA000_0000 + a;
  endfunction

  task automatic poke(int unsigned a, logic [31:0] v);
    mem[a] = v;
  endtask
endmodule
