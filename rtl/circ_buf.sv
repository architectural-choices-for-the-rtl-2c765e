// circ_buf: the 32-word Circular Buffer, a prefetch stage between the slow DRAM and the
// DSP.
//
// The DSP tells the buffer to prefetch COUNT words from DRAM, starting at the address in
// the CB_ADDR register, into buffer entries START, START+1, ... (modulo DEPTH, hence
// "circular"). The buffer then fetches them through its memory port while the DSP does
// other work, and the DSP later reads any entry by its index with no wait states. Every
// entry has a valid bit: a prefetch clears the bits of the entries it will fill and sets
// each again when its word arrives. With protection on (the reset state) a DSP read of an
// entry that is not valid is held in wait states until the word arrives; with protection
// off the read returns at once whatever the entry holds. 32 entries hold the 18 real
// numbers of an SU(3) colour matrix with room to spare.
//
// Registers (ctl port): CB_ADDR (DRAM address, advanced by COUNT after each prefetch so
// that consecutive prefetches stream through memory), CB_CMD (write {COUNT[13:8],
// START[4:0]} to start a prefetch, held in wait states while one is still running; read
// {busy[31], remaining[21:16], next index[4:0]}), CB_PROT (bit 0). Data port: addr[4:0]
// is the entry index; writes are ignored.
//
// From the design: 32 words, prefetch of a chosen number of words, zero-wait reads,
// protection of invalid locations that can be switched off. The register layout, the
// start index, the stalling of a second command and the address auto-advance are this
// implementation's choices.
module circ_buf
  import nga_pkg::*;
#(
  parameter int unsigned DEPTH = CB_DEPTH
) (
  input  logic      clk,
  input  logic      rst_n,
  input  reg_req_t  ctl_req,
  output reg_rsp_t  ctl_rsp,
  input  reg_req_t  dat_req,
  output reg_rsp_t  dat_rsp,
  output mem_req_t  mreq,
  input  mem_rsp_t  mrsp,
  output logic      stall       // a protected read is waiting (for status/statistics)
);
  localparam int unsigned IW = $clog2(DEPTH);

  logic [DATA_W-1:0]  mem_q [DEPTH];
  logic [DEPTH-1:0]   vld_q;
  logic               prot_q;
  logic [MEM_AW-1:0]  base_q;     // CB_ADDR register
  logic [MEM_AW-1:0]  faddr_q;    // address of the next word to fetch
  logic [IW-1:0]      widx_q;
  logic [IW:0]        rem_q;
  logic               busy;

  always_comb busy = (rem_q != '0);

  // command decode
  logic        cmd_wr, cmd_ok;
  logic [IW:0] cmd_cnt;
  logic [IW-1:0] cmd_start;
  always_comb begin
    cmd_wr    = ctl_req.valid && ctl_req.we && ctl_req.addr == CB_CMD;
    cmd_ok    = cmd_wr && !busy;
    cmd_cnt   = (ctl_req.wdata[13:8] > 6'(DEPTH)) ? (IW+1)'(DEPTH) : (IW+1)'(ctl_req.wdata[13:8]);
    cmd_start = ctl_req.wdata[IW-1:0];
  end

  always_comb begin
    ctl_rsp.rdy   = ctl_req.valid && !(cmd_wr && busy);
    ctl_rsp.rdata = '0;
    unique case (ctl_req.addr)
      CB_ADDR: ctl_rsp.rdata = DATA_W'(base_q);
      CB_CMD:  ctl_rsp.rdata = {busy, 9'd0, 6'(rem_q), 11'd0, 5'(widx_q)};
      CB_PROT: ctl_rsp.rdata = DATA_W'(prot_q);
      default: ctl_rsp.rdata = '0;
    endcase
  end

  logic [IW-1:0] ridx;
  always_comb begin
    ridx          = dat_req.addr[IW-1:0];
    dat_rsp.rdata = mem_q[ridx];
    dat_rsp.rdy   = dat_req.valid && (dat_req.we || !prot_q || vld_q[ridx]);
    stall         = dat_req.valid && !dat_rsp.rdy;
  end

  always_comb begin
    mreq.valid = busy;
    mreq.we    = 1'b0;
    mreq.addr  = faddr_q;
    mreq.wdata = '0;
  end

  // entries a new command will fill
  logic [DEPTH-1:0] clr_mask;
  always_comb begin
    clr_mask = '0;
    for (int unsigned k = 0; k < DEPTH; k++)
      if (k < int'(cmd_cnt)) clr_mask[(int'(cmd_start) + k) % DEPTH] = 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld_q   <= '0;
      prot_q  <= 1'b1;
      base_q  <= '0;
      faddr_q <= '0;
      widx_q  <= '0;
      rem_q   <= '0;
    end else begin
      if (ctl_req.valid && ctl_req.we && ctl_req.addr == CB_ADDR) base_q <= ctl_req.wdata[MEM_AW-1:0];
      if (ctl_req.valid && ctl_req.we && ctl_req.addr == CB_PROT) prot_q <= ctl_req.wdata[0];
      if (cmd_ok) begin
        vld_q   <= vld_q & ~clr_mask;
        faddr_q <= base_q;
        base_q  <= base_q + MEM_AW'(cmd_cnt);
        widx_q  <= cmd_start;
        rem_q   <= cmd_cnt;
      end else if (busy && mrsp.done) begin
        vld_q[widx_q] <= 1'b1;
        faddr_q <= faddr_q + MEM_AW'(1);
        widx_q  <= widx_q + IW'(1);
        rem_q   <= rem_q - (IW+1)'(1);
      end
    end
  end

  always_ff @(posedge clk) begin
    if (busy && mrsp.done) mem_q[widx_q] <= mrsp.rdata;
  end
endmodule
