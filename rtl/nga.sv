// nga: the Node Gate Array, the custom chip of one node of the machine. One node is a
// DSP, its DRAM and an NGA; 16,384 nodes are joined into a 16x16x16x4 four-dimensional
// mesh by the serial wires of the NGAs.
//
// The NGA holds the four units of its block diagram: the DSP I/O controller (dsp_io),
// which decodes the DSP bus; the Serial Communication Unit (scu) with its eight links,
// which resend words hit by errors on the wires,
// and on-the-fly global add/max/broadcast; the 32-word Circular Buffer (circ_buf),
// which prefetches DRAM words for zero-wait DSP reads; and the DRAM I/O with EDC
// (dram_ctrl), which runs the 39-bit DRAM bus and corrects errors. The DSP, the circular
// buffer and the SCU all reach DRAM through one round-robin arbiter (mem_arbiter),
// requesters 0, 1 and 2 in that order.
//
// Ports: the DSP bus (see dsp_io), the DRAM pins (see dram_ctrl) and the serial links
// sin/sout, link d being dimension d/2, + sense for even d and - sense for odd d. A
// node's sout[d] is wired to the sin of the opposite link (d xor 1) of its neighbour.
// All units share one clock, which is the DSP's 25 MHz cycle, and one active-low reset.
module nga
  import nga_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // DSP bus
  input  logic               dsp_strb,
  input  logic               dsp_rw,
  input  logic [DSP_AW-1:0]  dsp_addr,
  input  logic [DATA_W-1:0]  dsp_wdata,
  output logic [DATA_W-1:0]  dsp_rdata,
  output logic               dsp_rdy,
  // DRAM
  output logic [9:0]         dram_a,
  output logic               dram_ras_n,
  output logic               dram_cas_n,
  output logic               dram_we_n,
  output logic               dram_oe_n,
  output logic [CODE_W-1:0]  dram_dq_o,
  output logic               dram_dq_oe,
  input  logic [CODE_W-1:0]  dram_dq_i,
  // serial network
  input  logic [NLINK-1:0]   sin,
  output logic [NLINK-1:0]   sout,
  // events, for monitoring
  output logic               cmb_done,
  output logic               cb_stall
);
  mem_req_t [2:0] mreq;
  mem_rsp_t [2:0] mrsp;
  mem_req_t       dreq;
  mem_rsp_t       drsp;
  logic [2:0]     grant;

  reg_req_t cbd_req, cbc_req, scu_req;
  reg_rsp_t cbd_rsp, cbc_rsp, scu_rsp;

  logic [15:0]       sec_count, ded_count;
  logic [MEM_AW-1:0] err_addr;

  dsp_io u_dsp_io (
    .clk, .rst_n,
    .strb(dsp_strb), .rw(dsp_rw), .addr(dsp_addr), .wdata(dsp_wdata),
    .rdata(dsp_rdata), .rdy(dsp_rdy),
    .mreq(mreq[0]), .mrsp(mrsp[0]),
    .cbd_req, .cbd_rsp, .cbc_req, .cbc_rsp, .scu_req, .scu_rsp,
    .sec_count, .ded_count, .err_addr
  );

  circ_buf u_cb (
    .clk, .rst_n,
    .ctl_req(cbc_req), .ctl_rsp(cbc_rsp), .dat_req(cbd_req), .dat_rsp(cbd_rsp),
    .mreq(mreq[1]), .mrsp(mrsp[1]), .stall(cb_stall)
  );

  scu u_scu (
    .clk, .rst_n, .sin, .sout,
    .req(scu_req), .rsp(scu_rsp),
    .mreq(mreq[2]), .mrsp(mrsp[2]), .cmb_done
  );

  mem_arbiter #(.N(3)) u_arb (
    .clk, .rst_n, .req(mreq), .rsp(mrsp), .mreq(dreq), .mrsp(drsp), .grant
  );

  dram_ctrl u_dram (
    .clk, .rst_n, .req(dreq), .rsp(drsp),
    .dram_a, .dram_ras_n, .dram_cas_n, .dram_we_n, .dram_oe_n,
    .dram_dq_o, .dram_dq_oe, .dram_dq_i,
    .sec_count, .ded_count, .err_addr
  );
endmodule
