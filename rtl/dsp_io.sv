// dsp_io: the DSP I/O controller. Decodes each access of the DSP's external bus and
// hands it to the unit that owns the address: DRAM (through the memory arbiter), the
// circular buffer's data window, its control registers, the SCU's registers or the
// NGA's own status registers; and returns that unit's data and ready.
//
// Bus (modelled on the TMS320C30 external bus, simplified): the DSP raises `strb` with
// `rw` (1 = read), `addr` and `wdata`, holds them, and the access ends in the cycle
// `rdy` is high, which may be the first one (zero wait states). `rdata` is valid in that
// cycle. Address map (24-bit word addresses):
//   0x000000-0x7FFFFF  DRAM, word address = addr[18:0] (512k words with 512k x 8 parts,
//                      256k with 256k x 16 parts; higher addresses alias)
//   0x8000xx           circular buffer entries, xx = index (0..31)
//   0x8001xx           circular buffer registers
//   0x8002xx           SCU registers
//   0x8003xx           NGA status: 0 single errors corrected, 1 double errors,
//                      2 address of the last error, 3 sticky flags {uncorrectable word
//                      returned to the DSP[1], unmapped address accessed[0]}; a write
//                      to 3 clears the flags
//   other              unmapped: completes at once, reads 0, sets a flag
// From the design: the unit's name and place (Fig. 2, between the DSP and the SCU,
// circular buffer and DRAM) and that the NGA decodes the DSP address bus. The address
// map and the bus timing are this implementation's choices.
module dsp_io
  import nga_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  // DSP bus
  input  logic               strb,
  input  logic               rw,
  input  logic [DSP_AW-1:0]  addr,
  input  logic [DATA_W-1:0]  wdata,
  output logic [DATA_W-1:0]  rdata,
  output logic               rdy,
  // units
  output mem_req_t           mreq,
  input  mem_rsp_t           mrsp,
  output reg_req_t           cbd_req,
  input  reg_rsp_t           cbd_rsp,
  output reg_req_t           cbc_req,
  input  reg_rsp_t           cbc_rsp,
  output reg_req_t           scu_req,
  input  reg_rsp_t           scu_rsp,
  // status inputs from DRAM I/O
  input  logic [15:0]        sec_count,
  input  logic [15:0]        ded_count,
  input  logic [MEM_AW-1:0]  err_addr
);
  typedef enum logic [2:0] {T_DRAM, T_CBD, T_CBC, T_SCU, T_STAT, T_NONE} tgt_e;

  tgt_e     tgt;
  reg_req_t r;
  logic     uncorr_seen_q, unmapped_q;

  always_comb begin
    if (!addr[DSP_AW-1])                       tgt = T_DRAM;
    else if (addr[DSP_AW-2:8] == 15'h0000)     tgt = T_CBD;
    else if (addr[DSP_AW-2:8] == 15'h0001)     tgt = T_CBC;
    else if (addr[DSP_AW-2:8] == 15'h0002)     tgt = T_SCU;
    else if (addr[DSP_AW-2:8] == 15'h0003)     tgt = T_STAT;
    else                                       tgt = T_NONE;

    r.valid = strb;
    r.we    = !rw;
    r.addr  = addr[7:0];
    r.wdata = wdata;

    cbd_req = '0;
    cbc_req = '0;
    scu_req = '0;
    mreq    = '0;
    rdy     = 1'b0;
    rdata   = '0;
    unique case (tgt)
      T_DRAM: begin
        mreq.valid = strb;
        mreq.we    = !rw;
        mreq.addr  = addr[MEM_AW-1:0];
        mreq.wdata = wdata;
        rdy        = mrsp.done;
        rdata      = mrsp.rdata;
      end
      T_CBD: begin cbd_req = r; rdy = cbd_rsp.rdy; rdata = cbd_rsp.rdata; end
      T_CBC: begin cbc_req = r; rdy = cbc_rsp.rdy; rdata = cbc_rsp.rdata; end
      T_SCU: begin scu_req = r; rdy = scu_rsp.rdy; rdata = scu_rsp.rdata; end
      T_STAT: begin
        rdy = strb;
        unique case (addr[1:0])
          2'd0: rdata = DATA_W'(sec_count);
          2'd1: rdata = DATA_W'(ded_count);
          2'd2: rdata = DATA_W'(err_addr);
          default: rdata = {30'd0, uncorr_seen_q, unmapped_q};
        endcase
      end
      default: rdy = strb;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      uncorr_seen_q <= 1'b0;
      unmapped_q    <= 1'b0;
    end else begin
      if (tgt == T_DRAM && strb && rw && mrsp.done && mrsp.uncorr) uncorr_seen_q <= 1'b1;
      if (tgt == T_NONE && strb) unmapped_q <= 1'b1;
      if (tgt == T_STAT && strb && !rw && addr[1:0] == 2'd3) begin
        uncorr_seen_q <= 1'b0;
        unmapped_q    <= 1'b0;
      end
    end
  end

  a_bus_stable: assert property (@(posedge clk) disable iff (!rst_n)
    (strb && !rdy) |=> (strb && $stable(addr) && $stable(rw)));
endmodule
