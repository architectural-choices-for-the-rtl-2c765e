// scu: the Serial Communication Unit. Eight serial links (both senses of four
// dimensions) with error recovery, the on-the-fly add/max/broadcast unit and a DMA
// channel to DRAM.
//
// Link d (0..7) is dimension d/2, + sense when d is even, - sense when odd. Each link
// has a transmitter and a receiver (scu_tx, scu_rx; frame formats there). A node's
// sout[d] runs to the neighbour's sin[d^1] and back, so the acknowledge for a data frame
// sent on sout[d] comes back on sin[d].
//
// Error recovery. Ordinary words travel in data frames carrying a sequence bit, one word
// in flight per link (stop and wait). The receiver answers every data frame with an
// acknowledge frame on its own transmit wire: ok when the word was taken, or when it is a
// repeat of one already taken (same sequence bit, the earlier acknowledge was lost); not
// ok when the parity failed or when the receive buffer is still full. The sender keeps
// the word until an ok acknowledge with its sequence bit arrives, and sends it again on a
// not-ok acknowledge or after TIMEOUT cycles without an answer (a lost or corrupted
// acknowledge). A full receive buffer therefore holds the sender back instead of losing
// words. Words of global operations travel in global frames, which are not acknowledged:
// they are combined and passed on as they arrive, so they cannot be held back; a parity
// error in one is reported in the status register.
//
// Registers (reg_req_t; `rdy` may come in the same cycle; "waits" means wait states):
//   0x00+d  write: send the word on link d (waits while the link still holds a word)
//           read : take the word received on link d (waits until one has arrived)
//   0x10    STATUS read {refused/overrun[31:24], parity error[23:16], tx busy[15:8],
//           rx full[7:0]}; any write clears the refused/overrun and parity error bits
//   0x11    local word for the global operation
//   0x12    write {out mask[15:8], in link[6:4], op[1:0]}: arm the global operation;
//           the next frame on the in link is combined with the local word as it arrives
//           and sent on every link of the mask (waits while one is armed)
//   0x13    read: result of the global operation (waits until it is complete)
//   0x14    DMA DRAM address
//   0x15    write {count[31:16], send[8], link[2:0]}: start a DMA block that sends
//           `count` words from DRAM on the link, or writes the next `count` words
//           received on it to DRAM; read {busy[31], remaining[15:0]}
//   0x16    write {mask[7:0]}: send the local word as a global frame on the links of the
//           mask (starts a global operation; waits while an earlier one is unsent)
//   0x17    bit 0: most significant bit first on all links (set for OP_MAX)
//   0x18    read: number of retransmissions since reset
//
// From the design: the SCU's place in the NGA (between the DSP I/O controller and
// DRAM), serial links in eight directions, recovery from errors on the serial wires and
// the on-the-fly add, max and broadcast. The frame formats, the stop-and-wait recovery
// protocol, the register map, the single DMA channel and the receive buffering are this
// implementation's choices. Errors in a start or header bit (framing errors) are not
// guaranteed to be recovered. A frame already leaving an output link when a global
// operation is armed must end before the combined stream starts (a programming rule).
module scu
  import nga_pkg::*;
#(
  parameter int unsigned TIMEOUT = 128   // cycles without acknowledge before resending
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [NLINK-1:0]  sin,
  output logic [NLINK-1:0]  sout,
  input  reg_req_t          req,
  output reg_rsp_t          rsp,
  output mem_req_t          mreq,
  input  mem_rsp_t          mrsp,
  output logic              cmb_done    // pulse when a global operation completes
);
  // ---------------- links ----------------
  logic                     msb_first_q;
  logic [NLINK-1:0]         rx_fs, rx_bv, rx_bval, rx_wvalid, rx_perr;
  logic [4:0]               rx_bidx [NLINK];
  logic [1:0]               rx_hdr  [NLINK];
  logic [DATA_W-1:0]        rx_word [NLINK];
  logic [NLINK-1:0]         tx_load, tx_busy;
  logic [1:0]               tx_hdr  [NLINK];
  logic [DATA_W-1:0]        tx_word [NLINK];

  logic                     c_start, c_bv, c_bit, c_claim;
  logic [DATA_W-1:0]        c_result;
  logic [7:0]               c_omask_q;
  logic [2:0]               c_in_q;

  for (genvar d = 0; d < NLINK; d++) begin : g_link
    scu_rx u_rx (
      .clk, .rst_n, .msb_first(msb_first_q), .sin(sin[d]),
      .fs(rx_fs[d]), .bv(rx_bv[d]), .bval(rx_bval[d]), .bidx(rx_bidx[d]),
      .wvalid(rx_wvalid[d]), .hdr(rx_hdr[d]), .word(rx_word[d]), .perr(rx_perr[d])
    );
    scu_tx u_tx (
      .clk, .rst_n, .msb_first(msb_first_q),
      .load(tx_load[d]), .hdr(tx_hdr[d]), .word(tx_word[d]),
      .s_start(c_start && c_omask_q[d]), .s_bv(c_bv && c_omask_q[d]), .s_bit(c_bit),
      .sout(sout[d]), .busy(tx_busy[d])
    );
  end

  // ---------------- global operation ----------------
  logic              cmb_arm;
  scu_op_e           cmb_op;
  logic [DATA_W-1:0] cmb_loc_q;
  logic              cmb_res_vld_q;
  logic [NLINK-1:0]  gpend_q;         // global frames of the local word still to send
  logic [NLINK-1:0]  eat_q;           // frame being combined, until its end is received

  always_comb cmb_op = scu_op_e'(req.wdata[1:0]);

  scu_combine u_cmb (
    .clk, .rst_n, .arm(cmb_arm), .op(cmb_op), .local_word(cmb_loc_q),
    .msb_first(msb_first_q),
    .fs(rx_fs[c_in_q]), .bv(rx_bv[c_in_q]), .bval(rx_bval[c_in_q]), .bidx(rx_bidx[c_in_q]),
    .o_start(c_start), .o_bv(c_bv), .o_bit(c_bit), .claim(c_claim),
    .done(cmb_done), .result(c_result)
  );

  // ---------------- DMA ----------------
  typedef enum logic [1:0] {D_IDLE, D_READ, D_SEND, D_RECV} dma_state_e;
  dma_state_e         dst_q;
  logic [MEM_AW-1:0]  daddr_q;
  logic [15:0]        dcnt_q;
  logic [2:0]         dlink_q;
  logic [DATA_W-1:0]  dword_q;
  logic               dma_rx_pend_q;   // a received word waits to be written

  // ---------------- per-link sending state ----------------
  logic [NLINK-1:0]   pend_q;          // a data word is held until acknowledged
  logic [NLINK-1:0]   send_q;          // ... and must be (re)sent
  logic [NLINK-1:0]   seq_q;           // its sequence bit
  logic [DATA_W-1:0]  hold_q  [NLINK];
  logic [7:0]         tmr_q   [NLINK];
  logic [15:0]        retries_q;
  // ---------------- per-link receiving state ----------------
  logic [NLINK-1:0]   rseq_q;          // sequence bit expected next
  logic [NLINK-1:0]   ackp_q;          // an acknowledge is to be sent
  logic [1:0]         ackw_q  [NLINK]; // {seq, ok}
  logic [DATA_W-1:0]  rxbuf_q [NLINK];
  logic [NLINK-1:0]   rxfull_q, perr_q, ovr_q;

  // ---------------- register access ----------------
  logic        is_link, wr;
  logic [2:0]  lk;
  logic        dsp_rx_take, dsp_tx_put, dma_put, gsend;
  logic [NLINK-1:0] ld_ack, ld_glob, ld_data;

  always_comb begin
    is_link = (req.addr[7:3] == SCU_TXRX[7:3]);
    lk      = req.addr[2:0];
    wr      = req.valid && req.we;
  end

  always_comb begin
    rsp.rdy     = req.valid;
    rsp.rdata   = '0;
    cmb_arm     = 1'b0;
    dsp_rx_take = 1'b0;
    dsp_tx_put  = 1'b0;
    gsend       = 1'b0;
    if (is_link) begin
      if (wr) begin
        rsp.rdy    = !pend_q[lk] && !(dst_q == D_SEND && dlink_q == lk);
        dsp_tx_put = rsp.rdy;
      end else begin
        rsp.rdy     = req.valid && rxfull_q[lk];
        dsp_rx_take = rsp.rdy;
        rsp.rdata   = rxbuf_q[lk];
      end
    end else begin
      unique case (req.addr)
        SCU_STATUS:  rsp.rdata = {ovr_q, perr_q, pend_q | tx_busy, rxfull_q};
        SCU_CMB_LOC: rsp.rdata = cmb_loc_q;
        SCU_CMB_CTL: begin
          rsp.rdy   = req.valid && !(wr && c_claim);
          cmb_arm   = wr && !c_claim;
          rsp.rdata = {16'd0, c_omask_q, 1'b0, c_in_q, 4'd0};
        end
        SCU_CMB_RES: begin
          rsp.rdy   = req.valid && (wr || cmb_res_vld_q);
          rsp.rdata = c_result;
        end
        SCU_DMA_ADR: rsp.rdata = DATA_W'(daddr_q);
        SCU_DMA_CTL: begin
          rsp.rdy   = req.valid && !(wr && dst_q != D_IDLE);
          rsp.rdata = {(dst_q != D_IDLE), 15'd0, dcnt_q};
        end
        SCU_CMB_SND: begin
          rsp.rdy = req.valid && !(wr && gpend_q != '0);
          gsend   = wr && gpend_q == '0;
          rsp.rdata = DATA_W'(gpend_q);
        end
        SCU_CFG:     rsp.rdata = DATA_W'(msb_first_q);
        SCU_RETRY:   rsp.rdata = DATA_W'(retries_q);
        default:     rsp.rdata = '0;
      endcase
    end
    dma_put = (dst_q == D_SEND) && !pend_q[dlink_q];
  end

  // what each idle transmitter sends next: acknowledge, global word, data word. Nothing
  // is started on an output link of an armed global operation, whose stream may begin
  // at any cycle; a held acknowledge only makes the sender resend after its timeout.
  always_comb begin
    for (int d = 0; d < NLINK; d++) begin
      logic can;
      can        = !tx_busy[d] && !(c_claim && c_omask_q[d]);
      ld_ack[d]  = can && ackp_q[d];
      ld_glob[d] = can && !ackp_q[d] && gpend_q[d];
      ld_data[d] = can && !ackp_q[d] && !gpend_q[d] && pend_q[d] && send_q[d];
      tx_load[d] = ld_ack[d] || ld_glob[d] || ld_data[d];
      if (ld_ack[d]) begin
        tx_hdr[d]  = HDR_ACK;
        tx_word[d] = {30'd0, ackw_q[d]};
      end else if (ld_glob[d]) begin
        tx_hdr[d]  = HDR_GLOBAL;
        tx_word[d] = cmb_loc_q;
      end else begin
        tx_hdr[d]  = {1'b0, seq_q[d]};
        tx_word[d] = hold_q[d];
      end
    end
  end

  always_comb begin
    mreq.valid = (dst_q == D_READ) || (dst_q == D_RECV && dma_rx_pend_q);
    mreq.we    = (dst_q == D_RECV);
    mreq.addr  = daddr_q;
    mreq.wdata = dword_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      msb_first_q   <= 1'b0;
      cmb_loc_q     <= '0;
      cmb_res_vld_q <= 1'b0;
      c_omask_q     <= '0;
      c_in_q        <= '0;
      gpend_q       <= '0;
      eat_q         <= '0;
      pend_q        <= '0;
      send_q        <= '0;
      seq_q         <= '0;
      retries_q     <= '0;
      rseq_q        <= '0;
      ackp_q        <= '0;
      rxfull_q      <= '0;
      perr_q        <= '0;
      ovr_q         <= '0;
      dst_q         <= D_IDLE;
      daddr_q       <= '0;
      dcnt_q        <= '0;
      dlink_q       <= '0;
      dword_q       <= '0;
      dma_rx_pend_q <= 1'b0;
      for (int d = 0; d < NLINK; d++) begin
        rxbuf_q[d] <= '0;
        hold_q[d]  <= '0;
        tmr_q[d]   <= '0;
        ackw_q[d]  <= '0;
      end
    end else begin
      // registers
      if (wr && !is_link) begin
        unique case (req.addr)
          SCU_STATUS:  begin perr_q <= '0; ovr_q <= '0; end
          SCU_CMB_LOC: cmb_loc_q <= req.wdata;
          SCU_DMA_ADR: daddr_q <= req.wdata[MEM_AW-1:0];
          SCU_CFG:     msb_first_q <= req.wdata[0];
          default: ;
        endcase
      end
      if (cmb_arm) begin
        c_omask_q     <= req.wdata[15:8];
        c_in_q        <= req.wdata[6:4];
        cmb_res_vld_q <= 1'b0;
      end
      if (cmb_done) cmb_res_vld_q <= 1'b1;
      if (gsend) gpend_q <= req.wdata[NLINK-1:0];
      if (dsp_rx_take) rxfull_q[lk] <= 1'b0;

      for (int d = 0; d < NLINK; d++) begin
        logic claimed, dma_rx, is_ack, is_glob;
        claimed = (c_claim && c_in_q == 3'(d)) || eat_q[d];
        if (c_claim && c_in_q == 3'(d) && rx_fs[d]) eat_q[d] <= 1'b1;
        if (rx_wvalid[d]) eat_q[d] <= 1'b0;
        dma_rx  = (dst_q == D_RECV) && dlink_q == 3'(d);
        is_ack  = rx_hdr[d] == HDR_ACK;
        is_glob = rx_hdr[d] == HDR_GLOBAL;

        // ---- sending side ----
        if (ld_ack[d])  ackp_q[d]  <= 1'b0;
        if (ld_glob[d]) gpend_q[d] <= 1'b0;
        if ((dsp_tx_put && lk == 3'(d)) || (dma_put && dlink_q == 3'(d))) begin
          pend_q[d] <= 1'b1;
          send_q[d] <= 1'b1;
          hold_q[d] <= (dsp_tx_put && lk == 3'(d)) ? req.wdata : dword_q;
        end
        if (ld_data[d]) begin
          send_q[d] <= 1'b0;
          tmr_q[d]  <= '0;
        end else if (pend_q[d] && !send_q[d] && !tx_busy[d]) begin
          if (tmr_q[d] == 8'(TIMEOUT - 1)) begin
            send_q[d] <= 1'b1;                 // no answer: send again
            retries_q <= retries_q + 16'd1;
          end else begin
            tmr_q[d] <= tmr_q[d] + 8'd1;
          end
        end
        if (rx_wvalid[d] && is_ack && !rx_perr[d] && !claimed &&
            pend_q[d] && !send_q[d] && rx_word[d][1] == seq_q[d]) begin
          if (rx_word[d][0]) begin
            pend_q[d] <= 1'b0;                 // taken
            seq_q[d]  <= ~seq_q[d];
          end else begin
            send_q[d] <= 1'b1;                 // refused or corrupted: send again
            retries_q <= retries_q + 16'd1;
          end
        end

        // ---- receiving side ----
        if (rx_perr[d] && !(is_ack && !claimed)) perr_q[d] <= 1'b1;
        if (rx_wvalid[d] && !claimed && !is_ack) begin
          if (is_glob) begin
            // global frames are not acknowledged; a parity error is only reported
            if (!rx_perr[d]) begin
              if (dma_rx) begin
                if (!dma_rx_pend_q) begin
                  dword_q <= rx_word[d]; dma_rx_pend_q <= 1'b1;
                end else ovr_q[d] <= 1'b1;
              end else begin
                rxbuf_q[d]  <= rx_word[d];
                rxfull_q[d] <= 1'b1;
                if (rxfull_q[d] && !(dsp_rx_take && lk == 3'(d))) ovr_q[d] <= 1'b1;
              end
            end
          end else begin
            ackp_q[d]    <= 1'b1;
            ackw_q[d][1] <= rx_hdr[d][0];
            if (rx_perr[d]) begin
              ackw_q[d][0] <= 1'b0;                       // corrupted: ask again
            end else if (rx_hdr[d][0] != rseq_q[d]) begin
              ackw_q[d][0] <= 1'b1;                       // repeat of a word already taken
            end else if (dma_rx ? !dma_rx_pend_q : !rxfull_q[d]) begin
              ackw_q[d][0] <= 1'b1;                       // taken
              rseq_q[d]    <= ~rseq_q[d];
              if (dma_rx) begin
                dword_q <= rx_word[d]; dma_rx_pend_q <= 1'b1;
              end else begin
                rxbuf_q[d]  <= rx_word[d];
                rxfull_q[d] <= 1'b1;
              end
            end else begin
              ackw_q[d][0] <= 1'b0;                       // no room: refused
              ovr_q[d]     <= 1'b1;
            end
          end
        end
      end

      // DMA
      unique case (dst_q)
        D_IDLE: if (wr && req.addr == SCU_DMA_CTL && req.wdata[31:16] != 16'd0) begin
          dcnt_q  <= req.wdata[31:16];
          dlink_q <= req.wdata[2:0];
          dst_q   <= req.wdata[8] ? D_READ : D_RECV;
          dma_rx_pend_q <= 1'b0;
        end
        D_READ: if (mrsp.done) begin
          dword_q <= mrsp.rdata;
          dst_q   <= D_SEND;
        end
        D_SEND: if (dma_put) begin
          daddr_q <= daddr_q + MEM_AW'(1);
          dcnt_q  <= dcnt_q - 16'd1;
          dst_q   <= (dcnt_q == 16'd1) ? D_IDLE : D_READ;
        end
        D_RECV: begin
          if (dma_rx_pend_q && mrsp.done) begin
            dma_rx_pend_q <= 1'b0;
            daddr_q <= daddr_q + MEM_AW'(1);
            dcnt_q  <= dcnt_q - 16'd1;
            if (dcnt_q == 16'd1) dst_q <= D_IDLE;
          end
        end
        default: dst_q <= D_IDLE;
      endcase
    end
  end
endmodule
