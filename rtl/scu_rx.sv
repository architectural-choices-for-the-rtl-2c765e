// scu_rx: receiver of one serial link of the Serial Communication Unit (SCU).
//
// Waits for a start bit on `sin`, takes the two header bits, then the payload (32 data
// bits in the bit order set by `msb_first`, or the 2 bits {seq, ok} of an acknowledge)
// and the parity bit. Frame formats as in scu_tx. Each data bit is also offered as it
// arrives (`bv`, `bval`, `bidx`, combinational from `sin`) so that the SCU can combine a
// word with local data while it is still arriving; `fs` marks the start bit. One cycle
// after the parity bit, `wvalid` pulses with `hdr`, `word` (an acknowledge's payload in
// word[1:0]) and `perr`, set if the parity did not match: an error on the wire.
//
// The frame format and parity check are this implementation's; the design gives only
// that the NGA detects and recovers from errors on the serial wires.
module scu_rx
  import nga_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              msb_first,
  input  logic              sin,
  output logic              fs,
  output logic              bv,
  output logic              bval,
  output logic [4:0]        bidx,
  output logic              wvalid,
  output logic [1:0]        hdr,
  output logic [DATA_W-1:0] word,
  output logic              perr
);
  typedef enum logic [2:0] {R_IDLE, R_H1, R_H2, R_DATA, R_PAR} rx_state_e;

  rx_state_e          st_q;
  logic [4:0]         cnt_q;
  logic [1:0]         hdr_q;
  logic [DATA_W-1:0]  acc_q;
  logic               par_q;
  logic [4:0]         pos;
  logic               is_ack;

  always_comb begin
    is_ack = (hdr_q == HDR_ACK);
    fs   = (st_q == R_IDLE) && sin;
    bv   = (st_q == R_DATA) && !is_ack;
    bval = sin;
    bidx = cnt_q;
    if (is_ack)         pos = 5'd1 - cnt_q;
    else if (msb_first) pos = 5'd31 - cnt_q;
    else                pos = cnt_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q   <= R_IDLE;
      cnt_q  <= '0;
      hdr_q  <= '0;
      acc_q  <= '0;
      par_q  <= 1'b0;
      wvalid <= 1'b0;
      hdr    <= '0;
      word   <= '0;
      perr   <= 1'b0;
    end else begin
      wvalid <= 1'b0;
      perr   <= 1'b0;
      unique case (st_q)
        R_IDLE: if (sin) begin
          st_q  <= R_H1;
          cnt_q <= '0;
          acc_q <= '0;
          par_q <= 1'b0;
        end
        R_H1: begin
          hdr_q[1] <= sin;
          par_q    <= sin;
          st_q     <= R_H2;
        end
        R_H2: begin
          hdr_q[0] <= sin;
          par_q    <= par_q ^ sin;
          st_q     <= R_DATA;
        end
        R_DATA: begin
          acc_q[pos] <= sin;
          par_q      <= par_q ^ sin;
          cnt_q      <= cnt_q + 5'd1;
          if (cnt_q == (is_ack ? 5'd1 : 5'd31)) st_q <= R_PAR;
        end
        R_PAR: begin
          wvalid <= 1'b1;
          hdr    <= hdr_q;
          word   <= acc_q;
          perr   <= sin ^ par_q;
          st_q   <= R_IDLE;
        end
        default: st_q <= R_IDLE;
      endcase
    end
  end
endmodule
