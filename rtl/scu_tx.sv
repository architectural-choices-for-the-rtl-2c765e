// scu_tx: transmitter of one serial link of the Serial Communication Unit (SCU).
//
// Every frame starts with a 1 (the line idles at 0), then two header bits, a payload and
// an even parity bit over header and payload:
//   data    1, 0, seq, d[32], parity   36 bits, acknowledged by the receiver
//   global  1, 1, 0,   d[32], parity   36 bits, a word of a global operation, not acknowledged
//   ack     1, 1, 1, seq, ok, parity    6 bits, answers a data frame
// Data bits go least significant first, or most significant first when `msb_first` is
// set (the order the on-the-fly maximum needs). A frame is started with `load`, `hdr` and
// `word` (for an ack, word[1] = seq and word[0] = ok) when the transmitter is not `busy`;
// frames may follow each other with no idle bit. In stream mode (`s_start`) the
// transmitter sends a global frame whose data bits another unit hands it one per cycle
// (`s_bv`, `s_bit`) as they are produced: this is how a word being combined on the fly is
// passed on, one bit time behind the incoming frame. `sout` is a flip-flop output.
//
// From the design: serial links in both senses of four dimensions, with hardware
// recovery from errors on the wires. The frame format, the one-bit-per-clock rate, the
// parity and the bit order are this implementation's choices.
module scu_tx
  import nga_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              msb_first,
  input  logic              load,
  input  logic [1:0]        hdr,
  input  logic [DATA_W-1:0] word,
  input  logic              s_start,
  input  logic              s_bv,
  input  logic              s_bit,
  output logic              sout,
  output logic              busy
);
  typedef enum logic [2:0] {T_IDLE, T_H1, T_H2, T_DATA, T_PAR} tx_state_e;

  tx_state_e          st_q;
  logic [DATA_W-1:0]  sh_q;
  logic [1:0]         hdr_q;
  logic [4:0]         cnt_q, last;
  logic               par_q;
  logic               stream_q;
  logic               nbit;
  logic               adv;
  logic               is_ack;

  always_comb begin
    busy   = (st_q != T_IDLE);
    is_ack = (hdr_q == HDR_ACK);
    last   = is_ack ? 5'd1 : 5'd31;
    if (stream_q)       nbit = s_bit;
    else if (is_ack)    nbit = sh_q[5'd1 - cnt_q];
    else if (msb_first) nbit = sh_q[5'd31 - cnt_q];
    else                nbit = sh_q[cnt_q];
    adv  = stream_q ? s_bv : 1'b1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q     <= T_IDLE;
      sh_q     <= '0;
      hdr_q    <= '0;
      cnt_q    <= '0;
      par_q    <= 1'b0;
      stream_q <= 1'b0;
      sout     <= 1'b0;
    end else begin
      unique case (st_q)
        T_IDLE: begin
          sout <= 1'b0;
          if (s_start || load) begin
            sout     <= 1'b1;
            stream_q <= s_start;
            hdr_q    <= s_start ? HDR_GLOBAL : hdr;
            sh_q     <= word;
            cnt_q    <= '0;
            par_q    <= 1'b0;
            st_q     <= T_H1;
          end
        end
        T_H1: begin
          sout  <= hdr_q[1];
          par_q <= par_q ^ hdr_q[1];
          st_q  <= T_H2;
        end
        T_H2: begin
          sout  <= hdr_q[0];
          par_q <= par_q ^ hdr_q[0];
          st_q  <= T_DATA;
        end
        T_DATA: begin
          if (adv) begin
            sout  <= nbit;
            par_q <= par_q ^ nbit;
            cnt_q <= cnt_q + 5'd1;
            if (cnt_q == last) st_q <= T_PAR;
          end
        end
        T_PAR: begin
          sout     <= par_q;
          st_q     <= T_IDLE;
          stream_q <= 1'b0;
        end
        default: st_q <= T_IDLE;
      endcase
    end
  end

  // a streamed frame arrives without gaps, and nothing is started on a busy link
  a_stream_gapless: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q == T_DATA && stream_q) |-> s_bv);
  a_no_collision: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !s_start);
endmodule
