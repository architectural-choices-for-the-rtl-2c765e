// scu_combine: the SCU's on-the-fly global operations (add, max, broadcast).
//
// Once armed with an operation and the node's local word, the unit waits for a frame to
// start arriving on the chosen input link. As each bit of that frame arrives it combines
// it with the matching bit of the local word and emits the result bit in the same cycle;
// the SCU hands the result stream to one or more transmitters, which put it on the wire
// one bit time later. A word thus crosses a node with a delay of one bit, not one word,
// which is what keeps the latency of a global sum across many nodes low.
//   OP_ADD   two's complement sum; bits must arrive least significant first. A one-bit
//            carry is kept between bits; the carry out of bit 31 is dropped.
//   OP_MAX   signed maximum; bits must arrive most significant first. A small state
//            (still equal / local larger / incoming larger) picks the output bit; at the
//            sign bit a 0 means the larger number.
//   OP_BCAST the incoming bit passes unchanged; the local word is not used.
// After the 32nd bit `done` pulses, `result` holds the combined word and the unit is no
// longer armed. While armed (`claim`) the input link's receiver is reserved for it.
//
// From the design: on-the-fly add, max and broadcast between the node's data and data
// from a neighbour. Integer operands and the bit orders are this implementation's choice;
// the design does not say how the floating-point words of the DSP are summed.
module scu_combine
  import nga_pkg::*;
(
  input  logic              clk,
  input  logic              rst_n,
  input  logic              arm,
  input  scu_op_e           op,
  input  logic [DATA_W-1:0] local_word,
  input  logic              msb_first,
  // incoming bit stream (from the selected receiver)
  input  logic              fs,
  input  logic              bv,
  input  logic              bval,
  input  logic [4:0]        bidx,
  // outgoing bit stream (to the selected transmitters)
  output logic              o_start,
  output logic              o_bv,
  output logic              o_bit,
  output logic              claim,
  output logic              done,
  output logic [DATA_W-1:0] result
);
  typedef enum logic [1:0] {C_EQ, C_LOC, C_IN} cmp_e;

  logic              armed_q, active_q, carry_q;
  cmp_e              cmp_q;
  scu_op_e           op_q;
  logic [DATA_W-1:0] loc_q, res_q;
  logic [4:0]        pos;
  logic              a, b, loc_wins;

  always_comb begin
    pos      = msb_first ? (5'd31 - bidx) : bidx;
    a        = loc_q[pos];
    b        = bval;
    loc_wins = (bidx == 5'd0) ? !a : a;   // first bit (sign bit for MSB first)
    o_start  = armed_q && !active_q && fs;
    o_bv     = active_q && bv;
    unique case (op_q)
      OP_ADD:  o_bit = a ^ b ^ carry_q;
      OP_MAX:  o_bit = (cmp_q == C_LOC) ? a :
                       (cmp_q == C_IN)  ? b :
                       (a == b) ? a : (loc_wins ? a : b);
      default: o_bit = b;
    endcase
    claim  = armed_q;
    result = res_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      armed_q  <= 1'b0;
      active_q <= 1'b0;
      carry_q  <= 1'b0;
      cmp_q    <= C_EQ;
      op_q     <= OP_BCAST;
      loc_q    <= '0;
      res_q    <= '0;
      done     <= 1'b0;
    end else begin
      done <= 1'b0;
      if (arm && !armed_q) begin
        armed_q <= 1'b1;
        op_q    <= op;
        loc_q   <= local_word;
      end
      if (o_start) begin
        active_q <= 1'b1;
        carry_q  <= 1'b0;
        cmp_q    <= C_EQ;
      end
      if (o_bv) begin
        res_q[pos] <= o_bit;
        carry_q    <= (a & b) | (a & carry_q) | (b & carry_q);
        if (cmp_q == C_EQ && a != b) cmp_q <= loc_wins ? C_LOC : C_IN;
        if (bidx == 5'd31) begin
          active_q <= 1'b0;
          armed_q  <= 1'b0;
          done     <= 1'b1;
        end
      end
    end
  end
endmodule
