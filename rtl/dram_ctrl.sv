// dram_ctrl: DRAM I/O and EDC. Runs the node's DRAM over a 39-bit bus (32 data bits and
// 7 EDC bits), corrects single-bit errors on the way in and repairs them in memory.
//
// One transaction at a time, from the memory arbiter. Each access is a full RAS/CAS
// cycle on multiplexed address pins: row address with RAS low for T_RCD cycles, column
// address with CAS low for T_CAS cycles (write data and WE are set up before CAS falls,
// an "early write"), then both strobes high for T_RP cycles of precharge. A read word is
// sampled in the last CAS cycle and passed through the SEC-DED decoder; `rsp.done` pulses
// in the first precharge cycle with the corrected word. A corrected single-bit error is
// counted, its address kept, and the corrected word is written back before the next
// request is taken (scrubbing), so the error does not grow into a double one. A double
// error is counted and flagged with the data. CAS-before-RAS refresh is issued every
// REF_INT cycles, ahead of any waiting request.
//
// Addresses: row = addr[18:9] on ROW_W = 10 pins, column = addr[8:0] (the top pin is
// driven 0 in the column cycle). This serves both kinds of part the node takes: 512k x 8
// parts (1024 rows x 512 columns) use all 19 address bits; 256k x 16 parts (512 x 512)
// leave the top row pin unconnected, so the upper half of the address space aliases the
// lower half and software uses 256k words. CAS-before-RAS refresh needs no row address,
// so it is the same for both.
//
// From the design: the 39-bit bus with 7 EDC bits, the 256k x 16 and 512k x 8 parts and
// that the NGA recovers from DRAM errors. The SEC-DED code, write-back
// recovery, the strobe timing and the refresh interval are this implementation's
// choices, for 25 MHz operation with common 1994 DRAM (70-80 ns parts, 8 ms/512-row
// refresh = one row every 15.6 us = 390 cycles).
module dram_ctrl
  import nga_pkg::*;
#(
  parameter int unsigned ROW_W   = 10,   // address pins = row address bits
  parameter int unsigned COL_W   = 9,    // column address bits
  parameter int unsigned T_RCD   = 2,    // cycles from RAS to CAS
  parameter int unsigned T_CAS   = 2,    // cycles CAS is low
  parameter int unsigned T_RP    = 2,    // precharge cycles
  parameter int unsigned REF_INT = 390   // cycles between refreshes
) (
  input  logic                clk,
  input  logic                rst_n,
  input  mem_req_t            req,
  output mem_rsp_t            rsp,
  // DRAM pins
  output logic [ROW_W-1:0]    dram_a,
  output logic                dram_ras_n,
  output logic                dram_cas_n,
  output logic                dram_we_n,
  output logic                dram_oe_n,
  output logic [CODE_W-1:0]   dram_dq_o,
  output logic                dram_dq_oe,
  input  logic [CODE_W-1:0]   dram_dq_i,
  // error status
  output logic [15:0]         sec_count,   // single errors corrected
  output logic [15:0]         ded_count,   // double errors detected
  output logic [MEM_AW-1:0]   err_addr     // address of the last error
);
  typedef enum logic [2:0] {S_IDLE, S_ROW, S_COL, S_PRE, S_REF_CAS, S_REF_RAS} state_e;

  localparam int unsigned CW = 8;

  state_e             st_q;
  logic [CW-1:0]      cnt_q;
  logic [15:0]        ref_cnt_q;
  logic               ref_due_q;
  logic               op_we_q, op_scrub_q;
  logic [MEM_AW-1:0]  op_addr_q;
  logic               scrub_pend_q;
  logic [MEM_AW-1:0]  scrub_addr_q;
  logic [DATA_W-1:0]  scrub_data_q;

  logic [CODE_W-1:0]  enc_in;
  logic [DATA_W-1:0]  enc_data;
  logic [DATA_W-1:0]  dec_data;
  logic               dec_sgl, dec_dbl;
  logic [5:0]         dec_syn;

  // both the normal write and the scrub write go through the encoder
  always_comb enc_data = (st_q == S_IDLE && !scrub_pend_q) ? req.wdata : scrub_data_q;
  edc_encode u_enc (.data(enc_data), .code(enc_in));
  edc_decode u_dec (.code(dram_dq_i), .data(dec_data), .sgl_err(dec_sgl),
                    .dbl_err(dec_dbl), .syndrome(dec_syn));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q         <= S_IDLE;
      cnt_q        <= '0;
      ref_cnt_q    <= '0;
      ref_due_q    <= 1'b0;
      op_we_q      <= 1'b0;
      op_scrub_q   <= 1'b0;
      op_addr_q    <= '0;
      scrub_pend_q <= 1'b0;
      scrub_addr_q <= '0;
      scrub_data_q <= '0;
      dram_a       <= '0;
      dram_ras_n   <= 1'b1;
      dram_cas_n   <= 1'b1;
      dram_we_n    <= 1'b1;
      dram_oe_n    <= 1'b1;
      dram_dq_o    <= '0;
      dram_dq_oe   <= 1'b0;
      rsp          <= '0;
      sec_count    <= '0;
      ded_count    <= '0;
      err_addr     <= '0;
    end else begin
      rsp.done <= 1'b0;
      // refresh timer
      if (ref_cnt_q == 16'(REF_INT - 1)) begin
        ref_cnt_q <= '0;
        ref_due_q <= 1'b1;
      end else begin
        ref_cnt_q <= ref_cnt_q + 16'd1;
      end

      unique case (st_q)
        S_IDLE: begin
          cnt_q <= '0;
          if (ref_due_q) begin
            ref_due_q  <= 1'b0;
            dram_cas_n <= 1'b0;               // CAS before RAS
            st_q       <= S_REF_CAS;
          end else if (scrub_pend_q || req.valid) begin
            op_scrub_q <= scrub_pend_q;
            op_we_q    <= scrub_pend_q ? 1'b1 : req.we;
            op_addr_q  <= scrub_pend_q ? scrub_addr_q : req.addr;
            dram_a     <= scrub_pend_q ? scrub_addr_q[COL_W +: ROW_W] : req.addr[COL_W +: ROW_W];
            dram_ras_n <= 1'b0;
            dram_dq_o  <= enc_in;
            scrub_pend_q <= 1'b0;
            st_q       <= S_ROW;
          end
        end
        S_ROW: begin
          if (cnt_q == CW'(T_RCD - 1)) begin
            cnt_q      <= '0;
            dram_a     <= ROW_W'(op_addr_q[COL_W-1:0]);
            dram_cas_n <= 1'b0;
            dram_we_n  <= ~op_we_q;
            dram_oe_n  <= op_we_q;
            dram_dq_oe <= op_we_q;
            st_q       <= S_COL;
          end else begin
            cnt_q <= cnt_q + CW'(1);
          end
        end
        S_COL: begin
          if (cnt_q == CW'(T_CAS - 1)) begin
            cnt_q      <= '0;
            dram_ras_n <= 1'b1;
            dram_cas_n <= 1'b1;
            dram_we_n  <= 1'b1;
            dram_oe_n  <= 1'b1;
            dram_dq_oe <= 1'b0;
            st_q       <= S_PRE;
            if (!op_scrub_q) begin
              rsp.done   <= 1'b1;
              rsp.rdata  <= op_we_q ? '0 : dec_data;
              rsp.uncorr <= !op_we_q && dec_dbl;
            end
            if (!op_we_q && dec_sgl) begin
              sec_count    <= sec_count + 16'd1;
              err_addr     <= op_addr_q;
              scrub_pend_q <= 1'b1;
              scrub_addr_q <= op_addr_q;
              scrub_data_q <= dec_data;
            end
            if (!op_we_q && dec_dbl) begin
              ded_count <= ded_count + 16'd1;
              err_addr  <= op_addr_q;
            end
          end else begin
            cnt_q <= cnt_q + CW'(1);
          end
        end
        S_PRE: begin
          if (cnt_q == CW'(T_RP - 1)) begin
            cnt_q <= '0;
            st_q  <= S_IDLE;
          end else begin
            cnt_q <= cnt_q + CW'(1);
          end
        end
        S_REF_CAS: begin
          dram_ras_n <= 1'b0;
          st_q       <= S_REF_RAS;
        end
        S_REF_RAS: begin
          if (cnt_q == CW'(T_RCD + T_CAS - 1)) begin
            cnt_q      <= '0;
            dram_ras_n <= 1'b1;
            dram_cas_n <= 1'b1;
            st_q       <= S_PRE;
          end else begin
            cnt_q <= cnt_q + CW'(1);
          end
        end
        default: st_q <= S_IDLE;
      endcase
    end
  end

  a_no_double_op: assert property (@(posedge clk) disable iff (!rst_n)
    (st_q != S_IDLE) |-> !(dram_cas_n == 1'b0 && dram_ras_n == 1'b0 && dram_we_n == 1'b0 && dram_oe_n == 1'b0));
endmodule
