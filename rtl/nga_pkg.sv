// nga_pkg: types and constants shared by the blocks of the Node Gate Array (NGA).
//
// The NGA sits between a node's DSP, its DRAM and the eight serial wires that join the
// node to its neighbours in a four-dimensional mesh. The numbers taken from the design
// description are the 32-bit data word with 7 error-correction bits (a 39-bit memory
// bus), the 32-word circular buffer and the 4 dimensions x 2 senses = 8 serial links.
// The DRAM word address is 19 bits: 512k words with 512k x 8 parts; with 256k x 16
// parts only the lower 256k words exist.
// The DSP bus address width is that of the TMS320C30 (24 bits). Everything else here
// (address map, register layout, request/response structs) is this design's own choice.
package nga_pkg;

  localparam int unsigned DATA_W    = 32;  // data word
  localparam int unsigned EDC_W     = 7;   // error detection and correction bits
  localparam int unsigned CODE_W    = DATA_W + EDC_W; // 39-bit DRAM bus
  localparam int unsigned MEM_AW    = 19;  // 512k words of DRAM (512k x 8 parts)
  localparam int unsigned DSP_AW    = 24;  // TMS320C30 external address bus
  localparam int unsigned NDIM      = 4;   // space-time dimensions
  localparam int unsigned NLINK     = 2 * NDIM; // + and - sense per dimension
  localparam int unsigned CB_DEPTH  = 32;  // circular buffer words

  // One memory transaction towards the DRAM port. A requester holds `valid` and the
  // other fields steady until it sees `done` in its response.
  typedef struct packed {
    logic                valid;
    logic                we;
    logic [MEM_AW-1:0]   addr;
    logic [DATA_W-1:0]   wdata;
  } mem_req_t;

  // `done` is high for one cycle when the transaction ends; for a read `rdata` holds the
  // corrected word in that cycle and `uncorr` flags a double-bit (uncorrectable) error.
  typedef struct packed {
    logic                done;
    logic                uncorr;
    logic [DATA_W-1:0]   rdata;
  } mem_rsp_t;

  // Register access from the DSP I/O controller to an internal unit. `valid` is held with
  // the other fields until `rdy`; `rdy` may come in the same cycle (zero wait states).
  typedef struct packed {
    logic                valid;
    logic                we;
    logic [7:0]          addr;
    logic [DATA_W-1:0]   wdata;
  } reg_req_t;

  typedef struct packed {
    logic                rdy;
    logic [DATA_W-1:0]   rdata;
  } reg_rsp_t;

  // Global operation applied by the SCU to a word passing through the node.
  typedef enum logic [1:0] {
    OP_ADD   = 2'd0,   // two's complement sum, least significant bit first
    OP_MAX   = 2'd1,   // signed maximum, most significant bit first
    OP_BCAST = 2'd2    // pass the incoming word on unchanged and keep a copy
  } scu_op_e;

  // Serial frame header (the two bits after the start bit).
  localparam logic [1:0] HDR_DATA0  = 2'b00;  // data word, sequence bit 0
  localparam logic [1:0] HDR_DATA1  = 2'b01;  // data word, sequence bit 1
  localparam logic [1:0] HDR_GLOBAL = 2'b10;  // word of a global operation, no acknowledge
  localparam logic [1:0] HDR_ACK    = 2'b11;  // acknowledge: payload {seq, ok}

  // SCU register offsets (inside the SCU window of the DSP address map).
  localparam logic [7:0] SCU_TXRX    = 8'h00; // 0x00..0x07: link data (write = send, read = receive)
  localparam logic [7:0] SCU_STATUS  = 8'h10;
  localparam logic [7:0] SCU_CMB_LOC = 8'h11;
  localparam logic [7:0] SCU_CMB_CTL = 8'h12;
  localparam logic [7:0] SCU_CMB_RES = 8'h13;
  localparam logic [7:0] SCU_DMA_ADR = 8'h14;
  localparam logic [7:0] SCU_DMA_CTL = 8'h15;
  localparam logic [7:0] SCU_CMB_SND = 8'h16;
  localparam logic [7:0] SCU_RETRY   = 8'h18;
  localparam logic [7:0] SCU_CFG     = 8'h17;

  // Circular buffer control register offsets.
  localparam logic [7:0] CB_ADDR     = 8'h00; // DRAM address of the next prefetch
  localparam logic [7:0] CB_CMD      = 8'h01; // write: start prefetch; read: status
  localparam logic [7:0] CB_PROT     = 8'h02; // bit 0: protection on

  // Hamming SEC-DED layout: codeword position p = 1..38 is held in bit p-1, check bits at
  // positions 1,2,4,8,16,32, data bits fill the other positions in order; bit 38 holds the
  // parity of the whole word.
  function automatic bit is_pow2(int unsigned p);
    return (p & (p - 1)) == 0;
  endfunction

  function automatic logic [CODE_W-1:0] edc_enc(logic [DATA_W-1:0] d);
    logic [CODE_W-1:0] c;
    int unsigned k;
    c = '0;
    k = 0;
    for (int unsigned p = 1; p < CODE_W; p++) begin
      if (!is_pow2(p)) begin
        c[p-1] = d[k];
        k++;
      end
    end
    for (int unsigned j = 0; j < 6; j++) begin
      logic s;
      s = 1'b0;
      for (int unsigned p = 1; p < CODE_W; p++)
        if (((p >> j) & 1) == 1 && !is_pow2(p)) s ^= c[p-1];
      c[(1 << j) - 1] = s;
    end
    c[CODE_W-1] = ^c[CODE_W-2:0];
    return c;
  endfunction

endpackage
