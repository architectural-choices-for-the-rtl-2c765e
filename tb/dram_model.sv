// dram_model: behavioural model of the node's DRAM bank (39 bits wide, a ROW_W-bit row
// address and a COL_W-bit column address multiplexed on ROW_W pins), for simulation only.
// Word address = {row, column}.
//
// The row address is taken when RAS falls with CAS high; the column address when CAS
// falls with RAS low, and at that moment an early write (WE low) stores the data bus.
// While RAS, CAS and OE are all low the addressed word drives `dq`. CAS falling while
// RAS is high starts a CAS-before-RAS refresh, which is counted. Words never written read
// as 0 (a valid codeword). Tasks let a testbench read a stored word and flip stored bits
// to model DRAM errors.
module dram_model #(
  parameter int unsigned ROW_W = 10,
  parameter int unsigned COL_W = 9,
  parameter int unsigned W     = 39
) (
  input  logic [ROW_W-1:0] a,
  input  logic             ras_n,
  input  logic             cas_n,
  input  logic             we_n,
  input  logic             oe_n,
  input  logic [W-1:0]     d,
  output logic [W-1:0]     q
);
  logic [W-1:0]        mem [int unsigned];
  logic [ROW_W-1:0]    row;
  logic [COL_W-1:0]    col;
  int unsigned         refreshes = 0;
  int unsigned         writes = 0;
  int unsigned         reads = 0;

  always @(negedge ras_n) begin
    if (cas_n) row = a;
  end

  always @(negedge cas_n) begin
    if (ras_n) begin
      refreshes++;
    end else begin
      col = a[COL_W-1:0];
      if (!we_n) begin
        mem[{row, col}] = d;
        writes++;
      end else begin
        reads++;
      end
    end
  end

  always @(ras_n, cas_n, oe_n, row, col) begin
    if (!ras_n && !cas_n && !oe_n)
      q = mem.exists({row, col}) ? mem[{row, col}] : '0;
    else
      q = '0;
  end

  function automatic logic [W-1:0] peek(int unsigned addr);
    return mem.exists(addr) ? mem[addr] : '0;
  endfunction

  task automatic poke(int unsigned addr, logic [W-1:0] v);
    mem[addr] = v;
  endtask

  task automatic flip(int unsigned addr, int unsigned bitpos);
    logic [W-1:0] v;
    v = mem.exists(addr) ? mem[addr] : '0;
    v[bitpos] = ~v[bitpos];
    mem[addr] = v;
  endtask
endmodule
