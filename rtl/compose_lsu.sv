// compose_lsu -- load-store unit of a memory-capable (MEM) PE.
//
// Turns the PE's memory operation into a request on its own port of the
// shared data memory. Operand A is the byte address, operand B the store
// data. LOAD/STORE move a 32-bit word (address bits [1:0] ignored);
// LOADB/STOREB move one byte, zero-extended on load. The request is issued
// in the cycle the operation runs (`issue`); the memory answers one cycle
// later, and the LSU then hands the aligned data to the compute part, which
// writes it into the result register at that edge. A load therefore takes
// two clock cycles: issued in cycle t, its value is usable from the result
// register in cycle t+2. That a memory operation needs two cycles is the
// paper's; the address format, byte operations and alignment are this
// design's choices.
// The request's address is operand A with bits [1:0] cleared, pure wiring
// with no logic of its own.
module compose_lsu
  import compose_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  op_e                op,
  input  logic               issue,     // the operation executes this cycle
  input  logic [DATA_W-1:0]  addr,
  input  logic [DATA_W-1:0]  wdata,
  output mem_req_t           req,
  input  logic [DATA_W-1:0]  rdata,     // memory read data, one cycle later
  output logic               ld_valid,
  output logic [DATA_W-1:0]  ld_data
);

  localparam int unsigned NB = DATA_W / 8;

  logic                  is_ld, is_byte;
  logic                  pend_q, pend_byte_q;
  logic [$clog2(NB)-1:0] off_q;
  logic [$clog2(NB)-1:0] off;

  assign is_ld   = op inside {OP_LOAD, OP_LOADB};
  assign is_byte = op inside {OP_LOADB, OP_STOREB};
  assign off     = addr[$clog2(NB)-1:0];

  always_comb begin
    req       = '0;
    req.en    = issue && is_mem_op(op);
    req.we    = req.en && !is_ld;
    req.addr  = {addr[DATA_W-1:$clog2(NB)], {$clog2(NB){1'b0}}};
    if (is_byte) begin
      req.be    = NB'(1) << off;
      req.wdata = {NB{wdata[7:0]}};
    end else begin
      req.be    = '1;
      req.wdata = wdata;
    end
    if (!req.we) req.be = '0;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend_q      <= 1'b0;
      pend_byte_q <= 1'b0;
      off_q       <= '0;
    end else begin
      pend_q      <= req.en && is_ld;
      pend_byte_q <= is_byte;
      off_q       <= off;
    end
  end

  assign ld_valid = pend_q;
  assign ld_data  = pend_byte_q ? DATA_W'(rdata[8*off_q +: 8]) : rdata;

endmodule
