// compose_config_mem -- per-PE configuration memory.
//
// Holds one configuration word (compose_pkg::cfg_t) for each time slot of the
// static modulo schedule; the slot counter of the controller selects the word
// that drives the PE in the current cycle. The host writes words one at a
// time through the write port while the fabric is idle.
//
// The paper names this memory and places it at the start of the PE's timing
// path (configuration memory to ALU input selection). Its depth, its
// flip-flop implementation and the write port are this design's choices.
// The read is asynchronous from the slot register so that the word applies
// in the same cycle as its slot. All words reset to 0, which is a NOP with
// every multiplexer on its registered input, so an unprogrammed PE never
// closes a combinational path. While reset is asserted the read port also
// shows that word, whatever the array holds: the array's power-up contents
// could otherwise close a combinational loop of the mesh before the reset
// has cleared it.
module compose_config_mem
  import compose_pkg::*;
#(
  parameter int unsigned DEPTH = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      we,
  input  logic [$clog2(DEPTH)-1:0]  waddr,
  input  cfg_t                      wdata,
  input  logic [$clog2(DEPTH)-1:0]  raddr,
  output cfg_t                      rdata
);

  cfg_t mem [DEPTH];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) mem[i] <= '0;
    end else if (we) begin
      mem[waddr] <= wdata;
    end
  end

  // during reset the all-zero word is presented whatever the array holds
  assign rdata = rst_n ? mem[raddr] : cfg_t'(0);

endmodule
