// compose_data_mem -- shared multi-port data memory of the CGRA.
//
// One port per MEM PE (four for the 4x4 array), all usable in the same
// cycle. Each port reads a 32-bit word synchronously (data one cycle after
// the request) or writes bytes under a byte-enable mask. Addresses are byte
// addresses; bits [1:0] are ignored and the word index wraps at WORDS.
//
// The paper gives the memory's role (a shared 4-port data memory serving the
// LSUs of the edge PEs). Its size, the read-before-write behaviour (a read
// and a write of the same word in one cycle return the old word) and the rule
// that the higher-numbered port wins when two ports write the same byte in
// the same cycle are this design's choices. It is written as an array, to be
// mapped to SRAM macros in an implementation.
module compose_data_mem
  import compose_pkg::*;
#(
  parameter int unsigned NPORTS = 4,
  parameter int unsigned WORDS  = 4096
) (
  input  logic                               clk,
  input  mem_req_t [NPORTS-1:0]              req,
  output logic [NPORTS-1:0][DATA_W-1:0]      rdata
);

  localparam int unsigned NB = DATA_W / 8;
  localparam int unsigned AW = $clog2(WORDS);

  logic [DATA_W-1:0] mem [WORDS];

  function automatic logic [AW-1:0] widx(logic [DATA_W-1:0] a);
    return a[$clog2(NB) +: AW];
  endfunction

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++) begin
      if (req[p].en && !req[p].we) rdata[p] <= mem[widx(req[p].addr)];
    end
    for (int p = 0; p < NPORTS; p++) begin
      if (req[p].en && req[p].we)
        for (int k = 0; k < NB; k++)
          if (req[p].be[k]) mem[widx(req[p].addr)][8*k +: 8] <= req[p].wdata[8*k +: 8];
    end
  end

endmodule
