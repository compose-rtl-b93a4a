// compose_pe -- one processing element (PE) tile of the composable CGRA.
//
// A tile holds a configuration memory, a router (crossbar plus four mesh
// output ports, each with a bypassable register) and a compute part
// (bypassable operand and predicate registers, ALU, bypassable result
// register). In every cycle the configuration word of the current time slot
// sets all multiplexers. With the bypass multiplexers set, a value enters the
// tile, is used by the ALU and leaves it again within the same clock cycle,
// so several tiles can form one virtual PE whose only register is at its end.
// Memory-capable tiles (MEM_PE = 1, the left column of the array) also hold
// an LSU wired to one port of the shared data memory; in other tiles memory
// operations do nothing and the memory request is idle.
//
// The split into config memory, router and compute part follows the paper's
// PE drawing. Interface: `run` and `slot` come from the controller; the host
// writes configuration words through cfg_we/cfg_waddr/cfg_wdata while idle.
// Timing: mesh inputs to mesh outputs can be fully combinational, depending
// on the configuration; see compose_router and compose_compute. Inside the
// tile the RES value feeds the crossbar, whose operand outputs feed the ALU
// through the bypass multiplexers, so the netlist holds a structural
// combinational cycle (RES -> crossbar -> operand -> ALU -> RES). A word
// that bypasses both the operand taken from RES and the result would close
// it; that is not a legal configuration, and the reset word bypasses
// nothing. Linters report this cycle as circular logic; it stands because
// the multiplexers that form it are the composable datapath itself.
module compose_pe
  import compose_pkg::*;
#(
  parameter int unsigned CFG_DEPTH = 32,
  parameter bit          MEM_PE    = 1'b0
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          run,
  input  logic [$clog2(CFG_DEPTH)-1:0]  slot,
  input  logic                          cfg_we,
  input  logic [$clog2(CFG_DEPTH)-1:0]  cfg_waddr,
  input  cfg_t                          cfg_wdata,
  input  logic [NDIR-1:0][DATA_W-1:0]   in,
  output logic [NDIR-1:0][DATA_W-1:0]   out,
  output mem_req_t                      mem_req,
  input  logic [DATA_W-1:0]             mem_rdata
);

  cfg_t              cfg;
  logic [DATA_W-1:0] xa, xb, xp, res_x, a, b;
  logic              exec, ld_valid;
  logic [DATA_W-1:0] ld_data;

  compose_config_mem #(.DEPTH(CFG_DEPTH)) u_cfg (
    .clk   (clk),
    .rst_n (rst_n),
    .we    (cfg_we),
    .waddr (cfg_waddr),
    .wdata (cfg_wdata),
    .raddr (slot),
    .rdata (cfg)
  );

  compose_router u_router (
    .clk   (clk),
    .rst_n (rst_n),
    .run   (run),
    .cfg   (cfg),
    .in    (in),
    .res_x (res_x),
    .out   (out),
    .xa    (xa),
    .xb    (xb),
    .xp    (xp)
  );

  compose_compute u_compute (
    .clk      (clk),
    .rst_n    (rst_n),
    .run      (run),
    .cfg      (cfg),
    .xa       (xa),
    .xb       (xb),
    .xp       (xp),
    .ld_valid (ld_valid),
    .ld_data  (ld_data),
    .res_x    (res_x),
    .a        (a),
    .b        (b),
    .exec     (exec)
  );

  if (MEM_PE) begin : g_lsu
    compose_lsu u_lsu (
      .clk      (clk),
      .rst_n    (rst_n),
      .op       (cfg.op),
      .issue    (exec),
      .addr     (a),
      .wdata    (b),
      .req      (mem_req),
      .rdata    (mem_rdata),
      .ld_valid (ld_valid),
      .ld_data  (ld_data)
    );
  end else begin : g_no_lsu
    assign mem_req  = '0;
    assign ld_valid = 1'b0;
    assign ld_data  = '0;
  end

endmodule
