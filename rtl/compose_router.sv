// compose_router -- crossbar and mesh output stage of one PE.
//
// The crossbar takes the four mesh inputs (N, E, S, W) and the PE's own ALU
// result (RES) and, under control of the current configuration word, drives
// seven outputs: the four mesh outputs and the three inputs of the compute
// part (operand A, operand B, predicate). Each mesh output has a register
// and a bypass multiplexer behind the crossbar: with `byp` set the output is
// the crossbar value of this very cycle, so a value can cross this PE without
// being latched and several PEs can be traversed in one clock cycle
// (single-cycle multi-hop routing); with `byp` clear the output is the
// register, written at an earlier clock edge. This register-plus-mux per
// output port and the crossbar follow the PE drawing of the paper; the
// separate write enable of each register, the ZERO source and the gating of
// all writes by `run` are this design's choices.
//
// Timing: everything from `in_*`/`res_x` to `out`, `xa`, `xb`, `xp` is
// combinational; register writes happen at the rising clock edge when `run`
// and the port's `we` are set. Registers reset to 0. Because `in` reaches
// `out` combinationally, PEs joined in both directions form structural
// combinational loops once instantiated in the mesh; see compose_cgra for
// why they stand.
module compose_router
  import compose_pkg::*;
(
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          run,
  input  cfg_t                          cfg,
  input  logic [NDIR-1:0][DATA_W-1:0]   in,     // mesh inputs, by DIR_*
  input  logic [DATA_W-1:0]             res_x,  // ALU result offered by RES mux
  output logic [NDIR-1:0][DATA_W-1:0]   out,    // mesh outputs, by DIR_*
  output logic [DATA_W-1:0]             xa,     // crossbar value for operand A
  output logic [DATA_W-1:0]             xb,     // crossbar value for operand B
  output logic [DATA_W-1:0]             xp      // crossbar value for predicate
);

  function automatic logic [DATA_W-1:0] pick(
    src_e sel, logic [NDIR-1:0][DATA_W-1:0] i, logic [DATA_W-1:0] r);
    unique case (sel)
      SRC_N:   return i[DIR_N];
      SRC_E:   return i[DIR_E];
      SRC_S:   return i[DIR_S];
      SRC_W:   return i[DIR_W];
      SRC_RES: return r;
      default: return '0;
    endcase
  endfunction

  logic [NDIR-1:0][DATA_W-1:0] xo;     // crossbar outputs toward the mesh
  logic [NDIR-1:0][DATA_W-1:0] out_q;  // output registers

  always_comb begin
    for (int d = 0; d < NDIR; d++) begin
      xo[d]  = pick(cfg.out[d].sel, in, res_x);
      out[d] = cfg.out[d].byp ? xo[d] : out_q[d];
    end
    xa = pick(cfg.opa.sel,  in, res_x);
    xb = pick(cfg.opb.sel,  in, res_x);
    xp = pick(cfg.pred.sel, in, res_x);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_q <= '0;
    end else if (run) begin
      for (int d = 0; d < NDIR; d++)
        if (cfg.out[d].we) out_q[d] <= xo[d];
    end
  end

endmodule
