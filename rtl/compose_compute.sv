// compose_compute -- compute part of one PE: bypassable operand registers,
// predication, ALU and bypassable result register.
//
// This is where a PE is made composable. Each ALU input (A = I1, B = I2) has
// an operand register fed by the crossbar and a bypass multiplexer that picks
// either that register (a value latched at an earlier edge) or the unlatched
// crossbar value of this cycle, which may have been produced earlier in the
// same cycle by the ALU of another PE. The predicate input has the same
// register-plus-multiplexer pair. The ALU output has a result register and a
// RES multiplexer that offers the crossbar either the ALU output of this
// cycle or the registered result. A chain of operations on several PEs thus
// runs within one clock period when every link in it is bypassed, and only
// the end of the chain needs to be written to a register: this chain is a
// virtual PE (VPE). Two input multiplexers and one predication multiplexer
// per PE are the paper's added hardware; the result-side bypass is the
// output bypass the paper says a generic CGRA already has.
//
// Own choices: every register has its own write enable from the
// configuration word (so unneeded intermediate writes are skipped); when
// `pred_en` is set and the selected predicate is 0 the operation is squashed
// (the result register and memory are not written); a load's data, returned
// by the LSU one cycle after issue, is written into the result register at
// that cycle's edge and takes priority over the ALU. All writes are gated by
// `run`, except load returns, which always complete.
//
// Timing: xa/xb/xp -> res_x and -> a/b are combinational; registers update
// at the rising edge and reset to 0. Once instantiated in a PE, res_x
// returns through the crossbar to xa/xb/xp, so these combinational paths
// belong to structural loops that only the configuration keeps open (see
// compose_pe).
module compose_compute
  import compose_pkg::*;
(
  input  logic               clk,
  input  logic               rst_n,
  input  logic               run,
  input  cfg_t               cfg,
  input  logic [DATA_W-1:0]  xa,        // crossbar value for operand A
  input  logic [DATA_W-1:0]  xb,        // crossbar value for operand B
  input  logic [DATA_W-1:0]  xp,        // crossbar value for the predicate
  input  logic               ld_valid,  // load data returns this cycle
  input  logic [DATA_W-1:0]  ld_data,
  output logic [DATA_W-1:0]  res_x,     // RES mux output, back to the crossbar
  output logic [DATA_W-1:0]  a,         // selected operand A (LSU address)
  output logic [DATA_W-1:0]  b,         // selected operand B (LSU store data)
  output logic               exec       // operation not squashed, run active
);

  logic [DATA_W-1:0] a_q, b_q, res_q, alu_res;
  logic              p_q, p;

  assign a = cfg.opa.byp  ? xa    : a_q;
  assign b = cfg.opb.byp  ? xb    : b_q;
  assign p = cfg.pred.byp ? xp[0] : p_q;

  assign exec = run && (!cfg.pred_en || p);

  compose_alu u_alu (
    .op   (cfg.op),
    .a    (a),
    .b    (b),
    .p    (p),
    .cnst (cfg.cnst),
    .prev (res_q),
    .res  (alu_res)
  );

  assign res_x = cfg.res_byp ? alu_res : res_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_q   <= '0;
      b_q   <= '0;
      p_q   <= 1'b0;
      res_q <= '0;
    end else begin
      if (run && cfg.opa.we)  a_q <= xa;
      if (run && cfg.opb.we)  b_q <= xb;
      if (run && cfg.pred.we) p_q <= xp[0];
      if (ld_valid)                  res_q <= ld_data;
      else if (exec && cfg.res_we)   res_q <= alu_res;
    end
  end

endmodule
