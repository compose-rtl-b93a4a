// tb_compose_compute -- self-checking test of the PE compute part.
//
// Random configuration words (register-source ALU operations, bypass bits,
// write enables, predication) and crossbar values are applied every cycle.
// A model kept here holds the operand, predicate and result registers and
// predicts the RES multiplexer output, the selected operands and `exec` in
// the same cycle, and the register contents after the edge, including load
// returns that overwrite the result register. It counts how often each
// mechanism occurred: operand bypass, registered operand, result bypass,
// squashed operation, load return.
module tb_compose_compute;
  import compose_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, run, ld_valid, exec;
  cfg_t        cfg;
  logic [31:0] xa, xb, xp, ld_data, res_x, a, b;

  logic [31:0] ma, mb, mres;
  logic        mp;
  int n_byp = 0, n_reg = 0, n_resbyp = 0, n_squash = 0, n_ld = 0;

  compose_compute dut (.clk(clk), .rst_n(rst_n), .run(run), .cfg(cfg), .xa(xa), .xb(xb),
                       .xp(xp), .ld_valid(ld_valid), .ld_data(ld_data), .res_x(res_x),
                       .a(a), .b(b), .exec(exec));

  // reference ALU for the few operations used here
  function automatic logic [31:0] alu(op_e o, logic [31:0] x, logic [31:0] y,
                                      logic pp, logic [31:0] k, logic [31:0] pv);
    case (o)
      OP_ADD:    return x + y;
      OP_SUB:    return x - y;
      OP_XOR:    return x ^ y;
      OP_MOVC:   return k;
      OP_SELECT: return pp ? x : y;
      OP_CMERGE: return pp ? x : pv;
      default:   return 32'd0;
    endcase
  endfunction

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam op_e OPS [7] = '{OP_ADD, OP_SUB, OP_XOR, OP_MOVC, OP_SELECT, OP_CMERGE, OP_NOP};

  initial begin
    logic [31:0] ea, eb, ealu;
    logic        ep, eexec;
    rst_n = 1'b0; run = 1'b0; cfg = '0; xa = '0; xb = '0; xp = '0;
    ld_valid = 1'b0; ld_data = '0;
    ma = '0; mb = '0; mp = 1'b0; mres = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < 5000; t++) begin
      run      = ($urandom % 8) != 0;
      cfg      = cfg_t'({$urandom, $urandom, $urandom});
      cfg.op   = OPS[$urandom % 7];
      xa = $urandom; xb = $urandom; xp = $urandom;
      ld_valid = ($urandom % 6) == 0;
      ld_data  = $urandom;
      #1;
      ea    = cfg.opa.byp  ? xa    : ma;
      eb    = cfg.opb.byp  ? xb    : mb;
      ep    = cfg.pred.byp ? xp[0] : mp;
      eexec = run && (!cfg.pred_en || ep);
      ealu  = alu(cfg.op, ea, eb, ep, cfg.cnst, mres);
      chk(a, ea, "a");
      chk(b, eb, "b");
      chk(32'(exec), 32'(eexec), "exec");
      chk(res_x, cfg.res_byp ? ealu : mres, "res_x");
      if (cfg.opa.byp) n_byp++; else n_reg++;
      if (cfg.res_byp) n_resbyp++;
      if (run && cfg.pred_en && !ep) n_squash++;
      if (ld_valid) n_ld++;
      @(posedge clk);
      if (run && cfg.opa.we)  ma = xa;
      if (run && cfg.opb.we)  mb = xb;
      if (run && cfg.pred.we) mp = xp[0];
      if (ld_valid) mres = ld_data;
      else if (eexec && cfg.res_we) mres = ealu;
      @(negedge clk);
    end
    checks++;
    if (n_byp == 0 || n_reg == 0 || n_resbyp == 0 || n_squash == 0 || n_ld == 0) failures++;
    $display("operand bypass=%0d registered=%0d result bypass=%0d squashed=%0d load returns=%0d",
             n_byp, n_reg, n_resbyp, n_squash, n_ld);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
