// tb_compose_alu -- self-checking test of the PE ALU.
//
// Applies directed corner values and random operands to every operation and
// compares the result with a reference computed here from 64-bit integer
// arithmetic (independent of the ALU's own expressions). The ALU is purely
// combinational; a clock only paces the stimulus and drives the watchdog.
module tb_compose_alu;
  import compose_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  op_e         op;
  logic [31:0] a, b, cnst, prev, res;
  logic        p;

  compose_alu dut (.op(op), .a(a), .b(b), .p(p), .cnst(cnst), .prev(prev), .res(res));

  function automatic logic [31:0] ref_model(op_e o, logic [31:0] x, logic [31:0] y,
                                            logic pp, logic [31:0] k, logic [31:0] pv);
    longint sx, sy;
    longint unsigned ux, uy;
    int s;
    sx = longint'($signed(x));
    sy = longint'($signed(y));
    ux = {32'b0, x};
    uy = {32'b0, y};
    s  = int'(y % 32);
    case (o)
      OP_NOP:    return 32'd0;
      OP_MOVC:   return k;
      OP_SEXT:   return (x[15] == 1'b1) ? (32'hFFFF0000 | (x & 32'h0000FFFF)) : (x & 32'h0000FFFF);
      OP_SELECT: return pp ? x : y;
      OP_CMERGE: return pp ? x : pv;
      OP_BR:     return (x == 0) ? 32'd0 : 32'd1;
      OP_AND:    return x & y;
      OP_OR:     return x | y;
      OP_XOR:    return x ^ y;
      OP_CEQ:    return (ux == uy) ? 32'd1 : 32'd0;
      OP_CGT:    return (sx > sy) ? 32'd1 : 32'd0;
      OP_CLT:    return (sx < sy) ? 32'd1 : 32'd0;
      OP_LS:     return 32'((ux * (64'd1 << s)));
      OP_RS:     return 32'(ux / (64'd1 << s));
      OP_ARS:    return 32'(sx >>> s);
      OP_ADD:    return 32'(ux + uy);
      OP_SUB:    return 32'(ux - uy);
      OP_MUL:    return 32'(ux * uy);
      default:   return 32'd0;  // memory operations
    endcase
  endfunction

  task automatic check(op_e o, logic [31:0] x, logic [31:0] y, logic pp,
                       logic [31:0] k, logic [31:0] pv);
    logic [31:0] exp;
    op = o; a = x; b = y; p = pp; cnst = k; prev = pv;
    @(posedge clk);
    exp = ref_model(o, x, y, pp, k, pv);
    checks++;
    if (res !== exp) begin
      failures++;
      $display("FAIL op=%s a=%h b=%h p=%0d res=%h exp=%h", o.name(), x, y, pp, res, exp);
    end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam logic [31:0] CORNER [6] = '{32'h0, 32'h1, 32'hFFFFFFFF, 32'h80000000,
                                         32'h7FFFFFFF, 32'h0000801F};

  initial begin
    op_e o;
    for (int i = 0; i <= int'(OP_STOREB); i++) begin
      o = op_e'(i);
      foreach (CORNER[x])
        foreach (CORNER[y])
          check(o, CORNER[x], CORNER[y], 1'(x + y), 32'h1234_5678, 32'hCAFE_F00D);
      repeat (200)
        check(o, $urandom, $urandom, 1'($urandom), $urandom, $urandom);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
