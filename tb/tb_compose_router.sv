// tb_compose_router -- self-checking test of the PE crossbar and output stage.
//
// Random configuration words and inputs are applied each cycle. A model kept
// here holds the four output registers and predicts, per cycle, every mesh
// output (crossbar value when bypassed, register otherwise) and the three
// compute-side crossbar outputs; register writes follow `we` and `run`.
module tb_compose_router;
  import compose_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                        rst_n, run;
  cfg_t                        cfg;
  logic [NDIR-1:0][31:0]       in, out;
  logic [31:0]                 res_x, xa, xb, xp;
  logic [NDIR-1:0][31:0]       mreg;
  int                          n_byp = 0, n_reg = 0;

  compose_router dut (.clk(clk), .rst_n(rst_n), .run(run), .cfg(cfg), .in(in),
                      .res_x(res_x), .out(out), .xa(xa), .xb(xb), .xp(xp));

  function automatic logic [31:0] src(src_e s);
    case (s)
      SRC_N:   return in[0];
      SRC_E:   return in[1];
      SRC_S:   return in[2];
      SRC_W:   return in[3];
      SRC_RES: return res_x;
      default: return 32'd0;
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

  initial begin
    rst_n = 1'b0; run = 1'b0; cfg = '0; in = '0; res_x = '0;
    mreg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < 4000; t++) begin
      run = ($urandom % 8) != 0;
      cfg = cfg_t'({$urandom, $urandom, $urandom});
      for (int d = 0; d < NDIR; d++) begin
        cfg.out[d].sel = src_e'($urandom % 6);
      end
      cfg.opa.sel  = src_e'($urandom % 6);
      cfg.opb.sel  = src_e'($urandom % 6);
      cfg.pred.sel = src_e'($urandom % 6);
      in = {$urandom, $urandom, $urandom, $urandom};
      res_x = $urandom;
      #1;
      for (int d = 0; d < NDIR; d++) begin
        chk(out[d], cfg.out[d].byp ? src(cfg.out[d].sel) : mreg[d], $sformatf("out[%0d]", d));
        if (cfg.out[d].byp) n_byp++; else n_reg++;
      end
      chk(xa, src(cfg.opa.sel), "xa");
      chk(xb, src(cfg.opb.sel), "xb");
      chk(xp, src(cfg.pred.sel), "xp");
      @(posedge clk);
      for (int d = 0; d < NDIR; d++)
        if (run && cfg.out[d].we) mreg[d] = src(cfg.out[d].sel);
      @(negedge clk);
    end
    // a register keeps its value while run is low
    checks++;
    if (n_byp == 0 || n_reg == 0) failures++;
    $display("bypassed outputs=%0d registered outputs=%0d", n_byp, n_reg);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
