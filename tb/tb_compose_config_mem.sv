// tb_compose_config_mem -- self-checking test of the per-PE configuration
// memory: every word reads 0 after reset, random words written to random
// slots read back (asynchronously, in the cycle the slot is presented), and
// a write to one slot leaves the others unchanged.
module tb_compose_config_mem;
  import compose_pkg::*;

  localparam int unsigned DEPTH = 32;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                     rst_n, we;
  logic [$clog2(DEPTH)-1:0] waddr, raddr;
  cfg_t                     wdata, rdata;
  cfg_t                     model [DEPTH];

  compose_config_mem #(.DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr),
                                           .wdata(wdata), .raddr(raddr), .rdata(rdata));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int i = 0; i < DEPTH; i++) begin
      raddr = i[$clog2(DEPTH)-1:0];
      #1;
      checks++;
      if (rdata !== model[i]) begin
        failures++;
        $display("FAIL slot %0d got=%h exp=%h", i, rdata, model[i]);
      end
    end
  endtask

  initial begin
    rst_n = 1'b0; we = 1'b0; waddr = '0; wdata = '0; raddr = '0;
    foreach (model[i]) model[i] = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    check_all();
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      we    = ($urandom % 4) != 0;
      waddr = 5'($urandom);
      wdata = cfg_t'({$urandom, $urandom, $urandom});
      @(posedge clk);
      if (we) model[waddr] = wdata;
      @(negedge clk);
      we = 1'b0;
      if (t % 20 == 0) check_all();
    end
    check_all();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
