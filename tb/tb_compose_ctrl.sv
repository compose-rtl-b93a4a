// tb_compose_ctrl -- self-checking test of the schedule sequencer.
//
// Starts runs with several initiation intervals (including 0 and values
// above the depth, which are clamped) and run lengths, and checks cycle by
// cycle that `slot` equals cycle mod II, that `run` lasts exactly n_cycles
// cycles, that `done` pulses once right after, and that `start` is ignored
// while a run is in progress.
module tb_compose_ctrl;

  localparam int unsigned DEPTH = 32;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      rst_n, start, run, done;
  logic [$clog2(DEPTH):0]    ii;
  logic [31:0]               n_cycles, cycle;
  logic [$clog2(DEPTH)-1:0]  slot;

  compose_ctrl #(.DEPTH(DEPTH)) dut (.clk(clk), .rst_n(rst_n), .start(start), .ii(ii),
                                     .n_cycles(n_cycles), .run(run), .slot(slot),
                                     .cycle(cycle), .done(done));

  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s got=%0d exp=%0d", what, got, exp);
    end
  endtask

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic do_run(int ii_in, int n);
    int eii;
    eii = (ii_in == 0) ? 1 : (ii_in > DEPTH ? DEPTH : ii_in);
    @(negedge clk);
    start = 1'b1; ii = ($clog2(DEPTH)+1)'(ii_in); n_cycles = n;
    @(negedge clk);
    start = 1'b1;  // ignored while running
    ii = 3;
    for (int c = 0; c < n; c++) begin
      chk(int'(run), 1, "run");
      chk(int'(slot), c % eii, "slot");
      chk(int'(cycle), c, "cycle");
      chk(int'(done), 0, "done early");
      @(negedge clk);
      start = 1'b0;
    end
    chk(int'(run), 0, "run after end");
    chk(int'(done), 1, "done");
    @(negedge clk);
    chk(int'(done), 0, "done one cycle");
  endtask

  initial begin
    rst_n = 1'b0; start = 1'b0; ii = 1; n_cycles = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    do_run(1, 5);
    do_run(2, 9);
    do_run(3, 10);
    do_run(7, 40);
    do_run(0, 4);
    do_run(40, 70);
    do_run(32, 65);
    // n_cycles = 0 never starts
    @(negedge clk);
    start = 1'b1; ii = 2; n_cycles = 0;
    @(negedge clk);
    start = 1'b0;
    chk(int'(run), 0, "zero-length run");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
