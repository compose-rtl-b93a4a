// tb_compose_cgra -- end-to-end test of the 4x4 composable CGRA at its
// default parameters.
//
// Kernel (a loop-carried recurrence with a data-dependent predicate):
//     acc = ACC0
//     for j in 0..N-1:
//         v   = in[j]
//         if (v & 1) acc = (acc ^ v) + K
//         out[j] = acc
// It is mapped twice by hand and the results are compared with the same
// loop evaluated here in plain SystemVerilog.
//
// Mapping A, composed (II = 1): the recurrence XOR -> ADD runs on PE(1,1)
// and PE(1,2) within one clock cycle; the XOR result travels 4 hops
// (1,1) -> (0,1) -> (0,2) -> (1,2) through bypassed routers and is never
// registered; only the ADD result (the loop-carried value) is. The predicate
// v & 1 is computed on PE(2,1) and routed to PE(1,2)'s predication mux in
// the same cycle. MEM PE(1,0) loads v (address counter on PE(0,0)), MEM
// PE(2,0) stores acc (address counter on PE(3,0)). One iteration per cycle.
//
// Mapping B, conventional (II = 2): the same kernel with the XOR result
// written to its result register at a cycle boundary, as a CGRA without
// chaining must do; the recurrence then needs two cycles per iteration.
//
// A two-slot prologue run before each mapping loads constants into operand
// registers and initial values into result registers (MOVC). Between the
// runs the configuration memories are rewritten. The test checks all
// stored outputs, the run lengths (N+3 and 2N+4 cycles from start to done)
// and counts each mechanism of the fabric, failing if one never occurred.
module tb_compose_cgra;
  import compose_pkg::*;

  localparam int unsigned N      = 200;
  localparam int unsigned DEPTH  = 32;   // default configuration depth
  localparam logic [31:0] A_IN   = 32'h0000_0100;
  localparam logic [31:0] A_OUT1 = 32'h0000_2000;
  localparam logic [31:0] A_OUT2 = 32'h0000_3000;
  localparam logic [31:0] K      = 32'h1357_9BDF;
  localparam logic [31:0] ACC0   = 32'h0F0F_1234;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      rst_n, cfg_we, start, busy, done;
  logic [3:0]                cfg_pe;
  logic [$clog2(DEPTH)-1:0]  cfg_slot;
  cfg_t                      cfg_data;
  logic [$clog2(DEPTH):0]    ii;
  logic [31:0]               n_cycles, cycle;
  mem_req_t                  host_req;
  logic [31:0]               host_rdata;

  compose_cgra dut (
    .clk(clk), .rst_n(rst_n), .cfg_we(cfg_we), .cfg_pe(cfg_pe), .cfg_slot(cfg_slot),
    .cfg_data(cfg_data), .start(start), .ii(ii), .n_cycles(n_cycles), .busy(busy),
    .done(done), .cycle(cycle), .host_req(host_req), .host_rdata(host_rdata));

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s got=%h exp=%h", what, got, exp);
    end
  endtask

  // ---------------------------------------------------------------- monitors
  // Per-PE counts of the fabric's mechanisms while the array runs.
  int m_opnd_byp [16], m_opnd_reg [16], m_res_byp [16], m_fwd [16],
      m_squash [16], m_load [16], m_store [16], m_deferred [16], m_res_wr [16];
  int m_slot1 = 0;

  for (genvar r = 0; r < 4; r++) begin : g_mr
    for (genvar c = 0; c < 4; c++) begin : g_mc
      localparam int I = r * 4 + c;
      cfg_t w;
      logic ex;
      logic is_alu;
      assign w  = dut.g_row[r].g_col[c].u_pe.cfg;
      assign ex = dut.g_row[r].g_col[c].u_pe.exec;
      assign is_alu = !(w.op inside {OP_NOP, OP_MOVC, OP_LOAD, OP_STORE, OP_LOADB, OP_STOREB});
      initial begin
        m_opnd_byp[I] = 0; m_opnd_reg[I] = 0; m_res_byp[I] = 0; m_fwd[I] = 0;
        m_squash[I] = 0; m_load[I] = 0; m_store[I] = 0; m_deferred[I] = 0; m_res_wr[I] = 0;
      end
      always @(posedge clk) if (busy) begin
        if (is_alu && (w.opa.byp || w.opb.byp)) m_opnd_byp[I]++;
        if (is_alu && !w.opb.byp) m_opnd_reg[I]++;
        if (is_alu && w.res_byp) m_res_byp[I]++;
        for (int d = 0; d < 4; d++)
          if (w.out[d].byp && w.out[d].sel inside {SRC_N, SRC_E, SRC_S, SRC_W}) m_fwd[I]++;
        if (w.pred_en && !ex) m_squash[I]++;
        if (ex && w.op == OP_LOAD) m_load[I]++;
        if (ex && w.op == OP_STORE) m_store[I]++;
        if (is_alu && !w.res_we) m_deferred[I]++;
        if (is_alu && w.res_we && ex) m_res_wr[I]++;
      end
    end
  end
  always @(posedge clk) if (busy && dut.slot == 1) m_slot1++;

  function automatic int total(int a [16]);
    int s = 0;
    foreach (a[i]) s += a[i];
    return s;
  endfunction

  // ------------------------------------------------------------- host access
  task automatic host_write(logic [31:0] addr, logic [31:0] data);
    @(negedge clk);
    host_req = '0;
    host_req.en = 1'b1; host_req.we = 1'b1; host_req.be = 4'hF;
    host_req.addr = addr; host_req.wdata = data;
    @(negedge clk);
    host_req = '0;
  endtask

  task automatic host_read(logic [31:0] addr, output logic [31:0] data);
    @(negedge clk);
    host_req = '0;
    host_req.en = 1'b1; host_req.addr = addr;
    @(negedge clk);
    host_req = '0;
    data = host_rdata;
  endtask

  // ------------------------------------------------------------ configuring
  function automatic port_cfg_t pc(src_e s, logic byp, logic we);
    port_cfg_t p;
    p.sel = s; p.byp = byp; p.we = we;
    return p;
  endfunction

  task automatic put(int r, int c, int s, cfg_t w);
    @(negedge clk);
    cfg_we = 1'b1; cfg_pe = 4'(r * 4 + c); cfg_slot = s[$clog2(DEPTH)-1:0]; cfg_data = w;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic clear_all();
    for (int i = 0; i < 16; i++)
      for (int s = 0; s < 2; s++) put(i / 4, i % 4, s, '0);
  endtask

  function automatic cfg_t movc_latch_b(logic [31:0] k);
    cfg_t w = '0;
    w.op = OP_MOVC; w.cnst = k; w.res_byp = 1'b1;
    w.opb = pc(SRC_RES, 1'b0, 1'b1);
    return w;
  endfunction

  function automatic cfg_t movc_res(logic [31:0] k);
    cfg_t w = '0;
    w.op = OP_MOVC; w.cnst = k; w.res_we = 1'b1;
    return w;
  endfunction

  // constants into operand-B registers (slot 0), initial values (slot 1)
  task automatic prologue(logic [31:0] st0);
    clear_all();
    put(0, 0, 0, movc_latch_b(32'd4));  put(0, 0, 1, movc_res(A_IN));
    put(3, 0, 0, movc_latch_b(32'd4));  put(3, 0, 1, movc_res(st0));
    put(1, 2, 0, movc_latch_b(K));      put(1, 2, 1, movc_res(ACC0));
    put(2, 1, 0, movc_latch_b(32'd1));
    run_fabric(2, 2, 1'b0);
  endtask

  task automatic run_fabric(int ii_v, int n, logic check_len);
    int t0, t1;
    @(negedge clk);
    ii = ($clog2(DEPTH)+1)'(ii_v); n_cycles = n; start = 1'b1;
    t0 = $time;
    @(negedge clk);
    start = 1'b0;
    while (!done) @(negedge clk);
    t1 = $time;
    if (check_len) chk((t1 - t0) / 10, n + 1, "cycles from start to done");
  endtask

  // counter: res = res + opB (4); its registered value leaves on `dir`
  function automatic cfg_t counter(int dir);
    cfg_t w = '0;
    w.op = OP_ADD; w.opa = pc(SRC_RES, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
    w.res_we = 1'b1;
    w.out[dir] = pc(SRC_RES, 1'b1, 1'b0);
    return w;
  endfunction

  function automatic cfg_t route(int d0, src_e s0, int d1 = -1, src_e s1 = SRC_ZERO);
    cfg_t w = '0;
    w.out[d0] = pc(s0, 1'b1, 1'b0);
    if (d1 >= 0) w.out[d1] = pc(s1, 1'b1, 1'b0);
    return w;
  endfunction

  // ---------------------------------------------------------------- mappings
  task automatic map_composed();
    cfg_t w;
    clear_all();
    put(0, 0, 0, counter(DIR_S));                       // load address
    put(3, 0, 0, counter(DIR_N));                       // store address
    w = '0; w.op = OP_LOAD; w.opa = pc(SRC_N, 1'b1, 1'b0);
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    put(1, 0, 0, w);                                    // v = load
    w = '0; w.op = OP_XOR; w.opa = pc(SRC_E, 1'b1, 1'b0); w.opb = pc(SRC_W, 1'b1, 1'b0);
    w.res_byp = 1'b1;
    w.out[DIR_N] = pc(SRC_RES, 1'b1, 1'b0);
    w.out[DIR_S] = pc(SRC_W, 1'b1, 1'b0);
    put(1, 1, 0, w);                                    // acc ^ v, not registered
    put(0, 1, 0, route(DIR_E, SRC_S));                  // hop
    put(0, 2, 0, route(DIR_S, SRC_W));                  // hop
    w = '0; w.op = OP_ADD; w.opa = pc(SRC_N, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
    w.pred = pc(SRC_S, 1'b1, 1'b0); w.pred_en = 1'b1; w.res_we = 1'b1;
    w.out[DIR_W] = pc(SRC_RES, 1'b1, 1'b0);
    w.out[DIR_S] = pc(SRC_RES, 1'b1, 1'b0);
    put(1, 2, 0, w);                                    // acc = (acc ^ v) + K if v odd
    w = '0; w.op = OP_AND; w.opa = pc(SRC_N, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
    w.res_byp = 1'b1;
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    w.out[DIR_W] = pc(SRC_E, 1'b1, 1'b0);
    put(2, 1, 0, w);                                    // predicate v & 1
    put(2, 2, 0, route(DIR_N, SRC_W, DIR_W, SRC_N));    // predicate up, acc west
    w = '0; w.op = OP_STORE; w.opa = pc(SRC_S, 1'b1, 1'b0); w.opb = pc(SRC_E, 1'b1, 1'b0);
    put(2, 0, 0, w);                                    // out = acc
  endtask

  task automatic map_registered();
    cfg_t w;
    clear_all();
    // slot 0: load, XOR into the result register, store, counters
    put(0, 0, 0, counter(DIR_S));
    put(3, 0, 0, counter(DIR_N));
    w = '0; w.op = OP_LOAD; w.opa = pc(SRC_N, 1'b1, 1'b0);
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    put(1, 0, 0, w);
    w = '0; w.op = OP_XOR; w.opa = pc(SRC_E, 1'b1, 1'b0); w.opb = pc(SRC_W, 1'b1, 1'b0);
    w.res_we = 1'b1;
    put(1, 1, 0, w);
    put(1, 2, 0, route(DIR_W, SRC_RES, DIR_S, SRC_RES));
    put(2, 2, 0, route(DIR_W, SRC_N));
    put(2, 1, 0, route(DIR_W, SRC_E));
    w = '0; w.op = OP_STORE; w.opa = pc(SRC_S, 1'b1, 1'b0); w.opb = pc(SRC_E, 1'b1, 1'b0);
    put(2, 0, 0, w);
    // slot 1: registered XOR result to the ADD, predicate, ADD
    put(1, 0, 1, route(DIR_E, SRC_RES));
    put(1, 1, 1, route(DIR_N, SRC_RES, DIR_S, SRC_W));
    put(0, 1, 1, route(DIR_E, SRC_S));
    put(0, 2, 1, route(DIR_S, SRC_W));
    w = '0; w.op = OP_ADD; w.opa = pc(SRC_N, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
    w.pred = pc(SRC_S, 1'b1, 1'b0); w.pred_en = 1'b1; w.res_we = 1'b1;
    put(1, 2, 1, w);
    w = '0; w.op = OP_AND; w.opa = pc(SRC_N, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
    w.res_byp = 1'b1;
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    put(2, 1, 1, w);
    put(2, 2, 1, route(DIR_N, SRC_W));
  endtask

  // ------------------------------------------------------------------- main
  initial begin
    logic [31:0] vin [N];
    logic [31:0] acc_ref [N];
    logic [31:0] acc, got;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_pe = '0; cfg_slot = '0; cfg_data = '0;
    start = 1'b0; ii = 1; n_cycles = '0; host_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // input data and reference results
    acc = ACC0;
    for (int j = 0; j < N; j++) begin
      vin[j] = $urandom;
      if (vin[j][0]) acc = (acc ^ vin[j]) + K;
      acc_ref[j] = acc;
      host_write(A_IN + 32'(4 * j), vin[j]);
    end
    // the loop's trailing loads read past the input: keep those words even
    for (int j = N; j < N + 4; j++) host_write(A_IN + 32'(4 * j), 32'd0);

    // mapping A: composed, II = 1, one iteration per cycle
    prologue(A_OUT1 - 32'd12);
    map_composed();
    run_fabric(1, N + 3, 1'b1);
    for (int j = 0; j < N; j++) begin
      host_read(A_OUT1 + 32'(4 * j), got);
      chk(got, acc_ref[j], $sformatf("composed out[%0d]", j));
    end

    // mapping B: XOR registered, II = 2
    prologue(A_OUT2 - 32'd8);
    map_registered();
    run_fabric(2, 2 * N + 4, 1'b1);
    for (int j = 0; j < N; j++) begin
      host_read(A_OUT2 + 32'(4 * j), got);
      chk(got, acc_ref[j], $sformatf("registered out[%0d]", j));
    end

    // every mechanism must have occurred
    begin
      int cnt [10];
      string nm [10];
      cnt[0] = total(m_opnd_byp);  nm[0] = "operand bypass (chained operand)";
      cnt[1] = total(m_opnd_reg);  nm[1] = "registered operand";
      cnt[2] = total(m_res_byp);   nm[2] = "result bypass";
      cnt[3] = total(m_fwd);       nm[3] = "combinational multi-hop forward";
      cnt[4] = total(m_squash);    nm[4] = "predicated squash";
      cnt[5] = total(m_load);      nm[5] = "load";
      cnt[6] = total(m_store);     nm[6] = "store";
      cnt[7] = total(m_deferred);  nm[7] = "ALU result left unregistered";
      cnt[8] = total(m_res_wr);    nm[8] = "result register write";
      cnt[9] = m_slot1;            nm[9] = "II > 1 slot sequencing";
      for (int i = 0; i < 10; i++) begin
        $display("mechanism %-34s : %0d", nm[i], cnt[i]);
        checks++;
        if (cnt[i] == 0) begin
          failures++;
          $display("FAIL mechanism never occurred: %s", nm[i]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
