// tb_compose_gemm -- inner-product kernel of matrix multiplication on the
// 4x4 composable CGRA at its default parameters.
//
// Kernel (one element of C = A x B, a row of A times a column of B):
//     acc = 0
//     for k in 0..K-1: acc += a[k] * b[k]
// The multiply and the accumulate form one virtual PE: PE(1,1) multiplies
// without registering the product, and PE(1,2) adds it to its registered
// accumulator in the same cycle, so the loop runs at II = 1. MEM PE(1,0)
// loads a[k] (address counter on PE(0,0)); MEM PE(2,0) loads b[k]
// (address counter on PE(3,0)), routed through PE(2,1) north into PE(1,1).
// A load's data sits in the result register two cycles after issue, so the
// MAC of cycle c uses the loads of cycle c-2; the run lasts K+2 cycles, and
// the first two MACs multiply the zeroed result registers. A short second
// run stores the accumulator through MEM PE(1,0). Several rows and columns
// are computed one after another, each with freshly loaded schedules.
//
// Checks: every element against the product computed here (low 32 bits),
// the run length, and the number of chained multiply-accumulates.
module tb_compose_gemm;
  import compose_pkg::*;

  localparam int unsigned K      = 48;            // inner dimension
  localparam int unsigned NEL    = 6;             // elements of C computed
  localparam int unsigned DEPTH  = 32;
  localparam logic [31:0] A_A    = 32'h0000_0400;
  localparam logic [31:0] A_B    = 32'h0000_1000;
  localparam logic [31:0] A_C    = 32'h0000_2000;

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
    repeat (100000) @(posedge clk);
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

  // ------------------------------------------------------------- monitors
  int n_mac = 0, n_ld = 0;
  cfg_t w11, w12;
  assign w11 = dut.g_row[1].g_col[1].u_pe.cfg;
  assign w12 = dut.g_row[1].g_col[2].u_pe.cfg;
  always @(posedge clk) if (busy) begin
    if (w11.op == OP_MUL && w11.res_byp && !w11.res_we && w12.op == OP_ADD && w12.opa.byp)
      n_mac++;
    if (dut.g_row[1].g_col[0].u_pe.exec && dut.g_row[1].g_col[0].u_pe.cfg.op == OP_LOAD) n_ld++;
    if (dut.g_row[2].g_col[0].u_pe.exec && dut.g_row[2].g_col[0].u_pe.cfg.op == OP_LOAD) n_ld++;
  end

  // ---------------------------------------------------------------- helpers
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

  task automatic clear_all(int slots);
    for (int i = 0; i < 16; i++)
      for (int s = 0; s < slots; s++) put(i / 4, i % 4, s, '0);
  endtask

  function automatic cfg_t route(int d0, src_e s0, int d1 = -1, src_e s1 = SRC_ZERO);
    cfg_t w = '0;
    w.out[d0] = pc(s0, 1'b1, 1'b0);
    if (d1 >= 0) w.out[d1] = pc(s1, 1'b1, 1'b0);
    return w;
  endfunction

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

  // res = res + operand-B register; the old value leaves on `dir`
  function automatic cfg_t counter(int dir);
    cfg_t w = '0;
    w.op = OP_ADD; w.opa = pc(SRC_RES, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
    w.res_we = 1'b1;
    w.out[dir] = pc(SRC_RES, 1'b1, 1'b0);
    return w;
  endfunction

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

  function automatic cfg_t movc_latch_a(logic [31:0] k);
    cfg_t w = '0;
    w.op = OP_MOVC; w.cnst = k; w.res_byp = 1'b1;
    w.opa = pc(SRC_RES, 1'b0, 1'b1);
    return w;
  endfunction

  // ---------------------------------------------------------------- mapping
  // a: row i of A (K words from A_A + 4*K*i), b: column j of B (B is stored
  // transposed, K words from A_B + 4*K*j)
  task automatic prologue(logic [31:0] pa, logic [31:0] pb);
    clear_all(2);
    put(0, 0, 0, movc_latch_b(32'd4));  put(0, 0, 1, movc_res(pa));
    put(3, 0, 0, movc_latch_b(32'd4));  put(3, 0, 1, movc_res(pb));
    put(1, 0, 1, movc_res(32'd0));
    put(2, 0, 1, movc_res(32'd0));
    put(1, 2, 1, movc_res(32'd0));
    run_fabric(2, 2, 1'b0);
  endtask

  task automatic map_mac();
    cfg_t w;
    clear_all(2);
    put(0, 0, 0, counter(DIR_S));
    put(3, 0, 0, counter(DIR_N));
    w = '0; w.op = OP_LOAD; w.opa = pc(SRC_N, 1'b1, 1'b0);
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    put(1, 0, 0, w);                                    // a[k]
    w = '0; w.op = OP_LOAD; w.opa = pc(SRC_S, 1'b1, 1'b0);
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    put(2, 0, 0, w);                                    // b[k]
    put(2, 1, 0, route(DIR_N, SRC_W));
    w = '0; w.op = OP_MUL; w.opa = pc(SRC_W, 1'b1, 1'b0); w.opb = pc(SRC_S, 1'b1, 1'b0);
    w.res_byp = 1'b1;
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    put(1, 1, 0, w);                                    // a*b, unregistered
    w = '0; w.op = OP_ADD; w.opa = pc(SRC_W, 1'b1, 1'b0); w.opb = pc(SRC_RES, 1'b1, 1'b0);
    w.res_we = 1'b1;
    put(1, 2, 0, w);                                    // acc += a*b
  endtask

  task automatic store_acc(logic [31:0] addr);
    cfg_t w;
    clear_all(2);
    put(1, 0, 0, movc_latch_a(addr));
    w = '0; w.op = OP_STORE; w.opa = pc(SRC_ZERO, 1'b0, 1'b0); w.opb = pc(SRC_E, 1'b1, 1'b0);
    put(1, 0, 1, w);
    put(1, 1, 1, route(DIR_W, SRC_E));
    put(1, 2, 1, route(DIR_W, SRC_RES));
    run_fabric(2, 2, 1'b0);
  endtask

  // ------------------------------------------------------------------- main
  initial begin
    logic [31:0] am [NEL][K];
    logic [31:0] bm [NEL][K];
    logic [31:0] cref [NEL];
    logic [31:0] got;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_pe = '0; cfg_slot = '0; cfg_data = '0;
    start = 1'b0; ii = 1; n_cycles = '0; host_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    for (int e = 0; e < NEL; e++) begin
      cref[e] = '0;
      for (int k = 0; k < K; k++) begin
        am[e][k] = (e == 0) ? 32'(k + 1) : $urandom;
        bm[e][k] = (e == 0) ? 32'(k + 1) : $urandom;
        cref[e] += am[e][k] * bm[e][k];
        host_write(A_A + 32'(4 * (K * e + k)), am[e][k]);
        host_write(A_B + 32'(4 * (K * e + k)), bm[e][k]);
      end
    end
    // element 0 is sum of k^2 for k = 1..K, known in closed form
    chk(cref[0], 32'(K * (K + 1) * (2 * K + 1) / 6), "closed-form reference");

    for (int e = 0; e < NEL; e++) begin
      prologue(A_A + 32'(4 * K * e), A_B + 32'(4 * K * e));
      map_mac();
      run_fabric(1, K + 2, 1'b1);
      store_acc(A_C + 32'(4 * e));
    end
    for (int e = 0; e < NEL; e++) begin
      host_read(A_C + 32'(4 * e), got);
      chk(got, cref[e], $sformatf("C element %0d", e));
    end
    $display("chained multiply-accumulates : %0d", n_mac);
    $display("operand loads                : %0d", n_ld);
    chk(n_mac, NEL * (K + 2), "chained MACs");
    chk(n_ld, 2 * NEL * (K + 2), "loads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
