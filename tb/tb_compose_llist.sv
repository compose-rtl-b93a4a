// tb_compose_llist -- linked-list traversal kernel on the 4x4 composable
// CGRA at its default parameters.
//
// Kernel (pointer chasing, a recurrence through memory):
//     sum = 0; p = head
//     for i in 0..N-1:
//         sum += p->val        (word at p + 4)
//         p    = p->next       (word at p)
// The loop-carried pointer goes through a load, which occupies two cycles,
// so the recurrence bounds the schedule at II = 2. The mapping, by hand:
//   slot 0  MEM PE(1,0) loads p->next from the pointer held in its own
//           result register (the previous load's result). The same pointer
//           leaves south through MEM PE(2,0)'s router to PE(2,1), which adds
//           4; the sum comes straight back west, unregistered, as the
//           address of the LOAD that PE(2,0) issues in the same cycle (an
//           ADD chained into a load's address). PE(2,0) also sends the value
//           it loaded in the previous iteration south, and PE(3,0) forwards
//           it east to PE(3,1), which accumulates it.
//   slot 1  MEM PE(3,0) stores the running sum from PE(3,1) to a fixed
//           address (operand register A).
// The list length is the run length of the static schedule (2N+2 cycles:
// the last value is added and stored in one more iteration). The list is
// built by the host in a random order.
//
// Checks: the final sum against the same traversal done here, the run
// length, and that every load and store happened.
module tb_compose_llist;
  import compose_pkg::*;

  localparam int unsigned N      = 64;            // list nodes
  localparam int unsigned DEPTH  = 32;
  localparam logic [31:0] A_LIST = 32'h0000_0800;
  localparam logic [31:0] A_OUT  = 32'h0000_2000;

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
  int n_ld_next = 0, n_ld_val = 0, n_store = 0, n_chained_addr = 0;
  always @(posedge clk) if (busy) begin
    if (dut.g_row[1].g_col[0].u_pe.exec && dut.g_row[1].g_col[0].u_pe.cfg.op == OP_LOAD)
      n_ld_next++;
    if (dut.g_row[2].g_col[0].u_pe.exec && dut.g_row[2].g_col[0].u_pe.cfg.op == OP_LOAD) begin
      n_ld_val++;
      if (dut.g_row[2].g_col[1].u_pe.cfg.op == OP_ADD && dut.g_row[2].g_col[1].u_pe.cfg.res_byp)
        n_chained_addr++;
    end
    if (dut.g_row[3].g_col[0].u_pe.exec && dut.g_row[3].g_col[0].u_pe.cfg.op == OP_STORE)
      n_store++;
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
  task automatic prologue(logic [31:0] head);
    clear_all(2);
    put(1, 0, 1, movc_res(head));
    put(2, 0, 1, movc_res(32'd0));
    put(2, 1, 0, movc_latch_b(32'd4));
    put(3, 0, 0, movc_latch_a(A_OUT));
    put(3, 1, 1, movc_res(32'd0));
    run_fabric(2, 2, 1'b0);
  endtask

  task automatic map_llist();
    cfg_t w;
    clear_all(2);
    // slot 0
    w = '0; w.op = OP_LOAD; w.opa = pc(SRC_RES, 1'b1, 1'b0);
    w.out[DIR_S] = pc(SRC_RES, 1'b1, 1'b0);
    put(1, 0, 0, w);                                    // p = p->next
    w = '0; w.op = OP_LOAD; w.opa = pc(SRC_E, 1'b1, 1'b0);
    w.out[DIR_E] = pc(SRC_N, 1'b1, 1'b0);
    w.out[DIR_S] = pc(SRC_RES, 1'b1, 1'b0);
    put(2, 0, 0, w);                                    // v = load(p + 4)
    w = '0; w.op = OP_ADD; w.opa = pc(SRC_W, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
    w.res_byp = 1'b1;
    w.out[DIR_W] = pc(SRC_RES, 1'b1, 1'b0);
    put(2, 1, 0, w);                                    // p + 4, unregistered
    put(3, 0, 0, route(DIR_E, SRC_N));
    w = '0; w.op = OP_ADD; w.opa = pc(SRC_W, 1'b1, 1'b0); w.opb = pc(SRC_RES, 1'b1, 1'b0);
    w.res_we = 1'b1;
    put(3, 1, 0, w);                                    // sum += v
    // slot 1
    put(3, 1, 1, route(DIR_W, SRC_RES));
    w = '0; w.op = OP_STORE; w.opa = pc(SRC_ZERO, 1'b0, 1'b0); w.opb = pc(SRC_E, 1'b1, 1'b0);
    put(3, 0, 1, w);                                    // out = sum
  endtask

  // ------------------------------------------------------------------- main
  initial begin
    int          order [N];
    logic [31:0] val [N];
    logic [31:0] sum, got, head;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_pe = '0; cfg_slot = '0; cfg_data = '0;
    start = 1'b0; ii = 1; n_cycles = '0; host_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    // node k lives at A_LIST + 8k; visit order is a random permutation
    for (int k = 0; k < N; k++) order[k] = k;
    for (int k = N - 1; k > 0; k--) begin
      int j, t;
      j = int'($urandom % (k + 1));
      t = order[k];
      order[k] = order[j]; order[j] = t;
    end
    sum = '0;
    for (int i = 0; i < N; i++) begin
      logic [31:0] node, nextp;
      node  = A_LIST + 32'(8 * order[i]);
      nextp = (i + 1 < N) ? A_LIST + 32'(8 * order[i+1]) : 32'd0;
      val[i] = $urandom;
      sum += val[i];
      host_write(node, nextp);
      host_write(node + 32'd4, val[i]);
    end
    head = A_LIST + 32'(8 * order[0]);

    prologue(head);
    map_llist();
    run_fabric(2, 2 * N + 2, 1'b1);

    host_read(A_OUT, got);
    chk(got, sum, "list sum");
    $display("list sum = %h (expected %h)", got, sum);
    $display("next-pointer loads   : %0d", n_ld_next);
    $display("value loads          : %0d", n_ld_val);
    $display("  with chained address: %0d", n_chained_addr);
    $display("stores               : %0d", n_store);
    chk(n_ld_next, N + 1, "next-pointer loads");
    chk(n_ld_val, N + 1, "value loads");
    chk(n_chained_addr, N + 1, "ADD chained into load address");
    chk(n_store, N + 1, "stores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
