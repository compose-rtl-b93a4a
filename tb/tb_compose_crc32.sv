// tb_compose_crc32 -- CRC-32 kernel on the 4x4 composable CGRA at its
// default parameters.
//
// Kernel (reflected CRC-32, polynomial 0xEDB88320, the bitwise form):
//     crc = 0xFFFFFFFF
//     for each byte b of the message:
//         crc ^= b
//         repeat 8: crc = (crc & 1) ? (crc >> 1) ^ POLY : crc >> 1
//     result = ~crc
// The loop-carried value crc passes through a shift, an XOR and a select in
// every bit step. This testbench maps it by hand with II = 11 slots per byte:
//   slot 0     MEM PE(1,0) issues LOADB of the next byte (address counter
//              on PE(0,0)),
//   slot 1     MEM PE(2,0) stores the current crc (address counter on PE(3,0),
//              value routed from PE(1,2) through PE(2,2) and PE(2,1)),
//   slot 2     the loaded byte crosses PE(1,1) and is XORed into crc on
//              PE(1,2),
//   slots 3-10 one bit step per cycle as a three-operation virtual PE:
//              PE(1,2) sends its registered crc west to PE(1,1) (RS by 1,
//              not registered); the shifted value goes east to PE(1,2) and
//              north to PE(0,1) (XOR with POLY, not registered), whose result
//              crosses PE(0,2) by router bypass into PE(1,2), where SELECT,
//              with bit 0 of the registered crc as its predicate input,
//              picks one of the two and registers the new crc.
// Without chaining the same bit step takes three cycles (RS, XOR and SELECT
// each registered), so the byte would need 27 cycles instead of 11.
//
// Checks: the message starts with the ASCII string "123456789", whose
// CRC-32 is the published check value 0xCBF43926. Every stored intermediate
// crc is also compared with the loop above evaluated here. The run length is
// checked, and the testbench counts the bit steps done as a single-cycle
// chain of three operations.
module tb_compose_crc32;
  import compose_pkg::*;

  localparam int unsigned L      = 40;            // message bytes
  localparam int unsigned II_CRC = 11;
  localparam int unsigned DEPTH  = 32;
  localparam logic [31:0] A_IN   = 32'h0000_0400;
  localparam logic [31:0] A_OUT  = 32'h0000_1000;
  localparam logic [31:0] POLY   = 32'hEDB8_8320;

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
  // A bit step counts as chained when PE(1,2) registers a SELECT whose two
  // data operands both arrived unlatched and the XOR and shift feeding them
  // were not registered in that cycle.
  int n_chain3 = 0, n_loadb = 0, n_store = 0;
  cfg_t w12, w11, w01;
  assign w12 = dut.g_row[1].g_col[2].u_pe.cfg;
  assign w11 = dut.g_row[1].g_col[1].u_pe.cfg;
  assign w01 = dut.g_row[0].g_col[1].u_pe.cfg;
  always @(posedge clk) if (busy) begin
    if (w12.op == OP_SELECT && w12.opa.byp && w12.opb.byp && w12.res_we &&
        w11.op == OP_RS && w11.res_byp && !w11.res_we &&
        w01.op == OP_XOR && w01.res_byp && !w01.res_we) n_chain3++;
    if (dut.g_row[1].g_col[0].u_pe.exec && dut.g_row[1].g_col[0].u_pe.cfg.op == OP_LOADB)
      n_loadb++;
    if (dut.g_row[2].g_col[0].u_pe.exec && dut.g_row[2].g_col[0].u_pe.cfg.op == OP_STORE)
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

  // ---------------------------------------------------------------- mapping
  task automatic prologue();
    clear_all(2);
    put(0, 0, 0, movc_latch_b(32'd1));  put(0, 0, 1, movc_res(A_IN));
    put(3, 0, 0, movc_latch_b(32'd4));  put(3, 0, 1, movc_res(A_OUT));
    put(1, 1, 0, movc_latch_b(32'd1));
    put(0, 1, 0, movc_latch_b(POLY));
    put(1, 2, 1, movc_res(32'hFFFF_FFFF));
    run_fabric(2, 2, 1'b0);
  endtask

  task automatic map_crc();
    cfg_t w;
    clear_all(II_CRC);
    // slot 0: byte load
    put(0, 0, 0, counter(DIR_S));
    w = '0; w.op = OP_LOADB; w.opa = pc(SRC_N, 1'b1, 1'b0);
    put(1, 0, 0, w);
    // slot 1: store crc
    put(3, 0, 1, counter(DIR_N));
    put(1, 2, 1, route(DIR_S, SRC_RES));
    put(2, 2, 1, route(DIR_W, SRC_N));
    put(2, 1, 1, route(DIR_W, SRC_E));
    w = '0; w.op = OP_STORE; w.opa = pc(SRC_S, 1'b1, 1'b0); w.opb = pc(SRC_E, 1'b1, 1'b0);
    put(2, 0, 1, w);
    // slot 2: crc ^= byte
    put(1, 0, 2, route(DIR_E, SRC_RES));
    put(1, 1, 2, route(DIR_E, SRC_W));
    w = '0; w.op = OP_XOR; w.opa = pc(SRC_RES, 1'b1, 1'b0); w.opb = pc(SRC_W, 1'b1, 1'b0);
    w.res_we = 1'b1;
    put(1, 2, 2, w);
    // slots 3..10: one bit step per cycle
    for (int s = 3; s < II_CRC; s++) begin
      w = '0; w.op = OP_SELECT;
      w.opa = pc(SRC_N, 1'b1, 1'b0); w.opb = pc(SRC_W, 1'b1, 1'b0);
      w.pred = pc(SRC_RES, 1'b1, 1'b0); w.res_we = 1'b1;
      w.out[DIR_W] = pc(SRC_RES, 1'b1, 1'b0);
      put(1, 2, s, w);                                  // crc = crc[0] ? x : s
      w = '0; w.op = OP_RS;
      w.opa = pc(SRC_E, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
      w.res_byp = 1'b1;
      w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
      w.out[DIR_N] = pc(SRC_RES, 1'b1, 1'b0);
      put(1, 1, s, w);                                  // s = crc >> 1
      w = '0; w.op = OP_XOR;
      w.opa = pc(SRC_S, 1'b1, 1'b0); w.opb = pc(SRC_ZERO, 1'b0, 1'b0);
      w.res_byp = 1'b1;
      w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
      put(0, 1, s, w);                                  // x = s ^ POLY
      put(0, 2, s, route(DIR_S, SRC_W));                // hop down to PE(1,2)
    end
  endtask

  // ------------------------------------------------------------------- main
  initial begin
    logic [7:0]  msg [L];
    logic [31:0] crc_ref [L+1];
    logic [31:0] crc, got;
    string       chkstr;
    rst_n = 1'b0; cfg_we = 1'b0; cfg_pe = '0; cfg_slot = '0; cfg_data = '0;
    start = 1'b0; ii = 1; n_cycles = '0; host_req = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;

    chkstr = "123456789";
    for (int i = 0; i < L; i++) msg[i] = (i < 9) ? chkstr[i] : 8'($urandom);
    crc = 32'hFFFF_FFFF;
    crc_ref[0] = crc;
    for (int i = 0; i < L; i++) begin
      crc ^= 32'(msg[i]);
      for (int k = 0; k < 8; k++) crc = crc[0] ? ((crc >> 1) ^ POLY) : (crc >> 1);
      crc_ref[i+1] = crc;
    end
    // the message is packed little-endian, byte i at byte address A_IN + i
    for (int i = 0; i < L + 4; i += 4) begin
      logic [31:0] wv;
      wv = '0;
      for (int k = 0; k < 4; k++) if (i + k < L) wv[8*k +: 8] = msg[i+k];
      host_write(A_IN + 32'(i), wv);
    end

    prologue();
    map_crc();
    // L iterations plus slots 0 and 1 of one more, which store the final crc
    run_fabric(II_CRC, II_CRC * L + 2, 1'b1);

    for (int i = 0; i <= L; i++) begin
      host_read(A_OUT + 32'(4 * i), got);
      chk(got, crc_ref[i], $sformatf("crc after %0d bytes", i));
    end
    host_read(A_OUT + 32'(4 * 9), got);
    chk(~got, 32'hCBF4_3926, "CRC-32 check value of \"123456789\"");
    $display("CRC-32(\"123456789\") = %h", ~got);

    $display("bit steps as one-cycle 3-op chain : %0d", n_chain3);
    $display("byte loads                        : %0d", n_loadb);
    $display("stores                            : %0d", n_store);
    $display("cycles per byte                   : %0d (27 without chaining)", II_CRC);
    chk(n_chain3, 8 * L, "chained bit steps");
    chk(n_loadb, L + 1, "byte loads");
    chk(n_store, L + 1, "stores");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
