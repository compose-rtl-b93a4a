// tb_compose_pe -- self-checking test of one memory-capable PE tile.
//
// The tile is programmed with a four-slot schedule (II = 4) through its
// configuration write port and then run for many iterations with random mesh
// inputs, against a memory model kept here:
//   slot 0: ADD of input N (bypassed, or the operand register latched in
//           slot 3, alternating between runs) and input W (bypassed); the sum
//           leaves east combinationally in the same cycle and is also written
//           to the result register and to the south output register.
//   slot 1: LOAD from the address on input N; east output shows the
//           registered sum of slot 0 through the RES multiplexer.
//   slot 2: STORE of input W to the address on input N, predicated on bit 0
//           of input S (squashed when 0); the load data returns and is
//           written to the result register.
//   slot 3: west output shows the loaded word (two cycles after issue);
//           input N is latched into the operand register A.
// The south output is always registered, the others bypass their registers.
module tb_compose_pe;
  import compose_pkg::*;

  localparam int unsigned DEPTH = 32;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                      rst_n, run, cfg_we;
  logic [$clog2(DEPTH)-1:0]  slot, cfg_waddr;
  cfg_t                      cfg_wdata;
  logic [NDIR-1:0][31:0]     in, out;
  mem_req_t                  mem_req;
  logic [31:0]               mem_rdata;
  logic [31:0]               mem [16];

  compose_pe #(.CFG_DEPTH(DEPTH), .MEM_PE(1'b1)) dut (
    .clk(clk), .rst_n(rst_n), .run(run), .slot(slot), .cfg_we(cfg_we),
    .cfg_waddr(cfg_waddr), .cfg_wdata(cfg_wdata), .in(in), .out(out),
    .mem_req(mem_req), .mem_rdata(mem_rdata));

  always_ff @(posedge clk) begin
    if (mem_req.en && !mem_req.we) mem_rdata <= mem[mem_req.addr[5:2]];
    if (mem_req.en && mem_req.we)
      for (int k = 0; k < 4; k++)
        if (mem_req.be[k]) mem[mem_req.addr[5:2]][8*k +: 8] <= mem_req.wdata[8*k +: 8];
  end

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

  function automatic port_cfg_t pc(src_e s, logic byp, logic we);
    port_cfg_t p;
    p.sel = s; p.byp = byp; p.we = we;
    return p;
  endfunction

  task automatic write_cfg(int s, cfg_t w);
    @(negedge clk);
    cfg_we = 1'b1; cfg_waddr = s[$clog2(DEPTH)-1:0]; cfg_wdata = w;
    @(negedge clk);
    cfg_we = 1'b0;
  endtask

  task automatic load_schedule(logic a_bypass);
    cfg_t w;
    // slot 0
    w = '0;
    w.op = OP_ADD; w.opa = pc(SRC_N, a_bypass, 1'b0); w.opb = pc(SRC_W, 1'b1, 1'b0);
    w.res_byp = 1'b1; w.res_we = 1'b1;
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    w.out[DIR_S] = pc(SRC_RES, 1'b0, 1'b1);
    write_cfg(0, w);
    // slot 1
    w = '0;
    w.op = OP_LOAD; w.opa = pc(SRC_N, 1'b1, 1'b0);
    w.out[DIR_E] = pc(SRC_RES, 1'b1, 1'b0);
    write_cfg(1, w);
    // slot 2
    w = '0;
    w.op = OP_STORE; w.opa = pc(SRC_N, 1'b1, 1'b0); w.opb = pc(SRC_W, 1'b1, 1'b0);
    w.pred = pc(SRC_S, 1'b1, 1'b0); w.pred_en = 1'b1;
    write_cfg(2, w);
    // slot 3
    w = '0;
    w.opa = pc(SRC_N, 1'b0, 1'b1);
    w.out[DIR_W] = pc(SRC_RES, 1'b1, 1'b0);
    write_cfg(3, w);
  endtask

  logic [31:0] m_res, m_areg, m_sreg, m_mem [16];
  int n_squash = 0, n_store = 0;

  task automatic run_iters(logic a_bypass, int iters);
    logic [31:0] sum;
    for (int it = 0; it < iters; it++) begin
      for (int s = 0; s < 4; s++) begin
        run  = 1'b1;
        slot = s[$clog2(DEPTH)-1:0];
        in   = {$urandom, $urandom, $urandom, $urandom};
        in[DIR_N] = {26'b0, 4'($urandom), 2'b00};
        #1;
        case (s)
          0: begin
            sum = (a_bypass ? in[DIR_N] : m_areg) + in[DIR_W];
            chk(out[DIR_E], sum, "slot0 chained sum east");
            chk(out[DIR_S], m_sreg, "slot0 registered south");
            chk(32'(mem_req.en), 0, "slot0 no mem");
          end
          1: begin
            chk(out[DIR_E], m_res, "slot1 registered result");
            chk(32'(mem_req.en), 1, "slot1 load issued");
            chk(mem_req.addr, in[DIR_N], "slot1 load addr");
          end
          2: begin
            chk(32'(mem_req.en), 32'(in[DIR_S][0]), "slot2 predicated store");
            if (in[DIR_S][0]) begin
              m_mem[in[DIR_N][5:2]] = in[DIR_W];
              n_store++;
            end else n_squash++;
          end
          default: begin
            chk(out[DIR_W], m_res, "slot3 load data");
            chk(out[DIR_S], m_sreg, "slot3 registered south");
          end
        endcase
        @(posedge clk);
        case (s)
          0: begin m_res = sum; m_sreg = sum; end
          1: ;
          2: m_res = ld_snapshot;
          default: m_areg = in[DIR_N];
        endcase
        @(negedge clk);
      end
    end
    run = 1'b0;
  endtask

  // value the load of slot 1 read: memory contents at issue time
  logic [31:0] ld_snapshot;
  always @(posedge clk) if (mem_req.en && !mem_req.we) ld_snapshot <= m_mem[mem_req.addr[5:2]];

  initial begin
    rst_n = 1'b0; run = 1'b0; slot = '0; cfg_we = 1'b0; cfg_waddr = '0; cfg_wdata = '0;
    in = '0;
    for (int i = 0; i < 16; i++) begin
      mem[i] = 32'h0BAD_0000 + 32'(i * 7);
      m_mem[i] = mem[i];
    end
    m_res = '0; m_areg = '0; m_sreg = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    load_schedule(1'b1);
    run_iters(1'b1, 200);
    load_schedule(1'b0);
    run_iters(1'b0, 200);
    // idle: nothing changes while run is low
    @(negedge clk);
    in = '1;
    #1 chk(out[DIR_S], m_sreg, "idle registered south");
    checks++;
    if (n_squash == 0 || n_store == 0) failures++;
    $display("stores=%0d squashed=%0d", n_store, n_squash);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
