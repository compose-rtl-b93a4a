// tb_compose_lsu -- self-checking test of the load-store unit.
//
// The LSU is connected to a small memory model kept here (one-cycle read
// latency, byte-enable writes). Random LOAD/STORE/LOADB/STOREB operations
// and non-memory operations are issued; the test checks the request fields
// in the issue cycle, that load data is presented exactly one cycle after
// issue (so it lands in the result register for use two cycles after issue),
// with byte extraction for LOADB, and that non-issued or non-memory
// operations raise no request.
module tb_compose_lsu;
  import compose_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, issue, ld_valid;
  op_e         op;
  logic [31:0] addr, wdata, rdata, ld_data;
  mem_req_t    req;
  logic [31:0] mem [64];

  compose_lsu dut (.clk(clk), .rst_n(rst_n), .op(op), .issue(issue), .addr(addr),
                   .wdata(wdata), .req(req), .rdata(rdata), .ld_valid(ld_valid),
                   .ld_data(ld_data));

  // memory model
  always_ff @(posedge clk) begin
    if (req.en && !req.we) rdata <= mem[req.addr[7:2]];
    if (req.en && req.we)
      for (int k = 0; k < 4; k++)
        if (req.be[k]) mem[req.addr[7:2]][8*k +: 8] <= req.wdata[8*k +: 8];
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

  localparam op_e OPS [5] = '{OP_LOAD, OP_STORE, OP_LOADB, OP_STOREB, OP_ADD};

  initial begin
    logic [31:0] shadow [64];
    logic        pend;
    logic [31:0] pend_val;
    int          n_ld = 0, n_st = 0;
    rst_n = 1'b0; issue = 1'b0; op = OP_NOP; addr = '0; wdata = '0;
    for (int i = 0; i < 64; i++) begin
      mem[i] = 32'h1000_0000 + i * 32'h0101_0101;
      shadow[i] = mem[i];
    end
    pend = 1'b0; pend_val = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      op    = OPS[$urandom % 5];
      issue = ($urandom % 5) != 0;
      addr  = {24'b0, 8'($urandom)};
      wdata = $urandom;
      #1;
      // data of the load issued in the previous cycle
      chk(32'(ld_valid), 32'(pend), "ld_valid");
      if (pend) chk(ld_data, pend_val, "ld_data");
      // request of this cycle
      chk(32'(req.en), 32'(issue && op != OP_ADD), "req.en");
      if (req.en) begin
        chk(req.addr, {addr[31:2], 2'b00}, "req.addr");
        chk(32'(req.we), 32'(op inside {OP_STORE, OP_STOREB}), "req.we");
      end
      pend = 1'b0;
      if (issue && op == OP_LOAD) begin
        pend = 1'b1; pend_val = shadow[addr[7:2]]; n_ld++;
      end else if (issue && op == OP_LOADB) begin
        pend = 1'b1; pend_val = {24'b0, shadow[addr[7:2]][8*addr[1:0] +: 8]}; n_ld++;
      end else if (issue && op == OP_STORE) begin
        shadow[addr[7:2]] = wdata; n_st++;
      end else if (issue && op == OP_STOREB) begin
        shadow[addr[7:2]][8*addr[1:0] +: 8] = wdata[7:0]; n_st++;
      end
      @(negedge clk);
    end
    issue = 1'b0;
    #1;
    chk(32'(ld_valid), 32'(pend), "ld_valid");
    if (pend) chk(ld_data, pend_val, "ld_data");
    $display("loads=%0d stores=%0d", n_ld, n_st);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
