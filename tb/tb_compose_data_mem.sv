// tb_compose_data_mem -- self-checking test of the shared multi-port data
// memory.
//
// All four ports issue random reads and byte-masked writes every cycle. A
// model kept here predicts each read (the word as it was before this cycle's
// writes, one cycle after the request) and applies writes in port order so
// that the highest port wins a same-byte conflict. The test also counts
// cycles with several ports active and same-word write conflicts.
module tb_compose_data_mem;
  import compose_pkg::*;

  localparam int unsigned NP = 4;
  localparam int unsigned WORDS = 64;

  int checks = 0, failures = 0;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  mem_req_t [NP-1:0]          req;
  logic [NP-1:0][31:0]        rdata;
  logic [31:0]                model [WORDS];

  compose_data_mem #(.NPORTS(NP), .WORDS(WORDS)) dut (.clk(clk), .req(req), .rdata(rdata));

  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [NP-1:0]       rd_pend;
    logic [NP-1:0][31:0] rd_exp;
    int n_conflict = 0, n_multi = 0;
    req = '0;
    rd_pend = '0;
    // initialise through the ports
    @(negedge clk);
    for (int w = 0; w < WORDS; w++) begin
      req = '0;
      req[w % NP].en = 1'b1; req[w % NP].we = 1'b1; req[w % NP].be = 4'hF;
      req[w % NP].addr = 32'(w * 4); req[w % NP].wdata = 32'hA5A5_0000 + 32'(w);
      model[w] = 32'hA5A5_0000 + 32'(w);
      @(negedge clk);
    end
    req = '0;
    @(negedge clk);
    for (int t = 0; t < 3000; t++) begin
      logic [31:0] nxt [WORDS];
      int nact;
      for (int p = 0; p < NP; p++) begin
        req[p].en    = ($urandom % 3) != 0;
        req[p].we    = ($urandom % 2) != 0;
        req[p].be    = 4'($urandom);
        req[p].addr  = {24'b0, 4'($urandom), 4'($urandom)};  // 64 words, some collisions
        req[p].wdata = $urandom;
      end
      #1;
      // reads requested last cycle
      for (int p = 0; p < NP; p++)
        if (rd_pend[p]) begin
          checks++;
          if (rdata[p] !== rd_exp[p]) begin
            failures++;
            $display("FAIL port %0d got=%h exp=%h", p, rdata[p], rd_exp[p]);
          end
        end
      nxt = model;
      nact = 0;
      for (int p = 0; p < NP; p++) begin
        rd_pend[p] = req[p].en && !req[p].we;
        if (rd_pend[p]) rd_exp[p] = model[req[p].addr[7:2]];
        if (req[p].en) nact++;
        if (req[p].en && req[p].we) begin
          for (int q = 0; q < p; q++)
            if (req[q].en && req[q].we && req[q].addr[7:2] == req[p].addr[7:2]) n_conflict++;
          for (int k = 0; k < 4; k++)
            if (req[p].be[k]) nxt[req[p].addr[7:2]][8*k +: 8] = req[p].wdata[8*k +: 8];
        end
      end
      if (nact > 1) n_multi++;
      model = nxt;
      @(negedge clk);
    end
    checks++;
    if (n_conflict == 0 || n_multi == 0) failures++;
    $display("multi-port cycles=%0d write conflicts=%0d", n_multi, n_conflict);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
