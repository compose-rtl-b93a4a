// compose_cgra -- top level of the composable CGRA.
//
// A ROWS x COLS mesh of PEs (4x4 by default, the cluster of the characterised
// chip). The left column holds the memory-capable PEs, one per row, each
// with an LSU on its own port of a shared ROWS-port data memory; the other
// PEs are compute-only. Neighbouring PEs are joined by one 32-bit link in
// each direction. Because every router output and every ALU input and output
// can bypass its register, the compiler can chain dependent operations on
// PEs that are several hops apart into one clock cycle (a virtual PE, VPE)
// and register only the VPE's result. Recurrences of a loop can thus close
// in fewer cycles, which lowers the initiation interval (II).
//
// Operation: while idle, the host writes configuration words
// (cfg_we, cfg_pe = row*COLS + col, cfg_slot, cfg_data) and may read or write
// the data memory through the host port, which shares memory port 0 with the
// PE in row 0 and is served only while idle. `start` with `ii` and
// `n_cycles` runs the static schedule: every cycle each PE executes the word
// of slot (cycle mod II). `done` pulses when the run ends. Links that leave
// the array are tied to 0.
//
// The mesh, the MEM-PE placement in one edge column and the 4-port memory
// follow the paper; the host interfaces, edge tie-off and run control are
// this design's choices.
//
// Combinational loops: the mesh links run in both directions and every
// router can forward a link combinationally, so the netlist contains
// structural combinational cycles (for example PE A east -> PE B west -> PE B
// east-to-west forwarding -> PE A). They are inherent in single-cycle
// multi-hop routing; a legal configuration never closes one. The reset
// value of every configuration word keeps all bypasses off.
module compose_cgra
  import compose_pkg::*;
#(
  parameter int unsigned ROWS_P    = ROWS,
  parameter int unsigned COLS_P    = COLS,
  parameter int unsigned CFG_DEPTH = 32,
  parameter int unsigned MEM_WORDS = 4096,
  parameter int unsigned CNT_W     = 32
) (
  input  logic                                 clk,
  input  logic                                 rst_n,
  // configuration load
  input  logic                                 cfg_we,
  input  logic [$clog2(ROWS_P*COLS_P)-1:0]     cfg_pe,
  input  logic [$clog2(CFG_DEPTH)-1:0]         cfg_slot,
  input  cfg_t                                 cfg_data,
  // run control
  input  logic                                 start,
  input  logic [$clog2(CFG_DEPTH):0]           ii,
  input  logic [CNT_W-1:0]                     n_cycles,
  output logic                                 busy,
  output logic                                 done,
  output logic [CNT_W-1:0]                     cycle,
  // host access to the data memory (while idle)
  input  mem_req_t                             host_req,
  output logic [DATA_W-1:0]                    host_rdata
);

  localparam int unsigned NPE = ROWS_P * COLS_P;

  logic                               run;
  logic [$clog2(CFG_DEPTH)-1:0]       slot;
  logic [NPE-1:0][NDIR-1:0][DATA_W-1:0] pin, pout;
  mem_req_t [NPE-1:0]                 pe_req;
  mem_req_t [ROWS_P-1:0]              mreq;
  logic [ROWS_P-1:0][DATA_W-1:0]      mrdata;

  compose_ctrl #(.DEPTH(CFG_DEPTH), .CNT_W(CNT_W)) u_ctrl (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start),
    .ii       (ii),
    .n_cycles (n_cycles),
    .run      (run),
    .slot     (slot),
    .cycle    (cycle),
    .done     (done)
  );

  assign busy = run;

  for (genvar r = 0; r < ROWS_P; r++) begin : g_row
    for (genvar c = 0; c < COLS_P; c++) begin : g_col
      localparam int unsigned I = r * COLS_P + c;

      // mesh links; links leaving the array read 0
      if (r > 0) begin : g_n
        assign pin[I][DIR_N] = pout[I-COLS_P][DIR_S];
      end else begin : g_n_edge
        assign pin[I][DIR_N] = '0;
      end
      if (r < ROWS_P - 1) begin : g_s
        assign pin[I][DIR_S] = pout[I+COLS_P][DIR_N];
      end else begin : g_s_edge
        assign pin[I][DIR_S] = '0;
      end
      if (c > 0) begin : g_w
        assign pin[I][DIR_W] = pout[I-1][DIR_E];
      end else begin : g_w_edge
        assign pin[I][DIR_W] = '0;
      end
      if (c < COLS_P - 1) begin : g_e
        assign pin[I][DIR_E] = pout[I+1][DIR_W];
      end else begin : g_e_edge
        assign pin[I][DIR_E] = '0;
      end

      compose_pe #(.CFG_DEPTH(CFG_DEPTH), .MEM_PE(c == 0)) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .run       (run),
        .slot      (slot),
        .cfg_we    (cfg_we && cfg_pe == ($clog2(NPE))'(I)),
        .cfg_waddr (cfg_slot),
        .cfg_wdata (cfg_data),
        .in        (pin[I]),
        .out       (pout[I]),
        .mem_req   (pe_req[I]),
        .mem_rdata (mrdata[r])
      );
    end

    // memory port r: MEM PE of row r; port 0 is lent to the host while idle
    if (r == 0) begin : g_host
      assign mreq[r] = run ? pe_req[0] : host_req;
    end else begin : g_pe_port
      assign mreq[r] = pe_req[r * COLS_P];
    end
  end

  assign host_rdata = mrdata[0];

  compose_data_mem #(.NPORTS(ROWS_P), .WORDS(MEM_WORDS)) u_dmem (
    .clk   (clk),
    .req   (mreq),
    .rdata (mrdata)
  );

  // Usage rules: the host port is served only while the array is idle (its
  // request is otherwise dropped), and configuration words are written only
  // between runs so that the running schedule never changes under it.
  // rst_n also disables these checks; linters may note that it is then used
  // both as an asynchronous reset and as a sampled signal, which is harmless.
  a_host_idle: assert property (@(posedge clk) disable iff (!rst_n) !(run && host_req.en))
    else $error("host memory request while the array runs is ignored");
  a_cfg_idle: assert property (@(posedge clk) disable iff (!rst_n) !(run && cfg_we))
    else $error("configuration write while the array runs");

endmodule
