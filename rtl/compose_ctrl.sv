// compose_ctrl -- schedule sequencer of the CGRA.
//
// The fabric runs a statically scheduled, modulo-scheduled loop: the mapper
// assigns every configuration word to time slot k mod II, and in each clock
// cycle every PE executes the word of the current slot. This block produces
// that slot number. On `start` (accepted only while idle) it latches the
// initiation interval `ii` (1..DEPTH) and the number of cycles to run,
// raises `run`, and steps the slot 0, 1, .., II-1, 0, .. once per cycle. After
// the last cycle it drops `run` and pulses `done` for one cycle. `cycle`
// counts the cycles executed so far.
//
// The paper defines the schedule (slot k mod II, no run-time stalls since
// the schedule is static); the start/done handshake, the run length counted
// in cycles and the treatment of an out-of-range II (clamped to 1..DEPTH)
// are this design's choices.
module compose_ctrl #(
  parameter int unsigned DEPTH = 32,
  parameter int unsigned CNT_W = 32
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  logic [$clog2(DEPTH):0]    ii,
  input  logic [CNT_W-1:0]          n_cycles,
  output logic                      run,
  output logic [$clog2(DEPTH)-1:0]  slot,
  output logic [CNT_W-1:0]          cycle,
  output logic                      done
);

  localparam int unsigned SW = $clog2(DEPTH);

  logic [SW:0]      ii_q;
  logic [CNT_W-1:0] n_q;
  logic [SW:0]      ii_c;

  always_comb begin
    if (ii == '0)            ii_c = (SW+1)'(1);
    else if (ii > (SW+1)'(DEPTH)) ii_c = (SW+1)'(DEPTH);
    else                     ii_c = ii;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      run   <= 1'b0;
      slot  <= '0;
      cycle <= '0;
      ii_q  <= (SW+1)'(1);
      n_q   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!run) begin
        if (start && n_cycles != '0) begin
          run   <= 1'b1;
          slot  <= '0;
          cycle <= '0;
          ii_q  <= ii_c;
          n_q   <= n_cycles;
        end
      end else begin
        cycle <= cycle + 1'b1;
        slot  <= ((SW+1)'(slot) + 1'b1 == ii_q) ? '0 : slot + 1'b1;
        if (cycle + 1'b1 == n_q) begin
          run  <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

endmodule
