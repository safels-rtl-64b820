// stagger_delay: programmable delay line used to stagger the two cores of a
// lockstep pair.
//
// A chain of MAX_DELAY registers shifts d_i by one stage per clock. The output
// is taken from the stage selected by delay_i, so q_o shows d_i as it was
// delay_i cycles earlier (1 <= delay_i <= MAX_DELAY). The SafeLS wrapper uses
// one instance on the trailing core's inputs, one on the leading core's outcomes
// and a 1-bit one on the trailing core's reset; all three get the same delay_i
// so the two paths are delayed by exactly the same number of cycles.
//
// Interface: clk_i, synchronous active-low rst_ni (every stage loads
// RESET_VALUE), delay_i, d_i, q_o. Timing: q_o is a registered value (a mux of
// register outputs), never a combinational function of d_i. delay_i is expected
// to stay constant while the line is in use; when it changes, q_o switches to
// the newly selected stage at once.
//
// The register chain and its programmable length come from the lockstep scheme;
// the tap-mux structure, the reset and the range of delay_i are this design's.
module stagger_delay #(
  parameter int unsigned    WIDTH       = 1,
  parameter int unsigned    MAX_DELAY   = safels_pkg::MAX_DELAY_DEFAULT,
  parameter logic [WIDTH-1:0] RESET_VALUE = '0,
  localparam int unsigned   DLY_W       = $clog2(MAX_DELAY + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [DLY_W-1:0] delay_i,
  input  logic [WIDTH-1:0] d_i,
  output logic [WIDTH-1:0] q_o
);

  // stage_q[0] holds d_i of the previous cycle, stage_q[k] of k+1 cycles ago.
  logic [WIDTH-1:0] stage_q [MAX_DELAY];

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      for (int unsigned k = 0; k < MAX_DELAY; k++) stage_q[k] <= RESET_VALUE;
    end else begin
      stage_q[0] <= d_i;
      for (int unsigned k = 1; k < MAX_DELAY; k++) stage_q[k] <= stage_q[k-1];
    end
  end

  always_comb begin
    q_o = stage_q[0];
    for (int unsigned k = 1; k < MAX_DELAY; k++) begin
      if (int'(delay_i) == k + 1) q_o = stage_q[k];
    end
  end

  // The delay must lie in 1..MAX_DELAY.
  a_delay_range: assert property (@(posedge clk_i) disable iff (!rst_ni)
    (delay_i >= 1) && (int'(delay_i) <= MAX_DELAY))
    else $error("stagger_delay: delay %0d outside 1..%0d", delay_i, MAX_DELAY);

endmodule
