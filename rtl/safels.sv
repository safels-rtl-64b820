// safels: core-level lockstep wrapper for a pair of identical processor cores.
//
// To the SoC, a SafeLS looks like one core: it takes one set of core inputs
// (soc_in_i) and delivers one set of outcomes (soc_out_o). Inside, two copies
// of the core run the same instruction stream, staggered in time so that their
// electrical state is never identical and a common-cause fault (a glitch on
// clock or supply hitting both copies at once) produces different errors in
// the two, which a comparison then detects.
//
//   soc_in_i ──┬──────────────────────────► leading core ──► [delay D] ──┐
//              └─► [delay D] ─► trailing core ─────────────────────────► =? ─► err_irq_o
//                                                   soc_out_o ◄── delayed leading outcomes
//
// The leading core gets the inputs at once; the trailing core gets them, and
// its reset, D cycles later. The leading core's outcomes pass through a delay
// line of the same length D, so in every cycle the comparator sees the two
// cores' outcomes for the same logical cycle. The delayed leading outcomes go
// to the SoC (once); on any difference err_irq_o is raised and stays high until
// err_clear_i; mismatch_o shows the raw per-cycle comparison. Detection is
// therefore not immediate: err_irq_o rises D+1 cycles after an error appears
// on the leading core's outputs, and 1 cycle after one appears on the
// trailing core's outputs.
//
// The cores are not part of this module: their ports are brought out (lead_*,
// trail_*) and are connected next to the wrapper. lead_rst_no is rst_ni passed
// on; trail_rst_no is rst_ni delayed by D, so the trailing core leaves reset D
// cycles after the leading one, and comparison starts in that same cycle.
//
// The staggering delay D is programmed through delay_cfg_i, which is sampled
// while rst_ni is low and then held, since changing D under running cores would
// break the alignment. A value outside 1..MAX_DELAY selects DELAY_DEFAULT (2).
// The scheme (immediate vs. delayed inputs, equal delay on the outcomes,
// comparison, single delivery, interrupt on discrepancy) is the published
// SafeLS design; the way D is programmed, the reset handling, the bundle
// contents and the choice to deliver outcomes even in a cycle that mismatches
// (the interrupt reports it) are this design's own.
module safels
  import safels_pkg::*;
#(
  parameter int unsigned MAX_DELAY = MAX_DELAY_DEFAULT,
  localparam int unsigned DLY_W    = $clog2(MAX_DELAY + 1)
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic [DLY_W-1:0] delay_cfg_i,
  input  logic             err_clear_i,
  // SoC side: one core's worth of ports
  input  core_in_t         soc_in_i,
  output core_out_t        soc_out_o,
  output logic             err_irq_o,
  output logic             mismatch_o,
  // leading core
  output logic             lead_rst_no,
  output core_in_t         lead_in_o,
  input  core_out_t        lead_out_i,
  // trailing core
  output logic             trail_rst_no,
  output core_in_t         trail_in_o,
  input  core_out_t        trail_out_i
);

  localparam int unsigned IN_W  = $bits(core_in_t);
  localparam int unsigned OUT_W = $bits(core_out_t);

  // ---- staggering delay, fixed while out of reset --------------------------
  // A setting is valid when it is 1..MAX_DELAY; the upper bound only needs a
  // check when MAX_DELAY does not fill the whole range of delay_cfg_i.
  localparam logic [DLY_W-1:0] MAX_CODE = DLY_W'(MAX_DELAY);

  logic [DLY_W-1:0] delay_q;
  logic             cfg_valid;

  if (MAX_CODE == '1) begin : g_full_range
    assign cfg_valid = (delay_cfg_i != '0);
  end else begin : g_part_range
    assign cfg_valid = (delay_cfg_i != '0) && (delay_cfg_i <= MAX_CODE);
  end

  always_ff @(posedge clk_i) begin
    if (!rst_ni) begin
      if (cfg_valid) delay_q <= delay_cfg_i;
      else           delay_q <= DLY_W'(DELAY_DEFAULT);
    end
  end

  // ---- input side: leading core at once, trailing core delayed -------------
  assign lead_rst_no = rst_ni;
  assign lead_in_o   = soc_in_i;

  logic [IN_W-1:0] trail_in_d;

  stagger_delay #(.WIDTH(IN_W), .MAX_DELAY(MAX_DELAY)) u_in_delay (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .delay_i (delay_q),
    .d_i     (soc_in_i),
    .q_o     (trail_in_d)
  );
  assign trail_in_o = core_in_t'(trail_in_d);

  // Reset of the trailing core: low during reset and for D cycles after it.
  stagger_delay #(.WIDTH(1), .MAX_DELAY(MAX_DELAY), .RESET_VALUE(1'b0)) u_rst_delay (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .delay_i (delay_q),
    .d_i     (rst_ni),
    .q_o     (trail_rst_no)
  );

  // ---- output side: leading outcomes delayed, compared, delivered once -----
  logic [OUT_W-1:0] lead_out_d;

  stagger_delay #(.WIDTH(OUT_W), .MAX_DELAY(MAX_DELAY)) u_out_delay (
    .clk_i   (clk_i),
    .rst_ni  (rst_ni),
    .delay_i (delay_q),
    .d_i     (lead_out_i),
    .q_o     (lead_out_d)
  );

  lockstep_comparator #(.WIDTH(OUT_W)) u_cmp (
    .clk_i       (clk_i),
    .rst_ni      (rst_ni),
    .en_i        (trail_rst_no),
    .lead_i      (lead_out_d),
    .trail_i     (trail_out_i),
    .err_clear_i (err_clear_i),
    .mismatch_o  (mismatch_o),
    .err_irq_o   (err_irq_o)
  );

  assign soc_out_o = core_out_t'(lead_out_d);

  // The programmed delay may not change while both cores run: the three delay
  // lines would then disagree on D and the pair would fall out of alignment.
  a_delay_stable: assert property (@(posedge clk_i) disable iff (!rst_ni)
    trail_rst_no |-> $stable(delay_q));

endmodule
