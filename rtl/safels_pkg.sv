// safels_pkg: types and constants shared by the SafeLS lockstep wrapper.
//
// The wrapper sees a core as two signal bundles. core_in_t holds everything the
// SoC drives into a core (input data and interrupt lines); core_out_t holds
// everything a core produces that the SoC can observe (output data, interrupts
// it generates, exception indications). These are the signal groups the lockstep
// scheme replicates, delays and compares. The grouping follows the description
// of the scheme; the field widths are this design's choice: 64 data bits to
// match a 64-bit RISC-V core, 4 interrupt lines in each direction and a 4-bit
// exception field. Widen the fields here to wrap a core with a larger interface;
// the wrapper itself only relies on $bits() of the two types.
package safels_pkg;

  // Largest programmable staggering delay, in clock cycles. The typical
  // settings are 2 or 3 cycles; 3 is the largest the register chains hold.
  parameter int unsigned MAX_DELAY_DEFAULT = 3;
  // Staggering delay used when the programmed value is out of range.
  parameter int unsigned DELAY_DEFAULT     = 2;

  parameter int unsigned DATA_W    = 64;
  parameter int unsigned IRQ_IN_W  = 4;
  parameter int unsigned IRQ_OUT_W = 4;
  parameter int unsigned EXC_W     = 4;

  // Signals the SoC drives into the (single visible) core.
  typedef struct packed {
    logic [IRQ_IN_W-1:0] irq;   // interrupt lines
    logic [DATA_W-1:0]   data;  // input data
  } core_in_t;

  // Outcomes of a core, as seen by the SoC.
  typedef struct packed {
    logic [EXC_W-1:0]     exc;   // exception indications
    logic [IRQ_OUT_W-1:0] irq;   // interrupts generated by the core
    logic [DATA_W-1:0]    data;  // output data
  } core_out_t;

endpackage
