// lockstep_comparator: the "=?" stage of the SafeLS lockstep pair.
//
// Every cycle in which en_i is high, the leading core's outcomes (already
// delayed to line up with the trailing core) are compared bit for bit with the
// trailing core's outcomes. Any difference is a discrepancy: at least one core
// has erred, and with two copies there is no telling which, so the block only
// reports it, as an interrupt for the system to handle.
//
// Interface: clk_i, synchronous active-low rst_ni, en_i (compare enable, low
// while the trailing core is still in reset), lead_i, trail_i, err_clear_i.
// mismatch_o is combinational and high in the cycle the outcomes differ.
// err_irq_o is registered: it rises in the cycle after the first mismatch and
// stays high until err_clear_i is seen in a cycle without a new mismatch (a
// mismatch in the clearing cycle keeps it set).
//
// The comparison and the interrupt follow the lockstep scheme; the sticky
// level interrupt, the clear input and the enable are this design's choice.
module lockstep_comparator #(
  parameter int unsigned WIDTH = 1
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  input  logic             en_i,
  input  logic [WIDTH-1:0] lead_i,
  input  logic [WIDTH-1:0] trail_i,
  input  logic             err_clear_i,
  output logic             mismatch_o,
  output logic             err_irq_o
);

  logic err_q;

  assign mismatch_o = en_i && (lead_i != trail_i);

  always_ff @(posedge clk_i) begin
    if (!rst_ni)          err_q <= 1'b0;
    else if (mismatch_o)  err_q <= 1'b1;
    else if (err_clear_i) err_q <= 1'b0;
  end

  assign err_irq_o = err_q;

  // A discrepancy is always reported in the next cycle.
  a_mismatch_raises_irq: assert property (@(posedge clk_i) disable iff (!rst_ni)
    mismatch_o |=> err_irq_o);

endmodule
