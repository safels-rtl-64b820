// tb_lockstep_comparator: self-checking testbench for the "=?" stage.
//
// Random 16-bit outcome pairs are driven with a controlled mismatch rate,
// together with random compare-enable and clear pulses. A reference model in
// the testbench computes the expected combinational mismatch flag and the
// sticky interrupt (set the cycle after an enabled mismatch, cleared by
// err_clear_i unless a mismatch arrives in the same cycle). Directed cases at
// the start check single-bit differences in every bit position, that a
// disabled comparison never raises the interrupt, and the one-cycle latency.
module tb_lockstep_comparator;

  localparam int unsigned W = 16;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic         rst_n, en, clr;
  logic [W-1:0] a, b;
  logic         mism, irq;
  logic         exp_irq;

  int checks = 0;
  int failures = 0;
  int n_set = 0;
  int n_clear = 0;

  lockstep_comparator #(.WIDTH(W)) dut (
    .clk_i(clk), .rst_ni(rst_n), .en_i(en), .lead_i(a), .trail_i(b),
    .err_clear_i(clr), .mismatch_o(mism), .err_irq_o(irq));

  task automatic check(input string what, input logic got, input logic exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s at %0t: got %b expected %b", what, $time, got, exp);
    end
  endtask

  // Apply one cycle of stimulus: check the combinational flag, clock, update
  // the reference and check the interrupt.
  task automatic cycle(input logic [W-1:0] va, input logic [W-1:0] vb,
                       input logic ven, input logic vclr);
    logic exp_m;
    a = va; b = vb; en = ven; clr = vclr;
    #1;
    exp_m = ven && (va != vb);
    check("mismatch_o", mism, exp_m);
    @(posedge clk);
    if (!rst_n)       exp_irq = 1'b0;
    else if (exp_m)   begin if (!exp_irq) n_set++; exp_irq = 1'b1; end
    else if (vclr)    begin if (exp_irq) n_clear++; exp_irq = 1'b0; end
    #1;
    check("err_irq_o", irq, exp_irq);
  endtask

  initial begin
    logic [W-1:0] r;
    rst_n = 1'b0; en = 1'b0; clr = 1'b0; a = '0; b = '0; exp_irq = 1'b0;
    @(posedge clk); @(posedge clk); #1;
    check("irq after reset", irq, 1'b0);
    rst_n = 1'b1;

    // disabled comparison never flags
    for (int i = 0; i < 20; i++) begin
      r = W'($urandom);
      cycle(r, ~r, 1'b0, 1'b0);
    end
    // every single-bit difference is detected one cycle later and cleared
    for (int bitpos = 0; bitpos < int'(W); bitpos++) begin
      r = W'($urandom);
      cycle(r, r, 1'b1, 1'b0);
      cycle(r, r ^ (W'(1) << bitpos), 1'b1, 1'b0);
      cycle(r, r, 1'b1, 1'b0);          // stays set (sticky)
      cycle(r, r, 1'b1, 1'b1);          // cleared
    end
    // a mismatch in the clearing cycle keeps the interrupt set
    cycle(16'h1234, 16'h1235, 1'b1, 1'b0);
    cycle(16'h1234, 16'h1236, 1'b1, 1'b1);
    cycle(16'h1234, 16'h1234, 1'b1, 1'b1);
    // random traffic
    for (int i = 0; i < 3000; i++) begin
      r = W'($urandom);
      cycle(r, ($urandom_range(0, 9) == 0) ? r ^ W'($urandom_range(1, 65535)) : r,
            $urandom_range(0, 3) != 0, $urandom_range(0, 7) == 0);
    end
    // reset clears a pending interrupt
    cycle(16'h0001, 16'h0002, 1'b1, 1'b0);
    rst_n = 1'b0;
    cycle(16'h0001, 16'h0001, 1'b0, 1'b0);
    rst_n = 1'b1;

    checks++;
    if (n_set < 10 || n_clear < 10) begin
      failures++;
      $display("FAIL: too few interrupt events (set %0d, clear %0d)", n_set, n_clear);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
