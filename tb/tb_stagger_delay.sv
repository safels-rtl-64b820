// tb_stagger_delay: self-checking testbench for the programmable delay line.
//
// Two instances are tested: the default size (MAX_DELAY = 3) with 8-bit data,
// and a longer one (MAX_DELAY = 6) with a non-zero reset value. For every
// delay setting the line is reset, its outputs are checked against the reset
// value, then random data is pushed for 200 cycles while a history kept by the
// testbench predicts the output: after each clock edge q_o must equal the
// value presented delay cycles ago. The reset is also asserted in mid-stream
// to check that it flushes every stage.
module tb_stagger_delay;

  localparam int unsigned W      = 8;
  localparam int unsigned MAXA   = 3;
  localparam int unsigned MAXB   = 6;
  localparam logic [W-1:0] RVB   = 8'hA5;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic           rst_n;
  logic [1:0]     dly_a;
  logic [2:0]     dly_b;
  logic [W-1:0]   d;
  logic [W-1:0]   qa, qb;

  int checks = 0;
  int failures = 0;

  stagger_delay #(.WIDTH(W)) dut_a (
    .clk_i(clk), .rst_ni(rst_n), .delay_i(dly_a), .d_i(d), .q_o(qa));
  stagger_delay #(.WIDTH(W), .MAX_DELAY(MAXB), .RESET_VALUE(RVB)) dut_b (
    .clk_i(clk), .rst_ni(rst_n), .delay_i(dly_b), .d_i(d), .q_o(qb));

  // hist[k] = value of d captured k+1 edges ago (k = 0 is the last edge);
  // valid[k] tells whether that edge was out of reset.
  logic [W-1:0] hist  [MAXB];
  logic         valid [MAXB];

  task automatic check(input string what, input logic [W-1:0] got, input logic [W-1:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  task automatic tick();
    @(posedge clk);
    for (int k = MAXB - 1; k > 0; k--) begin
      hist[k]  = hist[k-1];
      valid[k] = valid[k-1];
    end
    hist[0]  = d;
    valid[0] = rst_n;
    #1;
  endtask

  task automatic do_reset();
    rst_n = 1'b0;
    tick();
    tick();
    for (int k = 0; k < MAXB; k++) valid[k] = 1'b0;
    check("A after reset", qa, '0);
    check("B after reset", qb, RVB);
    rst_n = 1'b1;
  endtask

  task automatic run(input int cycles, input int da, input int db);
    for (int n = 0; n < cycles; n++) begin
      d = W'($urandom);
      tick();
      check($sformatf("A delay %0d", da), qa, valid[da-1] ? hist[da-1] : '0);
      check($sformatf("B delay %0d", db), qb, valid[db-1] ? hist[db-1] : RVB);
    end
  endtask

  initial begin
    rst_n = 1'b0;
    d     = '0;
    dly_a = 2'd1;
    dly_b = 3'd1;
    for (int k = 0; k < MAXB; k++) begin
      hist[k]  = '0;
      valid[k] = 1'b0;
    end
    for (int del = 1; del <= int'(MAXB); del++) begin
      dly_a = 2'(((del - 1) % MAXA) + 1);
      dly_b = 3'(del);
      do_reset();
      run(200, int'(dly_a), del);
      // reset in mid-stream flushes all stages
      do_reset();
      run(10, int'(dly_a), del);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
