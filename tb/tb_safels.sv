// tb_safels: end-to-end testbench of the SafeLS lockstep wrapper at its
// default size (no parameter overrides).
//
// Two copies of a behavioural core (noelv_core_model) are wired to the
// wrapper's leading and trailing ports, as they would be in a chip. The
// testbench plays the SoC: it drives random input data and interrupt lines and
// keeps its own histories and its own reference of the core, and after every
// clock edge checks that
//   - the leading core gets the SoC inputs unchanged and at once,
//   - the trailing core gets them, and its reset, exactly D cycles later,
//   - the SoC receives the leading core's outcomes exactly D cycles later, and
//     in fault-free stretches those equal the reference core's outcomes,
//   - no error is flagged while both cores are fault free.
// This is repeated for every programmable delay (1, 2, 3) and for an
// out-of-range setting (0), which must fall back to 2. For each delay five
// faults are injected and the interrupt latency is measured against the
// expected value:
//   transient error on the trailing core's outputs  -> irq 0 cycles after the edge that captures it
//   transient error on the leading core's outputs   -> irq D cycles after that edge
//   upset of the leading core's state               -> irq D+1 cycles after the upset edge
//   upset of the trailing core's state              -> irq 1 cycle after the upset edge
//   the same upset hitting both cores at once       -> detected, because the
//     staggered cores hold different states when it strikes
// After transients the interrupt is cleared; after state upsets the pair is
// resynchronised by a reset. Every mechanism must happen at least once.
module tb_safels;
  import safels_pkg::*;

  localparam int unsigned MAXD  = MAX_DELAY_DEFAULT;
  localparam int unsigned OUT_W = $bits(core_out_t);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic        rst_n, clr;
  logic [1:0]  cfg;
  core_in_t    soc_in, lead_in, trail_in;
  core_out_t   soc_out, lead_out, trail_out;
  logic        irq, mism, lead_rst_n, trail_rst_n;
  logic [DATA_W-1:0] up_l, up_t;
  logic [OUT_W-1:0]  oup_l, oup_t;

  safels dut (
    .clk_i(clk), .rst_ni(rst_n), .delay_cfg_i(cfg), .err_clear_i(clr),
    .soc_in_i(soc_in), .soc_out_o(soc_out), .err_irq_o(irq), .mismatch_o(mism),
    .lead_rst_no(lead_rst_n), .lead_in_o(lead_in), .lead_out_i(lead_out),
    .trail_rst_no(trail_rst_n), .trail_in_o(trail_in), .trail_out_i(trail_out));

  noelv_core_model u_lead (
    .clk_i(clk), .rst_ni(lead_rst_n), .in_i(lead_in), .upset_i(up_l),
    .out_upset_i(oup_l), .out_o(lead_out));
  noelv_core_model u_trail (
    .clk_i(clk), .rst_ni(trail_rst_n), .in_i(trail_in), .upset_i(up_t),
    .out_upset_i(oup_t), .out_o(trail_out));

  int checks = 0;
  int failures = 0;
  int D;

  // mechanism counters
  int n_delay[4];          // runs per programmed setting 0..3
  int n_trail_rst_late;    // trailing reset released D cycles after leading
  int n_det_tout, n_det_lout, n_det_lstate, n_det_tstate, n_det_common;
  int n_cleared, n_resync;

  // histories: index k = captured k+1 edges ago
  core_in_t  h_in   [MAXD];
  core_out_t h_lead [MAXD];
  core_out_t h_ref  [MAXD];
  logic      h_rst  [MAXD];

  // reference core (written independently of the model in tb/)
  logic [63:0] ref_state;
  bit          ref_ok;       // leading core known to match the reference
  bit          expect_clean; // no error may be flagged

  function automatic core_out_t ref_out(input logic [63:0] s);
    core_out_t o;
    o.data = s;
    o.irq  = {s[63] ^ s[3], s[62] ^ s[2], s[61] ^ s[1], s[60] ^ s[0]};
    o.exc  = s[7:4] & s[11:8];
    return o;
  endfunction

  function automatic logic [63:0] ref_next(input logic [63:0] s, input core_in_t in);
    logic [63:0] rot;
    rot = (s << 7) | (s >> 57);
    return (rot + in.data) ^ {60'd0, in.irq};
  endfunction

  task automatic chk(input string what, input logic ok);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s (D=%0d, t=%0t)", what, D, $time);
    end
  endtask

  // One clock cycle: fresh random inputs, optional faults for this edge only.
  task automatic step(input logic [DATA_W-1:0] ul = '0, input logic [DATA_W-1:0] ut = '0,
                      input logic [OUT_W-1:0] ol = '0, input logic [OUT_W-1:0] ot = '0,
                      input logic c = 1'b0);
    core_out_t lead_pre, ref_pre;
    soc_in.data = {$urandom, $urandom};
    soc_in.irq  = ($urandom_range(0, 7) == 0) ? 4'($urandom) : 4'd0;
    up_l = ul; up_t = ut; oup_l = ol; oup_t = ot; clr = c;
    #1;
    chk("leading core gets inputs at once", lead_in == soc_in && lead_rst_n == rst_n);
    lead_pre = lead_out;
    ref_pre  = ref_out(ref_state);
    @(posedge clk);
    for (int k = int'(MAXD) - 1; k > 0; k--) begin
      h_in[k] = h_in[k-1]; h_lead[k] = h_lead[k-1]; h_ref[k] = h_ref[k-1]; h_rst[k] = h_rst[k-1];
    end
    h_in[0]   = rst_n ? soc_in : '0;
    h_lead[0] = rst_n ? lead_pre : '0;
    h_ref[0]  = rst_n ? ref_pre : '0;
    h_rst[0]  = rst_n;
    ref_state = rst_n ? ref_next(ref_state, soc_in) : 64'h0123_4567_89ab_cdef;
    #1;
    up_l = '0; up_t = '0; oup_l = '0; oup_t = '0; clr = 1'b0;
    if (rst_n) begin
      chk("trailing inputs delayed by D", trail_in == h_in[D-1]);
      chk("trailing reset delayed by D", trail_rst_n == h_rst[D-1]);
      chk("SoC gets leading outcomes delayed by D", soc_out == h_lead[D-1]);
      if (ref_ok) chk("SoC outcomes match reference core", soc_out == h_ref[D-1]);
      if (expect_clean) chk("no error while fault free", !irq && !mism);
    end else begin
      chk("trailing core held in reset", !trail_rst_n);
      chk("no interrupt in reset", !irq);
    end
  endtask

  task automatic do_reset(input logic [1:0] setting);
    int n;
    cfg   = setting;
    D     = (setting == 2'd0) ? int'(DELAY_DEFAULT) : int'(setting);
    rst_n = 1'b0;
    repeat (MAXD + 1) step();
    rst_n = 1'b1;
    ref_ok = 1'b1;
    expect_clean = 1'b1;
    cfg = 2'($urandom);   // ignored out of reset
    n = 0;
    do begin step(); n++; end while (!trail_rst_n && n < 10);
    chk("trailing reset released D cycles after leading", n == D);
    if (n == D) n_trail_rst_late++;
  endtask

  // Step until the interrupt is seen; return the number of steps taken.
  task automatic wait_irq(output int n);
    n = 0;
    while (!irq && n < 10) begin step(); n++; end
  endtask

  task automatic run_clean(input int cycles);
    expect_clean = 1'b1;
    repeat (cycles) step();
  endtask

  initial begin
    int n;
    logic [DATA_W-1:0] m;
    rst_n = 1'b0; clr = 1'b0; cfg = 2'd2; D = 2;
    soc_in = '0; up_l = '0; up_t = '0; oup_l = '0; oup_t = '0;
    ref_state = 64'h0123_4567_89ab_cdef; ref_ok = 1'b0; expect_clean = 1'b0;
    for (int k = 0; k < int'(MAXD); k++) begin
      h_in[k] = '0; h_lead[k] = '0; h_ref[k] = '0; h_rst[k] = 1'b0;
    end

    for (int s = 0; s < 4; s++) begin
      logic [1:0] setting;
      setting = (s == 3) ? 2'd0 : 2'(s + 1);
      do_reset(setting);
      n_delay[setting]++;
      run_clean(300);

      // transient error on the trailing core's outputs
      expect_clean = 1'b0;
      step(.ot(OUT_W'(1) << $urandom_range(0, OUT_W - 1)));
      chk("trailing output error flagged at once", irq);
      if (irq) n_det_tout++;
      repeat (5) step();
      chk("interrupt is sticky", irq);
      step(.c(1'b1));
      chk("interrupt cleared", !irq);
      if (!irq) n_cleared++;
      run_clean(50);

      // transient error on the leading core's outputs
      expect_clean = 1'b0;
      ref_ok = 1'b0;
      step(.ol(OUT_W'(1) << $urandom_range(0, OUT_W - 1)));
      wait_irq(n);
      chk($sformatf("leading output error flagged after D cycles (took %0d)", n), irq && n == D);
      if (irq) n_det_lout++;
      step(.c(1'b1));
      chk("interrupt cleared", !irq);
      if (!irq) n_cleared++;
      run_clean(50);

      // upset of the leading core's state: persistent divergence
      expect_clean = 1'b0;
      step(.ul(64'd1 << $urandom_range(0, 63)));
      wait_irq(n);
      chk($sformatf("leading state upset flagged after D+1 cycles (took %0d)", n), irq && n == D + 1);
      if (irq) n_det_lstate++;
      step(.c(1'b1));
      chk("diverged pair keeps the interrupt set", irq);
      do_reset(setting);
      run_clean(50);
      n_resync++;

      // upset of the trailing core's state
      expect_clean = 1'b0;
      step(.ut(64'd1 << $urandom_range(0, 63)));
      wait_irq(n);
      chk($sformatf("trailing state upset flagged after 1 cycle (took %0d)", n), irq && n == 1);
      if (irq) n_det_tstate++;
      do_reset(setting);
      run_clean(50);
      n_resync++;

      // the same upset hits both cores in the same cycle
      expect_clean = 1'b0;
      ref_ok = 1'b0;
      m = 64'd1 << $urandom_range(0, 63);
      step(.ul(m), .ut(m));
      wait_irq(n);
      chk($sformatf("common-cause upset detected (took %0d)", n), irq && n <= D + 1);
      if (irq) n_det_common++;
      do_reset(setting);
      run_clean(50);
      n_resync++;
    end

    chk("delay 1 exercised", n_delay[1] > 0);
    chk("delay 2 exercised", n_delay[2] > 0);
    chk("delay 3 exercised", n_delay[3] > 0);
    chk("out-of-range delay exercised", n_delay[0] > 0);
    chk("staggered reset release seen", n_trail_rst_late > 0);
    chk("trailing output error detected", n_det_tout > 0);
    chk("leading output error detected", n_det_lout > 0);
    chk("leading state upset detected", n_det_lstate > 0);
    chk("trailing state upset detected", n_det_tstate > 0);
    chk("common-cause upset detected", n_det_common > 0);
    chk("interrupt cleared", n_cleared > 0);
    chk("pair resynchronised by reset", n_resync > 0);
    $display("mechanisms: delays 0/1/2/3 = %0d/%0d/%0d/%0d, staggered reset %0d, detected: trail-out %0d lead-out %0d lead-state %0d trail-state %0d common %0d, cleared %0d, resync %0d",
             n_delay[0], n_delay[1], n_delay[2], n_delay[3], n_trail_rst_late,
             n_det_tout, n_det_lout, n_det_lstate, n_det_tstate, n_det_common, n_cleared, n_resync);
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
