// noelv_core_model: behavioural stand-in for one processor core of a lockstep
// pair, for simulation only (not a model of any real core's internals).
//
// The core is reduced to a 64-bit state register that is deterministic in its
// inputs: each cycle out of reset it becomes
//   state' = ((state rotated left by 7) + in.data) ^ in.irq ^ upset_i
// and the outcomes are functions of the state alone:
//   out.data = state, out.irq = state[3:0] ^ state[63:60],
//   out.exc = state[7:4] & state[11:8], each XORed with out_upset_i.
// upset_i flips state bits (a fault that corrupts the core's state and stays),
// out_upset_i flips outcome bits for as long as it is held (a transient error
// on the outputs). Two copies fed the same inputs D cycles apart produce the
// same outcomes D cycles apart, which is what the lockstep wrapper relies on.
// Reset is synchronous and active low.
module noelv_core_model
  import safels_pkg::*;
(
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  core_in_t              in_i,
  input  logic [DATA_W-1:0]     upset_i,
  input  logic [$bits(core_out_t)-1:0] out_upset_i,
  output core_out_t             out_o
);

  localparam logic [DATA_W-1:0] RESET_STATE = 64'h0123_4567_89ab_cdef;

  logic [DATA_W-1:0] state_q;

  always_ff @(posedge clk_i) begin
    if (!rst_ni) state_q <= RESET_STATE;
    else state_q <= ({state_q[DATA_W-8:0], state_q[DATA_W-1:DATA_W-7]} + in_i.data)
                    ^ DATA_W'(in_i.irq) ^ upset_i;
  end

  core_out_t out_clean;
  always_comb begin
    out_clean.data = state_q;
    out_clean.irq  = state_q[3:0] ^ state_q[63:60];
    out_clean.exc  = state_q[7:4] & state_q[11:8];
  end
  assign out_o = core_out_t'(out_clean ^ out_upset_i);

endmodule
