// carry_arbiter: per-bank arbiter built on a subtract-one carry chain.
//
// load copies the bank's lane vector (bit l = lane l accesses this bank)
// into the state register. While the state is not zero, each clock grants
// exactly one requesting lane: subtracting one from the state turns its
// lowest '1' into '0' and every '0' below it into '1'. The bit that went
// from 1 to 0 is the grant (state & ~(state-1)); the bits that went from 0
// to 1 are zeroed again, so the next state is state & (state-1). All lanes
// have equal priority; lanes are served from bit 0 (lane 0) upwards, so an
// arbiter loaded with k requests grants them in k consecutive clocks.
// grant is a one-hot (or all-zero) mux control, combinational from the
// state register, valid in the clocks after load. load has priority over
// run, so a new operation can be loaded in the clock that shows the last
// grant of the previous one. This follows the circuit and example of the
// paper; which end of the vector counts as "rightmost" (the LSB) is this
// design's choice.
module carry_arbiter #(
  parameter int unsigned LANES = simt_mem_pkg::N_LANES
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             load,
  input  logic             run,
  input  logic [LANES-1:0] bank,
  output logic [LANES-1:0] grant,
  output logic             active   // requests still pending (state != 0)
);
  logic [LANES-1:0] state, dec;

  assign dec    = state - 1'b1;      // the carry chain
  assign grant  = state & ~dec;      // 1 -> 0 transition: lane served now
  assign active = |state;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)      state <= '0;
    else if (load)   state <= bank;
    else if (run)    state <= state & dec;  // clear 0 -> 1 transitions
  end
endmodule
