// onehot_mux: pipelined N-to-1 multiplexer with a one-hot select.
//
// Each input word is ANDed with its select bit and the words are ORed
// together (an all-zero select gives zero). The OR tree is split into
// registered stages: the first stage ORs groups of four inputs, the second
// ORs the group results, and any further stages only delay the word. The
// result appears STAGES clocks after sel/din are presented; a new selection
// can be presented every clock. The paper states that the address and data
// muxes are one-hot with a three-stage pipeline; the group-of-four split is
// this design's choice (a 4-input OR plus AND terms fits one FPGA LUT level).
module onehot_mux #(
  parameter int unsigned N      = 16,
  parameter int unsigned W      = 32,
  parameter int unsigned STAGES = simt_mem_pkg::MUX_PIPE
) (
  input  logic                clk,
  input  logic [N-1:0]        sel,
  input  logic [N-1:0][W-1:0] din,
  output logic [W-1:0]        dout
);
  localparam int unsigned G = (N + 3) / 4;   // groups of four

  logic [G-1:0][W-1:0] part_d, part_q;
  logic [W-1:0]        pipe [STAGES-1];

  always_comb begin
    part_d = '0;
    for (int i = 0; i < N; i++)
      part_d[i/4] |= din[i] & {W{sel[i]}};
  end

  always_ff @(posedge clk) part_q <= part_d;

  always_ff @(posedge clk) begin
    logic [W-1:0] acc;
    acc = '0;
    for (int g = 0; g < G; g++) acc |= part_q[g];
    pipe[0] <= acc;
    for (int s = 1; s < STAGES - 1; s++) pipe[s] <= pipe[s-1];
  end

  assign dout = pipe[STAGES-2];

  initial assert (STAGES >= 2) else $error("onehot_mux: STAGES must be at least 2");
endmodule
