// conflict_counter: clocks an operation needs in the banked memory.
//
// For each operation (LANES addresses) the bank access matrix is formed, the
// popcount of each bank column is taken (the number of lanes that hit that
// bank) and a binary max tree ("sort network") reduces the NUM_BANKS counts
// to the largest, which equals the number of clocks the memory needs to
// serve the operation. A side band (addresses and request payload) travels
// through the same pipeline.
//
// Timing: the popcounts are registered (stage 1), then each level of the max
// tree is registered except the last, which is left combinational so that
// the consumer (the request buffer) registers it. out_valid therefore follows
// in_valid by log2(NUM_BANKS) clocks (4 for 16 banks), and with the buffer
// write the count is stored 5 clocks after the operation arrives, the
// initial latency the paper gives. One operation per clock is accepted.
// No reset of the data path; only the valid bits are reset.
module conflict_counter
  import simt_mem_pkg::*;
#(
  parameter int unsigned LANES      = simt_mem_pkg::N_LANES,
  parameter int unsigned NUM_BANKS  = simt_mem_pkg::N_BANKS,
  parameter int unsigned ADDR_W     = simt_mem_pkg::ADDR_BITS,
  parameter int unsigned BANK_SHIFT = 0,
  parameter int unsigned SIDE_W     = 8,
  localparam int unsigned CNT_W     = $clog2(LANES + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              in_valid,
  input  logic [LANES-1:0][ADDR_W-1:0] in_addr,
  input  logic [SIDE_W-1:0] in_side,
  output logic              out_valid,
  output logic [CNT_W-1:0]  out_count,
  output logic [LANES-1:0][ADDR_W-1:0] out_addr,
  output logic [SIDE_W-1:0] out_side,
  output logic              busy        // an operation is inside the pipeline
);
  localparam int unsigned LV = $clog2(NUM_BANKS);  // levels of the max tree
  localparam int unsigned NS = LV;                 // registered stages

  logic [NUM_BANKS-1:0][LANES-1:0] bank_lanes;

  bank_access_matrix #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W), .BANK_SHIFT(BANK_SHIFT)
  ) u_matrix (
    .addr(in_addr), .bank_lanes(bank_lanes)
  );

  // cnt[k] holds the NUM_BANKS >> k values of tree level k (level 0 = the
  // popcounts); levels 0 .. LV-1 are registers, level LV is the final max.
  logic [CNT_W-1:0] cnt [LV][NUM_BANKS];
  logic [CNT_W-1:0] max_all;

  // Level 0: popcounts, registered.
  always_ff @(posedge clk) begin
    if (in_valid) begin
      for (int b = 0; b < NUM_BANKS; b++) begin
        cnt[0][b] <= CNT_W'($countones(bank_lanes[b]));
      end
    end
  end

  // Levels 1..LV-1: pairwise maximum, registered.
  for (genvar k = 1; k < LV; k++) begin : g_level
    for (genvar i = 0; i < (NUM_BANKS >> k); i++) begin : g_node
      always_ff @(posedge clk)
        cnt[k][i] <= (cnt[k-1][2*i] > cnt[k-1][2*i+1]) ? cnt[k-1][2*i] : cnt[k-1][2*i+1];
    end
  end

  // Level LV: the last pair, combinational (registered by the consumer).
  assign max_all = (cnt[LV-1][0] > cnt[LV-1][1]) ? cnt[LV-1][0] : cnt[LV-1][1];

  // Side band and valid, NS stages deep.
  logic [NS-1:0] vld;
  logic [LANES-1:0][ADDR_W-1:0] addr_p [NS];
  logic [SIDE_W-1:0]            side_p [NS];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) vld <= '0;
    else        vld <= {vld[NS-2:0], in_valid};
  end

  always_ff @(posedge clk) begin
    addr_p[0] <= in_addr;
    side_p[0] <= in_side;
    for (int s = 1; s < NS; s++) begin
      addr_p[s] <= addr_p[s-1];
      side_p[s] <= side_p[s-1];
    end
  end

  assign out_valid = vld[NS-1];
  assign out_count = max_all;
  assign out_addr  = addr_p[NS-1];
  assign out_side  = side_p[NS-1];
  assign busy      = |vld;

  initial assert (NUM_BANKS >= 4 && (1 << LV) == NUM_BANKS)
    else $error("conflict_counter: NUM_BANKS must be a power of two >= 4");
endmodule
