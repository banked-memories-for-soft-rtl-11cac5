// shared_memory: the banked shared memory with its read and write
// arbitration (the "Shared Mem." of the design).
//
// NUM_BANKS banks of 32-bit words (bank_ram) each have one read and one
// write port, so a read operation and a write operation can be in progress
// at the same time. Both sides work the same way:
//  * When an operation (LANES word addresses) is issued, the bank access
//    matrix is recomputed from its addresses (cheaper than carrying it from
//    the controller) and column b is loaded into bank b's carry_arbiter.
//    The rows (bank-internal addresses), the write data and the read tag
//    are registered with it.
//  * Each clock, each arbiter grants one of its requesting lanes; the grant
//    is the one-hot select of the bank's address (and write data) mux, a
//    3-stage pipelined onehot_mux. An operation whose busiest bank has k
//    requests therefore takes k clocks, and the controllers issue the next
//    operation exactly then.
//  * Read side only: the grants are delayed by the address-mux and bank
//    latencies and transposed; row l of the transposed matrix selects, in
//    lane l's output mux, the bank that holds lane l's word, and the OR of
//    that row is lane l's write-back strobe sp_we[l]. The read tag
//    (destination register, operation index) travels with the grants.
//
// Timing: an operation issued in clock t is granted from clock t+1 on; a
// lane granted in clock g writes its bank at the edge ending clock g+3
// (write) or presents its data with sp_we in clock g+9 (read: 3 address mux
// + 3 bank + 3 output mux clocks). rd_busy/wr_busy stay high while any part
// of an operation is in flight. The paper gives the arbiter, the one-hot
// muxes with 3 pipeline stages, the 3-clock banks and the delay-and-
// transpose of the controls; that the controls are also delayed over the
// address mux stages follows from placing those stages before the banks.
//
// Size: ADDR_W-bit word addresses give banks of 2^ADDR_W / NUM_BANKS rows
// (64K words = 256 KB by default). BANK_WORDS may be set lower, above half
// of that, for a memory that is not a power of two (448 KB: ADDR_W = 17,
// BANK_WORDS = 7168); addresses beyond it must not be used. HALF_BANKS = 1
// splits every bank into two halves (bank_ram HALF) as the paper does for
// its 448 KB memory; reads then return 2 clocks later (g+11) and writes
// land 1 clock later, and the grant and activity delay lines grow to match.
module shared_memory
  import simt_mem_pkg::*;
#(
  parameter int unsigned LANES      = simt_mem_pkg::N_LANES,
  parameter int unsigned NUM_BANKS  = simt_mem_pkg::N_BANKS,
  parameter int unsigned ADDR_W     = simt_mem_pkg::ADDR_BITS,
  parameter int unsigned DATA_W     = simt_mem_pkg::DATA_BITS,
  parameter int unsigned BANK_SHIFT = 0,
  parameter int unsigned MUX_STAGES = simt_mem_pkg::MUX_PIPE,
  parameter int unsigned BANK_LAT   = simt_mem_pkg::BANK_LATENCY,
  parameter int unsigned BANK_WORDS = 1 << (ADDR_W - $clog2(NUM_BANKS)),
  parameter bit          HALF_BANKS = 1'b0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // read port (from the read controller)
  input  logic                         rd_valid,
  input  logic [LANES-1:0][ADDR_W-1:0] rd_addr,
  input  rd_tag_t                      rd_tag,
  output logic                         rd_busy,
  // write-back to the SPs
  output logic [LANES-1:0]             sp_we,
  output logic [LANES-1:0][DATA_W-1:0] sp_data,
  output rd_tag_t                      sp_tag,
  // write port (from the write controller)
  input  logic                         wr_valid,
  input  logic [LANES-1:0][ADDR_W-1:0] wr_addr,
  input  logic [LANES-1:0][DATA_W-1:0] wr_data,
  output logic                         wr_busy
);
  localparam int unsigned BB    = $clog2(NUM_BANKS);
  localparam int unsigned ROW_W = ADDR_W - BB;
  localparam int unsigned DEPTH = BANK_WORDS;
  localparam int unsigned HX    = HALF_BANKS ? 1 : 0;     // half-bank extra clocks, each way
  localparam int unsigned RD_D  = MUX_STAGES + BANK_LAT + 2 * HX;  // grant -> bank data
  localparam int unsigned WR_D  = MUX_STAGES + HX;        // grant -> bank written
  localparam int unsigned WB_D  = RD_D + MUX_STAGES;      // grant -> sp_we

  // ------------------------------------------------------------------ read
  logic [NUM_BANKS-1:0][LANES-1:0] rd_lanes, rgrant;
  logic [NUM_BANKS-1:0]            rd_arb_active;
  logic [LANES-1:0][ROW_W-1:0]     rrow_q;
  rd_tag_t                         rtag_q;

  bank_access_matrix #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W), .BANK_SHIFT(BANK_SHIFT)
  ) u_rd_matrix (.addr(rd_addr), .bank_lanes(rd_lanes));

  always_ff @(posedge clk) begin
    if (rd_valid) begin
      for (int l = 0; l < LANES; l++)
        rrow_q[l] <= ROW_W'(row_of(32'(rd_addr[l]), BB, BANK_SHIFT));
      rtag_q <= rd_tag;
    end
  end

  // Grants delayed to line up with the bank data; rd_act marks a granted clock.
  logic [NUM_BANKS-1:0][LANES-1:0] rgrant_d [RD_D];
  rd_tag_t                         rtag_d   [WB_D];
  logic [WB_D-1:0]                 ract_d;
  logic [NUM_BANKS-1:0][DATA_W-1:0] bank_rdata;

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_rbank
    logic [ROW_W-1:0]      raddr;
    logic [MUX_STAGES-1:0] ren_d;

    carry_arbiter #(.LANES(LANES)) u_rd_arb (
      .clk, .rst_n, .load(rd_valid), .run(1'b1), .bank(rd_lanes[b]),
      .grant(rgrant[b]), .active(rd_arb_active[b])
    );

    onehot_mux #(.N(LANES), .W(ROW_W), .STAGES(MUX_STAGES)) u_rd_amux (
      .clk, .sel(rgrant[b]), .din(rrow_q), .dout(raddr)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) ren_d <= '0;
      else        ren_d <= {ren_d[MUX_STAGES-2:0], |rgrant[b]};
    end

    bank_ram #(.DEPTH(DEPTH), .W(DATA_W), .LAT(BANK_LAT), .HALF(HALF_BANKS)) u_bank (
      .clk,
      .wr_en(g_wbank[b].wen_d[MUX_STAGES-1]),
      .wr_addr(g_wbank[b].wmux[DATA_W +: $clog2(DEPTH)]),
      .wr_data(g_wbank[b].wmux[DATA_W-1:0]),
      .rd_en(ren_d[MUX_STAGES-1]), .rd_addr($clog2(DEPTH)'(raddr)), .rd_data(bank_rdata[b])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int s = 0; s < RD_D; s++) rgrant_d[s] <= '0;
    end else begin
      rgrant_d[0] <= rgrant;
      for (int s = 1; s < RD_D; s++) rgrant_d[s] <= rgrant_d[s-1];
    end
  end

  always_ff @(posedge clk) begin
    rtag_d[0] <= rtag_q;
    for (int s = 1; s < WB_D; s++) rtag_d[s] <= rtag_d[s-1];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ract_d <= '0;
    else        ract_d <= {ract_d[WB_D-2:0], |rgrant};
  end

  // Transpose: lane l selects the bank whose delayed grant names lane l.
  logic [LANES-1:0][NUM_BANKS-1:0] lane_sel;
  logic [LANES-1:0]                lane_hit;
  logic [LANES-1:0][MUX_STAGES-1:0] we_d;

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      for (int b = 0; b < NUM_BANKS; b++) lane_sel[l][b] = rgrant_d[RD_D-1][b][l];
      lane_hit[l] = |lane_sel[l];
    end
  end

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    onehot_mux #(.N(NUM_BANKS), .W(DATA_W), .STAGES(MUX_STAGES)) u_out_mux (
      .clk, .sel(lane_sel[l]), .din(bank_rdata), .dout(sp_data[l])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) we_d[l] <= '0;
      else        we_d[l] <= {we_d[l][MUX_STAGES-2:0], lane_hit[l]};
    end
    assign sp_we[l] = we_d[l][MUX_STAGES-1];
  end

  assign sp_tag  = rtag_d[WB_D-1];
  assign rd_busy = (|rd_arb_active) || (|ract_d);

  // ----------------------------------------------------------------- write
  logic [NUM_BANKS-1:0][LANES-1:0]        wr_lanes, wgrant;
  logic [NUM_BANKS-1:0]                   wr_arb_active;
  logic [LANES-1:0][ROW_W+DATA_W-1:0]     wreq_q;   // {row, data} per lane
  logic [WR_D-1:0]                        wact_d;

  bank_access_matrix #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W), .BANK_SHIFT(BANK_SHIFT)
  ) u_wr_matrix (.addr(wr_addr), .bank_lanes(wr_lanes));

  always_ff @(posedge clk) begin
    if (wr_valid) begin
      for (int l = 0; l < LANES; l++)
        wreq_q[l] <= {ROW_W'(row_of(32'(wr_addr[l]), BB, BANK_SHIFT)), wr_data[l]};
    end
  end

  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_wbank
    logic [ROW_W+DATA_W-1:0] wmux;
    logic [MUX_STAGES-1:0]   wen_d;

    carry_arbiter #(.LANES(LANES)) u_wr_arb (
      .clk, .rst_n, .load(wr_valid), .run(1'b1), .bank(wr_lanes[b]),
      .grant(wgrant[b]), .active(wr_arb_active[b])
    );

    onehot_mux #(.N(LANES), .W(ROW_W + DATA_W), .STAGES(MUX_STAGES)) u_wr_mux (
      .clk, .sel(wgrant[b]), .din(wreq_q), .dout(wmux)
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) wen_d <= '0;
      else        wen_d <= {wen_d[MUX_STAGES-2:0], |wgrant[b]};
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) wact_d <= '0;
    else        wact_d <= {wact_d[WR_D-2:0], |wgrant};
  end

  assign wr_busy = (|wr_arb_active) || (|wact_d);

  // ------------------------------------------------------------ assertions
  initial assert ($clog2(BANK_WORDS) == ROW_W)
    else $error("shared_memory: BANK_WORDS must need exactly the row bits");
  // A new operation may only be issued once every arbiter is on its last
  // grant (or idle): the controllers space operations by their conflict count.
  for (genvar b = 0; b < NUM_BANKS; b++) begin : g_chk
    a_rd_spacing: assert property (@(posedge clk) disable iff (!rst_n)
      rd_valid |-> $onehot0(g_rbank[b].u_rd_arb.state))
      else $error("shared_memory: read issued while bank %0d still arbitrating", b);
    a_wr_spacing: assert property (@(posedge clk) disable iff (!rst_n)
      wr_valid |-> $onehot0(g_wbank[b].u_wr_arb.state))
      else $error("shared_memory: write issued while bank %0d still arbitrating", b);
  end
endmodule
