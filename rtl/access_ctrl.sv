// access_ctrl: analysis, buffering and issue of memory operations; the
// common core of the read and the write access controller.
//
// An operation is the set of LANES requests (one per SP) that the
// instruction pipeline issues in one clock. The conflict counter computes
// how many clocks the banked memory will need for it (the largest number of
// lanes addressing one bank); the operation and its count are stored in a
// circular buffer; the sequencer then issues buffered operations to the
// shared memory back to back, each one a count of clocks after the previous
// one, which is exactly when the per-bank arbiters have finished it.
//
// Timing: an operation presented with in_valid in clock t, into an idle
// controller, appears with iss_valid in clock t+5 (16 banks; in general
// log2(NUM_BANKS)+1). Operations can be accepted one per clock without
// back-pressure; the buffer must have room (see circ_buffer.free).
// The sequencer's gap counter is this design's own realisation of the
// paper's sequencer and cycle count buffer.
module access_ctrl #(
  parameter int unsigned LANES      = simt_mem_pkg::N_LANES,
  parameter int unsigned NUM_BANKS  = simt_mem_pkg::N_BANKS,
  parameter int unsigned ADDR_W     = simt_mem_pkg::ADDR_BITS,
  parameter int unsigned BANK_SHIFT = 0,
  parameter int unsigned PAYLOAD_W  = 8,
  parameter int unsigned BUF_DEPTH  = simt_mem_pkg::REQ_BUF_DEPTH,
  localparam int unsigned CNT_W     = $clog2(LANES + 1),
  localparam int unsigned FREE_W    = $clog2(BUF_DEPTH + 1)
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // operations from the instruction pipeline
  input  logic                         in_valid,
  input  logic [LANES-1:0][ADDR_W-1:0] in_addr,
  input  logic [PAYLOAD_W-1:0]         in_payload,
  // operations to the shared memory
  output logic                         iss_valid,
  output logic [LANES-1:0][ADDR_W-1:0] iss_addr,
  output logic [PAYLOAD_W-1:0]         iss_payload,
  output logic [CNT_W-1:0]             iss_count,
  // status
  output logic                         busy,      // operations not yet issued
  output logic [FREE_W-1:0]            buf_free
);
  localparam int unsigned ENTRY_W = CNT_W + LANES * ADDR_W + PAYLOAD_W;

  logic                         cc_valid, cc_busy;
  logic [CNT_W-1:0]             cc_count;
  logic [LANES-1:0][ADDR_W-1:0] cc_addr;
  logic [PAYLOAD_W-1:0]         cc_side;

  conflict_counter #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W),
    .BANK_SHIFT(BANK_SHIFT), .SIDE_W(PAYLOAD_W)
  ) u_count (
    .clk, .rst_n,
    .in_valid, .in_addr, .in_side(in_payload),
    .out_valid(cc_valid), .out_count(cc_count), .out_addr(cc_addr),
    .out_side(cc_side), .busy(cc_busy)
  );

  logic               buf_empty, buf_full, pop;
  logic [ENTRY_W-1:0] head;

  circ_buffer #(.WIDTH(ENTRY_W), .DEPTH(BUF_DEPTH)) u_buf (
    .clk, .rst_n,
    .wr_en(cc_valid), .wr_data({cc_count, cc_addr, cc_side}),
    .rd_en(pop), .rd_data(head),
    .empty(buf_empty), .full(buf_full), .free(buf_free)
  );

  // Sequencer: issue the head entry when the previous operation's clocks
  // have elapsed.
  logic [CNT_W-1:0] gap;  // clocks still owed to the last issued operation

  assign pop = !buf_empty && (gap == '0);
  assign {iss_count, iss_addr, iss_payload} = head;
  assign iss_valid = pop;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            gap <= '0;
    else if (pop)          gap <= iss_count - 1'b1;
    else if (gap != '0)    gap <= gap - 1'b1;
  end

  assign busy = cc_busy || !buf_empty;

  a_room: assert property (@(posedge clk) disable iff (!rst_n) cc_valid |-> (!buf_full || pop))
    else $error("access_ctrl: request buffer overflow");
  a_count_range: assert property (@(posedge clk) disable iff (!rst_n)
    iss_valid |-> (iss_count >= 1 && iss_count <= CNT_W'(LANES)))
    else $error("access_ctrl: cycle count out of range");
endmodule
