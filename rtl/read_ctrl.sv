// read_ctrl: read access controller.
//
// Receives the read operations of a read instruction, one per clock (LANES
// word addresses plus the destination register and operation index that the
// data must be written back to), computes each operation's bank-conflict
// count, buffers it and issues the operations to the shared memory spaced by
// their counts (see access_ctrl). As in the paper, a read instruction holds
// the instruction fetch/decode: hold_fetch is high from the first operation
// until the shared memory reports that its last read has been written back
// (mem_rd_busy low). First issue: 5 clocks after the first operation.
module read_ctrl
  import simt_mem_pkg::*;
#(
  parameter int unsigned LANES      = simt_mem_pkg::N_LANES,
  parameter int unsigned NUM_BANKS  = simt_mem_pkg::N_BANKS,
  parameter int unsigned ADDR_W     = simt_mem_pkg::ADDR_BITS,
  parameter int unsigned BANK_SHIFT = 0,
  parameter int unsigned BUF_DEPTH  = simt_mem_pkg::REQ_BUF_DEPTH
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // from fetch/decode and the SPs
  input  logic                         rd_enable,
  input  logic [LANES-1:0][ADDR_W-1:0] rd_addr,
  input  rd_tag_t                      rd_tag,
  // to the shared memory read port
  output logic                         iss_valid,
  output logic [LANES-1:0][ADDR_W-1:0] iss_addr,
  output rd_tag_t                      iss_tag,
  output logic [$clog2(LANES+1)-1:0]   iss_count,
  input  logic                         mem_rd_busy,
  // to fetch/decode
  output logic                         hold_fetch
);
  logic busy;
  logic [$clog2(BUF_DEPTH+1)-1:0] free_unused;

  access_ctrl #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W),
    .BANK_SHIFT(BANK_SHIFT), .PAYLOAD_W(TAG_W), .BUF_DEPTH(BUF_DEPTH)
  ) u_core (
    .clk, .rst_n,
    .in_valid(rd_enable), .in_addr(rd_addr), .in_payload(rd_tag),
    .iss_valid, .iss_addr, .iss_payload(iss_tag), .iss_count,
    .busy, .buf_free(free_unused)
  );

  // A read instruction pauses fetch/decode until all its data are back.
  assign hold_fetch = rd_enable || busy || iss_valid || mem_rd_busy;
endmodule
