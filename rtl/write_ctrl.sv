// write_ctrl: write access controller.
//
// Same structure as the read controller (conflict count, circular buffer,
// sequencer; see access_ctrl); a request carries a word address and 32-bit
// data per lane. Two kinds of write instruction exist. A blocking write
// (wr_blocking high on its operations) holds fetch/decode until every one of
// its words has been written into the banks (mem_wr_busy low); it is used
// when the data will be read back at once. A non-blocking write lets the
// pipeline go on, including into a following read, while the controller
// drains in the background.
// Own choices, where the paper is silent: the instruction pipeline is also
// held while the buffer has fewer than OPS_MAX+8 free entries, so that a
// further write instruction of up to OPS_MAX operations (plus the few still
// in the counting pipeline) can never overflow it; and a non-blocking write
// does not order itself against later reads of the same words.
module write_ctrl
  import simt_mem_pkg::*;
#(
  parameter int unsigned LANES      = simt_mem_pkg::N_LANES,
  parameter int unsigned NUM_BANKS  = simt_mem_pkg::N_BANKS,
  parameter int unsigned ADDR_W     = simt_mem_pkg::ADDR_BITS,
  parameter int unsigned DATA_W     = simt_mem_pkg::DATA_BITS,
  parameter int unsigned BANK_SHIFT = 0,
  parameter int unsigned BUF_DEPTH  = simt_mem_pkg::REQ_BUF_DEPTH,
  parameter int unsigned OPS_MAX    = simt_mem_pkg::OPS_PER_INSTR
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // from fetch/decode and the SPs
  input  logic                         wr_enable,
  input  logic                         wr_blocking,
  input  logic [LANES-1:0][ADDR_W-1:0] wr_addr,
  input  logic [LANES-1:0][DATA_W-1:0] wr_data,
  // to the shared memory write port
  output logic                         iss_valid,
  output logic [LANES-1:0][ADDR_W-1:0] iss_addr,
  output logic [LANES-1:0][DATA_W-1:0] iss_data,
  output logic [$clog2(LANES+1)-1:0]   iss_count,
  input  logic                         mem_wr_busy,
  // to fetch/decode
  output logic                         hold_fetch,
  output logic                         hold_full    // the buffer-space part of hold_fetch
);
  localparam int unsigned FREE_W = $clog2(BUF_DEPTH + 1);

  logic              busy;
  logic [FREE_W-1:0] buf_free;
  logic              blocking;  // a blocking write has not completed yet

  access_ctrl #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W),
    .BANK_SHIFT(BANK_SHIFT), .PAYLOAD_W(LANES * DATA_W), .BUF_DEPTH(BUF_DEPTH)
  ) u_core (
    .clk, .rst_n,
    .in_valid(wr_enable), .in_addr(wr_addr), .in_payload(wr_data),
    .iss_valid, .iss_addr, .iss_payload(iss_data), .iss_count,
    .busy, .buf_free
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                       blocking <= 1'b0;
    else if (wr_enable && wr_blocking)                blocking <= 1'b1;
    else if (!wr_enable && !busy && !iss_valid && !mem_wr_busy) blocking <= 1'b0;
  end

  assign hold_full  = (buf_free < FREE_W'(OPS_MAX + 8));
  assign hold_fetch = (wr_enable && wr_blocking) || blocking || hold_full;

  initial assert (BUF_DEPTH >= OPS_MAX + 8)
    else $error("write_ctrl: BUF_DEPTH must hold one instruction of OPS_MAX operations");
endmodule
