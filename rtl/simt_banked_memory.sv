// simt_banked_memory: banked shared-memory subsystem of a 16-lane soft SIMT
// processor (top level).
//
// The SIMT core issues each load or store instruction as a stream of
// operations, one per clock, each carrying one request per lane (SP). The
// read and write access controllers analyse every operation's bank
// conflicts, buffer the operations and issue them to the shared memory
// spaced by the number of clocks their conflicts cost; the shared memory
// arbitrates each bank with a carry-chain arbiter, reads or writes its
// banks and returns read data to the lanes with per-lane write-back strobes.
// Reads and writes use separate controllers and separate bank ports and run
// concurrently.
//
// The SPs and the instruction fetch/decode are not part of this module;
// their signals are the ports:
//  * rd_*: a read operation (rd_enable, one address per lane, destination
//    register and operation index);
//  * wr_*: a write operation (address and data per lane; wr_blocking marks
//    a blocking write);
//  * sp_*: read write-back, one strobe and one word per lane, with the tag
//    of the operation;
//  * hold_fetch: fetch/decode must not start a new instruction. It is high
//    during a read instruction until all its data are back, during a
//    blocking write until all its words are written, and while the write
//    buffer lacks room for another full write instruction.
// Timing: an operation enters a controller in clock t and is issued at t+5
// at the earliest; read data come back 10 clocks after the issue for a
// lane granted first (see shared_memory). The parameters default to the
// paper's main configuration (16 lanes, 16 banks, 64K words = 256 KB).
// BANK_WORDS and HALF_BANKS give the paper's larger memory built from half
// banks (448 KB: ADDR_W = 17, BANK_WORDS = 7168, HALF_BANKS = 1), whose
// reads take two clocks longer.
module simt_banked_memory
  import simt_mem_pkg::*;
#(
  parameter int unsigned LANES      = simt_mem_pkg::N_LANES,
  parameter int unsigned NUM_BANKS  = simt_mem_pkg::N_BANKS,
  parameter int unsigned ADDR_W     = simt_mem_pkg::ADDR_BITS,
  parameter int unsigned DATA_W     = simt_mem_pkg::DATA_BITS,
  parameter int unsigned BANK_SHIFT = 0,
  parameter int unsigned BUF_DEPTH  = simt_mem_pkg::REQ_BUF_DEPTH,
  parameter int unsigned OPS_MAX    = simt_mem_pkg::OPS_PER_INSTR,
  parameter int unsigned BANK_WORDS = 1 << (ADDR_W - $clog2(NUM_BANKS)),
  parameter bit          HALF_BANKS = 1'b0
) (
  input  logic                         clk,
  input  logic                         rst_n,
  // read operations from the core
  input  logic                         rd_enable,
  input  logic [LANES-1:0][ADDR_W-1:0] rd_addr,
  input  rd_tag_t                      rd_tag,
  // write operations from the core
  input  logic                         wr_enable,
  input  logic                         wr_blocking,
  input  logic [LANES-1:0][ADDR_W-1:0] wr_addr,
  input  logic [LANES-1:0][DATA_W-1:0] wr_data,
  // read write-back to the SPs
  output logic [LANES-1:0]             sp_we,
  output logic [LANES-1:0][DATA_W-1:0] sp_data,
  output rd_tag_t                      sp_tag,
  // to fetch/decode
  output logic                         hold_fetch,
  // observation of the issue streams (for profiling)
  output logic                         rd_issue,
  output logic [$clog2(LANES+1)-1:0]   rd_issue_count,
  output logic                         wr_issue,
  output logic [$clog2(LANES+1)-1:0]   wr_issue_count,
  output logic                         wr_hold_full
);
  localparam int unsigned CNT_W = $clog2(LANES + 1);

  logic                         r_iss_valid, w_iss_valid;
  logic [LANES-1:0][ADDR_W-1:0] r_iss_addr, w_iss_addr;
  logic [LANES-1:0][DATA_W-1:0] w_iss_data;
  rd_tag_t                      r_iss_tag;
  logic [CNT_W-1:0]             r_iss_count, w_iss_count;
  logic                         mem_rd_busy, mem_wr_busy;
  logic                         rd_hold, wr_hold;

  read_ctrl #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W),
    .BANK_SHIFT(BANK_SHIFT), .BUF_DEPTH(BUF_DEPTH)
  ) u_read_ctrl (
    .clk, .rst_n,
    .rd_enable, .rd_addr, .rd_tag,
    .iss_valid(r_iss_valid), .iss_addr(r_iss_addr), .iss_tag(r_iss_tag),
    .iss_count(r_iss_count), .mem_rd_busy, .hold_fetch(rd_hold)
  );

  write_ctrl #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W), .DATA_W(DATA_W),
    .BANK_SHIFT(BANK_SHIFT), .BUF_DEPTH(BUF_DEPTH), .OPS_MAX(OPS_MAX)
  ) u_write_ctrl (
    .clk, .rst_n,
    .wr_enable, .wr_blocking, .wr_addr, .wr_data,
    .iss_valid(w_iss_valid), .iss_addr(w_iss_addr), .iss_data(w_iss_data),
    .iss_count(w_iss_count), .mem_wr_busy, .hold_fetch(wr_hold),
    .hold_full(wr_hold_full)
  );

  shared_memory #(
    .LANES(LANES), .NUM_BANKS(NUM_BANKS), .ADDR_W(ADDR_W), .DATA_W(DATA_W),
    .BANK_SHIFT(BANK_SHIFT), .BANK_WORDS(BANK_WORDS), .HALF_BANKS(HALF_BANKS)
  ) u_shared_mem (
    .clk, .rst_n,
    .rd_valid(r_iss_valid), .rd_addr(r_iss_addr), .rd_tag(r_iss_tag),
    .rd_busy(mem_rd_busy),
    .sp_we, .sp_data, .sp_tag,
    .wr_valid(w_iss_valid), .wr_addr(w_iss_addr), .wr_data(w_iss_data),
    .wr_busy(mem_wr_busy)
  );

  assign hold_fetch = rd_hold || wr_hold;
  assign rd_issue   = r_iss_valid;
  assign wr_issue   = w_iss_valid;
  assign rd_issue_count = r_iss_count;
  assign wr_issue_count = w_iss_count;
endmodule
