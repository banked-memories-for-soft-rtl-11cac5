// bank_ram: one memory bank of the shared memory.
//
// A simple dual-port RAM of DEPTH words of W bits: one write port and one
// read port, usable in the same clock (as an FPGA block RAM in simple
// dual-port mode). A write takes effect at the clock edge. A read returns
// the word LAT clocks after rd_en/rd_addr are presented (3 in the paper's
// design): the address is registered with the array read, then LAT-1
// output registers follow. Reading a word in the clock it is written
// returns the old word. rd_data holds its value between reads. The memory
// is not reset.
//
// HALF = 1 builds the bank as two half banks, the upper address bit
// selecting the half, as the paper does for its largest (448 KB) memory to
// keep timing over a physically large bank. Here that costs two extra
// clocks: one register on the way in (address, write data and enables, to
// reach the far half) and one after the half-select mux on the way out, so
// reads take LAT+2 clocks and writes land one clock later. DEPTH need not
// be a power of two: the lower half holds 2^(AW-1) words and the upper half
// the rest (7168 = 4096 + 3072 for 448 KB over 16 banks). Which registers
// make up the two extra clocks is this design's choice.
module bank_ram #(
  parameter int unsigned DEPTH = 4096,
  parameter int unsigned W     = simt_mem_pkg::DATA_BITS,
  parameter int unsigned LAT   = simt_mem_pkg::BANK_LATENCY,
  parameter bit          HALF  = 1'b0,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [W-1:0]  wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [W-1:0]  rd_data
);
  if (!HALF) begin : g_whole
    logic [W-1:0] mem [DEPTH];
    logic [W-1:0] q [LAT];

    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_addr] <= wr_data;
    end

    always_ff @(posedge clk) begin
      if (rd_en) q[0] <= mem[rd_addr];
    end

    for (genvar s = 1; s < LAT; s++) begin : g_out
      always_ff @(posedge clk) q[s] <= q[s-1];
    end

    assign rd_data = q[LAT-1];
  end else begin : g_half
    localparam int unsigned LO_D = 1 << (AW - 1);
    localparam int unsigned HI_D = DEPTH - LO_D;

    // input register stage
    logic          wr_en_q, rd_en_q;
    logic [AW-1:0] wr_addr_q, rd_addr_q;
    logic [W-1:0]  wr_data_q;

    always_ff @(posedge clk) begin
      wr_en_q   <= wr_en;
      wr_addr_q <= wr_addr;
      wr_data_q <= wr_data;
      rd_en_q   <= rd_en;
      rd_addr_q <= rd_addr;
    end

    logic [W-1:0] mem_lo [LO_D];
    logic [W-1:0] mem_hi [HI_D];
    logic [W-1:0] q_lo [LAT];
    logic [W-1:0] q_hi [LAT];
    logic [LAT-1:0] sel_hi;
    logic [W-1:0] out_q;

    always_ff @(posedge clk) begin
      if (wr_en_q && !wr_addr_q[AW-1]) mem_lo[wr_addr_q[AW-2:0]] <= wr_data_q;
      if (wr_en_q &&  wr_addr_q[AW-1]) mem_hi[wr_addr_q[AW-2:0]] <= wr_data_q;
    end

    always_ff @(posedge clk) begin
      if (rd_en_q && !rd_addr_q[AW-1]) q_lo[0] <= mem_lo[rd_addr_q[AW-2:0]];
      if (rd_en_q &&  rd_addr_q[AW-1]) q_hi[0] <= mem_hi[rd_addr_q[AW-2:0]];
      if (rd_en_q) sel_hi[0] <= rd_addr_q[AW-1];
    end

    for (genvar s = 1; s < LAT; s++) begin : g_out
      always_ff @(posedge clk) begin
        q_lo[s]   <= q_lo[s-1];
        q_hi[s]   <= q_hi[s-1];
        sel_hi[s] <= sel_hi[s-1];
      end
    end

    always_ff @(posedge clk) out_q <= sel_hi[LAT-1] ? q_hi[LAT-1] : q_lo[LAT-1];
    assign rd_data = out_q;

    initial assert (HI_D >= 1 && HI_D <= LO_D)
      else $error("bank_ram: DEPTH must lie above a power of two for HALF");
  end

  initial assert (LAT >= 1) else $error("bank_ram: LAT must be at least 1");
endmodule
