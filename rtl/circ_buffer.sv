// circ_buffer: circular request buffer with show-ahead read.
//
// Holds analysed operations (addresses, payload, cycle count) between the
// conflict counter and the sequencer of an access controller. The head entry
// is visible on rd_data whenever empty is low; rd_en pops it. A write and a
// read may happen in the same clock. free reports the number of empty
// entries, which the write controller uses to hold the instruction pipeline
// before a new instruction could overflow the buffer.
// The paper stores these fields in M20K blocks; the depth of 512 is one M20K
// deep (own inference from the M20K counts of the controllers).
module circ_buffer #(
  parameter int unsigned WIDTH = 32,
  parameter int unsigned DEPTH = 512,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned CW   = $clog2(DEPTH + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_en,
  input  logic [WIDTH-1:0] wr_data,
  input  logic             rd_en,
  output logic [WIDTH-1:0] rd_data,
  output logic             empty,
  output logic             full,
  output logic [CW-1:0]    free
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic [CW-1:0]    used;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp   <= '0;
      rp   <= '0;
      used <= '0;
    end else begin
      if (wr_en) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (rd_en) rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      used <= used + CW'(wr_en) - CW'(rd_en);
    end
  end

  assign rd_data = mem[rp];
  assign empty   = (used == '0);
  assign full    = (used == CW'(DEPTH));
  assign free    = CW'(DEPTH) - used;

  a_no_overflow:  assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> (!full || rd_en))
    else $error("circ_buffer: write into a full buffer");
  a_no_underflow: assert property (@(posedge clk) disable iff (!rst_n) rd_en |-> !empty)
    else $error("circ_buffer: read from an empty buffer");
endmodule
