// bank_access_matrix: which lanes of one operation address which bank.
//
// Each lane's bank field is decoded to a one-hot vector (one row of a
// LANES x NUM_BANKS matrix); the matrix is transposed so that output
// bank_lanes[b] has bit l set when lane l accesses bank b. The popcount of
// bank_lanes[b] is the number of conflicting accesses to bank b, and the
// vector itself is what bank b's arbiter is loaded with. Purely combinational.
// The bank field is the LSBs of the address (BANK_SHIFT = 0) or, for the
// offset map, the bits BANK_SHIFT and up; both follow the paper's description.
module bank_access_matrix
  import simt_mem_pkg::*;
#(
  parameter int unsigned LANES      = simt_mem_pkg::N_LANES,
  parameter int unsigned NUM_BANKS  = simt_mem_pkg::N_BANKS,
  parameter int unsigned ADDR_W     = simt_mem_pkg::ADDR_BITS,
  parameter int unsigned BANK_SHIFT = 0
) (
  input  logic [LANES-1:0][ADDR_W-1:0] addr,
  output logic [NUM_BANKS-1:0][LANES-1:0] bank_lanes
);
  localparam int unsigned BB = $clog2(NUM_BANKS);

  logic [LANES-1:0][NUM_BANKS-1:0] onehot;  // rows: lanes

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      onehot[l] = '0;
      onehot[l][bank_of(32'(addr[l]), BB, BANK_SHIFT)] = 1'b1;
    end
    for (int b = 0; b < NUM_BANKS; b++)
      for (int l = 0; l < LANES; l++)
        bank_lanes[b][l] = onehot[l][b];
  end
endmodule
