// simt_mem_pkg: shared constants, types and address-mapping functions of
// the banked shared memory for a 16-lane SIMT processor.
//
// The sizes follow the main configuration of the design: 16 lanes (SPs)
// served by a 16-bank memory of 32-bit words, 16-bit word addresses, 5-bit
// destination registers and 3-clock memory banks. The bank of a word is a
// group of address bits, by default the LSBs; BANK_SHIFT moves that group up
// (the "offset" map, used so that the I and Q halves of a complex number land
// in the same bank and consecutive complex numbers in consecutive banks).
// The remaining address bits, concatenated, are the row inside the bank, so
// the mapping is a bijection for every shift.
//
// Own choices: the 8-bit warp tag that travels with each read (it identifies
// which of the up to 256 operations of an instruction the data belongs to),
// the 512-entry request buffers, and the 3-stage one-hot muxes placed both in
// front of and behind the banks.
package simt_mem_pkg;

  localparam int unsigned N_LANES       = 16  ; // SPs, i.e. requests per operation
  localparam int unsigned N_BANKS       = 16  ; // memory banks
  localparam int unsigned ADDR_BITS     = 16  ; // word address of a request
  localparam int unsigned DATA_BITS     = 32  ; // bank and data width
  localparam int unsigned REG_BITS      = 5   ; // destination register of a read
  localparam int unsigned WARP_BITS     = 8   ; // operation index inside an instruction
  localparam int unsigned OPS_PER_INSTR = 256 ; // operations per instruction (4096 threads / 16)
  localparam int unsigned REQ_BUF_DEPTH = 512 ; // request buffer entries (one M20K deep)
  localparam int unsigned BANK_LATENCY  = 3   ; // bank read latency in clocks
  localparam int unsigned MUX_PIPE      = 3   ; // pipeline stages of every one-hot mux

  // Tag returned with read data so that the SP can write its register file.
  typedef struct packed {
    logic [REG_BITS-1:0]  dest;  // destination register
    logic [WARP_BITS-1:0] warp;  // operation (thread group) index
  } rd_tag_t;

  localparam int unsigned TAG_W = $bits(rd_tag_t);

  // Bank index of word address a: bits [shift+bank_bits-1 : shift].
  function automatic int unsigned bank_of(logic [31:0] a, int unsigned bank_bits,
                                          int unsigned shift);
    return int'((a >> shift) & ((32'd1 << bank_bits) - 32'd1));
  endfunction

  // Row inside the bank: the address with the bank field removed.
  function automatic logic [31:0] row_of(logic [31:0] a, int unsigned bank_bits,
                                         int unsigned shift);
    logic [31:0] low_mask;
    low_mask = (32'd1 << shift) - 32'd1;
    return ((a >> (shift + bank_bits)) << shift) | (a & low_mask);
  endfunction

endpackage
