// addr_map: programmable address mapping of the Access Processor.
//
// Maps a logical vector address (matrix base + row*N/K + vector index) onto a
// memory bank or channel and an address inside it. The bank index is the
// BANK_BITS-wide field of the logical address starting at bit cfg_bank_pos,
// optionally XORed with another field starting at cfg_xor_pos (a common way to
// spread strided accesses, such as column-order writes, across banks). The
// remaining address bits, with the bank field cut out, form the local address.
// The physical address sent to memory is {bank, local}. As long as the XOR
// field does not overlap the bank field the mapping is one-to-one.
// Purely combinational. The paper names a programmable address mapping that
// reduces bank conflicts; the field-select and XOR scheme is this design's own.
module addr_map #(
  parameter int unsigned ADDR_W    = ap_pkg::ADDR_W,
  parameter int unsigned BANK_BITS = 5
) (
  input  logic [ADDR_W-1:0]           laddr,
  input  logic [4:0]                  cfg_bank_pos,
  input  logic                        cfg_xor_en,
  input  logic [4:0]                  cfg_xor_pos,
  output logic [BANK_BITS-1:0]        bank,
  output logic [ADDR_W-BANK_BITS-1:0] local_addr,
  output logic [ADDR_W-1:0]           paddr
);
  localparam logic [ADDR_W-1:0] FIELD = ADDR_W'((1 << BANK_BITS) - 1);

  logic [ADDR_W-1:0] low_mask, rest;

  always_comb begin
    low_mask   = (ADDR_W'(1) << cfg_bank_pos) - ADDR_W'(1);
    bank       = BANK_BITS'((laddr >> cfg_bank_pos) & FIELD);
    if (cfg_xor_en) bank = bank ^ BANK_BITS'((laddr >> cfg_xor_pos) & FIELD);
    rest       = ((laddr >> (cfg_bank_pos + 5'(BANK_BITS))) << cfg_bank_pos) | (laddr & low_mask);
    local_addr = (ADDR_W-BANK_BITS)'(rest);
    paddr      = {bank, local_addr};
  end
endmodule
