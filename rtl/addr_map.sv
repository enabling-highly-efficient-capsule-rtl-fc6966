// addr_map: the PIM-CapsNet physical address mapping (vault-major, with a
// sub-page size indicator).
//
// A 34-bit byte address is split as follows (bit 33 and bit 0 unused):
//   [32:28]        vault ID (5 bits, 32 vaults) - moved to the top so that
//                  consecutive blocks stay inside one vault
//   [27:8+n]       sub-page ID
//   [7+n:4+n]      bank ID (4 bits, 16 banks per vault)
//   [3+n:4]        block ID inside the sub-page (n bits)
//   [3:1]          indicator n: 000..100 select a sub-page of 16 B..256 B,
//                  i.e. 2^n blocks of 16 B; it is set per variable by the
//                  page table so that the blocks one PE fetches together sit
//                  in one bank while different PEs' data spread over banks.
// The bank-local block address is {sub-page ID, block ID} (20 bits: a bank
// holds 16 MB). Combinational. Field order, widths and the indicator codes
// follow the paper's address-mapping figure and text; treating indicator
// codes 101..111 as 256 B is this design's choice.
module addr_map
  import pim_pkg::*;
(
  input  logic [ADDR_W-1:0]      addr,
  output logic [VAULT_ID_W-1:0]  vault,
  output logic [BANK_ID_W-1:0]   bank,
  output logic [BANK_ADDR_W-1:0] baddr,
  output logic [2:0]             ind
);
  logic [23:0] blk;      // addr[27:4]: bank, sub-page and block fields
  logic [23:0] low_mask;
  logic [23:0] upper;

  always_comb begin
    ind      = (addr[3:1] > 3'(IND_MAX)) ? 3'(IND_MAX) : addr[3:1];
    vault    = addr[32:28];
    blk      = addr[27:4];
    bank     = 4'(blk >> ind);
    low_mask = (24'd1 << ind) - 24'd1;
    upper    = (blk >> ({2'b00, ind} + 5'd4)) << ind;
    baddr    = 20'(upper | (blk & low_mask));
  end
endmodule
