// interleave_mapper: virtual address to vault, memory set, DRAM row and
// column under DIPTA's page-interleaved layout.
//
// With ASSOC-way set-associative virtual memory, the ASSOC page frames of one
// memory set occupy ASSOC consecutive DRAM rows of the vault. Instead of
// giving each page a row of its own (which would need the translation before
// the row is known), every page is cut into ASSOC equal parts: row j of the
// set holds part j of all ASSOC pages, way w's part at block columns
// [w*PART, (w+1)*PART). The top log2(ASSOC) bits of the page offset thus name
// the row, so the virtual address alone selects the row to activate; only the
// column depends on the (predicted or translated) way.
//
// Address fields, most significant first, of this design's choosing where
// the paper is silent:
//   va[47:12]  VPN; of it, vpn[VAULT_BITS-1:0] selects the vault and
//              vpn[VAULT_BITS +: SET_BITS] the memory set inside the vault
//   va[11:6]   block within the page; its top log2(ASSOC) bits select the row
//              within the set, the rest the block within the page part
//   va[5:0]    byte within the 64B block (not used here)
// DRAM row inside the vault = {set, row-within-set}; a DRAM row is the size
// of a page (4KB), as the paper assumes for illustration.
//
// Purely combinational, and only a rearrangement of address bits: that is the
// point of the layout, since no lookup or arithmetic may stand between the
// virtual address and the row to activate. va[5:0] is an input for the sake
// of a whole-address interface and is left unused (the lint warning on it
// stands). ASSOC must be a power of two of at least 2.
module interleave_mapper
  import dipta_pkg::*;
#(
  parameter int unsigned ASSOC      = 4,
  parameter int unsigned VAULT_BITS = 4,
  parameter int unsigned SET_BITS   = 15
) (
  input  logic [VA_BITS-1:0]                 va,
  input  logic [$clog2(ASSOC)-1:0]           way,
  output logic [VPN_BITS-1:0]                vpn,
  output logic [VAULT_BITS-1:0]              vault,
  output logic [SET_BITS-1:0]                set,
  output logic [SET_BITS+$clog2(ASSOC)-1:0]  row,
  output logic [PAGE_BITS-BLOCK_BITS-1:0]    col
);

  localparam int unsigned W  = $clog2(ASSOC);
  localparam int unsigned BB = PAGE_BITS - BLOCK_BITS;  // block index bits in a page (6)
  localparam int unsigned PB = BB - W;                  // block index bits in a page part

  logic [BB-1:0] blk;

  always_comb begin
    vpn   = va[VA_BITS-1:PAGE_BITS];
    vault = vpn[VAULT_BITS-1:0];
    set   = vpn[VAULT_BITS +: SET_BITS];
    blk   = va[PAGE_BITS-1:BLOCK_BITS];
    row   = {set, blk[BB-1 -: W]};
    col   = {way, blk[PB-1:0]};
  end

endmodule
