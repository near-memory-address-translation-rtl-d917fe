// indram_layout_mapper: address arithmetic of the in-DRAM DIPTA layout.
//
// In-DRAM DIPTA stores each page frame's translation inside DRAM, next to the
// data, instead of in an SRAM. Block 0 of every DRAM row is reserved for
// metadata, so a row of K blocks holds K-1 data blocks and a page of K
// blocks no longer fits in one row. The layout packs K-1 page frames into K
// consecutive rows: data block addresses (frame * K + block) are laid out
// back to back over the K-1 data slots of successive rows, skipping slot 0.
// With 4KB pages and rows (K = 64) every page spans exactly two rows and a
// row holds blocks of at most two pages; rows 0..63 form a repeating cycle.
//
// For a data block address ba this unit computes, as the paper gives them,
//   row    = ba / (K-1)
//   offset = ba mod (K-1) + 1        (block slot inside the row, 1..K-1)
// and which half of the row's metadata block (slot 0) holds the page's
// translation: the second half describes the page that starts in the row,
// the first half the page that ends in it (meta_half = 1 / 0). The page of
// frame f starts in row (f*K)/(K-1).
//
// Purely combinational. The division by the constant K-1 is left to
// synthesis. Default sizes: K = 64 blocks per 4KB row; BA_BITS = 23 covers a
// 512MB vault (131072 rows, 129024 frames).
//
// This is the direct-mapped layout, the one the paper spells out; for a
// set-associative in-DRAM table the paper only sketches the layout.
module indram_layout_mapper #(
  parameter int unsigned K       = 64,
  parameter int unsigned BA_BITS = 23
) (
  input  logic [BA_BITS-1:0]    block_addr,
  output logic [BA_BITS-1:0]    row,
  output logic [$clog2(K)-1:0]  offset,
  output logic                  meta_half
);

  localparam int unsigned OB = $clog2(K);

  logic [BA_BITS-1:0] frame;
  logic [BA_BITS-1:0] start_row;
  logic [BA_BITS-1:0] rem;

  always_comb begin
    row       = block_addr / BA_BITS'(K - 1);
    rem       = block_addr % BA_BITS'(K - 1);
    offset    = OB'(rem + 1);
    frame     = block_addr / BA_BITS'(K);
    start_row = BA_BITS'((frame * BA_BITS'(K)) / BA_BITS'(K - 1));
    meta_half = (row == start_row);
  end

endmodule
