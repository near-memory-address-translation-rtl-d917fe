// dipta_pkg: types and constants shared by the DIPTA vault logic.
//
// DIPTA (distributed inverted page table) keeps, next to every DRAM vault, one
// translation entry per page frame of that vault. The constants below are the
// evaluated configuration: 48-bit virtual addresses, 4KB pages, 64B blocks,
// 4KB DRAM rows, 8GB chips of 16 vaults, 4-way set-associative virtual memory.
// An entry holds a 36-bit VPN, a 12-bit ASID and 12 bits of page flags, plus
// a valid bit of this design's own (the paper counts "less than 8B" per entry).
package dipta_pkg;

  localparam int unsigned VA_BITS     = 48;  // virtual address width
  localparam int unsigned PAGE_BITS   = 12;  // 4KB page offset
  localparam int unsigned BLOCK_BITS  = 6;   // 64B block (cache line)
  localparam int unsigned VPN_BITS    = VA_BITS - PAGE_BITS;  // 36
  localparam int unsigned ASID_BITS   = 12;
  localparam int unsigned FLAG_BITS   = 12;
  localparam int unsigned BLOCK_DATA_BITS = 512;  // one 64B block

  // One inverted-page-table entry: the translation of the page in one frame.
  typedef struct packed {
    logic                 valid;
    logic [ASID_BITS-1:0] asid;
    logic [VPN_BITS-1:0]  vpn;
    logic [FLAG_BITS-1:0] flags;
  } pte_t;

  localparam int unsigned PTE_BITS = $bits(pte_t);  // 61

  // Outcome of one MPU access, as reported with the response.
  typedef enum logic [1:0] {
    RESP_HIT        = 2'd0,  // hit in the predicted way (reads) or a completed write
    RESP_HIT_REPLAY = 2'd1,  // hit in another way: second column access
    RESP_FAULT      = 2'd2   // no way holds the page: page fault
  } resp_kind_e;

  // Commands on the vault's DRAM port (one bank per vault is modelled).
  typedef enum logic [2:0] {
    DRAM_NOP = 3'd0,
    DRAM_ACT = 3'd1,  // open a row
    DRAM_RD  = 3'd2,  // column read of one 64B block from the open row
    DRAM_WR  = 3'd3,  // column write of one 64B block into the open row
    DRAM_PRE = 3'd4   // close the open row
  } dram_cmd_e;

endpackage
