// way_predictor: per-vault address-based way predictor of DIPTA.
//
// With set-associative virtual memory a virtual address names a memory set,
// and thanks to page interleaving also the DRAM row, but not which of the
// ASSOC pages sharing that row holds the block. The predictor guesses that
// way so the column access can be issued without waiting for translation.
//
// Following the paper, it is a tagless table of ENTRIES = 2^K entries, each
// holding the last way accessed (log2(ASSOC) bits), indexed by a K-bit XOR
// hash of the VPN bits that select the set inside the vault (the vault bits
// are not part of the input). The hash folding is this design's choice: set
// bit i is XORed into hash bit (i mod K), which for the paper's example
// (13 set bits, K = 5) gives a 5-bit XOR hash as described.
//
// Interface and timing: a lookup (rd_en, rd_set) returns pred_way one cycle
// later (registered read, as an SRAM would). An update (upd_en, upd_set,
// upd_way) writes the entry at the next clock edge; a lookup in the same
// cycle as an update to the same entry sees the old value. After reset the
// table is cleared to way 0, one entry per cycle (ENTRIES cycles), and
// init_done then rises; updates before that are lost. The paper does not
// give a reset value.
module way_predictor #(
  parameter int unsigned ENTRIES  = 1024,
  parameter int unsigned ASSOC    = 4,
  parameter int unsigned SET_BITS = 15
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      rd_en,
  input  logic [SET_BITS-1:0]       rd_set,
  output logic [$clog2(ASSOC)-1:0]  pred_way,
  input  logic                      upd_en,
  input  logic [SET_BITS-1:0]       upd_set,
  input  logic [$clog2(ASSOC)-1:0]  upd_way,
  output logic                      init_done
);

  localparam int unsigned K = $clog2(ENTRIES);
  localparam int unsigned W = $clog2(ASSOC);

  logic [W-1:0] table_q [ENTRIES];

  function automatic logic [K-1:0] xor_hash(input logic [SET_BITS-1:0] set);
    logic [K-1:0] h;
    h = '0;
    for (int unsigned i = 0; i < SET_BITS; i++) begin
      h[i % K] = h[i % K] ^ set[i];
    end
    return h;
  endfunction

  wire [K-1:0] rd_idx  = xor_hash(rd_set);
  wire [K-1:0] upd_idx = xor_hash(upd_set);

  // After reset the table is walked once, one entry per cycle, writing way
  // 0 everywhere; init_done rises when the walk is over.
  logic         init_done_q;
  logic [K-1:0] init_idx_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done_q <= 1'b0;
      init_idx_q  <= '0;
    end else if (!init_done_q) begin
      init_idx_q <= init_idx_q + 1'b1;
      if (init_idx_q == K'(ENTRIES - 1)) init_done_q <= 1'b1;
    end
  end

  assign init_done = init_done_q;

  always_ff @(posedge clk) begin
    if (!init_done_q) table_q[init_idx_q] <= '0;
    else if (upd_en)  table_q[upd_idx]    <= upd_way;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)     pred_way <= '0;
    else if (rd_en) pred_way <= table_q[rd_idx];
  end

endmodule
