// dipta_table: the SRAM inverted page table of one vault (SRAM-based DIPTA).
//
// There is one entry per page frame of the vault, organised like a
// set-associative cache: NSETS = 2^SET_BITS sets of ASSOC ways, way w of set
// s describing the page that lives in frame (s, w). An entry holds the VPN
// and ASID of that page and its flags. Because virtual memory is restricted
// to be set-associative, the set is given by the virtual address itself, so
// the lookup can start at the same time as the DRAM row activation.
//
// Lookup: a request (lk_valid, lk_set, lk_vpn, lk_asid) reads all ASSOC
// entries of the set, compares each valid entry with the VPN and ASID and
// returns, LATENCY cycles later, res_valid with res_hit, the matching way and
// its flags. res_hit = 0 is a page fault. The pipeline accepts one lookup per
// cycle. LATENCY defaults to the 8-cycle access time the paper gives for the
// DIPTA SRAM; the read itself takes one cycle and the remaining LATENCY-1
// cycles are a delay line standing in for the large array's access time.
//
// Update: the OS page-fault handler and shootdown driver write one entry
// (wr_en, wr_set, wr_way, wr_pte); writing an entry with valid = 0
// invalidates it. The write lands at the next clock edge; a lookup of the
// same set in that cycle reads the old contents.
//
// Initialisation (not described in the paper): after reset the table walks
// all NSETS sets, one per cycle, writing every entry invalid; init_done
// rises after NSETS cycles. Lookups before that are ignored (no result) and
// writes are dropped, so the user waits for init_done.
//
// Sizes: 8GB chip / 16 vaults / 4KB pages = 131072 frames per vault, 4-way,
// hence 32768 sets, about 1MB of SRAM per vault as the paper states (16MB
// per 8GB chip).
module dipta_table
  import dipta_pkg::*;
#(
  parameter int unsigned ASSOC    = 4,
  parameter int unsigned SET_BITS = 15,
  parameter int unsigned LATENCY  = 8
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // lookup
  input  logic                      lk_valid,
  input  logic [SET_BITS-1:0]       lk_set,
  input  logic [VPN_BITS-1:0]       lk_vpn,
  input  logic [ASID_BITS-1:0]      lk_asid,
  output logic                      res_valid,
  output logic                      res_hit,
  output logic [$clog2(ASSOC)-1:0]  res_way,
  output logic [FLAG_BITS-1:0]      res_flags,
  // update from the OS handler
  input  logic                      wr_en,
  input  logic [SET_BITS-1:0]       wr_set,
  input  logic [$clog2(ASSOC)-1:0]  wr_way,
  input  pte_t                      wr_pte,
  // high once the array has been cleared after reset
  output logic                      init_done
);

  localparam int unsigned NSETS = 1 << SET_BITS;
  localparam int unsigned W     = $clog2(ASSOC);
  // The array: one memory per way, all read in the same cycle. The valid bit
  // is stored with the entry; after reset a sweep writes every entry
  // invalid, one set per cycle, and init_done rises when it is finished.
  pte_t                mem_q [ASSOC][NSETS];

  logic                init_done_q;
  logic [SET_BITS-1:0] init_set_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      init_done_q <= 1'b0;
      init_set_q  <= '0;
    end else if (!init_done_q) begin
      init_set_q <= init_set_q + 1'b1;
      if (init_set_q == SET_BITS'(NSETS - 1)) init_done_q <= 1'b1;
    end
  end

  assign init_done = init_done_q;

  for (genvar w = 0; w < ASSOC; w++) begin : g_way
    always_ff @(posedge clk) begin
      if (!init_done_q)                       mem_q[w][init_set_q] <= '0;
      else if (wr_en && wr_way == W'(w))      mem_q[w][wr_set]     <= wr_pte;
    end
  end

  // Stage 1: registered read.
  logic                 s1_valid;
  logic [VPN_BITS-1:0]  s1_vpn;
  logic [ASID_BITS-1:0] s1_asid;
  pte_t                 s1_pte [ASSOC];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_valid <= 1'b0;
      s1_vpn   <= '0;
      s1_asid  <= '0;
    end else begin
      s1_valid <= lk_valid && init_done_q;
      if (lk_valid) begin
        s1_vpn  <= lk_vpn;
        s1_asid <= lk_asid;
      end
    end
  end

  for (genvar w = 0; w < ASSOC; w++) begin : g_rd
    always_ff @(posedge clk) begin
      if (lk_valid) s1_pte[w] <= mem_q[w][lk_set];
    end
  end

  // Way compare on the read data.
  logic                 cmp_hit;
  logic [W-1:0]         cmp_way;
  logic [FLAG_BITS-1:0] cmp_flags;

  always_comb begin
    cmp_hit   = 1'b0;
    cmp_way   = '0;
    cmp_flags = '0;
    for (int unsigned w = 0; w < ASSOC; w++) begin
      if (s1_pte[w].valid && s1_pte[w].asid == s1_asid && s1_pte[w].vpn == s1_vpn && !cmp_hit) begin
        cmp_hit   = 1'b1;
        cmp_way   = W'(w);
        cmp_flags = s1_pte[w].flags;
      end
    end
  end

  // Delay line: the result appears LATENCY cycles after the lookup.
  typedef struct packed {
    logic                 valid;
    logic                 hit;
    logic [W-1:0]         way;
    logic [FLAG_BITS-1:0] flags;
  } res_t;

  res_t res_s1, res_out;

  assign res_s1 = '{valid: s1_valid, hit: cmp_hit, way: cmp_way, flags: cmp_flags};

  if (LATENCY > 1) begin : g_delay
    res_t pipe_q [LATENCY-1];
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        for (int unsigned i = 0; i < LATENCY-1; i++) pipe_q[i] <= '0;
      end else begin
        pipe_q[0] <= res_s1;
        for (int unsigned i = 1; i < LATENCY-1; i++) pipe_q[i] <= pipe_q[i-1];
      end
    end
    assign res_out = pipe_q[LATENCY-2];
  end else begin : g_nodelay
    assign res_out = res_s1;
  end

  assign res_valid = res_out.valid;
  assign res_hit   = res_out.hit;
  assign res_way   = res_out.way;
  assign res_flags = res_out.flags;

endmodule
