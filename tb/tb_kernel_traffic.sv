// tb_kernel_traffic: one vault at its default size under the access streams
// of data-structure traversal kernels (hash-table probes, skip-list and
// binary-search-tree lookups), as far as they can be reproduced without the
// original traces.
//
// The OS maps two segments into this vault: a node pool of 3000 pages and a
// small "top" segment of 40 pages; because pages of a segment go to
// consecutive sets, the second segment conflicts with the first only in its
// 40 sets and is placed in way 1 there, everything else in way 0, and a few
// sets get all four ways filled by other pages. Each kernel issues 1000
// reads:
//   hash table  uniformly random probe of a bucket page, then of a node page
//   skip list   a walk down 4 levels: a hot top page, then random pages
//   BST         root-to-leaf path: top levels on few hot pages, leaves random
// Every response is checked (kind, data, latency) against a reference model,
// as in tb_dipta_vault, and the prediction accuracy per kernel is printed.
// The kernels' real datasets (16-20GB over several chips) cannot be
// simulated; only the per-vault access pattern is imitated.
module tb_kernel_traffic;
  import dipta_pkg::*;

  localparam int unsigned T_RCD = 23, T_CAS = 23;
  localparam int unsigned MY_VAULT = 4'd9;
  localparam int unsigned POOL = 3000, TOP = 40;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  longint unsigned cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                       req_valid = 1'b0, req_ready, req_we = 1'b0;
  logic [VA_BITS-1:0]         req_va = '0;
  logic [ASID_BITS-1:0]       req_asid = '0;
  logic [BLOCK_DATA_BITS-1:0] req_wdata = '0;
  logic                       resp_valid;
  resp_kind_e                 resp_kind;
  logic [BLOCK_DATA_BITS-1:0] resp_rdata;
  logic [FLAG_BITS-1:0]       resp_flags;
  logic                       upd_valid = 1'b0, upd_ready;
  logic [14:0]                upd_set = '0;
  logic [1:0]                 upd_way = '0;
  pte_t                       upd_pte = '0;
  dram_cmd_e                  dram_cmd;
  logic [16:0]                dram_row;
  logic [5:0]                 dram_col;
  logic [BLOCK_DATA_BITS-1:0] dram_wdata, dram_rdata;
  logic                       dram_rvalid;
  int unsigned                violations, n_act, n_rd, n_wr;

  dipta_vault u_dut (
    .clk, .rst_n,
    .req_valid, .req_ready, .req_we, .req_va, .req_asid, .req_wdata,
    .resp_valid, .resp_kind, .resp_rdata, .resp_flags,
    .upd_valid, .upd_ready, .upd_set, .upd_way, .upd_pte,
    .dram_cmd, .dram_row, .dram_col, .dram_wdata, .dram_rvalid, .dram_rdata
  );

  dram_vault_model u_dram (
    .clk, .rst_n, .cmd(dram_cmd), .row(dram_row), .col(dram_col),
    .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
    .violations, .n_act, .n_rd, .n_wr
  );

  int checks = 0, failures = 0;
  int hits [3], replays [3];
  logic [1:0] ref_pred [1024];
  // page p of the pool: tag 0, set POOL_SET0 + p, way 0
  // page t of the top segment: tag 1, set POOL_SET0 + t, way 1
  localparam logic [14:0] POOL_SET0 = 15'd100;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic logic [9:0] ref_hash(input logic [14:0] s);
    return s[9:0] ^ {5'b0, s[14:10]};
  endfunction

  task automatic os_map(input logic [14:0] s, input logic [1:0] w, input logic [16:0] tag);
    @(negedge clk);
    upd_valid = 1'b1; upd_set = s; upd_way = w;
    upd_pte = '{valid: 1'b1, asid: 12'h42, vpn: {tag, s, 4'(MY_VAULT)}, flags: 12'h1};
    while (!upd_ready) @(negedge clk);
    @(negedge clk);
    upd_valid = 1'b0;
  endtask

  // Read one block of a mapped page and check everything.
  task automatic rd(input int kern, input logic [14:0] s, input logic [1:0] w,
                    input logic [16:0] tag, input logic [5:0] blk);
    longint unsigned c0;
    int lat;
    logic [1:0] pw;
    logic [BLOCK_DATA_BITS-1:0] exp_d;
    pw = ref_pred[ref_hash(s)];
    @(negedge clk);
    req_valid = 1'b1; req_va = {tag, s, 4'(MY_VAULT), blk, 6'd0}; req_asid = 12'h42;
    while (!req_ready) @(negedge clk);
    c0 = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    lat = int'(cyc - c0);
    exp_d = u_dram.pattern(longint'({s, blk[5:4]}), longint'({w, blk[3:0]}));
    check(resp_rdata == exp_d, "data");
    if (w == pw) begin
      check(resp_kind == RESP_HIT && lat == int'(1 + T_RCD + T_CAS), "predicted hit, hidden translation");
      hits[kern]++;
    end else begin
      check(resp_kind == RESP_HIT_REPLAY && lat == int'(1 + T_RCD + 2 * T_CAS), "replay");
      replays[kern]++;
    end
    ref_pred[ref_hash(s)] = w;
  endtask

  task automatic pool_page(input int kern, input int p);
    rd(kern, POOL_SET0 + 15'(p), 2'd0, 17'd0, 6'($urandom()));
  endtask
  task automatic top_page(input int kern, input int t);
    rd(kern, POOL_SET0 + 15'(t), 2'd1, 17'd1, 6'($urandom()));
  endtask

  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 1024; i++) ref_pred[i] = 2'd0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    for (int p = 0; p < POOL; p++) os_map(POOL_SET0 + 15'(p), 2'd0, 17'd0);
    for (int t = 0; t < TOP; t++)  os_map(POOL_SET0 + 15'(t), 2'd1, 17'd1);

    // hash table: bucket array in the top segment, nodes in the pool
    for (int n = 0; n < 500; n++) begin
      top_page(0, $urandom_range(TOP - 1));
      pool_page(0, $urandom_range(POOL - 1));
    end
    // skip list: hot head page, then random towers
    for (int n = 0; n < 250; n++) begin
      top_page(1, 0);
      for (int l = 0; l < 3; l++) pool_page(1, $urandom_range(POOL - 1));
    end
    // BST: root levels on top pages 0..3, then pool pages
    for (int n = 0; n < 200; n++) begin
      top_page(2, 0);
      top_page(2, $urandom_range(1, 3));
      for (int l = 0; l < 3; l++) pool_page(2, $urandom_range(POOL - 1));
    end

    repeat (100) @(posedge clk);
    check(violations == 0, "DRAM timing");
    for (int k = 0; k < 3; k++) begin
      check(hits[k] > 0 && replays[k] > 0, "both outcomes in every kernel");
      $display("kernel %0d (%s): prediction accuracy %0d/%0d", k,
               k == 0 ? "hash table" : k == 1 ? "skip list" : "BST", hits[k], hits[k] + replays[k]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
