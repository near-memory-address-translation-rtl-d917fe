// tb_dipta_vault: end-to-end test of one DIPTA vault at its default sizes
// (32768 sets x 4 ways, 1024-entry way predictor, 8-cycle table).
//
// The vault is connected to a behavioural DRAM model that checks the DRAM
// timing. The testbench plays both the OS (installing, replacing and
// invalidating translations through the update port) and an MPU (issuing
// reads and writes). It keeps its own reference of the page table, of the
// way predictor (same XOR-folded index, computed here independently), of
// the DRAM contents and of the address layout, and checks for every access:
// the response kind (hit in the predicted way, replay after a misprediction,
// page fault), the returned data, the flags, and the latency:
//   hit      1 + tRCD + tCAS cycles from accept (the same as a fetch with no
//            translation at all: translation is hidden),
//   replay   one tCAS more, fault 1 + tRCD + tCAS.
// Each mechanism (predicted hit, misprediction replay, page fault, fault
// serviced and retried, shootdown invalidation, write, read-after-write)
// must occur at least once.
module tb_dipta_vault;
  import dipta_pkg::*;

  localparam int unsigned ASSOC = 4, VAULT_BITS = 4, SET_BITS = 15;
  localparam int unsigned T_RCD = 23, T_CAS = 23;
  localparam int unsigned ROW_BITS = SET_BITS + 2, COL_BITS = 6;
  localparam int unsigned MY_VAULT = 4'd5;
  localparam int unsigned NSETS_USED = 6;
  localparam int unsigned NOPS = 600;

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
  logic [SET_BITS-1:0]        upd_set = '0;
  logic [1:0]                 upd_way = '0;
  pte_t                       upd_pte = '0;
  dram_cmd_e                  dram_cmd;
  logic [ROW_BITS-1:0]        dram_row;
  logic [COL_BITS-1:0]        dram_col;
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

  dram_vault_model #(.ROW_BITS(ROW_BITS), .COL_BITS(COL_BITS)) u_dram (
    .clk, .rst_n, .cmd(dram_cmd), .row(dram_row), .col(dram_col),
    .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
    .violations, .n_act, .n_rd, .n_wr
  );

  int checks = 0, failures = 0;
  int n_hit = 0, n_replay = 0, n_fault = 0, n_retry_ok = 0, n_inval = 0;
  int n_write = 0, n_raw = 0, n_upd = 0;

  // Reference state.
  pte_t                       ref_pt   [int unsigned][4];   // [set][way]
  logic [1:0]                 ref_pred [1024];
  logic [BLOCK_DATA_BITS-1:0] ref_mem  [longint unsigned];  // written blocks
  logic [14:0]                sets_used [NSETS_USED];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL @%0d: %s", cyc, what);
    end
  endtask

  function automatic logic [9:0] ref_hash(input logic [14:0] s);
    return s[9:0] ^ {5'b0, s[14:10]};
  endfunction

  function automatic logic [VA_BITS-1:0] make_va(input logic [14:0] s, input logic [16:0] tag,
                                                 input logic [5:0] blk);
    // VPN = {tag, set, vault}; 17 + 15 + 4 = 36 bits
    return {tag, s, 4'(MY_VAULT), blk, 6'd0};
  endfunction

  task automatic os_update(input logic [14:0] s, input logic [1:0] w, input pte_t p);
    @(negedge clk);
    upd_valid = 1'b1; upd_set = s; upd_way = w; upd_pte = p;
    while (!upd_ready) @(negedge clk);
    @(negedge clk);
    upd_valid = 1'b0;
    ref_pt[s][w] = p;
    n_upd++;
  endtask

  task automatic mpu_access(input bit we, input logic [VA_BITS-1:0] va,
                            input logic [ASID_BITS-1:0] asid,
                            input logic [BLOCK_DATA_BITS-1:0] wd,
                            output resp_kind_e kind, output logic [BLOCK_DATA_BITS-1:0] rd,
                            output logic [FLAG_BITS-1:0] fl, output int lat);
    longint unsigned c0;
    @(negedge clk);
    req_valid = 1'b1; req_we = we; req_va = va; req_asid = asid; req_wdata = wd;
    while (!req_ready) @(negedge clk);
    c0 = cyc;
    @(negedge clk);
    req_valid = 1'b0;
    while (!resp_valid) @(negedge clk);
    kind = resp_kind; rd = resp_rdata; fl = resp_flags;
    lat = int'(cyc - c0);
  endtask

  // One access with full reference checking.
  task automatic access_and_check(input bit we, input logic [14:0] s, input logic [16:0] tag,
                                  input logic [5:0] blk, input logic [ASID_BITS-1:0] asid,
                                  output resp_kind_e kind);
    logic [VA_BITS-1:0] va;
    logic [BLOCK_DATA_BITS-1:0] wd, rd, exp_d;
    logic [FLAG_BITS-1:0] fl;
    int lat, hit_way;
    logic [1:0] pw;
    logic [ROW_BITS-1:0] row;
    logic [COL_BITS-1:0] col;
    longint unsigned key;
    va = make_va(s, tag, blk);
    wd = {16{$urandom()}};
    hit_way = -1;
    for (int w = 0; w < 4; w++)
      if (hit_way < 0 && ref_pt[s][w].valid && ref_pt[s][w].asid == asid &&
          ref_pt[s][w].vpn == va[VA_BITS-1:PAGE_BITS]) hit_way = w;
    pw = ref_pred[ref_hash(s)];
    mpu_access(we, va, asid, wd, kind, rd, fl, lat);
    if (hit_way < 0) begin
      check(kind == RESP_FAULT, $sformatf("expected fault, got %s", kind.name()));
      check(lat == int'(1 + T_RCD + T_CAS), $sformatf("fault latency %0d", lat));
      n_fault++;
      return;
    end
    row = {s, blk[5:4]};
    col = {2'(hit_way), blk[3:0]};
    key = longint'({row, col});
    check(fl == ref_pt[s][hit_way].flags, "flags");
    if (we) begin
      check(kind == RESP_HIT, $sformatf("write: got %s", kind.name()));
      check(lat == int'(1 + T_RCD), $sformatf("write latency %0d", lat));
      ref_mem[key] = wd;
      n_write++;
    end else begin
      exp_d = ref_mem.exists(key) ? ref_mem[key] : u_dram.pattern(longint'(row), longint'(col));
      if (ref_mem.exists(key)) n_raw++;
      check(rd == exp_d, "read data");
      if (2'(hit_way) == pw) begin
        check(kind == RESP_HIT, $sformatf("expected predicted hit, got %s", kind.name()));
        check(lat == int'(1 + T_RCD + T_CAS), $sformatf("hit latency %0d", lat));
        n_hit++;
      end else begin
        check(kind == RESP_HIT_REPLAY, $sformatf("expected replay, got %s", kind.name()));
        check(lat == int'(1 + T_RCD + 2 * T_CAS), $sformatf("replay latency %0d", lat));
        n_replay++;
      end
      ref_pred[ref_hash(s)] = 2'(hit_way);
    end
  endtask

  initial begin : watchdog
    repeat (600000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin : main
    resp_kind_e k;
    pte_t p;
    logic [14:0] s;
    int si, w;
    for (int i = 0; i < 1024; i++) ref_pred[i] = 2'd0;
    repeat (4) @(posedge clk);
    rst_n = 1'b1;
    repeat (2) @(posedge clk);

    // Sets to use: two of them alias in the predictor (same XOR hash).
    sets_used[0] = 15'h0000;
    sets_used[1] = 15'h0421;         // hash 0x021 ^ 0x01 = 0x020
    sets_used[2] = 15'h0020;         // hash 0x020: aliases with set 1
    sets_used[3] = 15'h7fff;
    sets_used[4] = 15'h1234;
    sets_used[5] = 15'h4321;
    for (int i = 0; i < NSETS_USED; i++)
      for (int j = 0; j < 4; j++) ref_pt[sets_used[i]][j] = '0;

    // OS installs four pages (tags 0..3 at ways 3..0) in every used set.
    for (int i = 0; i < NSETS_USED; i++)
      for (int j = 0; j < 4; j++) begin
        p.valid = 1'b1; p.asid = 12'h0A5;
        p.vpn = {17'(j), sets_used[i], 4'(MY_VAULT)};
        p.flags = 12'(i * 16 + j);
        os_update(sets_used[i], 2'(3 - j), p);
      end

    // Random reads and writes over mapped pages, with a few unmapped tags,
    // a wrong ASID now and then.
    for (int n = 0; n < NOPS; n++) begin
      si = $urandom_range(NSETS_USED - 1);
      s = sets_used[si];
      access_and_check(($urandom_range(5) == 0), s,
                       17'($urandom_range(n % 50 == 0 ? 6 : 3)),
                       6'($urandom_range(63)),
                       (n % 97 == 0) ? 12'h0A6 : 12'h0A5, k);
      // Page-fault service: the OS maps the missing page and the MPU retries.
      if (k == RESP_FAULT && n % 3 == 0) begin
        p.valid = 1'b1; p.asid = 12'h0A5; p.vpn = {17'd9, s, 4'(MY_VAULT)}; p.flags = 12'h3c3;
        w = $urandom_range(3);
        os_update(s, 2'(w), p);
        access_and_check(1'b0, s, 17'd9, 6'd1, 12'h0A5, k);
        check(k != RESP_FAULT, "retry after fault service");
        if (k != RESP_FAULT) n_retry_ok++;
        // shootdown: the page is unmapped again and must fault
        p.valid = 1'b0;
        os_update(s, 2'(w), p);
        n_inval++;
        access_and_check(1'b0, s, 17'd9, 6'd1, 12'h0A5, k);
        check(k == RESP_FAULT, "access after shootdown faults");
        // restore the original page of that way
        p.valid = 1'b1; p.asid = 12'h0A5; p.vpn = {17'(3 - w), s, 4'(MY_VAULT)};
        p.flags = 12'(si * 16 + (3 - w));
        os_update(s, 2'(w), p);
      end
    end

    repeat (200) @(posedge clk);
    check(violations == 0, $sformatf("DRAM timing violations: %0d", violations));
    check(n_rd == 0 || n_act > 0, "DRAM activity");
    check(n_hit > 0,      "mechanism: hit in predicted way");
    check(n_replay > 0,   "mechanism: misprediction replay");
    check(n_fault > 0,    "mechanism: page fault");
    check(n_retry_ok > 0, "mechanism: fault serviced and retried");
    check(n_inval > 0,    "mechanism: shootdown invalidation");
    check(n_write > 0,    "mechanism: write");
    check(n_raw > 0,      "mechanism: read after write");
    $display("hits=%0d replays=%0d faults=%0d retries=%0d invalidations=%0d writes=%0d raw=%0d updates=%0d",
             n_hit, n_replay, n_fault, n_retry_ok, n_inval, n_write, n_raw, n_upd);
    $display("way prediction accuracy: %0d/%0d", n_hit, n_hit + n_replay);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
