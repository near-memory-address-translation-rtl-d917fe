// tb_dipta_table: checks the SRAM inverted page table at its default size
// (32768 sets x 4 ways, 8-cycle latency).
//
// A reference copy of the written entries is kept. Lookups are issued
// back to back, one per cycle, and each result must come out exactly 8
// cycles after its lookup with the right hit/way/flags; a VPN or ASID
// mismatch, an invalidated entry and an entry never written all miss.
module tb_dipta_table;
  import dipta_pkg::*;
  localparam int LAT = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                 lk_valid = 1'b0;
  logic [14:0]          lk_set = '0;
  logic [VPN_BITS-1:0]  lk_vpn = '0;
  logic [ASID_BITS-1:0] lk_asid = '0;
  logic                 res_valid, res_hit;
  logic [1:0]           res_way;
  logic [FLAG_BITS-1:0] res_flags;
  logic                 wr_en = 1'b0;
  logic [14:0]          wr_set = '0;
  logic [1:0]           wr_way = '0;
  pte_t                 wr_pte = '0;
  logic                 init_done;

  dipta_table u_dut (.clk, .rst_n, .lk_valid, .lk_set, .lk_vpn, .lk_asid,
                     .res_valid, .res_hit, .res_way, .res_flags,
                     .wr_en, .wr_set, .wr_way, .wr_pte, .init_done);

  int checks = 0, failures = 0;
  pte_t ref_pt [int unsigned][4];

  typedef struct { int t; bit hit; logic [1:0] way; logic [11:0] flags; } exp_t;
  exp_t q [$];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  function automatic exp_t expect_of(input logic [14:0] s, input logic [35:0] v,
                                     input logic [11:0] a);
    exp_t e;
    e.t = cyc + LAT; e.hit = 0; e.way = 0; e.flags = 0;
    if (ref_pt.exists(s))
      for (int w = 0; w < 4; w++)
        if (!e.hit && ref_pt[s][w].valid && ref_pt[s][w].vpn == v && ref_pt[s][w].asid == a) begin
          e.hit = 1; e.way = 2'(w); e.flags = ref_pt[s][w].flags;
        end
    return e;
  endfunction

  // Result checker: every result must match the oldest expectation, on time.
  always @(negedge clk) if (rst_n) begin
    if (res_valid) begin
      exp_t e;
      if (q.size() == 0) check(0, "unexpected result");
      else begin
        e = q.pop_front();
        check(cyc == e.t, $sformatf("latency: at %0d expected %0d", cyc, e.t));
        check(res_hit == e.hit, "hit");
        if (e.hit) check(res_way == e.way && res_flags == e.flags, "way/flags");
      end
    end
  end

  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [14:0] sets [8];

  initial begin
    logic [14:0] s;
    pte_t p;
    int w;
    for (int i = 0; i < 8; i++) sets[i] = 15'($urandom());
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // power-on clear: one set per cycle
    @(negedge clk);
    check(!init_done, "clearing after reset");
    while (!init_done) @(negedge clk);
    check(cyc >= 32768 && cyc <= 32768 + 8, $sformatf("clear took until cycle %0d", cyc));
    // after reset nothing hits, even an all-zero VPN/ASID
    @(negedge clk);
    lk_valid = 1; lk_set = sets[0]; lk_vpn = '0; lk_asid = '0;
    q.push_back(expect_of(lk_set, lk_vpn, lk_asid));
    @(negedge clk); lk_valid = 0;
    repeat (LAT + 2) @(negedge clk);
    for (int n = 0; n < 4000; n++) begin
      @(negedge clk);
      lk_valid = 0; wr_en = 0;
      if ($urandom_range(3) == 0) begin
        s = sets[$urandom_range(7)]; w = $urandom_range(3);
        p.valid = ($urandom_range(5) != 0);
        p.asid = 12'($urandom_range(2));
        p.vpn = {4'($urandom_range(3)), 17'($urandom_range(3)), s};
        p.flags = 12'($urandom());
        wr_en = 1; wr_set = s; wr_way = 2'(w); wr_pte = p;
        if (!ref_pt.exists(s)) for (int k = 0; k < 4; k++) ref_pt[s][k] = '0;
        ref_pt[s][w] = p;   // takes effect for lookups from the next cycle on
      end else begin
        s = sets[$urandom_range(7)];
        lk_valid = 1; lk_set = s; lk_asid = 12'($urandom_range(2));
        lk_vpn = {4'($urandom_range(3)), 17'($urandom_range(3)), s};
        q.push_back(expect_of(lk_set, lk_vpn, lk_asid));
      end
    end
    @(negedge clk);
    lk_valid = 0; wr_en = 0;
    repeat (LAT + 4) @(negedge clk);
    check(q.size() == 0, "all lookups answered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
