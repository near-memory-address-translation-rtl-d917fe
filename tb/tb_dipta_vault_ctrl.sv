// tb_dipta_vault_ctrl: checks the vault controller on its own.
//
// The testbench stands in for the DIPTA table (it answers each lookup 8
// cycles later from a scripted hit/way/fault decision) and for the way
// predictor (it returns a scripted predicted way the cycle after the read);
// a behavioural DRAM model checks the DRAM timing. For each request it
// checks: the ACT goes to row {set, top two block bits}; the first column
// read goes to the predicted way's column tRCD after the ACT; a
// misprediction causes exactly one more column read to the translated way
// in the same open row; the response kind, data and latency; the predictor
// update (way and set); writes go only to the translated way and never
// before the translation; faults return no write and no replay.
module tb_dipta_vault_ctrl;
  import dipta_pkg::*;

  localparam int T_RCD = 23, T_CAS = 23, LAT = 8;

  logic clk = 1'b0, rst_n = 1'b0;
  logic init_done = 1'b1;
  always #1 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic                       req_valid = 0, req_ready, req_we = 0;
  logic [VA_BITS-1:0]         req_va = '0;
  logic [ASID_BITS-1:0]       req_asid = '0;
  logic [BLOCK_DATA_BITS-1:0] req_wdata = '0;
  logic                       resp_valid;
  resp_kind_e                 resp_kind;
  logic [BLOCK_DATA_BITS-1:0] resp_rdata;
  logic [FLAG_BITS-1:0]       resp_flags;
  logic                       upd_valid = 0, upd_ready;
  logic [14:0]                upd_set = '0;
  logic [1:0]                 upd_way = '0;
  pte_t                       upd_pte = '0;
  logic                       lk_valid;
  logic [14:0]                lk_set;
  logic [35:0]                lk_vpn;
  logic [11:0]                lk_asid;
  logic                       res_valid = 0, res_hit = 0;
  logic [1:0]                 res_way = '0;
  logic [11:0]                res_flags = '0;
  logic                       tbl_wr_en;
  logic [14:0]                tbl_wr_set;
  logic [1:0]                 tbl_wr_way;
  pte_t                       tbl_wr_pte;
  logic                       pred_rd_en, pred_upd_en;
  logic [14:0]                pred_rd_set, pred_upd_set;
  logic [1:0]                 pred_way = '0, pred_upd_way;
  dram_cmd_e                  dram_cmd;
  logic [16:0]                dram_row;
  logic [5:0]                 dram_col;
  logic [BLOCK_DATA_BITS-1:0] dram_wdata, dram_rdata;
  logic                       dram_rvalid;
  int unsigned                violations, n_act, n_rd, n_wr;

  dipta_vault_ctrl u_dut (.*);

  dram_vault_model u_dram (.clk, .rst_n, .cmd(dram_cmd), .row(dram_row), .col(dram_col),
                           .wdata(dram_wdata), .rvalid(dram_rvalid), .rdata(dram_rdata),
                           .violations, .n_act, .n_rd, .n_wr);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL @%0d: %s", cyc, what); end
  endtask

  // Scripted behaviour of the table and predictor for the current request.
  bit         sc_hit;
  logic [1:0] sc_way, sc_pred;
  logic [11:0] sc_flags;

  // Table stand-in: answer LAT cycles after the lookup.
  int lk_t = -1;
  always @(posedge clk) begin
    res_valid <= 1'b0;
    if (lk_valid) lk_t <= cyc + LAT - 1;
    if (cyc == lk_t) begin
      res_valid <= 1'b1; res_hit <= sc_hit; res_way <= sc_way; res_flags <= sc_flags;
    end
    if (pred_rd_en) pred_way <= sc_pred;
  end

  // Command log of the current request.
  int         t_act, t_rd [$], t_wr;
  logic [5:0] c_rd [$];
  logic [16:0] r_act;
  int         n_pupd;
  logic [1:0] pupd_way;
  logic [14:0] pupd_set;
  always @(posedge clk) if (rst_n) begin
    if (dram_cmd == DRAM_ACT) begin t_act <= cyc; r_act <= dram_row; end
    if (dram_cmd == DRAM_RD) begin
      t_rd.push_back(cyc); c_rd.push_back(dram_col);
      check(dram_row == r_act, "RD to the open row");
    end
    if (dram_cmd == DRAM_WR) begin
      t_wr <= cyc;
      check(dram_col[5:4] == sc_way, "write goes to the translated way");
    end
    if (pred_upd_en) begin n_pupd <= n_pupd + 1; pupd_way <= pred_upd_way; pupd_set <= pred_upd_set; end
    check(!tbl_wr_en || upd_valid, "table write only on update");
  end

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int n_kind [3];

  initial begin
    logic [47:0] va;
    logic [14:0] s;
    logic [5:0]  blk;
    bit we;
    int c0, lat;
    logic [BLOCK_DATA_BITS-1:0] exp_d;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // an OS update is passed to the table
    @(negedge clk);
    upd_valid = 1; upd_set = 15'h1357; upd_way = 2'd2; upd_pte = '{valid: 1'b1, asid: 12'h1, vpn: 36'h5, flags: 12'h7};
    #0.1;
    check(tbl_wr_en && tbl_wr_set == 15'h1357 && tbl_wr_way == 2'd2 && tbl_wr_pte.vpn == 36'h5,
          "update forwarded");
    check(!req_ready, "requests wait while an update is pending");
    @(negedge clk); upd_valid = 0;
    for (int n = 0; n < 400; n++) begin
      s = 15'($urandom()); blk = 6'($urandom());
      va = {17'($urandom()), s, 4'($urandom()), blk, 6'd0};
      we = ($urandom_range(4) == 0);
      sc_hit = ($urandom_range(6) != 0); sc_way = 2'($urandom()); sc_pred = 2'($urandom());
      sc_flags = 12'($urandom());
      t_rd.delete(); c_rd.delete(); t_wr = -1; n_pupd = 0;
      @(negedge clk);
      req_valid = 1; req_we = we; req_va = va; req_asid = 12'h3; req_wdata = {16{$urandom()}};
      while (!req_ready) @(negedge clk);
      c0 = cyc;
      @(negedge clk); req_valid = 0;
      while (!resp_valid) @(negedge clk);
      lat = cyc - c0;
      n_kind[resp_kind]++;
      // lookup carried the right set / VPN / ASID
      check(lk_set == s && lk_vpn == va[47:12] && lk_asid == 12'h3, "lookup fields");
      check(r_act == {s, blk[5:4]}, "ACT row");
      check(t_act == c0 + 1, "ACT one cycle after accept");
      if (we) begin
        check(t_rd.size() == 0, "write: no reads");
        check(resp_kind == (sc_hit ? RESP_HIT : RESP_FAULT), "write kind");
        if (sc_hit) check(dram_cmd == DRAM_WR && cyc == t_act + T_RCD, "WR at tRCD, with the response");
        else check(dram_cmd != DRAM_WR, "fault: no write");
        check(lat == 1 + T_RCD, $sformatf("write latency %0d", lat));
        check(n_pupd == 0, "write leaves predictor alone");
      end else begin
        check(t_rd.size() >= 1 && t_rd[0] == t_act + T_RCD, "first RD at tRCD");
        check(c_rd.size() >= 1 && c_rd[0] == {sc_pred, blk[3:0]}, "first RD: predicted way");
        if (!sc_hit) begin
          check(resp_kind == RESP_FAULT, "fault kind");
          check(t_rd.size() == 1, "fault: no replay");
          check(n_pupd == 0, "fault leaves predictor alone");
          check(lat == 1 + T_RCD + T_CAS, "fault latency");
        end else if (sc_way == sc_pred) begin
          exp_d = u_dram.pattern(longint'({s, blk[5:4]}), longint'({sc_pred, blk[3:0]}));
          check(resp_kind == RESP_HIT, "hit kind");
          check(t_rd.size() == 1, "hit: one read");
          check(lat == 1 + T_RCD + T_CAS, $sformatf("hit latency %0d", lat));
          check(resp_flags == sc_flags, "flags");
          check(resp_rdata == exp_d, "hit data");
        end else begin
          check(resp_kind == RESP_HIT_REPLAY, "replay kind");
          check(t_rd.size() == 2 && c_rd[1] == {sc_way, blk[3:0]}, "replay reads the right way");
          check(lat == 1 + T_RCD + 2 * T_CAS, $sformatf("replay latency %0d", lat));
        end
        if (sc_hit) begin
          @(negedge clk);
          check(n_pupd == 1 && pupd_way == sc_way && pupd_set == s, "predictor update");
        end
      end
      // no second response
      @(negedge clk);
      check(!resp_valid, "single response");
    end
    repeat (100) @(negedge clk);
    check(violations == 0, $sformatf("DRAM violations %0d", violations));
    check(n_kind[0] > 0 && n_kind[1] > 0 && n_kind[2] > 0, "all outcomes seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
