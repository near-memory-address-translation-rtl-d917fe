// dipta_vault_ctrl: sequences one MPU memory request through a DIPTA vault.
//
// The point of DIPTA is that translation never delays the data. For a read,
// this controller:
//   1. decodes the virtual address (interleave_mapper) into memory set, DRAM
//      row and block, and issues the row activation (ACT); in the same cycle
//      it starts the DIPTA lookup of that set and reads the way predictor;
//   2. tRCD after the ACT issues the column read (RD) of the predicted way;
//   3. when the block returns (tCAS later) the translation, which took only
//      LATENCY (8) cycles, is already there and is checked:
//        - hit in the predicted way: the block is returned (RESP_HIT);
//        - hit in another way: a second column read of the correct way goes
//          to the row that is still open, and that block is returned
//          (RESP_HIT_REPLAY); this is the paper's misprediction penalty;
//        - no matching entry: the MPU is told of a page fault (RESP_FAULT)
//          and no data is returned;
//      on a hit the predictor learns the way just used;
//   4. the row is precharged (after tRAS from the ACT, tWR after a write)
//      and tRP later the next request is accepted.
// Writes are this design's choice, as the paper only discusses fetches: a
// write must not land in a mispredicted way, so it waits for the
// translation (which is done long before tRCD has elapsed) and writes the
// translated way only; a write to an unmapped page faults.
//
// One request is in flight at a time and one bank per vault is modelled;
// the DRAM timing (tRCD, tCAS, tRAS, tWR, tRP) is counted here in cycles of
// the 2GHz logic clock, from the nanosecond values of the evaluation:
// 11.2ns -> 23, 22.4ns -> 45, 14.4ns -> 29. The ACT is issued the cycle after
// the request is accepted (the address is registered first).
//
// OS updates (upd_*) are taken only between requests, so a lookup never
// sees a half-done update; upd_ready is high in IDLE and updates win over
// new requests. Nothing is accepted before init_done (the power-on clear
// of the table and the predictor).
//
// Ports: MPU request (req_*, valid/ready), MPU response (resp_*, a one-cycle
// valid pulse), DIPTA table lookup/result/write (lk_*, res_*, tbl_wr_*),
// way predictor read/update (pred_*), DRAM command port (dram_*; read data
// returns on dram_rvalid exactly T_CAS cycles after the RD).
module dipta_vault_ctrl
  import dipta_pkg::*;
#(
  parameter int unsigned ASSOC      = 4,
  parameter int unsigned VAULT_BITS = 4,
  parameter int unsigned SET_BITS   = 15,
  parameter int unsigned T_RCD      = 23,
  parameter int unsigned T_CAS      = 23,
  parameter int unsigned T_RAS      = 45,
  parameter int unsigned T_WR       = 29,
  parameter int unsigned T_RP       = 23,
  localparam int unsigned W         = $clog2(ASSOC),
  localparam int unsigned ROW_BITS  = SET_BITS + W,
  localparam int unsigned COL_BITS  = PAGE_BITS - BLOCK_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // table and predictor have finished their power-on clear
  input  logic                        init_done,
  // MPU request
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic                        req_we,
  input  logic [VA_BITS-1:0]          req_va,
  input  logic [ASID_BITS-1:0]        req_asid,
  input  logic [BLOCK_DATA_BITS-1:0]  req_wdata,
  // MPU response
  output logic                        resp_valid,
  output resp_kind_e                  resp_kind,
  output logic [BLOCK_DATA_BITS-1:0]  resp_rdata,
  output logic [FLAG_BITS-1:0]        resp_flags,
  // OS update of a DIPTA entry
  input  logic                        upd_valid,
  output logic                        upd_ready,
  input  logic [SET_BITS-1:0]         upd_set,
  input  logic [W-1:0]                upd_way,
  input  pte_t                        upd_pte,
  // DIPTA table
  output logic                        lk_valid,
  output logic [SET_BITS-1:0]         lk_set,
  output logic [VPN_BITS-1:0]         lk_vpn,
  output logic [ASID_BITS-1:0]        lk_asid,
  input  logic                        res_valid,
  input  logic                        res_hit,
  input  logic [W-1:0]                res_way,
  input  logic [FLAG_BITS-1:0]        res_flags,
  output logic                        tbl_wr_en,
  output logic [SET_BITS-1:0]         tbl_wr_set,
  output logic [W-1:0]                tbl_wr_way,
  output pte_t                        tbl_wr_pte,
  // way predictor
  output logic                        pred_rd_en,
  output logic [SET_BITS-1:0]         pred_rd_set,
  input  logic [W-1:0]                pred_way,
  output logic                        pred_upd_en,
  output logic [SET_BITS-1:0]         pred_upd_set,
  output logic [W-1:0]                pred_upd_way,
  // DRAM command port of the vault
  output dram_cmd_e                   dram_cmd,
  output logic [ROW_BITS-1:0]         dram_row,
  output logic [COL_BITS-1:0]         dram_col,
  output logic [BLOCK_DATA_BITS-1:0]  dram_wdata,
  input  logic                        dram_rvalid,
  input  logic [BLOCK_DATA_BITS-1:0]  dram_rdata
);

  typedef enum logic [2:0] {
    S_IDLE,     // waiting for a request or an update
    S_ACT,      // request registered: issue ACT, start lookup and prediction
    S_RCD,      // waiting tRCD (and, for writes, the translation)
    S_RD_WAIT,  // first column read in flight
    S_RD2_WAIT, // second column read (misprediction) in flight
    S_CLOSE,    // waiting tRAS / tWR, then PRE
    S_RP        // waiting tRP
  } state_e;

  state_e state_q;

  logic                       we_q;
  logic [VA_BITS-1:0]         va_q;
  logic [ASID_BITS-1:0]       asid_q;
  logic [BLOCK_DATA_BITS-1:0] wdata_q;
  logic [W-1:0]               pway_q;     // predicted way
  logic                       tr_done_q;  // translation result captured
  logic                       tr_hit_q;
  logic [W-1:0]               tr_way_q;
  logic [FLAG_BITS-1:0]       tr_flags_q;
  logic                       data_q;     // first block has returned
  logic [BLOCK_DATA_BITS-1:0] rdata_q;
  logic [7:0]                 cnt_q;      // generic timing counter
  logic [7:0]                 ras_q;      // cycles since ACT
  logic [W-1:0]               col_way;

  // Address decode of the registered request.
  logic [VPN_BITS-1:0]   vpn;
  logic [VAULT_BITS-1:0] vault_unused;
  logic [SET_BITS-1:0]   set;
  logic [ROW_BITS-1:0]   row;
  logic [COL_BITS-1:0]   col;

  interleave_mapper #(
    .ASSOC(ASSOC), .VAULT_BITS(VAULT_BITS), .SET_BITS(SET_BITS)
  ) u_map (
    .va(va_q), .way(col_way), .vpn(vpn), .vault(vault_unused),
    .set(set), .row(row), .col(col)
  );

  // Translation result of this request (from the register or arriving now).
  wire           tr_avail = tr_done_q || res_valid;
  wire           tr_hit   = tr_done_q ? tr_hit_q : res_hit;
  wire [W-1:0]   tr_way   = tr_done_q ? tr_way_q : res_way;

  // The way whose column is accessed: the prediction for a read's first
  // access, the translated way otherwise.
  always_comb begin
    if (state_q == S_RCD && !we_q) col_way = pred_way;
    else                           col_way = tr_way;
  end

  // Combinational outputs.
  always_comb begin
    req_ready    = (state_q == S_IDLE) && init_done && !upd_valid;
    upd_ready    = (state_q == S_IDLE) && init_done;
    tbl_wr_en    = (state_q == S_IDLE) && init_done && upd_valid;
    tbl_wr_set   = upd_set;
    tbl_wr_way   = upd_way;
    tbl_wr_pte   = upd_pte;

    lk_valid     = (state_q == S_ACT);
    lk_set       = set;
    lk_vpn       = vpn;
    lk_asid      = asid_q;
    pred_rd_en   = (state_q == S_ACT);
    pred_rd_set  = set;

    dram_cmd     = DRAM_NOP;
    dram_row     = row;
    dram_col     = col;
    dram_wdata   = wdata_q;
    unique case (state_q)
      S_ACT: dram_cmd = DRAM_ACT;
      S_RCD: if (cnt_q == 0) begin
               if (!we_q)                       dram_cmd = DRAM_RD;
               else if (tr_avail && tr_hit)     dram_cmd = DRAM_WR;
             end
      S_RD_WAIT: if ((data_q || dram_rvalid) && tr_avail && tr_hit && tr_way != pway_q)
                   dram_cmd = DRAM_RD;
      S_CLOSE: if (cnt_q == 0 && ras_q >= 8'(T_RAS)) dram_cmd = DRAM_PRE;
      default: ;
    endcase
  end

  // Predictor update and response.
  always_comb begin
    pred_upd_en  = 1'b0;
    pred_upd_set = set;
    pred_upd_way = tr_way;
    resp_valid   = 1'b0;
    resp_kind    = RESP_HIT;
    resp_rdata   = dram_rvalid ? dram_rdata : rdata_q;
    resp_flags   = tr_done_q ? tr_flags_q : res_flags;
    unique case (state_q)
      S_RCD: if (we_q && cnt_q == 0 && tr_avail) begin
               resp_valid = 1'b1;
               resp_kind  = tr_hit ? RESP_HIT : RESP_FAULT;
             end
      S_RD_WAIT: if ((data_q || dram_rvalid) && tr_avail) begin
                   if (!tr_hit) begin
                     resp_valid = 1'b1;
                     resp_kind  = RESP_FAULT;
                   end else if (tr_way == pway_q) begin
                     resp_valid  = 1'b1;
                     resp_kind   = RESP_HIT;
                     pred_upd_en = 1'b1;
                   end else begin
                     pred_upd_en = 1'b1;  // replay follows
                   end
                 end
      S_RD2_WAIT: if (dram_rvalid) begin
                    resp_valid = 1'b1;
                    resp_kind  = RESP_HIT_REPLAY;
                  end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q    <= S_IDLE;
      we_q       <= 1'b0;
      va_q       <= '0;
      asid_q     <= '0;
      wdata_q    <= '0;
      pway_q     <= '0;
      tr_done_q  <= 1'b0;
      tr_hit_q   <= 1'b0;
      tr_way_q   <= '0;
      tr_flags_q <= '0;
      data_q     <= 1'b0;
      rdata_q    <= '0;
      cnt_q      <= '0;
      ras_q      <= '0;
    end else begin
      if (cnt_q != 0) cnt_q <= cnt_q - 8'd1;
      if (ras_q != 8'hff) ras_q <= ras_q + 8'd1;
      if (res_valid && !tr_done_q && state_q != S_IDLE) begin
        tr_done_q  <= 1'b1;
        tr_hit_q   <= res_hit;
        tr_way_q   <= res_way;
        tr_flags_q <= res_flags;
      end
      if (dram_rvalid) rdata_q <= dram_rdata;

      unique case (state_q)
        S_IDLE: if (req_valid && req_ready) begin
          we_q      <= req_we;
          va_q      <= req_va;
          asid_q    <= req_asid;
          wdata_q   <= req_wdata;
          tr_done_q <= 1'b0;
          data_q    <= 1'b0;
          state_q   <= S_ACT;
        end
        S_ACT: begin
          ras_q   <= 8'd1;
          cnt_q   <= 8'(T_RCD - 1);
          state_q <= S_RCD;
        end
        S_RCD: begin
          if (cnt_q == 0) pway_q <= pred_way;
          if (cnt_q == 0 && !we_q) begin
            state_q <= S_RD_WAIT;
          end else if (cnt_q == 0 && tr_avail) begin
            cnt_q   <= tr_hit ? 8'(T_WR) : 8'd0;
            state_q <= S_CLOSE;
          end
        end
        S_RD_WAIT: begin
          if (dram_rvalid) data_q <= 1'b1;
          if ((data_q || dram_rvalid) && tr_avail) begin
            if (tr_hit && tr_way != pway_q) state_q <= S_RD2_WAIT;
            else begin
              cnt_q   <= 8'd0;
              state_q <= S_CLOSE;
            end
          end
        end
        S_RD2_WAIT: if (dram_rvalid) begin
          cnt_q   <= 8'd0;
          state_q <= S_CLOSE;
        end
        S_CLOSE: if (cnt_q == 0 && ras_q >= 8'(T_RAS)) begin
          cnt_q   <= 8'(T_RP - 1);
          state_q <= S_RP;
        end
        S_RP: if (cnt_q == 0) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  // pred_way is valid from the cycle after the lookup in S_ACT until the
  // next lookup; it is used for the RD and kept in pway_q for the check.

  // Handshake rules.
  a_one_cmd_per_req: assert property (@(posedge clk) disable iff (!rst_n)
    (dram_cmd == DRAM_ACT) |-> (state_q == S_ACT));
  a_resp_not_idle: assert property (@(posedge clk) disable iff (!rst_n)
    resp_valid |-> (state_q != S_IDLE));
  a_rd_data_tcas: assert property (@(posedge clk) disable iff (!rst_n)
    (dram_cmd == DRAM_RD) |-> ##(T_CAS) dram_rvalid);
  a_no_upd_busy: assert property (@(posedge clk) disable iff (!rst_n)
    tbl_wr_en |-> (state_q == S_IDLE));

endmodule
