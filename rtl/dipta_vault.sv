// dipta_vault: the DIPTA address-translation logic of one memory vault.
//
// A near-memory processing unit (MPU) sends virtual-address requests to the
// vault that holds the data. Virtual memory is 4-way set-associative, so the
// virtual address alone names the memory set, and, because the four pages
// of a set are interleaved across the set's four DRAM rows, also the DRAM
// row. The vault therefore starts the row activation at once and, in
// parallel, looks up its slice of the inverted page table (dipta_table) and
// its way predictor (way_predictor). The column of the predicted way is read
// after tRCD; by then the 8-cycle table lookup has long finished, so the
// translation is checked as the data arrives and costs no time on a correct
// prediction. A wrong prediction costs one more column access to the open
// row; a missing translation is reported to the MPU as a page fault. The OS
// writes entries through the update port after it services a fault or
// changes a mapping (shootdown).
//
// Blocks: dipta_vault_ctrl (sequencing, with interleave_mapper inside),
// dipta_table (SRAM inverted page table), way_predictor.
//
// Interface: MPU request (valid/ready) and one-cycle response; OS update
// port (valid/ready); DRAM command port to the vault's DRAM (one bank; ACT,
// RD, WR, PRE, read data T_CAS cycles after RD). The DRAM itself, the NoC
// router that delivers requests to this vault and the MPUs are outside.
//
// Timing at defaults (2GHz logic clock): read hit in the predicted way, from
// request accept to response, 1 + 1 + T_RCD + T_CAS = 48 cycles; a
// mispredicted read T_CAS more; the vault is ready again after the row is
// precharged. After reset the vault accepts nothing for 2^SET_BITS cycles
// (32768 at defaults, 16us at 2GHz) while the table clears itself.
module dipta_vault
  import dipta_pkg::*;
#(
  parameter int unsigned ASSOC       = 4,
  parameter int unsigned VAULT_BITS  = 4,
  parameter int unsigned SET_BITS    = 15,
  parameter int unsigned WP_ENTRIES  = 1024,
  parameter int unsigned TBL_LATENCY = 8,
  parameter int unsigned T_RCD       = 23,
  parameter int unsigned T_CAS       = 23,
  parameter int unsigned T_RAS       = 45,
  parameter int unsigned T_WR        = 29,
  parameter int unsigned T_RP        = 23,
  localparam int unsigned W          = $clog2(ASSOC),
  localparam int unsigned ROW_BITS   = SET_BITS + W,
  localparam int unsigned COL_BITS   = PAGE_BITS - BLOCK_BITS
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // MPU request / response
  input  logic                        req_valid,
  output logic                        req_ready,
  input  logic                        req_we,
  input  logic [VA_BITS-1:0]          req_va,
  input  logic [ASID_BITS-1:0]        req_asid,
  input  logic [BLOCK_DATA_BITS-1:0]  req_wdata,
  output logic                        resp_valid,
  output resp_kind_e                  resp_kind,
  output logic [BLOCK_DATA_BITS-1:0]  resp_rdata,
  output logic [FLAG_BITS-1:0]        resp_flags,
  // OS update of one DIPTA entry
  input  logic                        upd_valid,
  output logic                        upd_ready,
  input  logic [SET_BITS-1:0]         upd_set,
  input  logic [W-1:0]                upd_way,
  input  pte_t                        upd_pte,
  // DRAM of the vault
  output dram_cmd_e                   dram_cmd,
  output logic [ROW_BITS-1:0]         dram_row,
  output logic [COL_BITS-1:0]         dram_col,
  output logic [BLOCK_DATA_BITS-1:0]  dram_wdata,
  input  logic                        dram_rvalid,
  input  logic [BLOCK_DATA_BITS-1:0]  dram_rdata
);

  logic                 lk_valid;
  logic [SET_BITS-1:0]  lk_set;
  logic [VPN_BITS-1:0]  lk_vpn;
  logic [ASID_BITS-1:0] lk_asid;
  logic                 res_valid, res_hit;
  logic [W-1:0]         res_way;
  logic [FLAG_BITS-1:0] res_flags;
  logic                 tbl_wr_en;
  logic [SET_BITS-1:0]  tbl_wr_set;
  logic [W-1:0]         tbl_wr_way;
  pte_t                 tbl_wr_pte;
  logic                 pred_rd_en, pred_upd_en;
  logic [SET_BITS-1:0]  pred_rd_set, pred_upd_set;
  logic [W-1:0]         pred_way, pred_upd_way;
  logic                 tbl_init_done, wp_init_done;

  dipta_vault_ctrl #(
    .ASSOC(ASSOC), .VAULT_BITS(VAULT_BITS), .SET_BITS(SET_BITS),
    .T_RCD(T_RCD), .T_CAS(T_CAS), .T_RAS(T_RAS), .T_WR(T_WR), .T_RP(T_RP)
  ) u_ctrl (
    .clk, .rst_n,
    .init_done(tbl_init_done && wp_init_done),
    .req_valid, .req_ready, .req_we, .req_va, .req_asid, .req_wdata,
    .resp_valid, .resp_kind, .resp_rdata, .resp_flags,
    .upd_valid, .upd_ready, .upd_set, .upd_way, .upd_pte,
    .lk_valid, .lk_set, .lk_vpn, .lk_asid,
    .res_valid, .res_hit, .res_way, .res_flags,
    .tbl_wr_en, .tbl_wr_set, .tbl_wr_way, .tbl_wr_pte,
    .pred_rd_en, .pred_rd_set, .pred_way,
    .pred_upd_en, .pred_upd_set, .pred_upd_way,
    .dram_cmd, .dram_row, .dram_col, .dram_wdata, .dram_rvalid, .dram_rdata
  );

  dipta_table #(
    .ASSOC(ASSOC), .SET_BITS(SET_BITS), .LATENCY(TBL_LATENCY)
  ) u_table (
    .clk, .rst_n,
    .lk_valid, .lk_set, .lk_vpn, .lk_asid,
    .res_valid, .res_hit, .res_way, .res_flags,
    .wr_en(tbl_wr_en), .wr_set(tbl_wr_set), .wr_way(tbl_wr_way), .wr_pte(tbl_wr_pte),
    .init_done(tbl_init_done)
  );

  way_predictor #(
    .ENTRIES(WP_ENTRIES), .ASSOC(ASSOC), .SET_BITS(SET_BITS)
  ) u_wp (
    .clk, .rst_n,
    .rd_en(pred_rd_en), .rd_set(pred_rd_set), .pred_way(pred_way),
    .upd_en(pred_upd_en), .upd_set(pred_upd_set), .upd_way(pred_upd_way),
    .init_done(wp_init_done)
  );

endmodule
