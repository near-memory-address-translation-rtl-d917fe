// dram_vault_model: behavioural model of one vault's DRAM (one bank), for
// simulation only.
//
// Accepts the ACT / RD / WR / PRE commands of the vault logic, checks the
// timing rules tRCD (ACT to RD/WR), tRAS (ACT to PRE), tWR (WR to PRE) and
// tRP (PRE to ACT), and that column commands go to the open row. Every
// violation increments `violations`. A RD returns its 64B block exactly
// T_CAS cycles later. Contents: a block never written reads as
// pattern(row, col) (see the function below, also usable by a testbench);
// written blocks are kept in an associative array, so the model does not
// allocate the whole vault.
module dram_vault_model
  import dipta_pkg::*;
#(
  parameter int unsigned ROW_BITS = 17,
  parameter int unsigned COL_BITS = 6,
  parameter int unsigned T_RCD    = 23,
  parameter int unsigned T_CAS    = 23,
  parameter int unsigned T_RAS    = 45,
  parameter int unsigned T_WR     = 29,
  parameter int unsigned T_RP     = 23
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  dram_cmd_e                   cmd,
  input  logic [ROW_BITS-1:0]         row,
  input  logic [COL_BITS-1:0]         col,
  input  logic [BLOCK_DATA_BITS-1:0]  wdata,
  output logic                        rvalid,
  output logic [BLOCK_DATA_BITS-1:0]  rdata,
  output int unsigned                 violations,
  output int unsigned                 n_act,
  output int unsigned                 n_rd,
  output int unsigned                 n_wr
);

  logic [BLOCK_DATA_BITS-1:0] store [longint unsigned];

  logic                       open_q;
  logic [ROW_BITS-1:0]        open_row_q;
  longint unsigned            t_now, t_act, t_wr, t_pre;

  // Read pipeline: T_CAS stages.
  logic                       pv [T_CAS];
  logic [BLOCK_DATA_BITS-1:0] pd [T_CAS];

  function automatic logic [BLOCK_DATA_BITS-1:0] pattern(input longint unsigned r,
                                                         input longint unsigned c);
    logic [BLOCK_DATA_BITS-1:0] d;
    for (int i = 0; i < BLOCK_DATA_BITS / 64; i++)
      d[i*64 +: 64] = (r << 24) ^ (c << 8) ^ longint'(i) ^ 64'hA5A5_0000_0000_0000;
    return d;
  endfunction

  wire [COL_BITS+ROW_BITS-1:0] key = {row, col};

  assign rvalid = pv[T_CAS-1];
  assign rdata  = pd[T_CAS-1];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_q     <= 1'b0;
      open_row_q <= '0;
      t_now      <= 64'd1000;
      t_act      <= 64'd0;
      t_wr       <= 64'd0;
      t_pre      <= 64'd0;
      violations <= 0;
      n_act      <= 0;
      n_rd       <= 0;
      n_wr       <= 0;
      for (int i = 0; i < T_CAS; i++) begin
        pv[i] <= 1'b0;
        pd[i] <= '0;
      end
    end else begin
      t_now <= t_now + 1;
      pv[0] <= 1'b0;
      for (int i = 1; i < T_CAS; i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      unique case (cmd)
        DRAM_ACT: begin
          n_act <= n_act + 1;
          if (open_q || t_now < t_pre + T_RP) violations <= violations + 1;
          open_q     <= 1'b1;
          open_row_q <= row;
          t_act      <= t_now;
        end
        DRAM_RD: begin
          n_rd <= n_rd + 1;
          if (!open_q || row != open_row_q || t_now < t_act + T_RCD)
            violations <= violations + 1;
          pv[0] <= 1'b1;
          pd[0] <= store.exists(longint'(key)) ? store[longint'(key)] : pattern(row, col);
        end
        DRAM_WR: begin
          n_wr <= n_wr + 1;
          if (!open_q || row != open_row_q || t_now < t_act + T_RCD)
            violations <= violations + 1;
          store[longint'(key)] = wdata;
          t_wr <= t_now;
        end
        DRAM_PRE: begin
          if (!open_q || t_now < t_act + T_RAS || (t_wr > t_act && t_now < t_wr + T_WR))
            violations <= violations + 1;
          open_q <= 1'b0;
          t_pre  <= t_now;
        end
        default: ;
      endcase
    end
  end

endmodule
