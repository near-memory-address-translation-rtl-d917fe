// tb_interleave_mapper: checks the address split of the page-interleaved
// layout. For random addresses and ways it computes the expected vault, set,
// DRAM row and column from the layout rule (ASSOC rows per set; row j of the
// set holds part j of every way's page, way w at columns w*16 .. w*16+15)
// and, as a second independent check, that all 64 blocks of all 4 pages of
// one set land on 256 distinct (row, column) slots inside the set's 4 rows.
module tb_interleave_mapper;
  import dipta_pkg::*;

  logic [VA_BITS-1:0]  va;
  logic [1:0]          way;
  logic [VPN_BITS-1:0] vpn;
  logic [3:0]          vault;
  logic [14:0]         set;
  logic [16:0]         row;
  logic [5:0]          col;

  interleave_mapper u_dut (.va, .way, .vpn, .vault, .set, .row, .col);

  int checks = 0, failures = 0;
  bit seen [4][64];

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint unsigned a, blk, part, exp_row;
    for (int n = 0; n < 3000; n++) begin
      a = {$urandom(), $urandom()} & 64'hFFFF_FFFF_FFFF;
      va = 48'(a); way = 2'($urandom());
      #1;
      blk = (a >> 6) & 63;
      part = blk / 16;
      exp_row = (((a >> 16) & 32'h7fff) * 4) + part;
      check(vpn == 36'(a >> 12), "vpn");
      check(vault == 4'((a >> 12) & 15), "vault");
      check(set == 15'((a >> 16) & 32'h7fff), "set");
      check(row == 17'(exp_row), $sformatf("row %h exp %h", row, exp_row));
      check(col == 6'(way * 16 + (blk % 16)), "col");
    end
    // all blocks of a full set occupy distinct slots of the set's 4 rows
    for (int w = 0; w < 4; w++)
      for (int b = 0; b < 64; b++) begin
        va = {17'h1_2345, 15'h0abc, 4'h3, 6'(b), 6'd0}; way = 2'(w);
        #1;
        check(row[16:2] == 15'h0abc, "row inside the set");
        check(!seen[row[1:0]][col], "slot used twice");
        seen[row[1:0]][col] = 1'b1;
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
