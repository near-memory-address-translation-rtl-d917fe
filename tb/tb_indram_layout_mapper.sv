// tb_indram_layout_mapper: checks the in-DRAM layout against the picture of
// the layout for 4KB pages and rows (64 blocks per row): page 0 block 0 at
// row 0 offset 1, its block 63 at row 1 offset 1, page 1 block 0 at row 1
// offset 2, page 62 block 0 at row 62 offset 63 and its block 63 at row 63
// offset 63, page 63 (first page of the next cycle) block 0 at row 64
// offset 1. Then, by walking the layout slot by slot (rows of 63 data
// slots after one metadata slot), it checks every block address of the
// first 200 rows, and the metadata half: a block's page metadata is in the
// second half of the row where the page starts and the first half of the
// row where it ends.
module tb_indram_layout_mapper;
  logic [22:0] block_addr;
  logic [22:0] row;
  logic [5:0]  offset;
  logic        meta_half;

  indram_layout_mapper u_dut (.block_addr, .row, .offset, .meta_half);

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic probe(input int page, input int blk, input int exp_row, input int exp_off);
    block_addr = 23'(page * 64 + blk);
    #1;
    check(row == 23'(exp_row) && offset == 6'(exp_off),
          $sformatf("page %0d block %0d: row %0d offset %0d", page, blk, row, offset));
  endtask

  initial begin : watchdog
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int r, o, page, b, start_row;
    probe(0, 0, 0, 1);
    probe(0, 63, 1, 1);
    probe(1, 0, 1, 2);
    probe(1, 63, 2, 2);
    probe(2, 0, 2, 3);
    probe(62, 0, 62, 63);
    probe(62, 63, 63, 63);
    probe(63, 0, 64, 1);
    // Walk: fill slots 1..63 of rows in order with consecutive blocks.
    r = 0; o = 1; start_row = 0;
    for (int ba = 0; ba < 200 * 63; ba++) begin
      page = ba / 64; b = ba % 64;
      if (b == 0) start_row = r;
      block_addr = 23'(ba);
      #1;
      check(row == 23'(r) && offset == 6'(o), $sformatf("walk ba %0d", ba));
      check(meta_half == (r == start_row), $sformatf("meta half ba %0d", ba));
      // every page spans exactly two rows
      check(r == start_row || r == start_row + 1, "page spans two rows");
      o++;
      if (o == 64) begin o = 1; r++; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
