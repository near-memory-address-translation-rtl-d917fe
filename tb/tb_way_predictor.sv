// tb_way_predictor: checks the way predictor against a reference table.
//
// Random lookups and updates over all 2^15 set numbers; the reference keeps
// 1024 two-bit entries indexed by the XOR of set bits [9:0] and [14:10]
// (the 15-bit set folded onto 10 bits). Checks the one-cycle read latency,
// last-way-written behaviour, that two sets with the same hash share an
// entry, and that reset clears the table to way 0 in 1024 cycles.
module tb_way_predictor;
  logic clk = 1'b0, rst_n = 1'b0;
  always #1 clk = ~clk;

  logic        rd_en = 1'b0, upd_en = 1'b0;
  logic [14:0] rd_set = '0, upd_set = '0;
  logic [1:0]  upd_way = '0, pred_way;
  logic        init_done;

  way_predictor u_dut (.clk, .rst_n, .rd_en, .rd_set, .pred_way, .upd_en, .upd_set, .upd_way, .init_done);

  int checks = 0, failures = 0;
  logic [1:0] ref_t [1024];

  function automatic logic [9:0] h(input logic [14:0] s);
    return s[9:0] ^ {5'b0, s[14:10]};
  endfunction

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [14:0] s;
    logic [1:0] exp;
    for (int i = 0; i < 1024; i++) ref_t[i] = 2'd0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // the power-on clear takes one cycle per entry
    for (int i = 0; i < 1023; i++) begin
      @(negedge clk);
      check(!init_done, "init_done only after the clear");
    end
    @(negedge clk);
    check(init_done, "init_done after 1024 cycles");
    // after reset every entry predicts way 0
    for (int i = 0; i < 50; i++) begin
      @(negedge clk); rd_en = 1'b1; rd_set = 15'($urandom());
      @(negedge clk); rd_en = 1'b0;
      check(pred_way == 2'd0, "reset value");
    end
    // random mix of updates then lookups
    for (int n = 0; n < 5000; n++) begin
      @(negedge clk);
      upd_en = 1'b1; upd_set = 15'($urandom()); upd_way = 2'($urandom());
      @(negedge clk);
      upd_en = 1'b0;
      ref_t[h(upd_set)] = upd_way;
      rd_en = 1'b1;
      // look up either the set just written, an alias of it, or a random set
      case ($urandom_range(2))
        0: s = upd_set;
        1: s = {upd_set[14:10] ^ 5'b10101, upd_set[9:0] ^ 10'b0000010101};  // same hash
        default: s = 15'($urandom());
      endcase
      rd_set = s;
      exp = ref_t[h(s)];
      @(negedge clk);
      rd_en = 1'b0;
      check(pred_way == exp, $sformatf("lookup set %h: got %0d exp %0d", s, pred_way, exp));
    end
    // pred_way holds while rd_en is low
    @(negedge clk);
    check(pred_way == exp, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
