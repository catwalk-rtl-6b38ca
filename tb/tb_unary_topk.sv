// tb_unary_topk: checks the top-k selector against a popcount reference.
// Output wire y[K-1-m] must be 1 exactly when more than m inputs are 1.
// N=16,K=2 (default) is checked on all 65536 input patterns; N=8,K=4,
// N=32,K=2 and N=64,K=2 on random sparse and dense patterns. The unit counts
// after pruning are checked against the numbers printed for 8-input sorters
// (19 total / 14 kept / 6 half for top-2, 19/18/4 for top-4), and the sizes
// of the 16-, 32- and 64-input networks (60, 185, 531 units; 16-input top-2
// keeps 29 units, 14 of them half).
module tb_unary_topk;
  import catwalk_pkg::*;
  int checks = 0, failures = 0;

  logic [15:0] x16;  logic [1:0] y16;
  logic [7:0]  x8;   logic [3:0] y8;
  logic [31:0] x32;  logic [1:0] y32;
  logic [63:0] x64;  logic [1:0] y64;

  unary_topk                u16 (.x(x16), .y(y16));
  unary_topk #(.N(8),  .K(4)) u8  (.x(x8),  .y(y8));
  unary_topk #(.N(32), .K(2)) u32 (.x(x32), .y(y32));
  unary_topk #(.N(64), .K(2)) u64 (.x(x64), .y(y64));

  function automatic logic [7:0] expect_y(int ones, int k);
    logic [7:0] e = '0;
    for (int m = 0; m < k; m++) e[k-1-m] = (ones > m);
    return e;
  endfunction

  task automatic check(string what, logic [7:0] got, logic [7:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 10) $display("FAIL %s got=%b exp=%b", what, got, exp);
    end
  endtask

  function automatic logic [63:0] sparse(int n, int density_pct);
    logic [63:0] v = '0;
    for (int i = 0; i < n; i++) v[i] = ($urandom_range(99) < density_pct);
    return v;
  endfunction

  initial begin
    #10000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // pruning statistics
    check("cnt8_2_total", 8'(sorter_size(8)), 8'd19);
    check("cnt8_2_kept", 8'(topk_count(8, 2, CAS_FULL) + topk_count(8, 2, CAS_HALF_HI) + topk_count(8, 2, CAS_HALF_LO)), 8'd14);
    check("cnt8_2_half", 8'(topk_count(8, 2, CAS_HALF_HI) + topk_count(8, 2, CAS_HALF_LO)), 8'd6);
    check("cnt8_4_kept", 8'(topk_count(8, 4, CAS_FULL) + topk_count(8, 4, CAS_HALF_HI) + topk_count(8, 4, CAS_HALF_LO)), 8'd18);
    check("cnt8_4_half", 8'(topk_count(8, 4, CAS_HALF_HI) + topk_count(8, 4, CAS_HALF_LO)), 8'd4);
    check("cnt16_total", 8'(sorter_size(16)), 8'd60);
    check("cnt16_2_kept", 8'(topk_count(16, 2, CAS_FULL) + topk_count(16, 2, CAS_HALF_HI) + topk_count(16, 2, CAS_HALF_LO)), 8'd29);
    check("cnt16_2_half", 8'(topk_count(16, 2, CAS_HALF_HI) + topk_count(16, 2, CAS_HALF_LO)), 8'd14);
    check("cnt32_total", 8'(sorter_size(32)), 8'd185);
    check("cnt64_total", 8'(sorter_size(64) - 400), 8'd131);  // 531 units

    for (int v = 0; v < 65536; v++) begin
      x16 = 16'(v);
      #1;
      check("n16", {6'b0, y16}, expect_y($countones(x16), 2));
    end
    for (int t = 0; t < 3000; t++) begin
      x8  = 8'(sparse(8, (t % 3 == 0) ? 60 : 15));
      x32 = 32'(sparse(32, (t % 3 == 0) ? 30 : 4));
      x64 = sparse(64, (t % 3 == 0) ? 10 : 2);
      #1;
      check("n8k4", {4'b0, y8}, expect_y($countones(x8), 4));
      check("n32", {6'b0, y32}, expect_y($countones(x32), 2));
      check("n64", {6'b0, y64}, expect_y($countones(x64), 2));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
