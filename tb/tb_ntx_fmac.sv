// tb_ntx_fmac -- self-checking test of the fused multiply-accumulate unit.
// Runs random dot products, sums with cancellation, negated products and
// rounding cases against a double-precision reference and checks the
// one-cycle result latency.
module tb_ntx_fmac;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  logic en, clr, neg;
  logic [31:0] a, b, res;
  logic [299:0] acc;
  int checks = 0, failures = 0;

  ntx_fmac dut (.clk_i(clk), .rst_ni(rst_n), .en_i(en), .clr_i(clr), .neg_i(neg),
                .a_i(a), .b_i(b), .res_o(res), .acc_o(acc));

  always #5 clk = ~clk;

  task automatic check(logic [31:0] exp, string what);
    checks++;
    if (res !== exp) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, res, exp);
    end
  endtask

  task automatic op(logic [31:0] x, logic [31:0] y, logic c, logic n);
    en = 1; clr = c; neg = n; a = x; b = y;
    @(posedge clk); #1;
    en = 0;
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real ref_sum;
    logic [31:0] x, y;
    en = 0; clr = 0; neg = 0; a = 0; b = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // one product, result visible one cycle after issue
    op(32'h40400000, 32'h40000000, 1, 0);          // 3*2
    check(32'h40c00000, "3*2");
    op(32'h3f800000, 32'h3f800000, 0, 1);          // 6 - 1
    check(32'h40a00000, "6-1");
    // random dot products
    for (int t = 0; t < 200; t++) begin
      int n; n = 1 + int'($urandom % 16);
      ref_sum = 0.0;
      for (int i = 0; i < n; i++) begin
        x = rnd_f(-6, 6); y = rnd_f(-6, 6);
        ref_sum = ref_sum + f2r(x) * f2r(y);
        op(x, y, i == 0, 0);
      end
      check(r2f(ref_sum), $sformatf("dot %0d", t));
    end
    // cancellation to exactly zero
    op(32'h41200000, 32'h3f800000, 1, 0);
    op(32'h41200000, 32'h3f800000, 0, 1);
    check(32'h0, "cancel");
    // rounding: 1 + 2^-24 (tie, round to even -> 1.0), 1 + 3*2^-24 -> up
    op(32'h3f800000, 32'h3f800000, 1, 0);
    op(32'h33800000, 32'h3f800000, 0, 0);
    check(32'h3f800000, "tie-even");
    op(32'h33800000, 32'h3f800000, 0, 0);
    op(32'h33800000, 32'h3f800000, 0, 0);
    check(32'h3f800002, "round-up");
    // deferred rounding: 2^24 + 1 - 2^24 keeps the 1 exactly
    op(32'h4b800000, 32'h3f800000, 1, 0);
    op(32'h3f800000, 32'h3f800000, 0, 0);
    op(32'h4b800000, 32'h3f800000, 0, 1);
    check(32'h3f800000, "exact accumulation");
    // hold: en low keeps the value
    @(posedge clk); #1;
    check(32'h3f800000, "hold");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
