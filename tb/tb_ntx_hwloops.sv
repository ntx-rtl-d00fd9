// tb_ntx_hwloops -- checks the hardware loop cascade against a software
// nested-loop model: counter values, the incrementing level, first/last
// flags and the total number of iterations of random loop nests.
module tb_ntx_hwloops;
  logic clk = 0, rst_n = 0;
  logic clear, step;
  logic [4:0][15:0] maxv, cnt;
  logic [4:0] first, last;
  logic [2:0] outer, level;
  logic done;
  int checks = 0, failures = 0;

  ntx_hwloops dut (.clk_i(clk), .rst_ni(rst_n), .clear_i(clear), .step_i(step), .max_i(maxv),
                   .outer_level_i(outer), .cnt_o(cnt), .first_o(first), .last_o(last),
                   .level_o(level), .done_o(done));
  always #5 clk = ~clk;

  task automatic chk(logic c, string what);
    checks++;
    if (!c) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int m[5];
    int c[5];
    int iters, exp_iters, exp_level;
    clear = 0; step = 0; maxv = '0; outer = 1;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      outer = 3'(1 + $urandom % 5);
      exp_iters = 1;
      for (int i = 0; i < 5; i++) begin
        m[i] = $urandom % 4;
        maxv[i] = 16'(m[i]);
        c[i] = 0;
        if (i < int'(outer)) exp_iters *= m[i] + 1;
      end
      clear = 1; @(posedge clk); #1; clear = 0;
      iters = 0;
      forever begin
        // reference: outermost incrementing level
        exp_level = 5;
        for (int i = int'(outer) - 1; i >= 0; i--) if (c[i] != m[i]) exp_level = i;
        for (int i = 0; i < int'(outer); i++) begin
          chk(cnt[i] == 16'(c[i]), $sformatf("cnt[%0d]", i));
          chk(first[i] == (c[i] == 0), "first");
          chk(last[i] == (c[i] == m[i]), "last");
        end
        chk(int'(level) == exp_level, $sformatf("level %0d exp %0d", level, exp_level));
        chk(done == (exp_level == 5), "done");
        iters++;
        if (done) break;
        step = 1; @(posedge clk); #1; step = 0;
        for (int i = 0; i < exp_level; i++) c[i] = 0;
        c[exp_level]++;
      end
      chk(iters == exp_iters, $sformatf("iterations %0d exp %0d", iters, exp_iters));
    end
    // a wide 16-bit maximum count
    outer = 1; maxv[0] = 16'hffff;
    clear = 1; @(posedge clk); #1; clear = 0;
    step = 1; repeat (65535) @(posedge clk); #1; step = 0;
    chk(cnt[0] == 16'hffff && done, "16-bit count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
