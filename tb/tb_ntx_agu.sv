// tb_ntx_agu -- checks the address generator: base load, stepping with the
// stride of the selected level (including negative strides), holding when
// not stepping and when the level is past the last loop.
module tb_ntx_agu;
  logic clk = 0, rst_n = 0;
  logic load, step;
  logic [31:0] base, addr;
  logic [2:0] level;
  logic [4:0][31:0] stride;
  int checks = 0, failures = 0;

  ntx_agu dut (.clk_i(clk), .rst_ni(rst_n), .load_i(load), .base_i(base), .step_i(step),
               .level_i(level), .stride_i(stride), .addr_o(addr));
  always #5 clk = ~clk;

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] exp;
    load = 0; step = 0; base = 0; level = 0; stride = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int t = 0; t < 20; t++) begin
      base = $urandom;
      for (int k = 0; k < 5; k++) stride[k] = 32'($signed($urandom % 256) - 128);
      load = 1; @(posedge clk); #1; load = 0;
      exp = base;
      checks++; if (addr !== exp) begin failures++; $display("FAIL load"); end
      for (int i = 0; i < 50; i++) begin
        step = 1'($urandom); level = 3'($urandom % 6);
        @(posedge clk); #1;
        if (step && level < 5) exp = exp + stride[level];
        checks++;
        if (addr !== exp) begin failures++; $display("FAIL step %h exp %h", addr, exp); end
      end
      step = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
