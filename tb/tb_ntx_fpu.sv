// tb_ntx_fpu -- drives the NTX datapath with micro-instructions and operand
// streams from queues and checks the stored values of every command against
// a double-precision / bit-level reference, plus the MAC rate (one product
// per cycle) and the VADDSUB rate (one result per two cycles).
module tb_ntx_fpu;
  import ntx_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  cmd_word_t cmd;
  uop_t uq[$];
  logic [31:0] q0[$], q1[$], outq[$];
  logic uop_pop, rd0_pop, rd1_pop, std_push, busy;
  logic [31:0] std_data;
  logic [2:0] std_free;
  int checks = 0, failures = 0;
  int cycles;

  ntx_fpu dut (.clk_i(clk), .rst_ni(rst_n), .cmd_i(cmd),
    .uop_valid_i(uq.size() > 0), .uop_i(uq.size() > 0 ? uq[0] : '0), .uop_pop_o(uop_pop),
    .rd0_valid_i(q0.size() > 0), .rd0_data_i(q0.size() > 0 ? q0[0] : 32'h0), .rd0_pop_o(rd0_pop),
    .rd1_valid_i(q1.size() > 0), .rd1_data_i(q1.size() > 0 ? q1[0] : 32'h0), .rd1_pop_o(rd1_pop),
    .std_free_i(std_free), .std_push_o(std_push), .std_data_o(std_data), .busy_o(busy));

  always #5 clk = ~clk;
  // sample the handshakes in mid-cycle, act on them at the clock edge
  logic s_uop, s_rd0, s_rd1, s_push;
  logic [31:0] s_data;
  always @(negedge clk) begin
    s_uop = uop_pop; s_rd0 = rd0_pop; s_rd1 = rd1_pop; s_push = std_push; s_data = std_data;
  end
  always @(posedge clk) begin
    if (s_uop) void'(uq.pop_front());
    if (s_rd0) void'(q0.pop_front());
    if (s_rd1) void'(q1.pop_front());
    if (s_push) outq.push_back(s_data);
  end

  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  function automatic uop_t mk(logic init_mem, logic clr, logic pa, logic pb, logic st);
    uop_t u; u.init_mem = init_mem; u.clr = clr; u.pop_a = pa; u.pop_b = pb; u.store = st;
    return u;
  endfunction

  task automatic run();
    cycles = 0;
    while (uq.size() > 0 || busy) begin @(posedge clk); #1; cycles++; end
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    real r;
    logic [31:0] x, y, v[8];
    std_free = 3'd5; cmd = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;

    // MAC: 8 dot products of length 16, init 0, store at the end
    cmd.opcode = OP_MAC; cmd.b_src = B_AGU1;
    for (int d = 0; d < 8; d++) begin
      r = 0.0;
      for (int i = 0; i < 16; i++) begin
        x = rnd_f(-4, 4); y = rnd_f(-4, 4); r += f2r(x) * f2r(y);
        q0.push_back(x); q1.push_back(y); uq.push_back(mk(0, i == 0, 1, 1, i == 15));
      end
      v[d] = r2f(r);
    end
    run();
    checks++; if (cycles > 8*16 + 2) begin failures++; $display("FAIL MAC rate %0d cycles", cycles); end
    for (int d = 0; d < 8; d++) chk(outq.pop_front(), v[d], "MAC");

    // MAC with init from memory and fused ReLU: x = 5 + sum, negative -> 0
    cmd.relu = 1;
    q0.push_back(32'h40a00000); uq.push_back(mk(1, 0, 0, 0, 0));
    q0.push_back(32'hc0400000); q1.push_back(32'h40000000); uq.push_back(mk(0, 0, 1, 1, 1)); // 5-6
    q0.push_back(32'h40a00000); uq.push_back(mk(1, 0, 0, 0, 0));
    q0.push_back(32'h3f800000); q1.push_back(32'h40000000); uq.push_back(mk(0, 0, 1, 1, 1)); // 5+2
    run();
    chk(outq.pop_front(), 32'h0, "MAC init + ReLU");
    chk(outq.pop_front(), 32'h40e00000, "MAC init");
    cmd.relu = 0;

    // VADDSUB: a - b, two cycles per element
    cmd.opcode = OP_VADDSUB; cmd.neg = 1;
    for (int i = 0; i < 8; i++) begin
      x = rnd_f(-3, 3); y = rnd_f(-3, 3); v[i] = r2f(f2r(x) - f2r(y));
      q0.push_back(x); q1.push_back(y); uq.push_back(mk(0, 1, 1, 1, 1));
    end
    run();
    checks++; if (cycles < 16 || cycles > 18) begin failures++; $display("FAIL VADDSUB rate %0d", cycles); end
    for (int i = 0; i < 8; i++) chk(outq.pop_front(), v[i], "VADDSUB");
    cmd.neg = 0;

    // OUTERP: b read once, reused
    cmd.opcode = OP_OUTERP;
    y = 32'h40400000;
    for (int i = 0; i < 4; i++) begin
      x = rnd_f(-3, 3); v[i] = r2f(f2r(x) * 3.0);
      q0.push_back(x); uq.push_back(mk(0, 1, 1, i == 0, 1));
      if (i == 0) q1.push_back(y);
    end
    run();
    for (int i = 0; i < 4; i++) chk(outq.pop_front(), v[i], "OUTERP");

    // MAXMIN with argmax: init from element 0, then compare all
    cmd.opcode = OP_MAXMIN; cmd.cmp = CMP_GT; cmd.b_src = B_NONE;
    v[0] = 32'h3f800000; v[1] = 32'hc0000000; v[2] = 32'h40800000; v[3] = 32'h40400000;
    v[4] = 32'h40800000; v[5] = 32'h41000000; v[6] = 32'hc1000000; v[7] = 32'h3f000000;
    for (int pass = 0; pass < 2; pass++) begin
      cmd.alt = 1'(pass);
      q0.push_back(v[0]); uq.push_back(mk(1, 0, 0, 0, 0));
      for (int i = 0; i < 8; i++) begin q0.push_back(v[i]); uq.push_back(mk(0, 0, 1, 0, i == 7)); end
      run();
      chk(outq.pop_front(), pass ? 32'd5 : 32'h41000000, pass ? "ARGMAX" : "MAX");
    end
    cmd.alt = 0;

    // THTST: a >= b ? 1 : 0
    cmd.opcode = OP_THTST; cmd.cmp = CMP_GE; cmd.b_src = B_AGU1;
    for (int i = 0; i < 8; i++) begin
      x = rnd_f(-1, 1); y = (i == 3) ? x : rnd_f(-1, 1);
      v[i] = (f2r(x) >= f2r(y)) ? FP_ONE : FP_ZERO;
      q0.push_back(x); q1.push_back(y); uq.push_back(mk(0, 1, 1, 1, 1));
    end
    run();
    for (int i = 0; i < 8; i++) chk(outq.pop_front(), v[i], "THTST");

    // MASK: a > 0 ? b : 0
    cmd.opcode = OP_MASK; cmd.cmp = CMP_GT;
    for (int i = 0; i < 8; i++) begin
      x = rnd_f(-1, 1); y = rnd_f(-1, 1);
      v[i] = (f2r(x) > 0.0) ? y : FP_ZERO;
      q0.push_back(x); q1.push_back(y); uq.push_back(mk(0, 1, 1, 1, 1));
    end
    run();
    for (int i = 0; i < 8; i++) chk(outq.pop_front(), v[i], "MASK");

    // MASKMAC: sum of a*b where a > 0
    cmd.opcode = OP_MASKMAC;
    r = 0.0;
    for (int i = 0; i < 8; i++) begin
      x = rnd_f(-1, 1); y = rnd_f(-1, 1);
      if (f2r(x) > 0.0) r += f2r(x) * f2r(y);
      q0.push_back(x); q1.push_back(y); uq.push_back(mk(0, i == 0, 1, 1, i == 7));
    end
    run();
    chk(outq.pop_front(), r2f(r), "MASKMAC");

    // COPY and MEMSET (x = b = 1.0)
    cmd.opcode = OP_COPY; cmd.b_src = B_ONE;
    for (int i = 0; i < 4; i++) begin
      x = rnd_f(-1, 1); v[i] = x;
      q0.push_back(x); uq.push_back(mk(0, 1, 1, 0, 1));
    end
    run();
    for (int i = 0; i < 4; i++) chk(outq.pop_front(), v[i], "COPY");
    cmd.alt = 1;
    for (int i = 0; i < 4; i++) uq.push_back(mk(0, 1, 0, 0, 1));
    run();
    for (int i = 0; i < 4; i++) chk(outq.pop_front(), FP_ONE, "MEMSET");

    // back-pressure: STD FIFO has no room -> nothing stored
    std_free = 3'd0;
    uq.push_back(mk(0, 1, 0, 0, 1));
    repeat (5) @(posedge clk); #1;
    checks++; if (outq.size() != 0 || uq.size() != 1) begin failures++; $display("FAIL stall"); end
    std_free = 3'd5; run();
    chk(outq.pop_front(), FP_ONE, "after stall");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
