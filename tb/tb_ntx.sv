// tb_ntx -- end-to-end test of one NTX co-processor against a two-port
// memory model with single-cycle latency and optional random grant stalls
// (standing in for TCDM bank conflicts). Programs commands through the
// register port exactly as the core would and checks:
//   * a matrix-vector product (MAC, two loops, init 0.0), its cycle count;
//   * the same under random port stalls (results must not change);
//   * a 3x3 convolution with four loops and init from memory (bias);
//   * VADDSUB, MAXMIN with argmax, THTST and MEMSET;
//   * command double buffering (second command written while busy) and
//     the done interrupt.
module tb_ntx;
  import ntx_pkg::*;
  import tb_fp_pkg::*;
  logic clk = 0, rst_n = 0;
  tcdm_req_t       cfg_req;
  tcdm_rsp_t       cfg_rsp;
  tcdm_req_t [1:0] mreq;
  tcdm_rsp_t [1:0] mrsp;
  logic irq, busy;
  int checks = 0, failures = 0;
  int stalls = 0;
  logic stall_en = 0;

  ntx dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
           .irq_o(irq), .busy_o(busy), .tcdm_req_o(mreq), .tcdm_rsp_i(mrsp));
  always #5 clk = ~clk;

  // ---------------------------------------------------------- memory model
  logic [31:0] mem [4096];
  logic [1:0]  grant_ok;
  logic [1:0]  s_req, s_we, s_gnt;
  logic [1:0][31:0] s_addr, s_wdata;
  always_comb for (int p = 0; p < 2; p++) mrsp[p].gnt = mreq[p].req && grant_ok[p];
  always @(negedge clk) for (int p = 0; p < 2; p++) begin
    s_req[p] = mreq[p].req; s_gnt[p] = mrsp[p].gnt; s_we[p] = mreq[p].we;
    s_addr[p] = mreq[p].addr; s_wdata[p] = mreq[p].wdata;
  end
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      mrsp[p].rvalid <= s_req[p] && s_gnt[p] && !s_we[p];
      if (s_req[p] && s_gnt[p]) begin
        if (s_we[p]) mem[s_addr[p][13:2]] <= s_wdata[p];
        else         mrsp[p].rdata <= mem[s_addr[p][13:2]];
      end
      if (s_req[p] && !s_gnt[p]) stalls++;
    end
    #1;
    for (int p = 0; p < 2; p++) grant_ok[p] = stall_en ? ($urandom % 4 != 0) : 1'b1;
  end

  // ------------------------------------------------------------- register port
  task automatic wr(logic [7:0] off, logic [31:0] d);
    cfg_req.req = 1; cfg_req.we = 1; cfg_req.addr = {24'b0, off}; cfg_req.wdata = d; cfg_req.be = 4'hf;
    do @(posedge clk); while (!cfg_rsp.gnt);
    #1 cfg_req.req = 0;
  endtask
  task automatic rd(logic [7:0] off, output logic [31:0] d);
    cfg_req.req = 1; cfg_req.we = 0; cfg_req.addr = {24'b0, off};
    do @(posedge clk); while (!cfg_rsp.gnt);
    #1 cfg_req.req = 0;
    d = cfg_rsp.rdata;
  endtask
  task automatic loops(int l0, int l1, int l2, int l3, int l4);
    wr(8'h10, l0 - 1); wr(8'h14, l1 - 1); wr(8'h18, l2 - 1); wr(8'h1c, l3 - 1); wr(8'h20, l4 - 1);
  endtask
  task automatic agu(int j, int base, int s0, int s1, int s2, int s3, int s4);
    wr(8'(8'h40 + 32*j), base);
    wr(8'(8'h44 + 32*j), s0); wr(8'(8'h48 + 32*j), s1); wr(8'(8'h4c + 32*j), s2);
    wr(8'(8'h50 + 32*j), s3); wr(8'(8'h54 + 32*j), s4);
  endtask
  function automatic logic [31:0] cmdw(opcode_e op, int outer, int initl, int storel,
      init_src_e is, a_src_e as, b_src_e bs, logic relu = 0, logic neg = 0,
      cmp_e cmp = CMP_GT, logic alt = 0);
    cmd_word_t c;
    c = '0; c.opcode = op; c.outer_level = 3'(outer); c.init_level = 3'(initl);
    c.store_level = 3'(storel); c.init_src = is; c.a_src = as; c.b_src = bs;
    c.relu = relu; c.neg = neg; c.cmp = cmp; c.alt = alt;
    return c;
  endfunction
  task automatic wait_done(output int cyc);
    cyc = 0;
    @(posedge clk); #1;
    while (busy) begin @(posedge clk); #1; cyc++; end
  endtask
  task automatic chk(logic [31:0] got, logic [31:0] exp, string what);
    checks++;
    if (got !== exp) begin failures++; $display("FAIL %s: got %h exp %h", what, got, exp); end
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // memory layout (word addresses)
  localparam int A = 0, X = 512, Y = 768, IMG = 1024, W = 1536, OUT = 1600, V = 2048, V2 = 2304, R = 2560;
  localparam int N = 8, M = 16, H = 8, WD = 8;

  initial begin
    real ref_y [N];
    real acc;
    logic [31:0] d;
    int cyc;
    cfg_req = '0;
    for (int i = 0; i < 4096; i++) mem[i] = 32'h0;
    grant_ok = 2'b11;
    repeat (3) @(posedge clk); rst_n = 1; #1;

    // ---------------- GEMV: y = A x  (N x M)
    for (int i = 0; i < N; i++) for (int j = 0; j < M; j++) mem[A + i*M + j] = rnd_f(-3, 3);
    for (int j = 0; j < M; j++) mem[X + j] = rnd_f(-3, 3);
    for (int i = 0; i < N; i++) begin
      ref_y[i] = 0.0;
      for (int j = 0; j < M; j++) ref_y[i] += f2r(mem[A + i*M + j]) * f2r(mem[X + j]);
    end
    for (int pass = 0; pass < 2; pass++) begin
      stall_en = 1'(pass);
      loops(M, N, 1, 1, 1);
      agu(0, A*4, 4, 4, 0, 0, 0);
      agu(1, X*4, 4, -(M-1)*4, 0, 0, 0);
      agu(2, Y*4, 0, 4, 0, 0, 0);
      wr(8'h04, cmdw(OP_MAC, 2, 1, 1, INIT_ZERO, A_AGU0, B_AGU1));
      wait_done(cyc);
      for (int i = 0; i < N; i++) chk(mem[Y + i], r2f(ref_y[i]), $sformatf("GEMV pass %0d y[%0d]", pass, i));
      if (pass == 0) begin
        checks++;
        // one MAC per cycle plus one port cycle per store and start-up
        if (cyc > N*M + N + 12) begin failures++; $display("FAIL GEMV took %0d cycles", cyc); end
        $display("GEMV %0dx%0d: %0d MACs in %0d cycles", N, M, N*M, cyc);
      end
      for (int i = 0; i < N; i++) mem[Y + i] = 0;
    end
    stall_en = 0;
    checks++; if (stalls == 0) begin failures++; $display("FAIL no port stall happened"); end
    rd(8'h00, d); chk(d[1], 1'b1, "irq pending");
    wr(8'h08, 1); rd(8'h00, d); chk(d[1], 1'b0, "irq cleared");

    // ---------------- 3x3 convolution with bias init from memory
    for (int i = 0; i < H*WD; i++) mem[IMG + i] = rnd_f(-2, 2);
    for (int i = 0; i < 9; i++) mem[W + i] = rnd_f(-2, 2);
    for (int i = 0; i < (H-2)*(WD-2); i++) mem[OUT + i] = rnd_f(-2, 2);
    loops(3, 3, WD-2, H-2, 1);
    agu(0, IMG*4, 4, (WD-2)*4, (-2*WD-1)*4, (1-2*WD)*4, 0);
    agu(1, W*4, 4, 4, -8*4, -8*4, 0);
    agu(2, OUT*4, 0, 0, 4, 4, 0);
    begin
      logic [31:0] expv [(H-2)*(WD-2)];
      for (int oy = 0; oy < H-2; oy++) for (int ox = 0; ox < WD-2; ox++) begin
        acc = f2r(mem[OUT + oy*(WD-2) + ox]);
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++)
          acc += f2r(mem[IMG + (oy+ky)*WD + ox + kx]) * f2r(mem[W + ky*3 + kx]);
        expv[oy*(WD-2) + ox] = r2f(acc);
      end
      wr(8'h04, cmdw(OP_MAC, 4, 2, 2, INIT_AGU2, A_AGU0, B_AGU1));
      wait_done(cyc);
      for (int i = 0; i < (H-2)*(WD-2); i++) chk(mem[OUT + i], expv[i], $sformatf("CONV %0d", i));
      $display("CONV3x3 %0d outputs: %0d cycles", (H-2)*(WD-2), cyc);
    end

    // ---------------- VADDSUB (a - b with ReLU), 32 elements; then MEMSET queued
    for (int i = 0; i < 32; i++) begin mem[V + i] = rnd_f(-2, 2); mem[V2 + i] = rnd_f(-2, 2); end
    loops(32, 1, 1, 1, 1);
    agu(0, V*4, 4, 0, 0, 0, 0); agu(1, V2*4, 4, 0, 0, 0, 0); agu(2, R*4, 4, 0, 0, 0, 0);
    wr(8'h04, cmdw(OP_VADDSUB, 1, 0, 0, INIT_ZERO, A_AGU0, B_AGU1, 1, 1));
    // double buffering: stage and launch the next command while this one runs
    agu(2, (R+64)*4, 4, 0, 0, 0, 0);
    checks++; if (!busy) begin failures++; $display("FAIL staging did not overlap"); end
    wr(8'h04, cmdw(OP_COPY, 1, 0, 0, INIT_ZERO, A_NONE, B_ONE, 0, 0, CMP_GT, 1));
    wait_done(cyc);
    for (int i = 0; i < 32; i++) begin
      real r; r = f2r(mem[V + i]) - f2r(mem[V2 + i]);
      chk(mem[R + i], r > 0.0 ? r2f(r) : 32'h0, "VADDSUB-ReLU");
      chk(mem[R + 64 + i], FP_ONE, "MEMSET");
    end

    // ---------------- MAXMIN argmax over 4 rows of 8, init from the row start
    mem[V + 13] = 32'h41f00000;   // make sure row 1 has a clear winner at index 5
    for (int alt = 0; alt < 2; alt++) begin
      loops(8, 4, 1, 1, 1);
      agu(0, V*4, 4, 4, 0, 0, 0); agu(2, (R + 128 + 4*alt)*4, 0, 4, 0, 0, 0);
      wr(8'h04, cmdw(OP_MAXMIN, 2, 1, 1, INIT_AGU0, A_AGU0, B_NONE, 0, 0, CMP_GT, 1'(alt)));
      wait_done(cyc);
      for (int r = 0; r < 4; r++) begin
        int bi; real bv;
        bi = 0; bv = f2r(mem[V + r*8]);
        for (int i = 1; i < 8; i++) if (f2r(mem[V + r*8 + i]) > bv) begin bv = f2r(mem[V + r*8 + i]); bi = i; end
        chk(mem[R + 128 + 4*alt + r], alt ? 32'(bi) : r2f(bv), alt ? "ARGMAX" : "MAX");
      end
    end

    // ---------------- THTST a >= b
    loops(32, 1, 1, 1, 1);
    agu(0, V*4, 4, 0, 0, 0, 0); agu(1, V2*4, 4, 0, 0, 0, 0); agu(2, R*4, 4, 0, 0, 0, 0);
    wr(8'h04, cmdw(OP_THTST, 1, 0, 0, INIT_ZERO, A_AGU0, B_AGU1, 0, 0, CMP_GE));
    wait_done(cyc);
    for (int i = 0; i < 32; i++)
      chk(mem[R + i], f2r(mem[V + i]) >= f2r(mem[V2 + i]) ? FP_ONE : FP_ZERO, "THTST");

    $display("port stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
