// tb_ntx_workloads -- runs the kernels of the roofline evaluation on one NTX
// with a 64 kB two-port memory model of single-cycle latency, at sizes that
// fit the TCDM: AXPY (16 and a 2048-element tile), GEMV 16x16, GEMM 16 and
// 32, CONV 3x3 / 5x5 / 7x7, the discrete Laplace operators in 1D, 2D and 3D,
// and a horizontal-diffusion stencil (DIFF) built from twelve commands
// (Laplacian, differences, products, flux limiter by masking, final update).
// Every kernel is programmed through the register port as the control core
// would and every output word is compared with a reference computed here in
// double precision, rounded to fp32 wherever an NTX command stores.
// Each kernel runs twice: once without memory stalls, where the cycle count
// must stay within a few percent of its port bound, and once with
// every port request refused with 13 % probability, the bank-conflict rate
// reported for the cluster; the results must not change and the achieved
// rate is printed. The port bound: a reduction issues one iteration per
// cycle plus one port cycle for each store (1 + 1/taps cycles per
// iteration); VMULT and MASK read two operands and store one result per
// element, three accesses on two ports, so 2/3 element per cycle; VADDSUB
// needs a second FPU cycle per element (1/2 per cycle); an init from memory
// adds one issue cycle.
// The kernel mappings (loop counts, strides, command choice) are this
// testbench's own; the kernels and the conflict rate follow the evaluation.
module tb_ntx_workloads;
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
  logic [31:0] mem [16384];
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
        if (s_we[p]) mem[s_addr[p][15:2]] <= s_wdata[p];
        else         mrsp[p].rdata <= mem[s_addr[p][15:2]];
      end
      if (s_req[p] && !s_gnt[p]) stalls++;
    end
    #1;
    for (int p = 0; p < 2; p++) grant_ok[p] = stall_en ? ($urandom % 100 >= 13) : 1'b1;
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
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end


  // runs the staged command with word c, checks the cycle bound (pass 0)
  // and reports the rate; iters = innermost iterations, extra = allowed
  // additional cycles per iteration (init from memory, stores)
  int pass_no;
  task automatic launch(string name, logic [31:0] c, int iters, real slack);
    int cyc;
    wr(8'h04, c);
    wait_done(cyc);
    if (pass_no == 0) begin
      checks++;
      if (real'(cyc) > real'(iters) * slack + 16.0) begin
        failures++; $display("FAIL %s: %0d iterations took %0d cycles", name, iters, cyc);
      end
    end
    $display("%-12s %s %7d iterations %7d cycles  %.2f iter/cycle", name,
             pass_no ? "13% stalls" : "no stalls ", iters, cyc, real'(iters) / real'(cyc));
  endtask

  // 2D convolution / stencil over an image of pitch IW: OHxOW outputs of a
  // KxK kernel, output pitch OP; init 0.0
  task automatic conv2d(string name, int img, int iw, int k, int oh, int ow, int wt, int outb, int op);
    loops(k, k, ow, oh, 1);
    agu(0, img*4, 4, (iw - (k-1))*4, (1 - (k-1)*iw - (k-1))*4, ((2-k)*iw - (ow+k-2))*4, 0);
    agu(1, wt*4, 4, 4, -(k*k-1)*4, -(k*k-1)*4, 0);
    agu(2, outb*4, 0, 0, 4, (op - (ow-1))*4, 0);
    launch(name, cmdw(OP_MAC, 4, 2, 2, INIT_ZERO, A_AGU0, B_AGU1), k*k*oh*ow, 1.03 + 1.0 / real'(k*k));
  endtask
  function automatic real conv_ref(int img, int iw, int k, int wt, int oy, int ox);
    real acc; acc = 0.0;
    for (int ky = 0; ky < k; ky++) for (int kx = 0; kx < k; kx++)
      acc += f2r(mem[img + (oy+ky)*iw + ox + kx]) * f2r(mem[wt + ky*k + kx]);
    return acc;
  endfunction

  // element-wise z[i] = a[i+ao] op b[i+bo] over n elements
  task automatic vec(string name, opcode_e op, int n, int a, int b, int z, logic neg = 0,
                     cmp_e cmp = CMP_GT, int slack_pct = 210);
    loops(n, 1, 1, 1, 1);
    agu(0, a*4, 4, 0, 0, 0, 0); agu(1, b*4, 4, 0, 0, 0, 0); agu(2, z*4, 4, 0, 0, 0, 0);
    launch(name, cmdw(op, 1, 0, 0, INIT_ZERO, A_AGU0, B_AGU1, 0, neg, cmp),
           n, real'(slack_pct) / 100.0);
  endtask

  // memory layout (word addresses); 16384 words = 64 kB
  localparam int SC = 0;            // scalars
  localparam int BA = 16, BB = 4112, BC = 8208, BD = 12304;   // 4 kword areas
  localparam int G = 12;            // DIFF grid side
  localparam int D3 = 8;            // LAP3D grid side

  logic [31:0] expv [4096];

  initial begin
    real r;
    int n, nn, k, iw, oh;
    cfg_req = '0;
    for (int i = 0; i < 16384; i++) mem[i] = 32'h0;
    grant_ok = 2'b11;
    repeat (3) @(posedge clk); rst_n = 1; #1;
    for (int pass = 0; pass < 2; pass++) begin
      pass_no = pass;
      stall_en = 1'(pass);

      // ---------------- AXPY y = alpha*x + y, n = 16 and a 2048-element tile
      foreach (expv[i]) expv[i] = 0;
      for (int t = 0; t < 2; t++) begin
        n = t ? 2048 : 16;
        mem[SC] = rnd_f(-2, 2);
        for (int i = 0; i < n; i++) begin mem[BA + i] = rnd_f(-3, 3); mem[BB + i] = rnd_f(-3, 3); end
        for (int i = 0; i < n; i++) expv[i] = r2f(f2r(mem[SC]) * f2r(mem[BA + i]) + f2r(mem[BB + i]));
        loops(n, 1, 1, 1, 1);
        agu(0, BA*4, 4, 0, 0, 0, 0); agu(1, SC*4, 0, 0, 0, 0, 0); agu(2, BB*4, 4, 0, 0, 0, 0);
        // init from y costs one extra issue cycle per element
        launch($sformatf("AXPY %0d", n), cmdw(OP_MAC, 1, 0, 0, INIT_AGU2, A_AGU0, B_AGU1), n, 2.1);
        for (int i = 0; i < n; i++) chk(mem[BB + i], expv[i], $sformatf("AXPY %0d y[%0d]", n, i));
      end

      // ---------------- GEMV 16x16: y = A x
      nn = 16;
      for (int i = 0; i < nn*nn; i++) mem[BA + i] = rnd_f(-3, 3);
      for (int i = 0; i < nn; i++) mem[BB + i] = rnd_f(-3, 3);
      loops(nn, nn, 1, 1, 1);
      agu(0, BA*4, 4, 4, 0, 0, 0); agu(1, BB*4, 4, -(nn-1)*4, 0, 0, 0); agu(2, BC*4, 0, 4, 0, 0, 0);
      launch("GEMV 16", cmdw(OP_MAC, 2, 1, 1, INIT_ZERO, A_AGU0, B_AGU1), nn*nn, 1.1);
      for (int i = 0; i < nn; i++) begin
        r = 0.0;
        for (int j = 0; j < nn; j++) r += f2r(mem[BA + i*nn + j]) * f2r(mem[BB + j]);
        chk(mem[BC + i], r2f(r), "GEMV");
      end

      // ---------------- GEMM N = 16, 32: C = A B (three loops k, j, i)
      for (int t = 0; t < 2; t++) begin
        nn = t ? 32 : 16;
        for (int i = 0; i < nn*nn; i++) begin mem[BA + i] = rnd_f(-3, 3); mem[BB + i] = rnd_f(-3, 3); end
        loops(nn, nn, nn, 1, 1);
        agu(0, BA*4, 4, -(nn-1)*4, 4, 0, 0);
        agu(1, BB*4, nn*4, (1 - (nn-1)*nn)*4, -(nn*nn-1)*4, 0, 0);
        agu(2, BC*4, 0, 4, 4, 0, 0);
        launch($sformatf("GEMM %0d", nn), cmdw(OP_MAC, 3, 1, 1, INIT_ZERO, A_AGU0, B_AGU1), nn*nn*nn, 1.1);
        for (int i = 0; i < nn; i++) for (int j = 0; j < nn; j++) begin
          r = 0.0;
          for (int q = 0; q < nn; q++) r += f2r(mem[BA + i*nn + q]) * f2r(mem[BB + q*nn + j]);
          chk(mem[BC + i*nn + j], r2f(r), $sformatf("GEMM %0d C[%0d][%0d]", nn, i, j));
        end
      end

      // ---------------- CONV KxK on a 24x24 image
      iw = 24;
      for (int i = 0; i < iw*iw; i++) mem[BA + i] = rnd_f(-2, 2);
      for (k = 3; k <= 7; k += 2) begin
        oh = iw - k + 1;
        for (int i = 0; i < k*k; i++) mem[BB + i] = rnd_f(-2, 2);
        conv2d($sformatf("CONV %0dx%0d", k, k), BA, iw, k, oh, oh, BB, BC, oh);
        for (int oy = 0; oy < oh; oy++) for (int ox = 0; ox < oh; ox++)
          chk(mem[BC + oy*oh + ox], r2f(conv_ref(BA, iw, k, BB, oy, ox)), $sformatf("CONV %0d", k));
      end

      // ---------------- LAP1D: z[i] = x[i-1] - 2 x[i] + x[i+1], 512 points
      n = 512;
      for (int i = 0; i < n; i++) mem[BA + i] = rnd_f(-3, 3);
      mem[SC] = FP_ONE; mem[SC+1] = 32'hc0000000; mem[SC+2] = FP_ONE;   // 1 -2 1
      loops(3, n-2, 1, 1, 1);
      agu(0, BA*4, 4, -4, 0, 0, 0); agu(1, SC*4, 4, -8, 0, 0, 0); agu(2, (BC+1)*4, 0, 4, 0, 0, 0);
      launch("LAP1D", cmdw(OP_MAC, 2, 1, 1, INIT_ZERO, A_AGU0, B_AGU1), 3*(n-2), 1.4);
      for (int i = 1; i < n-1; i++)
        chk(mem[BC + i], r2f(f2r(mem[BA+i-1]) - 2.0*f2r(mem[BA+i]) + f2r(mem[BA+i+1])), "LAP1D");

      // ---------------- LAP2D: 5-point Laplacian as a 3x3 stencil, 32x32 grid
      iw = 32;
      for (int i = 0; i < iw*iw; i++) mem[BA + i] = rnd_f(-3, 3);
      for (int i = 0; i < 9; i++) mem[SC + i] = (i == 4) ? 32'hc0800000 : (i % 2) ? FP_ONE : FP_ZERO;
      conv2d("LAP2D", BA, iw, 3, iw-2, iw-2, SC, BC + iw + 1, iw);
      for (int y = 1; y < iw-1; y++) for (int x = 1; x < iw-1; x++)
        chk(mem[BC + y*iw + x], r2f(conv_ref(BA, iw, 3, SC, y-1, x-1)), "LAP2D");

      // ---------------- LAP3D: 7-point Laplacian, 8x8x8 grid, one command per plane
      for (int i = 0; i < D3*D3*D3; i++) mem[BA + i] = rnd_f(-3, 3);
      for (int i = 0; i < 27; i++) mem[SC + i] = FP_ZERO;
      mem[SC + 13] = 32'hc0c00000;                                       // -6
      mem[SC + 4] = FP_ONE; mem[SC + 22] = FP_ONE; mem[SC + 10] = FP_ONE;
      mem[SC + 16] = FP_ONE; mem[SC + 12] = FP_ONE; mem[SC + 14] = FP_ONE;
      for (int oz = 0; oz < D3-2; oz++) begin
        loops(3, 3, 3, D3-2, D3-2);
        agu(0, (BA + oz*D3*D3)*4, 4, (D3-2)*4, (D3*D3 - 2*D3 - 2)*4,
            (1 - (2*D3*D3 + 2*D3 + 2))*4, (-2*D3*D3 - 2*D3 + 1)*4);
        agu(1, SC*4, 4, 4, 4, -26*4, -26*4);
        agu(2, (BC + (oz+1)*D3*D3 + D3 + 1)*4, 0, 0, 0, 4, 3*4);
        launch($sformatf("LAP3D z=%0d", oz+1), cmdw(OP_MAC, 5, 3, 3, INIT_ZERO, A_AGU0, B_AGU1),
               27*(D3-2)*(D3-2), 1.1);
      end
      for (int z = 1; z < D3-1; z++) for (int y = 1; y < D3-1; y++) for (int x = 1; x < D3-1; x++) begin
        int c; c = BA + z*D3*D3 + y*D3 + x;
        r = f2r(mem[c-1]) + f2r(mem[c+1]) + f2r(mem[c-D3]) + f2r(mem[c+D3])
          + f2r(mem[c-D3*D3]) + f2r(mem[c+D3*D3]) - 6.0*f2r(mem[c]);
        chk(mem[BC + z*D3*D3 + y*D3 + x], r2f(r), "LAP3D");
      end

      // ---------------- DIFF: horizontal diffusion on a 12x12 grid
      //   lap = 4-neighbour Laplacian; flx = lap[p+1]-lap[p], limited to 0
      //   where flx*(in[p+1]-in[p]) > 0; fly likewise with p+G;
      //   out = in - c*((flx[p]-flx[p-1]) + (fly[p]-fly[p-G])), c = 0.25
      begin
        localparam int IN = BA, LAP = BA + 256, DX = BA + 512, DY = BA + 768,
                       FX = BA + 1024, FY = BA + 1280, TX = BA + 1536, TY = BA + 1792,
                       OUT = BA + 2048, PX = BB, PY = BB + 256;
        real lap_r [G*G], fx_r [G*G], fy_r [G*G], tx_r [G*G], ty_r [G*G];
        for (int i = 0; i < 2304; i++) mem[BA + i] = 32'h0;
        for (int i = 0; i < G*G; i++) mem[IN + i] = rnd_f(-3, 3);
        for (int i = 0; i < 9; i++) mem[SC + i] = (i == 4) ? 32'h40800000 : (i % 2) ? 32'hbf800000 : FP_ZERO;
        mem[SC + 9] = 32'hbe800000;                                       // -0.25
        conv2d("DIFF lap", IN, G, 3, G-2, G-2, SC, LAP + G + 1, G);
        vec("DIFF dx", OP_VADDSUB, G*G-1, IN+1, IN, DX, 1, CMP_GT, 210);
        vec("DIFF dy", OP_VADDSUB, G*G-G, IN+G, IN, DY, 1, CMP_GT, 210);
        vec("DIFF flx", OP_VADDSUB, G*G-1, LAP+1, LAP, FX, 1, CMP_GT, 210);
        vec("DIFF fly", OP_VADDSUB, G*G-G, LAP+G, LAP, FY, 1, CMP_GT, 210);
        vec("DIFF px", OP_VMULT, G*G-1, FX, DX, PX, 0, CMP_GT, 155);
        vec("DIFF py", OP_VMULT, G*G-G, FY, DY, PY, 0, CMP_GT, 155);
        vec("DIFF limx", OP_MASK, G*G-1, PX, FX, FX, 0, CMP_LE, 155);
        vec("DIFF limy", OP_MASK, G*G-G, PY, FY, FY, 0, CMP_LE, 155);
        vec("DIFF tx", OP_VADDSUB, G*G-1, FX+1, FX, TX+1, 1, CMP_GT, 210);
        vec("DIFF ty", OP_VADDSUB, G*G-G, FY+G, FY, TY+G, 1, CMP_GT, 210);
        // out = in + (-c)*tx + (-c)*ty: init from out (a copy of in), two taps
        for (int i = 0; i < G*G; i++) mem[OUT + i] = mem[IN + i];
        loops(2, G*G, 1, 1, 1);
        agu(0, TX*4, (TY-TX)*4, (TX-TY+1)*4, 0, 0, 0);
        agu(1, (SC+9)*4, 0, 0, 0, 0, 0);
        agu(2, OUT*4, 0, 4, 0, 0, 0);
        launch("DIFF out", cmdw(OP_MAC, 2, 1, 1, INIT_AGU2, A_AGU0, B_AGU1), 2*G*G, 1.6);
        // reference, rounded to fp32 after every command
        for (int i = 0; i < G*G; i++) lap_r[i] = 0.0;
        for (int y = 1; y < G-1; y++) for (int x = 1; x < G-1; x++) begin
          int c; c = IN + y*G + x;
          lap_r[y*G+x] = f2r(r2f(4.0*f2r(mem[c]) - f2r(mem[c-1]) - f2r(mem[c+1]) - f2r(mem[c-G]) - f2r(mem[c+G])));
        end
        for (int p = 0; p < G*G; p++) begin
          real dx, dy, px, py;
          fx_r[p] = 0.0; fy_r[p] = 0.0;
          if (p < G*G-1) begin
            dx = f2r(r2f(f2r(mem[IN+p+1]) - f2r(mem[IN+p])));
            fx_r[p] = f2r(r2f(lap_r[p+1] - lap_r[p]));
            px = f2r(r2f(fx_r[p] * dx));
            if (!(px <= 0.0)) fx_r[p] = 0.0;
          end
          if (p < G*G-G) begin
            dy = f2r(r2f(f2r(mem[IN+p+G]) - f2r(mem[IN+p])));
            fy_r[p] = f2r(r2f(lap_r[p+G] - lap_r[p]));
            py = f2r(r2f(fy_r[p] * dy));
            if (!(py <= 0.0)) fy_r[p] = 0.0;
          end
        end
        for (int p = 0; p < G*G; p++) begin
          tx_r[p] = (p >= 1)  ? f2r(r2f(fx_r[p] - fx_r[p-1])) : 0.0;
          ty_r[p] = (p >= G) ? f2r(r2f(fy_r[p] - fy_r[p-G])) : 0.0;
        end
        for (int y = 1; y < G-1; y++) for (int x = 1; x < G-1; x++) begin
          int p; p = y*G + x;
          chk(mem[OUT + p], r2f(f2r(mem[IN + p]) - 0.25*tx_r[p] - 0.25*ty_r[p]),
              $sformatf("DIFF out[%0d][%0d]", y, x));
        end
      end
    end
    checks++; if (stalls == 0) begin failures++; $display("FAIL no port stall happened"); end
    $display("port stalls: %0d", stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
