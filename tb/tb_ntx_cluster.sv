// tb_ntx_cluster -- end-to-end test of the cluster at its default size
// (8 NTX, 32 banks, 64 kB TCDM), with the testbench playing the control
// core. It runs the tiled, double-buffered flow of the architecture:
//   1. the DMA copies weights and the first set of image tiles from AXI
//      memory into TCDM buffer A (two-dimensional transfer);
//   2. all eight NTX are configured through the broadcast alias (loop
//      counts, strides, weight pointer) and individually (tile pointers),
//      then compute a 3x3 convolution with fused ReLU on their tile, in two
//      commands each, the second staged while the first runs;
//   3. meanwhile the DMA fills buffer B with the next tiles;
//   4. the NTX process buffer B while the DMA writes the results of A out;
//   5. the results of B are written out and everything is compared with a
//      reference computed here in double precision.
// Instruction fetches run through the instruction cache in parallel.
// Each mechanism must occur at least once: TCDM bank conflicts, broadcast
// writes, a command staged while its NTX is busy, DMA/NTX overlap,
// NTX interrupts, icache prefetch hits. It also checks that the eight NTX
// reach at least 0.5 MAC per cycle each over the first round, measured
// from the first configuration write, so programming time is included.
module tb_ntx_cluster;
  import ntx_pkg::*;
  import tb_fp_pkg::*;
  localparam int NN = 8;
  logic clk = 0, rst_n = 0;
  tcdm_req_t core_req;
  tcdm_rsp_t core_rsp;
  logic fetch_req, fetch_gnt, fetch_rvalid;
  logic [31:0] fetch_addr, fetch_rdata;
  logic refill_req, refill_gnt, refill_rvalid;
  logic [31:0] refill_addr;
  logic [127:0] refill_rdata;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  logic [NN-1:0] irq, nbusy;
  logic dma_done, dma_busy;
  int checks = 0, failures = 0;

  ntx_cluster dut (
    .clk_i(clk), .rst_ni(rst_n), .core_req_i(core_req), .core_rsp_o(core_rsp),
    .fetch_req_i(fetch_req), .fetch_addr_i(fetch_addr), .fetch_gnt_o(fetch_gnt),
    .fetch_rvalid_o(fetch_rvalid), .fetch_rdata_o(fetch_rdata),
    .refill_req_o(refill_req), .refill_addr_o(refill_addr), .refill_gnt_i(refill_gnt),
    .refill_rvalid_i(refill_rvalid), .refill_rdata_i(refill_rdata),
    .axi_req_o(axi_req), .axi_rsp_i(axi_rsp),
    .ntx_irq_o(irq), .ntx_busy_o(nbusy), .dma_done_o(dma_done), .dma_busy_o(dma_busy));
  tb_axi_mem #(.WORDS(8192)) u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp));
  always #5 clk = ~clk;

  // ------------------------------------------------ mechanism counters
  int n_conflict = 0, n_bcast = 0, n_staged = 0, n_overlap = 0, n_irq = 0, n_pf_hit = 0;
  int ntx_busy_cycles = 0, macs = 0;
  always @(negedge clk) if (rst_n) begin
    for (int p = 0; p < 2*NN; p++)
      if (dut.mst_req[p].req && !dut.mst_rsp[p].gnt) n_conflict++;
    if (core_req.req && core_rsp.gnt && core_req.we && core_req.addr[31:8] == 24'h102008) n_bcast++;
    if (core_req.req && core_req.we && core_req.addr[7:0] == 8'h04 && core_req.addr[31:12] == 20'h10200
        && |nbusy) n_staged++;
    if (dma_busy && |nbusy) n_overlap++;
    if (|nbusy) ntx_busy_cycles++;
  end
  logic [NN-1:0] irq_q = '0;
  always @(posedge clk) begin
    for (int i = 0; i < NN; i++) if (irq[i] && !irq_q[i]) n_irq++;
    irq_q <= irq;
  end

  // ------------------------------------------------ core data port
  task automatic bus(logic [31:0] a, logic we, logic [31:0] d, output logic [31:0] q);
    logic g;
    core_req.req = 1; core_req.addr = a; core_req.we = we; core_req.wdata = d; core_req.be = 4'hf;
    do begin @(negedge clk); g = core_rsp.gnt; @(posedge clk); end while (!g);
    #1 core_req.req = 0;
    @(negedge clk); q = core_rsp.rdata;
    @(posedge clk); #1;
  endtask
  task automatic wr(logic [31:0] a, logic [31:0] d);
    logic [31:0] q; bus(a, 1, d, q);
  endtask
  task automatic rd(logic [31:0] a, output logic [31:0] q);
    bus(a, 0, 0, q);
  endtask

  localparam logic [31:0] TCDM = 32'h1000_0000, NTX = 32'h1020_0000, BC = 32'h1020_0800,
                          DMA = 32'h1020_1000;
  localparam int IMW = 10, OW = 8;                    // 10x10 tile -> 8x8 outputs
  localparam int T_W = 'h0, T_IN = 'h1000, T_OUT = 'h4000;  // TCDM layout, buffer stride 0x1000/0x2000
  localparam int X_W = 'h0, X_IN = 'h1000, X_OUT = 'h8000;  // AXI layout, round stride 0x2000

  task automatic dma(int ext, int tc, int len, int rows, int es, int ts, bit dir);
    wr(DMA + DMA_EXT_ADDR, ext); wr(DMA + DMA_TCDM_ADDR, tc); wr(DMA + DMA_ROW_LEN, len);
    wr(DMA + DMA_NUM_ROWS, rows); wr(DMA + DMA_EXT_STRIDE, es); wr(DMA + DMA_TCDM_STRIDE, ts);
    wr(DMA + DMA_CTRL, {31'b0, dir});
  endtask
  task automatic dma_wait();
    logic [31:0] s;
    do rd(DMA + DMA_STATUS, s); while (s[0]);
  endtask
  task automatic ntx_wait();
    logic [31:0] s;
    do rd(BC + 32'h00, s); while (s[0]);   // OR of all STATUS: any busy
  endtask
  // configure the common part of the convolution through the broadcast alias
  task automatic conv_common();
    wr(BC + 32'h10, 2); wr(BC + 32'h14, 2); wr(BC + 32'h18, OW - 1); wr(BC + 32'h1c, OW/2 - 1);
    wr(BC + 32'h20, 0);
    wr(BC + 32'h44, 4); wr(BC + 32'h48, (IMW-2)*4); wr(BC + 32'h4c, (-2*IMW-1)*4); wr(BC + 32'h50, (1-2*IMW)*4);
    wr(BC + 32'h60, T_W);
    wr(BC + 32'h64, 4); wr(BC + 32'h68, 4); wr(BC + 32'h6c, -32); wr(BC + 32'h70, -32);
    wr(BC + 32'h84, 0); wr(BC + 32'h88, 0); wr(BC + 32'h8c, 4); wr(BC + 32'h90, 4);
  endtask
  function automatic logic [31:0] conv_cmd();
    cmd_word_t c;
    c = '0; c.opcode = OP_MAC; c.outer_level = 3'd4; c.init_level = 3'd2; c.store_level = 3'd2;
    c.init_src = INIT_ZERO; c.a_src = A_AGU0; c.b_src = B_AGU1; c.relu = 1'b1;
    return c;
  endfunction
  // launch half h (output rows 4h..4h+3) of round r on every NTX
  task automatic conv_half(int r, int h);
    for (int n = 0; n < NN; n++) begin
      wr(NTX + 32'(n*'h100) + 32'h40, T_IN + r*'h1000 + n*400 + h*4*IMW*4);
      wr(NTX + 32'(n*'h100) + 32'h80, T_OUT + r*'h2000 + n*256 + h*4*OW*4);
    end
    wr(BC + 32'h04, conv_cmd());
  endtask

  // ------------------------------------------------ instruction side
  function automatic logic [31:0] iword(logic [31:0] a);
    return a ^ 32'hc0de_0000;
  endfunction
  logic s_rreq; logic [31:0] s_raddr;
  assign refill_gnt = refill_req;
  always @(negedge clk) begin s_rreq = refill_req; s_raddr = refill_addr; end
  initial begin
    refill_rvalid = 0; refill_rdata = '0;
    forever begin
      @(posedge clk);
      if (s_rreq && rst_n) begin
        logic [31:0] a; a = s_raddr;
        repeat (3) @(posedge clk);
        #1 for (int i = 0; i < 4; i++) refill_rdata[32*i +: 32] = iword(a + 32'(4*i));
        refill_rvalid = 1; @(posedge clk); #1 refill_rvalid = 0;
      end
    end
  end
  int fetch_done = 0;
  initial begin
    logic g;
    fetch_req = 0; fetch_addr = 0;
    @(posedge rst_n);
    for (int i = 0; i < 512; i++) begin
      fetch_req = 1; fetch_addr = 32'h1c00_8000 + 32'(4*i);
      #1 g = fetch_gnt;
      if (g && i % 4 == 0 && i > 0) n_pf_hit++;
      do begin @(negedge clk); g = fetch_gnt; @(posedge clk); end while (!g);
      #1 fetch_req = 0;
      @(negedge clk);
      checks++;
      if (!fetch_rvalid || fetch_rdata !== iword(fetch_addr)) begin
        failures++; $display("FAIL fetch %h", fetch_addr);
      end
      repeat (3) @(posedge clk);
      #1;
    end
    fetch_done = 1;
  end

  // ------------------------------------------------ watchdog
  initial begin
    #20000000; failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // ------------------------------------------------ main flow
  real ref_out [2][NN][OW*OW];
  initial begin
    logic [31:0] q;
    int t0, t1;
    core_req = '0;
    for (int i = 0; i < 8192; i++) u_mem.mem[i] = 64'h0;
    // weights and two rounds of tiles in AXI memory
    for (int k = 0; k < 9; k += 2) begin
      u_mem.mem[(X_W + 4*k)/8] = {rnd_f(-2, 1), rnd_f(-2, 1)};
    end
    for (int r = 0; r < 2; r++) for (int n = 0; n < NN; n++) for (int i = 0; i < IMW*IMW; i += 2)
      u_mem.mem[(X_IN + r*'h2000 + n*512 + 4*i)/8] = {rnd_f(-3, 2), rnd_f(-3, 2)};
    for (int r = 0; r < 2; r++) for (int n = 0; n < NN; n++)
      for (int oy = 0; oy < OW; oy++) for (int ox = 0; ox < OW; ox++) begin
        real acc; acc = 0.0;
        for (int ky = 0; ky < 3; ky++) for (int kx = 0; kx < 3; kx++) begin
          int ii, ia;
          ii = oy*IMW + ox + ky*IMW + kx;
          ia = X_IN + r*'h2000 + n*512 + 4*ii;
          acc += f2r(ia % 8 ? u_mem.mem[ia/8][63:32] : u_mem.mem[ia/8][31:0]) *
                 f2r((4*(ky*3+kx)) % 8 ? u_mem.mem[(ky*3+kx)/2][63:32] : u_mem.mem[(ky*3+kx)/2][31:0]);
        end
        ref_out[r][n][oy*OW + ox] = acc > 0.0 ? acc : 0.0;
      end
    repeat (3) @(posedge clk); rst_n = 1; #1;

    // 1. weights (one 48-byte row) and round-0 tiles (8 rows of 400 bytes)
    dma(X_W, T_W, 48, 1, 0, 0, 0); dma_wait();
    dma(X_IN, T_IN, 400, NN, 512, 400, 0); dma_wait();
    // 2. configure and launch round 0, first half; stage the second half
    conv_common();
    t0 = $time / 10;
    conv_half(0, 0);
    // 3. next tiles into buffer B while the NTX compute
    dma(X_IN + 'h2000, T_IN + 'h1000, 400, NN, 512, 400, 0);
    conv_half(0, 1);          // command write waits for the first half
    ntx_wait();
    t1 = $time / 10;
    dma_wait();
    // 4. round 1 on buffer B, results of round 0 out
    conv_half(1, 0);
    dma(X_OUT, T_OUT, 256, NN, 256, 256, 1);
    conv_half(1, 1);
    ntx_wait(); dma_wait();
    // 5. results of round 1 out
    dma(X_OUT + 'h2000, T_OUT + 'h2000, 256, NN, 256, 256, 1); dma_wait();

    for (int r = 0; r < 2; r++) for (int n = 0; n < NN; n++) for (int i = 0; i < OW*OW; i++) begin
      logic [63:0] w; logic [31:0] got;
      w = u_mem.mem[(X_OUT + r*'h2000 + n*256 + 4*i)/8];
      got = i % 2 ? w[63:32] : w[31:0];
      checks++;
      if (got !== r2f(ref_out[r][n][i])) begin
        failures++;
        if (failures < 10) $display("FAIL round %0d ntx %0d out %0d: %h exp %h", r, n, i, got, r2f(ref_out[r][n][i]));
      end
    end
    // the core reads the TCDM directly
    rd(TCDM + T_OUT + 4, q);
    checks++; if (q !== r2f(ref_out[0][0][1])) begin failures++; $display("FAIL core TCDM read"); end

    // round 0: 8 NTX x 64 outputs x 9 MACs, in two commands
    macs = NN * OW*OW * 9;
    $display("round 0: %0d MACs on %0d NTX in %0d cycles (%.2f MAC/cycle/NTX)",
             macs, NN, t1 - t0, real'(macs) / NN / (t1 - t0));
    checks++;
    if (real'(macs) / NN / (t1 - t0) < 0.5) begin failures++; $display("FAIL NTX throughput"); end

    wait (fetch_done);
    $display("bank conflicts=%0d broadcasts=%0d staged=%0d dma/ntx overlap=%0d irqs=%0d prefetch hits=%0d",
             n_conflict, n_bcast, n_staged, n_overlap, n_irq, n_pf_hit);
    checks++; if (n_conflict == 0) begin failures++; $display("FAIL no bank conflict"); end
    checks++; if (n_bcast == 0)    begin failures++; $display("FAIL no broadcast"); end
    checks++; if (n_staged == 0)   begin failures++; $display("FAIL no staged command"); end
    checks++; if (n_overlap == 0)  begin failures++; $display("FAIL no DMA/NTX overlap"); end
    checks++; if (n_irq < NN)      begin failures++; $display("FAIL interrupts %0d", n_irq); end
    checks++; if (n_pf_hit == 0)   begin failures++; $display("FAIL no prefetch hit"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
