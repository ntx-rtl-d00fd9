// tb_cluster_dma -- programs two-dimensional transfers through the DMA
// register port: a tile is copied from AXI memory into a two-port TCDM model
// (with random bank-conflict stalls), then written back to another place in
// AXI memory with a different stride. Rows longer than one burst and
// several rows are used. Checks every word on both sides, that nothing
// outside the tile is touched, and that bursts were split as expected.
module tb_cluster_dma;
  import ntx_pkg::*;
  logic clk = 0, rst_n = 0;
  tcdm_req_t cfg_req;
  tcdm_rsp_t cfg_rsp;
  tcdm_req_t [1:0] mreq;
  tcdm_rsp_t [1:0] mrsp;
  axi_req_t axi_req;
  axi_rsp_t axi_rsp;
  logic busy, done;
  int checks = 0, failures = 0, dones = 0;

  cluster_dma dut (.clk_i(clk), .rst_ni(rst_n), .cfg_req_i(cfg_req), .cfg_rsp_o(cfg_rsp),
                   .tcdm_req_o(mreq), .tcdm_rsp_i(mrsp), .axi_req_o(axi_req), .axi_rsp_i(axi_rsp),
                   .busy_o(busy), .done_o(done));
  tb_axi_mem #(.WORDS(4096)) u_mem (.clk_i(clk), .rst_ni(rst_n), .req_i(axi_req), .rsp_o(axi_rsp));
  always #5 clk = ~clk;

  // two-port TCDM model with random stalls
  logic [31:0] tcdm [4096];
  logic [1:0] ok, s_req, s_gnt, s_we;
  logic [1:0][31:0] s_addr, s_wdata;
  always_comb for (int p = 0; p < 2; p++) mrsp[p].gnt = mreq[p].req && ok[p];
  always @(negedge clk) for (int p = 0; p < 2; p++) begin
    s_req[p] = mreq[p].req; s_gnt[p] = mrsp[p].gnt; s_we[p] = mreq[p].we;
    s_addr[p] = mreq[p].addr; s_wdata[p] = mreq[p].wdata;
  end
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      mrsp[p].rvalid <= s_req[p] && s_gnt[p] && !s_we[p];
      if (s_req[p] && s_gnt[p]) begin
        if (s_we[p]) tcdm[s_addr[p][13:2]] <= s_wdata[p];
        else         mrsp[p].rdata <= tcdm[s_addr[p][13:2]];
      end
    end
    if (done) dones++;
    #1 for (int p = 0; p < 2; p++) ok[p] = ($urandom % 3 != 0);
  end

  task automatic wr(logic [7:0] off, logic [31:0] d);
    cfg_req.req = 1; cfg_req.we = 1; cfg_req.addr = {24'b0, off}; cfg_req.wdata = d; cfg_req.be = 4'hf;
    do @(posedge clk); while (!cfg_rsp.gnt);
    #1 cfg_req.req = 0;
  endtask
  task automatic xfer(int ext, int tc, int len, int rows, int es, int ts, bit dir);
    wr(DMA_EXT_ADDR, ext); wr(DMA_TCDM_ADDR, tc); wr(DMA_ROW_LEN, len); wr(DMA_NUM_ROWS, rows);
    wr(DMA_EXT_STRIDE, es); wr(DMA_TCDM_STRIDE, ts); wr(DMA_CTRL, {31'b0, dir});
    @(posedge clk); #1;
    while (busy) begin @(posedge clk); #1; end
  endtask

  initial begin
    #4000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  localparam int ROWS = 5, LEN = 200;   // bytes per row: 25 beats = 2 bursts
  initial begin
    cfg_req = '0; ok = 2'b11;
    for (int i = 0; i < 4096; i++) begin
      u_mem.mem[i] = {$urandom, $urandom};
      tcdm[i] = 32'hdeadbeef;
    end
    repeat (3) @(posedge clk); rst_n = 1; #1;
    // AXI (row stride 512 B) -> TCDM (row stride 256 B)
    xfer(32'h1000, 32'h400, LEN, ROWS, 512, 256, 0);
    for (int r = 0; r < ROWS; r++) for (int w = 0; w < 64; w++) begin
      logic [31:0] exp;
      logic [63:0] src;
      src = u_mem.mem[(32'h1000 + r*512 + (w/2)*8) / 8];
      exp = (w < LEN/4) ? (w % 2 ? src[63:32] : src[31:0]) : 32'hdeadbeef;
      checks++;
      if (tcdm[(32'h400 + r*256)/4 + w] !== exp) begin
        failures++; $display("FAIL in row %0d word %0d: %h exp %h", r, w, tcdm[(32'h400 + r*256)/4 + w], exp);
      end
    end
    // TCDM -> AXI (row stride 1024 B)
    for (int i = 0; i < 4096; i++) if (i >= 2048) u_mem.mem[i] = 64'h0;
    xfer(32'h4000, 32'h400, LEN, ROWS, 1024, 256, 1);
    for (int r = 0; r < ROWS; r++) for (int b = 0; b < 32; b++) begin
      logic [63:0] exp;
      exp = (b < LEN/8) ? {tcdm[(32'h400 + r*256)/4 + 2*b + 1], tcdm[(32'h400 + r*256)/4 + 2*b]} : 64'h0;
      checks++;
      if (u_mem.mem[(32'h4000 + r*1024)/8 + b] !== exp) begin
        failures++; $display("FAIL out row %0d beat %0d", r, b);
      end
    end
    checks++; if (dones != 2) begin failures++; $display("FAIL done pulses %0d", dones); end
    // 25 beats per row -> 2 bursts per row, 2 directions
    checks++; if (u_mem.bursts != 4*ROWS) begin failures++; $display("FAIL bursts %0d", u_mem.bursts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
