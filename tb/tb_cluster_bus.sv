// tb_cluster_bus -- random core loads and stores through the cluster bus
// into modelled targets (TCDM, 8 NTX register files, DMA registers) that
// grant at random. A reference model of the address map predicts where every
// write lands and what every read returns, including broadcast writes
// (all NTX), broadcast reads (OR of all NTX) and unmapped addresses.
module tb_cluster_bus;
  import ntx_pkg::*;
  localparam int NN = 8;
  localparam int NT = NN + 2;   // targets: 0..7 NTX, 8 TCDM, 9 DMA
  logic clk = 0, rst_n = 0;
  tcdm_req_t core_req, tcdm_req, dma_req;
  tcdm_rsp_t core_rsp, tcdm_rsp, dma_rsp;
  tcdm_req_t [NN-1:0] ntx_req;
  tcdm_rsp_t [NN-1:0] ntx_rsp;
  int checks = 0, failures = 0, bcasts = 0;

  cluster_bus dut (.clk_i(clk), .rst_ni(rst_n), .core_req_i(core_req), .core_rsp_o(core_rsp),
                   .tcdm_req_o(tcdm_req), .tcdm_rsp_i(tcdm_rsp), .ntx_req_o(ntx_req),
                   .ntx_rsp_i(ntx_rsp), .dma_req_o(dma_req), .dma_rsp_i(dma_rsp));
  always #5 clk = ~clk;

  // target models: 64 words each, random grant, answer one cycle later
  logic [31:0] tm [NT][64];
  logic [31:0] ref_m [NT][64];
  tcdm_req_t treq [NT];
  logic [NT-1:0] tok;
  logic [NT-1:0][31:0] trd;
  always_comb begin
    for (int i = 0; i < NN; i++) treq[i] = ntx_req[i];
    treq[NN] = tcdm_req; treq[NN+1] = dma_req;
    for (int i = 0; i < NN; i++) begin ntx_rsp[i].gnt = tok[i]; ntx_rsp[i].rdata = trd[i]; ntx_rsp[i].rvalid = 0; end
    tcdm_rsp.gnt = tok[NN]; tcdm_rsp.rdata = trd[NN]; tcdm_rsp.rvalid = 0;
    dma_rsp.gnt = tok[NN+1]; dma_rsp.rdata = trd[NN+1]; dma_rsp.rvalid = 0;
  end
  tcdm_req_t s_req [NT];
  logic [NT-1:0] s_ok;
  always @(negedge clk) for (int t = 0; t < NT; t++) begin s_req[t] = treq[t]; s_ok[t] = tok[t]; end
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) if (s_req[t].req && s_ok[t]) begin
      if (s_req[t].we) tm[t][s_req[t].addr[7:2]] <= s_req[t].wdata;
      else             trd[t] <= tm[t][s_req[t].addr[7:2]];
    end
    #1 for (int t = 0; t < NT; t++) tok[t] = ($urandom % 3 != 0);
  end

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] addr, exp, got;
    int kind, t, w;
    core_req = '0; tok = '1;
    for (int i = 0; i < NT; i++) for (int j = 0; j < 64; j++) begin tm[i][j] = 0; ref_m[i][j] = 0; end
    repeat (2) @(posedge clk); rst_n = 1; #1;
    for (int n = 0; n < 3000; n++) begin
      kind = $urandom % 5; w = $urandom % 64;
      unique case (kind)
        0: begin t = $urandom % NN; addr = 32'h1020_0000 + 32'(t) * 32'h100 + 32'(w*4); end
        1: begin t = -1; addr = 32'h1020_0800 + 32'(w*4); end
        2: begin t = NN; addr = 32'h1000_0000 + 32'(w*4); end
        3: begin t = NN + 1; addr = 32'h1020_1000 + 32'(w*4); end
        default: begin t = -2; addr = 32'h2000_0000 + 32'(w*4); end
      endcase
      core_req.req = 1; core_req.addr = addr; core_req.we = 1'($urandom); core_req.wdata = $urandom;
      core_req.be = 4'hf;
      do @(posedge clk); while (!core_rsp.gnt);
      #1 core_req.req = 0;
      if (core_req.we) begin
        if (t == -1) begin for (int i = 0; i < NN; i++) ref_m[i][w] = core_req.wdata; bcasts++; end
        else if (t >= 0) ref_m[t][w] = core_req.wdata;
      end else begin
        exp = 0;
        if (t == -1) for (int i = 0; i < NN; i++) exp |= ref_m[i][w];
        else if (t >= 0) exp = ref_m[t][w];
        checks++;
        if (!core_rsp.rvalid || core_rsp.rdata !== exp) begin
          failures++; $display("FAIL read %h: %h exp %h", addr, core_rsp.rdata, exp);
        end
      end
    end
    @(posedge clk); #1;
    for (int i = 0; i < NT; i++) for (int j = 0; j < 64; j++) begin
      checks++;
      if (tm[i][j] !== ref_m[i][j]) begin failures++; $display("FAIL target %0d word %0d", i, j); end
    end
    checks++; if (bcasts == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
