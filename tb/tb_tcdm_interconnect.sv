// tb_tcdm_interconnect -- 19 masters issue random reads and writes into 32
// banks through the interconnect. A reference memory, updated in grant
// order, predicts every read. Checks read data, that a bank serves one
// master per cycle, that requests to distinct banks are all granted in the
// same cycle, and that round-robin keeps every wait below the number of
// masters, also when all of them hammer one bank. Bank conflicts are
// counted and must occur.
module tb_tcdm_interconnect;
  import ntx_pkg::*;
  localparam int NM = 19, NB = 32, WORDS = 512;
  logic clk = 0, rst_n = 0;
  tcdm_req_t [NM-1:0] req;
  tcdm_rsp_t [NM-1:0] rsp;
  logic [NB-1:0] b_req, b_we;
  logic [NB-1:0][8:0] b_addr;
  logic [NB-1:0][3:0] b_be;
  logic [NB-1:0][31:0] b_wdata, b_rdata;
  logic [31:0] model [NB*WORDS];
  logic [31:0] expq [NM][$];
  int wait_cnt [NM];
  int checks = 0, failures = 0, conflicts = 0, max_wait = 0;

  tcdm_interconnect dut (.clk_i(clk), .rst_ni(rst_n), .mst_req_i(req), .mst_rsp_o(rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_be_o(b_be),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata));
  for (genvar b = 0; b < NB; b++) begin : g_bank
    tcdm_bank u_bank (.clk_i(clk), .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]),
                      .be_i(b_be[b]), .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b]));
  end
  always #5 clk = ~clk;

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // range_words == 0 selects the hot-spot pattern: every master requests
  // bank 0 in every cycle
  function automatic tcdm_req_t rnd_req(int range_words);
    tcdm_req_t r;
    r.req = range_words == 0 ? 1'b1 : 1'($urandom % 3 != 0);
    r.addr = range_words == 0 ? 32'(($urandom % WORDS) * NB * 4) : 32'(($urandom % range_words) * 4);
    r.we = 1'($urandom);
    r.be = 4'hf;
    r.wdata = $urandom;
    return r;
  endfunction

  initial begin
    int range_words;
    req = '0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // initialise all memory through master 0 (one word per cycle)
    for (int a = 0; a < NB*WORDS; a++) begin
      req[0] = '{req: 1, addr: 32'(a*4), we: 1, be: 4'hf, wdata: 32'(a * 32'h9e3779b1)};
      model[a] = req[0].wdata;
      @(posedge clk); #1;
    end
    req = '0;
    @(posedge clk); #1;
    // distinct banks: all granted at once
    for (int m = 0; m < NM; m++) req[m] = '{req: 1, addr: 32'(m*4), we: 0, be: 4'hf, wdata: 0};
    #1;
    for (int m = 0; m < NM; m++) begin checks++; if (!rsp[m].gnt) begin failures++; $display("FAIL distinct banks, master %0d", m); end end
    req = '0;
    @(posedge clk); #1;
    for (int phase = 0; phase < 3; phase++) begin
      // phase 0: spread, phase 1: heavy conflicts, phase 2: one hot bank
      range_words = phase == 0 ? NB*WORDS : phase == 1 ? 64 : 0;
      for (int m = 0; m < NM; m++) begin req[m] = rnd_req(range_words); wait_cnt[m] = 0; end
      for (int t = 0; t < 3000; t++) begin
        #3;
        // apply the granted requests to the model in master order; a bank
        // grants one master so the order between masters does not matter
        for (int b = 0; b < NB; b++) begin
          int n; n = 0;
          for (int m = 0; m < NM; m++) if (rsp[m].gnt && req[m].addr[6:2] == 5'(b)) n++;
          checks++; if (n > 1) begin failures++; $display("FAIL bank %0d double grant t=%0t", b, $time); for (int m = 0; m < NM; m++) if (rsp[m].gnt) $display("  m%0d addr %h req %b", m, req[m].addr, req[m].req); end
        end
        for (int m = 0; m < NM; m++) begin
          if (req[m].req && rsp[m].gnt) begin
            int a; a = int'(req[m].addr[15:2]);
            if (req[m].we) model[a] = req[m].wdata;
            else expq[m].push_back(model[a]);
          end
          if (req[m].req && !rsp[m].gnt) conflicts++;
        end
        @(posedge clk); #1;
        for (int m = 0; m < NM; m++) begin
          if (rsp[m].rvalid) begin
            checks++;
            if (expq[m].size() == 0 || rsp[m].rdata !== expq[m][0]) begin
              failures++; $display("FAIL master %0d read %h", m, rsp[m].rdata);
            end
            if (expq[m].size() > 0) void'(expq[m].pop_front());
          end
        end
        for (int m = 0; m < NM; m++) begin
          // a request stays until granted
          if (req[m].req && !rsp_gnt_q[m]) begin
            wait_cnt[m]++;
            if (wait_cnt[m] > max_wait) max_wait = wait_cnt[m];
          end else begin
            req[m] = rnd_req(range_words); wait_cnt[m] = 0;
          end
        end
      end
    end
    checks++; if (conflicts == 0) begin failures++; $display("FAIL no bank conflicts"); end
    checks++; if (max_wait >= NM) begin failures++; $display("FAIL starvation: waited %0d", max_wait); end
    $display("conflicts=%0d max_wait=%0d", conflicts, max_wait);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // grant seen in the last cycle, per master
  logic [NM-1:0] rsp_gnt_q;
  always @(negedge clk) for (int m = 0; m < NM; m++) rsp_gnt_q[m] = rsp[m].gnt;
endmodule
