// tb_icache -- fetches through the instruction cache from a modelled
// instruction memory with random refill latency: a straight-line sweep, a
// second sweep over cached code, random jumps and a sweep over a region
// that aliases the first one. Checks every fetched word, that straight-line
// code needs fewer demand refills than lines thanks to the prefetch, and that
// cached code is fetched without any refill.
module tb_icache;
  logic clk = 0, rst_n = 0;
  logic freq, fgnt, frv, rreq, rgnt, rrv;
  logic [31:0] faddr, frd, raddr;
  logic [127:0] rdata;
  int checks = 0, failures = 0, refills = 0;

  icache dut (.clk_i(clk), .rst_ni(rst_n), .fetch_req_i(freq), .fetch_addr_i(faddr),
              .fetch_gnt_o(fgnt), .fetch_rvalid_o(frv), .fetch_rdata_o(frd),
              .refill_req_o(rreq), .refill_addr_o(raddr), .refill_gnt_i(rgnt),
              .refill_rvalid_i(rrv), .refill_rdata_i(rdata));
  always #5 clk = ~clk;

  function automatic logic [31:0] word_at(logic [31:0] a);
    return a * 32'h0101_0101 ^ 32'h5a5a_0000;
  endfunction

  // refill memory: grant at once, answer after 2..5 cycles
  logic s_req;
  logic [31:0] s_addr;
  int   lat;
  assign rgnt = rreq;
  always @(negedge clk) begin s_req = rreq; s_addr = raddr; end
  initial begin
    rrv = 0; rdata = '0;
    forever begin
      @(posedge clk);
      if (s_req && rst_n) begin
        logic [31:0] a;
        a = s_addr;
        refills++;
        lat = 2 + int'($urandom % 4);
        repeat (lat - 1) @(posedge clk);
        #1;
        for (int i = 0; i < 4; i++) rdata[32*i +: 32] = word_at(a + 32'(4*i));
        rrv = 1;
        @(posedge clk); #1 rrv = 0;
      end
    end
  end

  int misses = 0;
  task automatic fetch(logic [31:0] a);
    freq = 1; faddr = a;
    #1 if (!fgnt) misses++;
    do @(posedge clk); while (!fgnt);
    #1 freq = 0;
    checks++;
    if (!frv || frd !== word_at(a)) begin failures++; $display("FAIL fetch %h: %h", a, frd); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int r0;
    freq = 0; faddr = 0;
    repeat (2) @(posedge clk); rst_n = 1; #1;
    // straight-line code: 64 lines, 4 instructions each, a few cycles of work between
    for (int i = 0; i < 256; i++) begin
      fetch(32'h8000 + 32'(4*i));
      repeat (2) @(posedge clk);
      #1;
    end
    $display("sweep 1: %0d refills, %0d demand misses for 64 lines", refills, misses);
    // every line after the first was prefetched in time
    checks++; if (misses != 1) begin failures++; $display("FAIL demand misses %0d", misses); end
    checks++; if (refills != 65) begin failures++; $display("FAIL refills %0d", refills); end
    r0 = refills;
    // the same code again: 2 kB cached, 1 kB swept -> no refill at all
    for (int i = 0; i < 256; i++) fetch(32'h8000 + 32'(4*i));
    checks++; if (refills != r0) begin failures++; $display("FAIL refills on cached code"); end
    // random jumps inside and outside
    for (int i = 0; i < 500; i++) fetch(32'h8000 + 32'(4 * ($urandom % 2048)));
    // aliasing region
    for (int i = 0; i < 64; i++) fetch(32'h8800 + 32'(4*i));
    for (int i = 0; i < 64; i++) fetch(32'h8000 + 32'(4*i));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
