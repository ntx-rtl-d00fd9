// tb_tcdm_bank -- writes random words with random byte enables into one
// TCDM bank and reads them back, checking the one-cycle read latency and
// that a write leaves the read data register unchanged.
module tb_tcdm_bank;
  logic clk = 0;
  logic req, we;
  logic [8:0] addr;
  logic [3:0] be;
  logic [31:0] wdata, rdata;
  logic [31:0] model [512];
  int checks = 0, failures = 0;

  tcdm_bank dut (.clk_i(clk), .req_i(req), .we_i(we), .addr_i(addr), .be_i(be),
                 .wdata_i(wdata), .rdata_o(rdata));
  always #5 clk = ~clk;

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] last;
    req = 0; we = 0; addr = 0; be = 0; wdata = 0;
    // fill
    for (int i = 0; i < 512; i++) begin
      req = 1; we = 1; addr = 9'(i); be = 4'hf; wdata = $urandom; model[i] = wdata;
      @(posedge clk); #1;
    end
    for (int t = 0; t < 3000; t++) begin
      req = 1; addr = 9'($urandom); we = 1'($urandom);
      if (we) begin
        be = 4'($urandom); wdata = $urandom;
        for (int b = 0; b < 4; b++) if (be[b]) model[addr][8*b +: 8] = wdata[8*b +: 8];
        last = rdata;
        @(posedge clk); #1;
        checks++; if (rdata !== last) begin failures++; $display("FAIL rdata changed on write"); end
      end else begin
        @(posedge clk); #1;
        checks++;
        if (rdata !== model[addr]) begin failures++; $display("FAIL read %0d: %h exp %h", addr, rdata, model[addr]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
