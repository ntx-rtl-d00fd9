// tcdm_bank -- one bank of the tightly coupled data memory (TCDM).
//
// A single-port 32-bit SRAM with byte enables, written as an array so that
// it maps onto an SRAM macro. A request in cycle t (req_i high) reads or
// writes word addr_i; read data is on rdata_o in cycle t+1 and held until
// the next read. The default size is 512 words (2 kB): 32 such banks make
// the 64 kB TCDM of the cluster. Contents are not initialised.
module tcdm_bank #(
  parameter int unsigned WORDS = 512,
  parameter int unsigned AW    = $clog2(WORDS)
) (
  input  logic          clk_i,
  input  logic          req_i,
  input  logic          we_i,
  input  logic [AW-1:0] addr_i,
  input  logic [3:0]    be_i,
  input  logic [31:0]   wdata_i,
  output logic [31:0]   rdata_o
);
  logic [31:0] mem [WORDS];

  always_ff @(posedge clk_i) begin
    if (req_i) begin
      if (we_i) begin
        for (int b = 0; b < 4; b++)
          if (be_i[b]) mem[addr_i][8*b +: 8] <= wdata_i[8*b +: 8];
      end else begin
        rdata_o <= mem[addr_i];
      end
    end
  end
endmodule
