// ntx_cluster -- one processing cluster: eight NTX floating-point streaming
// co-processors and a DMA engine working on a shared 64 kB tightly coupled
// data memory (TCDM) of 32 word-interleaved banks, reached through a
// single-cycle logarithmic interconnect.
//
// The RISC-V control core is not part of this RTL: its data port
// (core_req_i/core_rsp_o) and instruction port (fetch_*) are ports of the
// cluster. Its loads and stores go through the cluster bus to the TCDM, to
// the NTX register files (one window per NTX plus a broadcast alias) or to
// the DMA registers; its instruction fetches go through the 2 kB
// instruction cache, which refills over refill_*. The DMA moves tiles
// between the TCDM and the 64-bit AXI port (axi_req_o/axi_rsp_i), so the
// core can double-buffer: NTX compute on one buffer while the DMA fills or
// drains another.
// Interconnect masters: NTX i uses ports 2i and 2i+1, the core port 2*NNTX,
// the DMA ports 2*NNTX+1 and 2*NNTX+2.
// Everything runs on one clock here; the silicon runs NTX and TCDM at twice
// the clock of the core and the rest of the cluster.
module ntx_cluster
  import ntx_pkg::*;
#(
  parameter int unsigned NNTX       = 8,
  parameter int unsigned NBANKS     = 32,
  parameter int unsigned BANK_WORDS = 512,   // 32 x 512 x 4 B = 64 kB
  parameter int unsigned IC_BYTES   = 2048,
  parameter int unsigned IC_LINE    = 16
) (
  input  logic             clk_i,
  input  logic             rst_ni,
  // core data port
  input  tcdm_req_t        core_req_i,
  output tcdm_rsp_t        core_rsp_o,
  // core instruction port
  input  logic             fetch_req_i,
  input  logic [31:0]      fetch_addr_i,
  output logic             fetch_gnt_o,
  output logic             fetch_rvalid_o,
  output logic [31:0]      fetch_rdata_o,
  // instruction refill port (line reads from L2)
  output logic             refill_req_o,
  output logic [31:0]      refill_addr_o,
  input  logic             refill_gnt_i,
  input  logic             refill_rvalid_i,
  input  logic [IC_LINE*8-1:0] refill_rdata_i,
  // AXI port of the DMA
  output axi_req_t         axi_req_o,
  input  axi_rsp_t         axi_rsp_i,
  // events
  output logic [NNTX-1:0]  ntx_irq_o,
  output logic [NNTX-1:0]  ntx_busy_o,
  output logic             dma_done_o,
  output logic             dma_busy_o
);
  localparam int unsigned NM = 2*NNTX + 3;
  localparam int unsigned RW = $clog2(BANK_WORDS);

  tcdm_req_t [NM-1:0] mst_req;
  tcdm_rsp_t [NM-1:0] mst_rsp;
  tcdm_req_t [NNTX-1:0] ntx_cfg_req;
  tcdm_rsp_t [NNTX-1:0] ntx_cfg_rsp;
  tcdm_req_t dma_cfg_req;
  tcdm_rsp_t dma_cfg_rsp;

  // ---------------------------------------------------------- NTX
  for (genvar i = 0; i < NNTX; i++) begin : g_ntx
    ntx u_ntx (
      .clk_i, .rst_ni,
      .cfg_req_i(ntx_cfg_req[i]), .cfg_rsp_o(ntx_cfg_rsp[i]),
      .irq_o(ntx_irq_o[i]), .busy_o(ntx_busy_o[i]),
      .tcdm_req_o(mst_req[2*i +: 2]), .tcdm_rsp_i(mst_rsp[2*i +: 2])
    );
  end

  // ---------------------------------------------------------- core bus
  cluster_bus #(.NNTX(NNTX), .TCDM_SIZE(NBANKS*BANK_WORDS*4)) u_bus (
    .clk_i, .rst_ni,
    .core_req_i(core_req_i), .core_rsp_o(core_rsp_o),
    .tcdm_req_o(mst_req[2*NNTX]), .tcdm_rsp_i(mst_rsp[2*NNTX]),
    .ntx_req_o(ntx_cfg_req), .ntx_rsp_i(ntx_cfg_rsp),
    .dma_req_o(dma_cfg_req), .dma_rsp_i(dma_cfg_rsp)
  );

  // ---------------------------------------------------------- DMA
  cluster_dma u_dma (
    .clk_i, .rst_ni,
    .cfg_req_i(dma_cfg_req), .cfg_rsp_o(dma_cfg_rsp),
    .tcdm_req_o(mst_req[2*NNTX+1 +: 2]), .tcdm_rsp_i(mst_rsp[2*NNTX+1 +: 2]),
    .axi_req_o(axi_req_o), .axi_rsp_i(axi_rsp_i),
    .busy_o(dma_busy_o), .done_o(dma_done_o)
  );

  // ---------------------------------------------------------- TCDM
  logic [NBANKS-1:0]         b_req, b_we;
  logic [NBANKS-1:0][RW-1:0] b_addr;
  logic [NBANKS-1:0][3:0]    b_be;
  logic [NBANKS-1:0][31:0]   b_wdata, b_rdata;

  tcdm_interconnect #(.NM(NM), .NB(NBANKS), .BANK_WORDS(BANK_WORDS)) u_xbar (
    .clk_i, .rst_ni, .mst_req_i(mst_req), .mst_rsp_o(mst_rsp),
    .bank_req_o(b_req), .bank_we_o(b_we), .bank_addr_o(b_addr), .bank_be_o(b_be),
    .bank_wdata_o(b_wdata), .bank_rdata_i(b_rdata)
  );

  for (genvar b = 0; b < NBANKS; b++) begin : g_bank
    tcdm_bank #(.WORDS(BANK_WORDS)) u_bank (
      .clk_i, .req_i(b_req[b]), .we_i(b_we[b]), .addr_i(b_addr[b]), .be_i(b_be[b]),
      .wdata_i(b_wdata[b]), .rdata_o(b_rdata[b])
    );
  end

  // ---------------------------------------------------------- I$
  icache #(.BYTES(IC_BYTES), .LINE(IC_LINE)) u_icache (
    .clk_i, .rst_ni,
    .fetch_req_i, .fetch_addr_i, .fetch_gnt_o, .fetch_rvalid_o, .fetch_rdata_o,
    .refill_req_o, .refill_addr_o, .refill_gnt_i, .refill_rvalid_i, .refill_rdata_i
  );
endmodule
