// cluster_bus -- the core's data-side bus inside the cluster: decodes each
// load/store and routes it to the TCDM, to the register port of one NTX, to
// all NTX at once (broadcast alias) or to the DMA registers.
//
// Address map (this implementation's choice):
//   TCDM_BASE + [0, 64 kB)         TCDM, through the core's interconnect port
//   NTX_BASE + 0x100*i, i < NNTX   registers of NTX i
//   NTX_BASE + 0x800               broadcast alias: a write goes to every NTX
//                                  in the same cycle, a read returns the OR of
//                                  all NTX (e.g. "any busy" from STATUS)
//   DMA_BASE                       DMA registers
// Anything else is granted at once and reads as zero.
// Every target answers one cycle after its grant, so the bus only has to
// remember the target of the last granted read. A broadcast is only issued
// when every NTX grants it, so a command write cannot reach some NTX and
// miss others. The broadcast alias follows the architecture; the map and
// the OR-combined broadcast read are this implementation's.
module cluster_bus
  import ntx_pkg::*;
#(
  parameter int unsigned NNTX      = 8,
  parameter logic [31:0] TCDM_BASE = 32'h1000_0000,
  parameter int unsigned TCDM_SIZE = 65536,
  parameter logic [31:0] NTX_BASE  = 32'h1020_0000,
  parameter logic [31:0] DMA_BASE  = 32'h1020_1000
) (
  input  logic                clk_i,
  input  logic                rst_ni,
  input  tcdm_req_t           core_req_i,
  output tcdm_rsp_t           core_rsp_o,
  output tcdm_req_t           tcdm_req_o,
  input  tcdm_rsp_t           tcdm_rsp_i,
  output tcdm_req_t [NNTX-1:0] ntx_req_o,
  input  tcdm_rsp_t [NNTX-1:0] ntx_rsp_i,
  output tcdm_req_t           dma_req_o,
  input  tcdm_rsp_t           dma_rsp_i
);
  typedef enum logic [2:0] {T_NONE, T_TCDM, T_NTX, T_BCAST, T_DMA} tgt_e;
  tgt_e        tgt, tgt_q;
  logic [$clog2(NNTX+1)-1:0] idx, idx_q;
  logic        read_q;
  logic        all_gnt;
  logic [31:0] a, bc_rdata;

  always_comb begin
    a   = core_req_i.addr;
    tgt = T_NONE;
    idx = '0;
    if (a - TCDM_BASE < TCDM_SIZE)                         tgt = T_TCDM;
    else if (a[31:12] == NTX_BASE[31:12] && a[11:8] == 4'h8) tgt = T_BCAST;
    else if (a[31:12] == NTX_BASE[31:12] && 32'(a[11:8]) < NNTX) begin
      tgt = T_NTX;
      idx = $bits(idx)'(a[11:8]);
    end else if (a[31:8] == DMA_BASE[31:8])                tgt = T_DMA;

    all_gnt = 1'b1;
    for (int i = 0; i < NNTX; i++) all_gnt &= ntx_rsp_i[i].gnt;

    tcdm_req_o     = core_req_i;
    tcdm_req_o.req = core_req_i.req && tgt == T_TCDM;
    tcdm_req_o.addr = a - TCDM_BASE;
    dma_req_o      = core_req_i;
    dma_req_o.req  = core_req_i.req && tgt == T_DMA;
    for (int i = 0; i < NNTX; i++) begin
      ntx_req_o[i]     = core_req_i;
      ntx_req_o[i].req = core_req_i.req &&
                         ((tgt == T_NTX && idx == $bits(idx)'(i)) || (tgt == T_BCAST && all_gnt));
    end

    unique case (tgt)
      T_TCDM:  core_rsp_o.gnt = tcdm_rsp_i.gnt;
      T_NTX:   core_rsp_o.gnt = ntx_rsp_i[idx].gnt;
      T_BCAST: core_rsp_o.gnt = all_gnt;
      T_DMA:   core_rsp_o.gnt = dma_rsp_i.gnt;
      default: core_rsp_o.gnt = 1'b1;
    endcase

    bc_rdata = '0;
    for (int i = 0; i < NNTX; i++) bc_rdata |= ntx_rsp_i[i].rdata;
    core_rsp_o.rvalid = read_q;
    unique case (tgt_q)
      T_TCDM:  core_rsp_o.rdata = tcdm_rsp_i.rdata;
      T_NTX:   core_rsp_o.rdata = ntx_rsp_i[idx_q].rdata;
      T_BCAST: core_rsp_o.rdata = bc_rdata;
      T_DMA:   core_rsp_o.rdata = dma_rsp_i.rdata;
      default: core_rsp_o.rdata = '0;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      tgt_q <= T_NONE; idx_q <= '0; read_q <= 1'b0;
    end else begin
      read_q <= core_req_i.req && core_rsp_o.gnt && !core_req_i.we;
      if (core_req_i.req && core_rsp_o.gnt) begin
        tgt_q <= tgt;
        idx_q <= idx;
      end
    end
  end
endmodule
