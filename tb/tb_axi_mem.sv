// tb_axi_mem -- behavioural AXI4 slave memory (64-bit data) standing in for
// the memory behind the cluster's AXI port in simulation. Serves one read
// burst and one write burst at a time (INCR only), with optional random
// ready/valid gaps. mem is public so a testbench can load and inspect it.
module tb_axi_mem
  import ntx_pkg::*;
#(
  parameter int unsigned WORDS = 8192,  // 64-bit words
  parameter bit          JITTER = 1'b1
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  axi_req_t req_i,
  output axi_rsp_t rsp_o
);
  logic [63:0] mem [WORDS];
  logic        rd_act, wr_act, b_pend;
  logic [31:0] rd_addr, wr_addr;
  logic [8:0]  rd_left;
  logic        gap_r, gap_w;
  int          bursts = 0;

  always_comb begin
    rsp_o          = '0;
    rsp_o.ar_ready = !rd_act;
    rsp_o.aw_ready = !wr_act && !b_pend;
    rsp_o.r_valid  = rd_act && !gap_r;
    rsp_o.r_data   = mem[rd_addr[3 +: $clog2(WORDS)]];
    rsp_o.r_last   = (rd_left == 1);
    rsp_o.w_ready  = wr_act && !gap_w;
    rsp_o.b_valid  = b_pend;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_act <= 0; wr_act <= 0; b_pend <= 0; rd_addr <= 0; wr_addr <= 0; rd_left <= 0;
      gap_r <= 0; gap_w <= 0;
    end else begin
      gap_r <= JITTER && ($urandom % 4 == 0);
      gap_w <= JITTER && ($urandom % 4 == 0);
      if (req_i.ar_valid && rsp_o.ar_ready) begin
        rd_act <= 1; rd_addr <= req_i.ar_addr; rd_left <= 9'(req_i.ar_len) + 1; bursts++;
      end
      if (rsp_o.r_valid && req_i.r_ready) begin
        rd_addr <= rd_addr + 8; rd_left <= rd_left - 1;
        if (rd_left == 1) rd_act <= 0;
      end
      if (req_i.aw_valid && rsp_o.aw_ready) begin
        wr_act <= 1; wr_addr <= req_i.aw_addr; bursts++;
      end
      if (req_i.w_valid && rsp_o.w_ready) begin
        for (int b = 0; b < 8; b++)
          if (req_i.w_strb[b]) mem[wr_addr[3 +: $clog2(WORDS)]][8*b +: 8] <= req_i.w_data[8*b +: 8];
        wr_addr <= wr_addr + 8;
        if (req_i.w_last) begin wr_act <= 0; b_pend <= 1; end
      end
      if (b_pend && req_i.b_ready) b_pend <= 0;
    end
  end
endmodule
