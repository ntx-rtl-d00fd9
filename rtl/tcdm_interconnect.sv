// tcdm_interconnect -- single-cycle logarithmic interconnect between the
// cluster's TCDM masters and the word-interleaved TCDM banks.
//
// Consecutive 32-bit words lie in consecutive banks: bank = addr[2 +: BW],
// row = addr[2+BW +: RW]. In every cycle each bank grants at most one of the
// masters that address it; the others see gnt low and keep their request
// (a bank conflict, which stalls that master). Each bank arbitrates
// round-robin: the search starts one past the master granted last, so no
// master waits more than NM-1 cycles. Requests to different banks are all
// served in the same cycle. Read data returns exactly one cycle after the
// grant with rvalid high (writes return no response), which is the
// single-cycle access latency of the TCDM.
// Interface: mst_req_i/mst_rsp_o per master (ntx_pkg TCDM bus); bank_*
// ports drive NB tcdm_bank instances. Addresses are taken modulo the TCDM
// size; decoding which requests belong to the TCDM is the bus's job.
// The round-robin policy is this implementation's choice.
module tcdm_interconnect
  import ntx_pkg::*;
#(
  parameter int unsigned NM = 19,     // masters: 8 NTX x 2, core, DMA x 2
  parameter int unsigned NB = 32,     // banks
  parameter int unsigned BANK_WORDS = 512,
  parameter int unsigned BW = $clog2(NB),
  parameter int unsigned RW = $clog2(BANK_WORDS)
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  tcdm_req_t [NM-1:0]    mst_req_i,
  output tcdm_rsp_t [NM-1:0]    mst_rsp_o,
  output logic      [NB-1:0]    bank_req_o,
  output logic      [NB-1:0]    bank_we_o,
  output logic [NB-1:0][RW-1:0] bank_addr_o,
  output logic [NB-1:0][3:0]    bank_be_o,
  output logic [NB-1:0][31:0]   bank_wdata_o,
  input  logic [NB-1:0][31:0]   bank_rdata_i
);
  localparam int unsigned MW = (NM > 1) ? $clog2(NM) : 1;

  logic [NM-1:0][BW-1:0] bank_of;
  logic [NB-1:0][MW-1:0] rr_q, winner;
  logic [NB-1:0]         has_win;
  logic [NM-1:0]         gnt;
  logic [NM-1:0]         rvalid_q;
  logic [NM-1:0][BW-1:0] rbank_q;

  always_comb begin
    for (int m = 0; m < NM; m++) bank_of[m] = mst_req_i[m].addr[2 +: BW];
    gnt = '0;
    for (int b = 0; b < NB; b++) begin
      has_win[b] = 1'b0;
      winner[b]  = '0;
      // round-robin: first requester at or after rr_q[b], wrapping around
      for (int k = 0; k < NM; k++) begin
        int m;
        m = int'(rr_q[b]) + k;
        if (m >= int'(NM)) m -= int'(NM);
        if (!has_win[b] && mst_req_i[m].req && bank_of[m] == BW'(b)) begin
          has_win[b] = 1'b1;
          winner[b]  = MW'(m);
        end
      end
      bank_req_o[b]   = has_win[b];
      bank_we_o[b]    = mst_req_i[winner[b]].we;
      bank_addr_o[b]  = mst_req_i[winner[b]].addr[2+BW +: RW];
      bank_be_o[b]    = mst_req_i[winner[b]].be;
      bank_wdata_o[b] = mst_req_i[winner[b]].wdata;
      if (has_win[b]) gnt[winner[b]] = 1'b1;
    end
    for (int m = 0; m < NM; m++) begin
      mst_rsp_o[m].gnt    = gnt[m];
      mst_rsp_o[m].rvalid = rvalid_q[m];
      mst_rsp_o[m].rdata  = bank_rdata_i[rbank_q[m]];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rr_q     <= '0;
      rvalid_q <= '0;
      rbank_q  <= '0;
    end else begin
      for (int b = 0; b < NB; b++)
        if (has_win[b]) rr_q[b] <= (winner[b] == MW'(NM-1)) ? '0 : winner[b] + 1'b1;
      for (int m = 0; m < NM; m++) begin
        rvalid_q[m] <= gnt[m] && !mst_req_i[m].we;
        if (gnt[m]) rbank_q[m] <= bank_of[m];
      end
    end
  end

  a_one_bank: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               $countones(gnt) <= NB)
    else $error("tcdm_interconnect: more grants than banks");
endmodule
