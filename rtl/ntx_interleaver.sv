// ntx_interleaver -- memory side of one NTX: address, read-data and
// store-data FIFOs and the writeback interleaver that shares the two
// 32-bit TCDM master ports between three streams.
//
// Streams: reads of operand a (RAddr0 FIFO, data returns into RD0), reads of
// operand b (RAddr1 FIFO, data into RD1) and stores (ST Addr FIFO paired
// with the STD data FIFO). Port 0 serves the a-reads, port 1 the b-reads; a
// store whose address and data are both present takes a port whose read
// stream has nothing to issue this cycle, and when both read streams are
// busy it alternates between the ports, so that an element-wise command
// (two reads and one store per element) spreads its three accesses evenly
// and reaches 2/3 element per cycle. A read is only issued when its
// data FIFO has room for it and for every read still in flight, so read data
// can never be dropped. The TCDM answers a granted read exactly one cycle
// later (single-cycle interconnect); a request stays on the port until it is
// granted, which is how bank conflicts stall NTX.
// FIFO depths default to the ones of the architecture (address FIFOs 5, 5
// and 7, data FIFOs 5). The port arbitration is this implementation's own.
module ntx_interleaver
  import ntx_pkg::*;
#(
  parameter int unsigned RA_DEPTH = 5,
  parameter int unsigned SA_DEPTH = 7,
  parameter int unsigned RD_DEPTH = 5,
  parameter int unsigned SD_DEPTH = 5
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  // address streams from the controller
  input  logic              raddr0_push_i,
  input  logic [ADDR_W-1:0] raddr0_i,
  output logic              raddr0_full_o,
  input  logic              raddr1_push_i,
  input  logic [ADDR_W-1:0] raddr1_i,
  output logic              raddr1_full_o,
  input  logic              staddr_push_i,
  input  logic [ADDR_W-1:0] staddr_i,
  output logic              staddr_full_o,
  // store data from the FPU
  input  logic              std_push_i,
  input  logic [31:0]       std_i,
  output logic [$clog2(SD_DEPTH+1)-1:0] std_free_o,
  // read data to the FPU
  output logic              rd0_valid_o,
  output logic [31:0]       rd0_data_o,
  input  logic              rd0_pop_i,
  output logic              rd1_valid_o,
  output logic [31:0]       rd1_data_o,
  input  logic              rd1_pop_i,
  // TCDM master ports
  output tcdm_req_t [1:0]   tcdm_req_o,
  input  tcdm_rsp_t [1:0]   tcdm_rsp_i,
  output logic              idle_o
);
  localparam int unsigned RCW = $clog2(RD_DEPTH+1);
  localparam int unsigned SCW = $clog2(SD_DEPTH+1);

  logic [1:0][ADDR_W-1:0] ra_head;
  logic [1:0]             ra_empty, ra_full, ra_pop;
  logic [1:0][RCW-1:0]    rd_count;
  logic [1:0]             rd_empty, rd_full;
  logic [ADDR_W-1:0]      sa_head;
  logic                   sa_empty, sa_pop;
  logic [31:0]            sd_head;
  logic                   sd_empty;
  logic [SCW-1:0]         sd_count;
  logic [1:0]             rd_pend_q;      // read granted last cycle, data due now
  logic [1:0]             rd_push;
  logic [1:0][31:0]       rd_head;

  ntx_fifo #(.T(logic [ADDR_W-1:0]), .DEPTH(RA_DEPTH)) u_ra0 (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(raddr0_push_i), .data_i(raddr0_i),
    .pop_i(ra_pop[0]), .data_o(ra_head[0]), .full_o(ra_full[0]), .empty_o(ra_empty[0]), .count_o());
  ntx_fifo #(.T(logic [ADDR_W-1:0]), .DEPTH(RA_DEPTH)) u_ra1 (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(raddr1_push_i), .data_i(raddr1_i),
    .pop_i(ra_pop[1]), .data_o(ra_head[1]), .full_o(ra_full[1]), .empty_o(ra_empty[1]), .count_o());
  ntx_fifo #(.T(logic [ADDR_W-1:0]), .DEPTH(SA_DEPTH)) u_sa (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(staddr_push_i), .data_i(staddr_i),
    .pop_i(sa_pop), .data_o(sa_head), .full_o(staddr_full_o), .empty_o(sa_empty), .count_o());
  ntx_fifo #(.T(logic [31:0]), .DEPTH(SD_DEPTH)) u_sd (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(std_push_i), .data_i(std_i),
    .pop_i(sa_pop), .data_o(sd_head), .full_o(), .empty_o(sd_empty), .count_o(sd_count));
  for (genvar p = 0; p < 2; p++) begin : g_rd
    ntx_fifo #(.T(logic [31:0]), .DEPTH(RD_DEPTH)) u_rd (
      .clk_i, .rst_ni, .flush_i(1'b0), .push_i(rd_push[p]), .data_i(tcdm_rsp_i[p].rdata),
      .pop_i(p == 0 ? rd0_pop_i : rd1_pop_i), .data_o(rd_head[p]), .full_o(rd_full[p]),
      .empty_o(rd_empty[p]), .count_o(rd_count[p]));
  end

  assign raddr0_full_o = ra_full[0];
  assign raddr1_full_o = ra_full[1];
  assign std_free_o    = SCW'(SD_DEPTH) - sd_count;
  assign rd0_valid_o   = !rd_empty[0];
  assign rd0_data_o    = rd_head[0];
  assign rd1_valid_o   = !rd_empty[1];
  assign rd1_data_o    = rd_head[1];

  // ------------------------------------------------------ arbitration
  logic [1:0] r_ok, is_store;
  logic       st_ok;
  logic       st_port_q;   // port for the next store when both read streams are busy
  always_comb begin
    for (int p = 0; p < 2; p++) begin
      r_ok[p] = !ra_empty[p] && (32'(rd_count[p]) + 32'(rd_pend_q[p]) < RD_DEPTH);
    end
    st_ok = !sa_empty && !sd_empty;
    is_store = 2'b00;
    if (st_ok) begin
      if      (!r_ok[0]) is_store[0] = 1'b1;
      else if (!r_ok[1]) is_store[1] = 1'b1;
      else               is_store[st_port_q] = 1'b1;
    end
    for (int p = 0; p < 2; p++) begin
      tcdm_req_o[p].req   = is_store[p] || r_ok[p];
      tcdm_req_o[p].addr  = is_store[p] ? sa_head : ra_head[p];
      tcdm_req_o[p].we    = is_store[p];
      tcdm_req_o[p].be    = 4'hf;
      tcdm_req_o[p].wdata = sd_head;
    end
  end

  // pops depend on the grants; kept apart from the requests above so that
  // no process reads the grant and drives the request
  always_comb begin
    sa_pop = |(is_store & {tcdm_rsp_i[1].gnt, tcdm_rsp_i[0].gnt});
    for (int p = 0; p < 2; p++) begin
      ra_pop[p] = r_ok[p] && !is_store[p] && tcdm_rsp_i[p].gnt;
      rd_push[p] = rd_pend_q[p];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_pend_q <= '0;
      st_port_q <= 1'b0;
    end else begin
      rd_pend_q <= ra_pop;
      if (sa_pop) st_port_q <= !st_port_q;
    end
  end

  assign idle_o = (&ra_empty) && sa_empty && sd_empty && (rd_pend_q == '0);

  for (genvar p = 0; p < 2; p++) begin : g_asrt
    a_rvalid: assert property (@(posedge clk_i) disable iff (!rst_ni)
                               rd_pend_q[p] |-> tcdm_rsp_i[p].rvalid)
      else $error("ntx_interleaver: read response missing on port %0d", p);
    a_room:   assert property (@(posedge clk_i) disable iff (!rst_ni)
                               rd_push[p] |-> !rd_full[p])
      else $error("ntx_interleaver: read data FIFO overflow on port %0d", p);
  end
endmodule
