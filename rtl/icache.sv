// icache -- 2 kB instruction cache of the control core with linear
// (next-line) prefetching.
//
// Direct mapped, LINE-byte lines (default 16 B, 128 lines). A fetch that
// hits is granted at once and its 32-bit word is returned one cycle later
// (fetch_rvalid_o/fetch_rdata_o). A fetch that misses is held off (no
// grant) while the line is read over the refill port, one whole line per
// request; the refill answers after any number of cycles with
// refill_rvalid_i. Whenever the core moves on to a new line L (a demand
// refill, or the first hit in a line) the cache also fetches line L+1 if
// it is not present, so straight-line code finds its next line already
// loaded; hits continue to be served during a prefetch.
// The architecture gives the size and the linear prefetching; the mapping,
// line size and refill port are this implementation's choice.
module icache #(
  parameter int unsigned BYTES = 2048,
  parameter int unsigned LINE  = 16
) (
  input  logic              clk_i,
  input  logic              rst_ni,
  input  logic              fetch_req_i,
  input  logic [31:0]       fetch_addr_i,
  output logic              fetch_gnt_o,
  output logic              fetch_rvalid_o,
  output logic [31:0]       fetch_rdata_o,
  output logic              refill_req_o,
  output logic [31:0]       refill_addr_o,
  input  logic              refill_gnt_i,
  input  logic              refill_rvalid_i,
  input  logic [LINE*8-1:0] refill_rdata_i
);
  localparam int unsigned NL = BYTES / LINE;
  localparam int unsigned OW = $clog2(LINE);
  localparam int unsigned IW = $clog2(NL);
  localparam int unsigned TW = 32 - OW - IW;

  logic [LINE*8-1:0] data_q [NL];
  logic [TW-1:0]     tag_q  [NL];
  logic [NL-1:0]     valid_q;

  typedef enum logic [1:0] {R_IDLE, R_REQ, R_WAIT} rstate_e;
  rstate_e     rstate_q;
  logic [31:0] raddr_q;     // line being refilled
  logic        pf_pend_q;   // a prefetch of pf_addr_q is due
  logic [31:0] pf_addr_q;
  logic        rvalid_q;
  logic [31:0] rdata_q;
  logic [31:0] last_line_q; // line of the last granted fetch

  function automatic logic [IW-1:0] idx_of(logic [31:0] a);
    return a[OW +: IW];
  endfunction
  function automatic logic [TW-1:0] tag_of(logic [31:0] a);
    return a[OW+IW +: TW];
  endfunction
  function automatic logic present(logic [31:0] a, logic [NL-1:0] v, logic [TW-1:0] t);
    return v[idx_of(a)] && t == tag_of(a);
  endfunction

  logic hit, pf_present;
  always_comb begin
    hit         = present(fetch_addr_i, valid_q, tag_q[idx_of(fetch_addr_i)]);
    pf_present  = present(pf_addr_q, valid_q, tag_q[idx_of(pf_addr_q)]);
    fetch_gnt_o = fetch_req_i && hit;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      valid_q <= '0; rstate_q <= R_IDLE; raddr_q <= '0;
      pf_pend_q <= 1'b0; pf_addr_q <= '0; rvalid_q <= 1'b0; rdata_q <= '0;
      last_line_q <= '1;
    end else begin
      rvalid_q <= fetch_gnt_o;
      if (fetch_gnt_o)
        rdata_q <= data_q[idx_of(fetch_addr_i)][32*fetch_addr_i[OW-1:2] +: 32];
      if (fetch_gnt_o && fetch_addr_i[31:OW] != last_line_q[31:OW]) begin
        last_line_q <= {fetch_addr_i[31:OW], OW'(0)};
        pf_pend_q   <= 1'b1;
        pf_addr_q   <= {fetch_addr_i[31:OW], OW'(0)} + 32'(LINE);
      end
      unique case (rstate_q)
        R_IDLE: begin
          if (fetch_req_i && !hit) begin
            rstate_q <= R_REQ;
            raddr_q  <= {fetch_addr_i[31:OW], OW'(0)};
          end else if (pf_pend_q && !(fetch_gnt_o && fetch_addr_i[31:OW] != last_line_q[31:OW])) begin
            pf_pend_q <= 1'b0;
            if (!pf_present) begin
              rstate_q <= R_REQ;
              raddr_q  <= pf_addr_q;
            end
          end
        end
        R_REQ:  if (refill_gnt_i) rstate_q <= R_WAIT;
        R_WAIT: if (refill_rvalid_i) begin
          data_q[idx_of(raddr_q)]  <= refill_rdata_i;
          tag_q[idx_of(raddr_q)]   <= tag_of(raddr_q);
          valid_q[idx_of(raddr_q)] <= 1'b1;
          rstate_q <= R_IDLE;
        end
        default: rstate_q <= R_IDLE;
      endcase
    end
  end

  assign refill_req_o   = (rstate_q == R_REQ);
  assign refill_addr_o  = raddr_q;
  assign fetch_rvalid_o = rvalid_q;
  assign fetch_rdata_o  = rdata_q;
endmodule
