// cluster_dma -- DMA engine of the cluster: two-dimensional transfers
// between the TCDM and the cluster's 64-bit AXI port.
//
// A transfer moves NUM_ROWS rows of ROW_LEN bytes; consecutive rows start
// EXT_STRIDE bytes apart on the AXI side and TCDM_STRIDE bytes apart in the
// TCDM, so a tile of a larger matrix can be cut out or put back in one
// command. The core programs the registers (offsets in ntx_pkg) and writes
// CTRL to start: bit 0 = 0 reads from AXI into the TCDM, 1 writes TCDM data
// out. Each row is split into AXI INCR bursts of at most 16 beats of 8
// bytes. Every beat is two 32-bit TCDM words, moved through the two TCDM
// master ports in parallel, so one beat needs one TCDM cycle when there is
// no bank conflict. One burst is in flight at a time.
// A CTRL write while a transfer runs is held off (no grant) until it ends;
// done_o pulses when a transfer ends. Addresses and lengths must be
// multiples of 8 bytes and a burst must not cross a 4 kB boundary.
// The architecture specifies the two-dimensional transfer and the AXI
// width; register layout, burst size and buffering are this implementation's.
module cluster_dma
  import ntx_pkg::*;
#(
  parameter int unsigned MAX_BURST = 16
) (
  input  logic            clk_i,
  input  logic            rst_ni,
  // register port
  input  tcdm_req_t       cfg_req_i,
  output tcdm_rsp_t       cfg_rsp_o,
  // TCDM master ports (low and high word of a beat)
  output tcdm_req_t [1:0] tcdm_req_o,
  input  tcdm_rsp_t [1:0] tcdm_rsp_i,
  // AXI master port
  output axi_req_t        axi_req_o,
  input  axi_rsp_t        axi_rsp_i,
  output logic            busy_o,
  output logic            done_o
);
  typedef enum logic [2:0] {S_IDLE, S_AR, S_R, S_AW, S_TRD, S_W, S_B, S_NEXT} state_e;

  logic [31:0] r_ext, r_tcdm, r_len, r_rows, r_ext_str, r_tcdm_str;
  state_e      state_q;
  logic        dir_q;
  logic [31:0] ext_row_q, tcdm_row_q, off_q, rows_left_q;
  logic [8:0]  burst_q, beat_q;       // beats in current burst / done so far
  logic [63:0] buf_q;
  logic        buf_full_q;
  logic [1:0]  pend_q;                // TCDM word still to be written / granted
  logic [1:0]  got_q;                 // TCDM read word captured
  logic        rvalid_q, start;
  logic [31:0] rdata_q;

  // ------------------------------------------------------- registers
  logic [7:0] off;
  logic       cfg_wr;
  assign off    = cfg_req_i.addr[7:0];
  assign cfg_rsp_o.gnt = !(cfg_req_i.we && off == DMA_CTRL && state_q != S_IDLE);
  assign cfg_wr = cfg_req_i.req && cfg_rsp_o.gnt && cfg_req_i.we;
  assign start  = cfg_wr && off == DMA_CTRL;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      r_ext <= '0; r_tcdm <= '0; r_len <= '0; r_rows <= '0; r_ext_str <= '0; r_tcdm_str <= '0;
      rvalid_q <= 1'b0; rdata_q <= '0;
    end else begin
      rvalid_q <= cfg_req_i.req && cfg_rsp_o.gnt && !cfg_req_i.we;
      if (cfg_req_i.req && cfg_rsp_o.gnt && !cfg_req_i.we) begin
        unique case (off)
          DMA_EXT_ADDR:    rdata_q <= r_ext;
          DMA_TCDM_ADDR:   rdata_q <= r_tcdm;
          DMA_ROW_LEN:     rdata_q <= r_len;
          DMA_NUM_ROWS:    rdata_q <= r_rows;
          DMA_EXT_STRIDE:  rdata_q <= r_ext_str;
          DMA_TCDM_STRIDE: rdata_q <= r_tcdm_str;
          DMA_STATUS:      rdata_q <= {31'b0, state_q != S_IDLE};
          default:         rdata_q <= '0;
        endcase
      end
      if (cfg_wr) begin
        unique case (off)
          DMA_EXT_ADDR:    r_ext      <= cfg_req_i.wdata;
          DMA_TCDM_ADDR:   r_tcdm     <= cfg_req_i.wdata;
          DMA_ROW_LEN:     r_len      <= cfg_req_i.wdata;
          DMA_NUM_ROWS:    r_rows     <= cfg_req_i.wdata;
          DMA_EXT_STRIDE:  r_ext_str  <= cfg_req_i.wdata;
          DMA_TCDM_STRIDE: r_tcdm_str <= cfg_req_i.wdata;
          default: ;
        endcase
      end
    end
  end
  assign cfg_rsp_o.rvalid = rvalid_q;
  assign cfg_rsp_o.rdata  = rdata_q;

  // ------------------------------------------------------- transfer
  logic [31:0] beats_left;
  logic [8:0]  next_burst;
  always_comb begin
    beats_left = (r_len - off_q) >> 3;
    next_burst = (beats_left > MAX_BURST) ? 9'(MAX_BURST) : beats_left[8:0];
  end

  always_comb begin
    axi_req_o          = '0;
    axi_req_o.aw_addr  = ext_row_q + off_q;
    axi_req_o.ar_addr  = ext_row_q + off_q;
    axi_req_o.aw_len   = 8'(burst_q - 1);
    axi_req_o.ar_len   = 8'(burst_q - 1);
    axi_req_o.aw_size  = 3'd3;
    axi_req_o.ar_size  = 3'd3;
    axi_req_o.aw_burst = 2'b01;
    axi_req_o.ar_burst = 2'b01;
    axi_req_o.w_data   = buf_q;
    axi_req_o.w_strb   = 8'hff;
    axi_req_o.w_last   = (beat_q == burst_q - 1);
    axi_req_o.ar_valid = (state_q == S_AR);
    axi_req_o.aw_valid = (state_q == S_AW);
    axi_req_o.r_ready  = (state_q == S_R) && !buf_full_q;
    axi_req_o.w_valid  = (state_q == S_W);
    axi_req_o.b_ready  = (state_q == S_B);
    for (int p = 0; p < 2; p++) begin
      tcdm_req_o[p].req   = (state_q == S_R || state_q == S_TRD) && pend_q[p];
      tcdm_req_o[p].addr  = tcdm_row_q + off_q + 32'(4*p);
      tcdm_req_o[p].we    = (state_q == S_R);
      tcdm_req_o[p].be    = 4'hf;
      tcdm_req_o[p].wdata = buf_q[32*p +: 32];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE; dir_q <= 1'b0;
      ext_row_q <= '0; tcdm_row_q <= '0; off_q <= '0; rows_left_q <= '0;
      burst_q <= '0; beat_q <= '0; buf_q <= '0; buf_full_q <= 1'b0; pend_q <= '0; got_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (start) begin
          dir_q       <= cfg_req_i.wdata[0];
          ext_row_q   <= r_ext;
          tcdm_row_q  <= r_tcdm;
          rows_left_q <= r_rows;
          off_q       <= '0;
          state_q     <= S_NEXT;
        end
        // ---- AXI -> TCDM
        S_AR: if (axi_rsp_i.ar_ready) begin state_q <= S_R; beat_q <= '0; end
        S_R: begin
          if (axi_rsp_i.r_valid && !buf_full_q) begin
            buf_q <= axi_rsp_i.r_data; buf_full_q <= 1'b1; pend_q <= 2'b11;
          end
          if (buf_full_q) begin
            logic [1:0] left;
            left = pend_q & ~{tcdm_rsp_i[1].gnt, tcdm_rsp_i[0].gnt};
            pend_q <= left;
            if (left == '0) begin
              buf_full_q <= 1'b0;
              off_q      <= off_q + 32'd8;
              beat_q     <= beat_q + 1'b1;
              if (beat_q == burst_q - 1) state_q <= S_NEXT;
            end
          end
        end
        // ---- TCDM -> AXI
        S_AW: if (axi_rsp_i.aw_ready) begin
          state_q <= S_TRD; beat_q <= '0; pend_q <= 2'b11; got_q <= '0;
        end
        S_TRD: begin
          logic [1:0] got;
          pend_q <= pend_q & ~{tcdm_rsp_i[1].gnt, tcdm_rsp_i[0].gnt};
          got = got_q;
          for (int p = 0; p < 2; p++)
            if (tcdm_rsp_i[p].rvalid) begin buf_q[32*p +: 32] <= tcdm_rsp_i[p].rdata; got[p] = 1'b1; end
          got_q <= got;
          if (got == 2'b11) state_q <= S_W;
        end
        S_W: if (axi_rsp_i.w_ready) begin
          off_q  <= off_q + 32'd8;
          beat_q <= beat_q + 1'b1;
          if (beat_q == burst_q - 1) state_q <= S_B;
          else begin state_q <= S_TRD; pend_q <= 2'b11; got_q <= '0; end
        end
        S_B: if (axi_rsp_i.b_valid) state_q <= S_NEXT;
        // ---- next burst / next row
        S_NEXT: begin
          if (off_q >= r_len || r_len == '0) begin
            if (rows_left_q <= 1) state_q <= S_IDLE;
            else begin
              rows_left_q <= rows_left_q - 1;
              ext_row_q   <= ext_row_q + r_ext_str;
              tcdm_row_q  <= tcdm_row_q + r_tcdm_str;
              off_q       <= '0;
            end
          end else begin
            burst_q <= next_burst;
            state_q <= dir_q ? S_AW : S_AR;
          end
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign busy_o = (state_q != S_IDLE);
  assign done_o = (state_q == S_NEXT) && (off_q >= r_len || r_len == '0) && (rows_left_q <= 1);

  a_beat_aligned: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                   start |-> (r_len[2:0] == '0 && r_ext[2:0] == '0 && r_tcdm[2:0] == '0))
    else $error("cluster_dma: transfer not 8-byte aligned");
endmodule
