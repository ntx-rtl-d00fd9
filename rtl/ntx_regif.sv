// ntx_regif -- register interface of one NTX: the configuration registers
// the RISC-V core writes (command staging area), the command register that
// launches a command, status and interrupt.
//
// The core sees the registers as 32-bit words in its memory space
// (offsets in ntx_pkg: STATUS 0x00, CMD 0x04, IRQ 0x08, loop maxima
// 0x10..0x20, AGU j base at 0x40+0x20*j and its strides at +0x04..+0x14).
// Writing the command word copies the staged configuration together with
// the word into the controller's command register (start_o) and executes
// it; the staging registers are free again immediately, so the core can
// prepare the next command while the current one runs (double buffering).
// A command write that arrives while the controller is still busy is held
// off by withholding the grant until the controller is idle. gnt_o depends
// only on the address/write fields and the controller state, never on
// req, so a bus can check the grant of several NTX before it broadcasts.
// A finished command sets the interrupt-pending bit (irq_o); writing 1 to
// bit 0 of IRQ clears it. Reads answer one cycle after the grant.
// Register offsets and the stall-on-busy policy are this implementation's
// choice; the staging/command-register split follows the architecture.
module ntx_regif
  import ntx_pkg::*;
(
  input  logic      clk_i,
  input  logic      rst_ni,
  input  tcdm_req_t bus_req_i,
  output tcdm_rsp_t bus_rsp_o,
  output logic      start_o,
  output ntx_cfg_t  cfg_o,
  input  logic      idle_i,
  input  logic      done_i,
  output logic      irq_o
);
  ntx_cfg_t  stage_q;     // staging area (word = last command written)
  logic      irq_q;
  logic      rvalid_q;
  logic [31:0] rdata_q, rdata_d;
  logic [7:0]  off;
  logic        is_cmd, wr, rd;

  assign off    = bus_req_i.addr[7:0];
  assign is_cmd = (off == REG_CMD) && bus_req_i.we;
  assign bus_rsp_o.gnt    = !is_cmd || idle_i;
  assign wr     = bus_req_i.req && bus_rsp_o.gnt && bus_req_i.we;
  assign rd     = bus_req_i.req && bus_rsp_o.gnt && !bus_req_i.we;
  assign start_o = wr && (off == REG_CMD);

  always_comb begin
    cfg_o      = stage_q;
    cfg_o.word = cmd_word_t'(bus_req_i.wdata);
  end

  always_comb begin
    rdata_d = '0;
    if (off == REG_STATUS)      rdata_d = {30'b0, irq_q, !idle_i};
    else if (off == REG_CMD)    rdata_d = stage_q.word;
    else if (off == REG_IRQ)    rdata_d = {31'b0, irq_q};
    for (int i = 0; i < NUM_LOOPS; i++)
      if (off == REG_LOOP + 8'(4*i)) rdata_d = {16'b0, stage_q.loop_max[i]};
    for (int j = 0; j < NUM_AGUS; j++) begin
      if (off == REG_AGU + 8'(32*j)) rdata_d = stage_q.agu_base[j];
      for (int k = 0; k < NUM_LOOPS; k++)
        if (off == REG_AGU + 8'(32*j + 4 + 4*k)) rdata_d = stage_q.agu_stride[j][k];
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      stage_q  <= '0;
      irq_q    <= 1'b0;
      rvalid_q <= 1'b0;
      rdata_q  <= '0;
    end else begin
      rvalid_q <= bus_req_i.req && bus_rsp_o.gnt;
      if (rd) rdata_q <= rdata_d;
      if (wr) begin
        if (off == REG_CMD) stage_q.word <= cmd_word_t'(bus_req_i.wdata);
        for (int i = 0; i < NUM_LOOPS; i++)
          if (off == REG_LOOP + 8'(4*i)) stage_q.loop_max[i] <= bus_req_i.wdata[15:0];
        for (int j = 0; j < NUM_AGUS; j++) begin
          if (off == REG_AGU + 8'(32*j)) stage_q.agu_base[j] <= bus_req_i.wdata;
          for (int k = 0; k < NUM_LOOPS; k++)
            if (off == REG_AGU + 8'(32*j + 4 + 4*k)) stage_q.agu_stride[j][k] <= bus_req_i.wdata;
        end
      end
      if (done_i)                                              irq_q <= 1'b1;
      else if (wr && off == REG_IRQ && bus_req_i.wdata[0])     irq_q <= 1'b0;
    end
  end

  assign bus_rsp_o.rvalid = rvalid_q;
  assign bus_rsp_o.rdata  = rdata_q;
  assign irq_o            = irq_q;
endmodule
