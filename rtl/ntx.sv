// ntx -- one NTX floating-point streaming co-processor.
//
// The core writes a command's configuration (loop counts, base addresses,
// strides) into the register interface and launches it with the command
// word. The controller then runs the loop nest on its own: per innermost
// iteration it issues up to two operand reads and one store address to the
// memory side and one micro-instruction (Cmd FIFO, depth 5) to the FPU. The
// memory side (ntx_interleaver) streams the operands out of the TCDM through
// two 32-bit master ports into the RD0/RD1 FIFOs and writes results from
// the STD FIFO back. Address issue and execution are decoupled by these
// FIFOs, so with single-cycle TCDM latency and no bank conflicts a MAC
// sustains one multiply-accumulate per cycle. A bank conflict withholds a
// port grant and stalls the stream until it is served.
//
// Interface: cfg_req_i/cfg_rsp_o is the register port (request/grant, read
// data one cycle after the grant); tcdm_req_o/tcdm_rsp_i are the two TCDM
// master ports; irq_o is the command-done interrupt; busy_o is high while a
// command runs.
module ntx
  import ntx_pkg::*;
(
  input  logic            clk_i,
  input  logic            rst_ni,
  input  tcdm_req_t       cfg_req_i,
  output tcdm_rsp_t       cfg_rsp_o,
  output logic            irq_o,
  output logic            busy_o,
  output tcdm_req_t [1:0] tcdm_req_o,
  input  tcdm_rsp_t [1:0] tcdm_rsp_i
);
  logic       start, idle, done, drained;
  ntx_cfg_t   cfg;
  cmd_word_t  cmd;

  logic              ra0_push, ra1_push, sa_push, ra0_full, ra1_full, sa_full;
  logic [ADDR_W-1:0] ra0, ra1, sa;
  logic              uop_push, uop_full, uop_empty, uop_pop;
  uop_t              uop_in, uop_head;
  logic              rd0_valid, rd1_valid, rd0_pop, rd1_pop, std_push;
  logic [31:0]       rd0_data, rd1_data, std_data;
  logic [2:0]        std_free;
  logic              fpu_busy, mem_idle;

  ntx_regif u_regif (
    .clk_i, .rst_ni, .bus_req_i(cfg_req_i), .bus_rsp_o(cfg_rsp_o),
    .start_o(start), .cfg_o(cfg), .idle_i(idle), .done_i(done), .irq_o(irq_o)
  );

  ntx_controller u_ctrl (
    .clk_i, .rst_ni, .start_i(start), .cfg_i(cfg), .idle_o(idle), .done_o(done), .cmd_o(cmd),
    .raddr0_push_o(ra0_push), .raddr0_o(ra0), .raddr0_full_i(ra0_full),
    .raddr1_push_o(ra1_push), .raddr1_o(ra1), .raddr1_full_i(ra1_full),
    .staddr_push_o(sa_push), .staddr_o(sa), .staddr_full_i(sa_full),
    .uop_push_o(uop_push), .uop_o(uop_in), .uop_full_i(uop_full), .drained_i(drained)
  );

  ntx_fifo #(.T(uop_t), .DEPTH(5)) u_cmd_fifo (
    .clk_i, .rst_ni, .flush_i(1'b0), .push_i(uop_push), .data_i(uop_in), .pop_i(uop_pop),
    .data_o(uop_head), .full_o(uop_full), .empty_o(uop_empty), .count_o()
  );

  ntx_fpu u_fpu (
    .clk_i, .rst_ni, .cmd_i(cmd),
    .uop_valid_i(!uop_empty), .uop_i(uop_head), .uop_pop_o(uop_pop),
    .rd0_valid_i(rd0_valid), .rd0_data_i(rd0_data), .rd0_pop_o(rd0_pop),
    .rd1_valid_i(rd1_valid), .rd1_data_i(rd1_data), .rd1_pop_o(rd1_pop),
    .std_free_i(std_free), .std_push_o(std_push), .std_data_o(std_data), .busy_o(fpu_busy)
  );

  ntx_interleaver u_mem (
    .clk_i, .rst_ni,
    .raddr0_push_i(ra0_push), .raddr0_i(ra0), .raddr0_full_o(ra0_full),
    .raddr1_push_i(ra1_push), .raddr1_i(ra1), .raddr1_full_o(ra1_full),
    .staddr_push_i(sa_push), .staddr_i(sa), .staddr_full_o(sa_full),
    .std_push_i(std_push), .std_i(std_data), .std_free_o(std_free),
    .rd0_valid_o(rd0_valid), .rd0_data_o(rd0_data), .rd0_pop_i(rd0_pop),
    .rd1_valid_o(rd1_valid), .rd1_data_o(rd1_data), .rd1_pop_i(rd1_pop),
    .tcdm_req_o(tcdm_req_o), .tcdm_rsp_i(tcdm_rsp_i), .idle_o(mem_idle)
  );

  assign drained = mem_idle && uop_empty && !fpu_busy && !rd0_valid && !rd1_valid;
  assign busy_o  = !idle;
endmodule
