// ntx_controller -- NTX main controller with its hardware loops and address
// generators.
//
// A command is accepted from the register interface (start_i with the
// complete configuration cfg_i) when the controller is idle; it is copied
// into the command register, the loop counters are cleared and the three
// AGUs load their base addresses. The sequencer then walks the loop nest,
// one innermost iteration per cycle, and for each iteration
//   * computes the triggers: init when loops 0..init_level-1 are all at 0,
//     store when loops 0..store_level-1 are all at their maximum, done
//     when every enabled loop is at its maximum;
//   * pushes the read addresses of a (AGU selected by a_src, RAddr0) and b
//     (AGU1, RAddr1; for OUTERP only when loop 0 is at 0) and, on store,
//     the store address (AGU2) into the address FIFOs;
//   * pushes a micro-instruction for the FPU into the Cmd FIFO;
//   * steps the hardware loops and the AGUs.
// An initialisation from memory (init_src != 0.0) takes one extra issue
// cycle that reads the init value through RAddr0 ahead of the iteration.
// An iteration waits while any FIFO it needs is full. After the last
// iteration the controller waits for the datapath and memory side to drain
// (drained_i), pulses done_o and becomes idle again.
// The trigger conditions follow the loop-nest structure of the
// architecture; the one-cycle cost of a memory initialisation and the
// handshake with the register interface are this implementation's choice.
module ntx_controller
  import ntx_pkg::*;
(
  input  logic              clk_i,
  input  logic              rst_ni,
  // command hand-off
  input  logic              start_i,
  input  ntx_cfg_t          cfg_i,
  output logic              idle_o,
  output logic              done_o,
  output cmd_word_t         cmd_o,
  // address streams
  output logic              raddr0_push_o,
  output logic [ADDR_W-1:0] raddr0_o,
  input  logic              raddr0_full_i,
  output logic              raddr1_push_o,
  output logic [ADDR_W-1:0] raddr1_o,
  input  logic              raddr1_full_i,
  output logic              staddr_push_o,
  output logic [ADDR_W-1:0] staddr_o,
  input  logic              staddr_full_i,
  // micro-instructions
  output logic              uop_push_o,
  output uop_t              uop_o,
  input  logic              uop_full_i,
  // everything issued has been executed and written
  input  logic              drained_i
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DRAIN} state_e;
  state_e   state_q;
  ntx_cfg_t cfg_q;
  logic     init_done_q;

  // --------------------------------------------- loops and AGUs
  logic                                 loop_clear, step;
  logic [NUM_LOOPS-1:0][CNT_W-1:0]      cnt;
  logic [NUM_LOOPS-1:0]                 first, last;
  logic [2:0]                           level;
  logic                                 nest_done;
  logic [NUM_AGUS-1:0][ADDR_W-1:0]      agu_addr;

  ntx_hwloops u_loops (
    .clk_i(clk_i), .rst_ni(rst_ni), .clear_i(loop_clear), .step_i(step),
    .max_i(cfg_q.loop_max), .outer_level_i(cfg_q.word.outer_level),
    .cnt_o(cnt), .first_o(first), .last_o(last), .level_o(level), .done_o(nest_done)
  );

  for (genvar g = 0; g < NUM_AGUS; g++) begin : g_agu
    ntx_agu u_agu (
      .clk_i(clk_i), .rst_ni(rst_ni), .load_i(loop_clear), .base_i(cfg_i.agu_base[g]),
      .step_i(step), .level_i(level), .stride_i(cfg_q.agu_stride[g]), .addr_o(agu_addr[g])
    );
  end

  // ------------------------------------------------- triggers
  logic init_trig, store_trig, init_phase, need_a, need_b, can_go;
  always_comb begin
    init_trig  = 1'b1;
    store_trig = 1'b1;
    for (int i = 0; i < NUM_LOOPS; i++) begin
      if (3'(i) < cfg_q.word.init_level)  init_trig  &= first[i];
      if (3'(i) < cfg_q.word.store_level) store_trig &= last[i];
    end
    init_phase = init_trig && (cfg_q.word.init_src != INIT_ZERO) && !init_done_q;
    need_a     = (cfg_q.word.a_src != A_NONE);
    need_b     = (cfg_q.word.b_src == B_AGU1) &&
                 ((cfg_q.word.opcode != OP_OUTERP) || first[0]);

    if (init_phase) can_go = !raddr0_full_i && !uop_full_i;
    else            can_go = !uop_full_i && !(need_a && raddr0_full_i) &&
                             !(need_b && raddr1_full_i) && !(store_trig && staddr_full_i);
    can_go = can_go && (state_q == S_RUN);

    raddr0_push_o = 1'b0; raddr1_push_o = 1'b0; staddr_push_o = 1'b0; uop_push_o = 1'b0;
    raddr0_o = agu_addr[cfg_q.word.a_src == A_NONE ? 0 : cfg_q.word.a_src];
    raddr1_o = agu_addr[1];
    staddr_o = agu_addr[2];
    uop_o    = '0;
    step     = 1'b0;
    if (can_go && init_phase) begin
      raddr0_push_o = 1'b1;
      raddr0_o      = agu_addr[cfg_q.word.init_src];
      uop_push_o    = 1'b1;
      uop_o.init_mem = 1'b1;
    end else if (can_go) begin
      raddr0_push_o = need_a;
      raddr1_push_o = need_b;
      staddr_push_o = store_trig;
      uop_push_o    = 1'b1;
      uop_o.clr     = init_trig && (cfg_q.word.init_src == INIT_ZERO);
      uop_o.pop_a   = need_a;
      uop_o.pop_b   = need_b;
      uop_o.store   = store_trig;
      step          = 1'b1;
    end
  end

  assign loop_clear = start_i && (state_q == S_IDLE);

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q     <= S_IDLE;
      cfg_q       <= '0;
      init_done_q <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE:  if (start_i) begin
                   state_q <= S_RUN;
                   cfg_q   <= cfg_i;
                   init_done_q <= 1'b0;
                 end
        S_RUN: begin
          if (can_go && init_phase) init_done_q <= 1'b1;
          else if (step) begin
            init_done_q <= 1'b0;
            if (nest_done) state_q <= S_DRAIN;
          end
        end
        S_DRAIN: if (drained_i) state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  assign idle_o = (state_q == S_IDLE);
  assign done_o = (state_q == S_DRAIN) && drained_i;
  assign cmd_o  = cfg_q.word;
endmodule
