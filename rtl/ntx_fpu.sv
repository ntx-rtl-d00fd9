// ntx_fpu -- the NTX datapath: FMAC, comparator, ALU register, 16-bit index
// counter, fused ReLU and the datapath control that executes the
// micro-instructions of the controller.
//
// Each micro-instruction (uop_t, from the Cmd FIFO) is one iteration of the
// innermost loop, x = f(x, a, b), or an initialisation of x from memory.
// Operand a comes from the RD0 FIFO, operand b from the RD1 FIFO or, per
// the command, the constants 0.0/1.0 or the b held from the last read (outer
// product). x lives in the FMAC accumulator for the arithmetic commands and
// in the ALU register for the others:
//   MAC      x = x + a*b             VMULT, OUTERP  x = a*b
//   VADDSUB  x = a +/- b (2 cycles)  MASKMAC        x = x + (cmp(a,0) ? a*b : 0)
//   MAXMIN   x = cmp(a,x) ? a : x, index of the last winner kept
//   THTST    x = cmp(a,b) ? 1.0 : 0.0          MASK  x = cmp(a,0) ? b : 0.0
//   COPY     x = a, or x = b with alt=1 (memset)
// A micro-instruction with store set writes x to the STD FIFO one cycle
// later (ReLU applied if enabled; MAXMIN with alt=1 stores the index as an
// unsigned integer). A micro-instruction executes when its operands are at
// the FIFO heads and, for a store, the STD FIFO has room; otherwise the
// datapath stalls. Throughput is one micro-instruction per cycle, two for
// VADDSUB, whose first cycle sets the accumulator to a.
// The command encodings and the exact meaning of THTST, MASK and MASKMAC
// are this implementation's reading of the command list; the architecture
// names the commands and their data sources only.
module ntx_fpu
  import ntx_pkg::*;
#(
  parameter int unsigned STD_DEPTH = 5
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  cmd_word_t   cmd_i,        // command being executed, stable while busy
  // micro-instructions
  input  logic        uop_valid_i,
  input  uop_t        uop_i,
  output logic        uop_pop_o,
  // operand FIFOs
  input  logic        rd0_valid_i,
  input  logic [31:0] rd0_data_i,
  output logic        rd0_pop_o,
  input  logic        rd1_valid_i,
  input  logic [31:0] rd1_data_i,
  output logic        rd1_pop_o,
  // store data FIFO
  input  logic [$clog2(STD_DEPTH+1)-1:0] std_free_i,
  output logic        std_push_o,
  output logic [31:0] std_data_o,
  output logic        busy_o
);
  // ------------------------------------------------------------ state
  logic [31:0] alu_q, alu_d;     // ALU register
  logic [31:0] b_q;              // last b read (OUTERP)
  logic [15:0] idx_q, best_q;    // index counter, index of last winner
  logic [15:0] idx_d, best_d;
  logic        phase_q;          // VADDSUB: accumulator set cycle done
  logic        st_pend_q;        // store data goes out next cycle

  logic        fire, body, need_a, need_b, ops_ok, room_ok;
  logic [31:0] a, b, cmp_rhs;
  logic        cmp_res;
  logic        fm_en, fm_clr, fm_neg;
  logic [31:0] fm_a, fm_b, fm_res;

  ntx_fmac u_fmac (
    .clk_i(clk_i), .rst_ni(rst_ni), .en_i(fm_en), .clr_i(fm_clr), .neg_i(fm_neg),
    .a_i(fm_a), .b_i(fm_b), .res_o(fm_res), .acc_o()
  );

  always_comb begin
    body    = !uop_i.init_mem;
    need_a  = uop_i.init_mem || uop_i.pop_a;
    need_b  = body && uop_i.pop_b;
    ops_ok  = (!need_a || rd0_valid_i) && (!need_b || rd1_valid_i);
    room_ok = !uop_i.store || (32'(std_free_i) > 32'(st_pend_q));
    fire    = uop_valid_i && ops_ok && room_ok;

    a = uop_i.pop_a ? rd0_data_i : FP_ZERO;
    unique case (cmd_i.b_src)
      B_ZERO:  b = FP_ZERO;
      B_ONE:   b = FP_ONE;
      default: b = uop_i.pop_b ? rd1_data_i : b_q;
    endcase

    // comparator: right-hand side per command
    unique case (cmd_i.opcode)
      OP_MAXMIN: cmp_rhs = uop_i.clr ? FP_ZERO : alu_q;
      OP_THTST:  cmp_rhs = b;
      default:   cmp_rhs = FP_ZERO;
    endcase
    cmp_res = fp_cmp(a, cmp_rhs, cmd_i.cmp);

    // FMAC control
    fm_en = 1'b0; fm_clr = 1'b0; fm_neg = 1'b0; fm_a = a; fm_b = b;
    alu_d = alu_q; idx_d = idx_q; best_d = best_q;
    uop_pop_o = 1'b0; rd0_pop_o = 1'b0; rd1_pop_o = 1'b0;

    if (fire && uop_i.init_mem) begin
      // x = *AGUn
      fm_en = 1'b1; fm_clr = 1'b1; fm_a = rd0_data_i; fm_b = FP_ONE;
      alu_d = rd0_data_i; idx_d = '0; best_d = '0;
      uop_pop_o = 1'b1; rd0_pop_o = 1'b1;
    end else if (fire) begin
      unique case (cmd_i.opcode)
        OP_MAC: begin
          fm_en = 1'b1; fm_clr = uop_i.clr; fm_neg = cmd_i.neg;
        end
        OP_VMULT, OP_OUTERP: begin
          fm_en = 1'b1; fm_clr = 1'b1; fm_neg = cmd_i.neg;
        end
        OP_MASKMAC: begin
          fm_en = 1'b1; fm_clr = uop_i.clr; fm_neg = cmd_i.neg;
          if (!cmp_res) fm_b = FP_ZERO;
        end
        OP_VADDSUB: begin
          fm_en = 1'b1;
          if (!phase_q) begin fm_clr = 1'b1; fm_a = a; fm_b = FP_ONE; end
          else          begin fm_neg = cmd_i.neg; fm_a = b; fm_b = FP_ONE; end
        end
        OP_MAXMIN: begin
          idx_d  = (uop_i.clr ? 16'd0 : idx_q) + 16'd1;
          best_d = uop_i.clr ? 16'd0 : best_q;
          alu_d  = cmp_rhs;
          if (cmp_res) begin
            alu_d  = a;
            best_d = uop_i.clr ? 16'd0 : idx_q;
          end
        end
        OP_THTST: alu_d = cmp_res ? FP_ONE : FP_ZERO;
        OP_MASK:  alu_d = cmp_res ? b : FP_ZERO;
        OP_COPY:  alu_d = cmd_i.alt ? b : a;
        default: ;
      endcase
      // VADDSUB holds its operands for the set cycle
      if (cmd_i.opcode != OP_VADDSUB || phase_q) begin
        uop_pop_o = 1'b1;
        rd0_pop_o = uop_i.pop_a;
        rd1_pop_o = uop_i.pop_b;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      alu_q <= '0; b_q <= '0; idx_q <= '0; best_q <= '0;
      phase_q <= 1'b0; st_pend_q <= 1'b0;
    end else begin
      alu_q  <= alu_d;
      idx_q  <= idx_d;
      best_q <= best_d;
      if (rd1_pop_o) b_q <= rd1_data_i;
      if (fire && body && cmd_i.opcode == OP_VADDSUB) phase_q <= !phase_q;
      st_pend_q <= uop_pop_o && uop_i.store;
    end
  end

  // ----------------------------------------------------- store data
  logic [31:0] x;
  logic        is_float;
  always_comb begin
    is_float = 1'b1;
    unique case (cmd_i.opcode)
      OP_MAC, OP_VADDSUB, OP_VMULT, OP_OUTERP, OP_MASKMAC: x = fm_res;
      OP_MAXMIN: begin
        x = cmd_i.alt ? {16'b0, best_q} : alu_q;
        is_float = !cmd_i.alt;
      end
      default: x = alu_q;
    endcase
    std_data_o = (cmd_i.relu && is_float && x[31]) ? FP_ZERO : x;
  end
  assign std_push_o = st_pend_q;
  assign busy_o     = st_pend_q || phase_q;

  a_push_room: assert property (@(posedge clk_i) disable iff (!rst_ni)
                                std_push_o |-> std_free_i != '0)
    else $error("ntx_fpu: store data pushed into a full STD FIFO");
endmodule
