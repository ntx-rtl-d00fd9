// ntx_pkg -- types, constants and small helper functions shared by the NTX
// co-processor and the cluster around it.
//
// Sizes that the architecture fixes (five 16-bit hardware loops, three
// 32-bit address generators, two 32-bit TCDM master ports, 32 TCDM banks,
// 64 kB of TCDM) are the defaults here.  The command word layout, the
// register map and the comparison encodings are this implementation's own
// choice; the architecture only lists the commands and their options.
package ntx_pkg;

  // ---------------------------------------------------------------- sizes
  localparam int unsigned NUM_LOOPS = 5;   // hardware loops L0..L4
  localparam int unsigned NUM_AGUS  = 3;   // address generators AGU0..AGU2
  localparam int unsigned CNT_W     = 16;  // loop counter width
  localparam int unsigned ADDR_W    = 32;  // AGU / TCDM address width
  localparam int unsigned DATA_W    = 32;  // fp32 words

  // ----------------------------------------------------------- commands
  // The nine commands of the NTX instruction set.
  typedef enum logic [3:0] {
    OP_NOP     = 4'd0,
    OP_MAC     = 4'd1,  // x = x + a*b                   (fused ReLU)
    OP_VADDSUB = 4'd2,  // x = a +/- b, two cycles       (fused ReLU)
    OP_VMULT   = 4'd3,  // x = a*b                       (fused ReLU)
    OP_OUTERP  = 4'd4,  // x = a*b, b re-read once per L0 sweep
    OP_MAXMIN  = 4'd5,  // x = cmp(a,x) ? a : x, index of winner kept
    OP_THTST   = 4'd6,  // x = cmp(a,b) ? 1.0 : 0.0
    OP_MASK    = 4'd7,  // x = cmp(a,0) ? b : 0.0
    OP_MASKMAC = 4'd8,  // x = x + (cmp(a,0) ? a*b : 0)
    OP_COPY    = 4'd9   // x = a (copy) or x = b (memset, alt=1)
  } opcode_e;

  // Source of the accumulator initialisation: x = [*AGU0|*AGU1|*AGU2|0.0]
  typedef enum logic [1:0] {INIT_AGU0 = 2'd0, INIT_AGU1 = 2'd1, INIT_AGU2 = 2'd2, INIT_ZERO = 2'd3} init_src_e;
  // Source of operand a: a = [*AGU0|*AGU1|*AGU2|NULL]
  typedef enum logic [1:0] {A_AGU0 = 2'd0, A_AGU1 = 2'd1, A_AGU2 = 2'd2, A_NONE = 2'd3} a_src_e;
  // Source of operand b: b = [*AGU1|0.0|1.0|NULL]
  typedef enum logic [1:0] {B_AGU1 = 2'd0, B_ZERO = 2'd1, B_ONE = 2'd2, B_NONE = 2'd3} b_src_e;
  // Comparator modes, "lhs <op> rhs".
  typedef enum logic [2:0] {CMP_GT = 3'd0, CMP_GE = 3'd1, CMP_LT = 3'd2, CMP_LE = 3'd3,
                            CMP_EQ = 3'd4, CMP_NE = 3'd5} cmp_e;

  // Command register layout (written last; the write launches the command).
  typedef struct packed {
    logic [6:0] rsvd;        // [31:25]
    logic       alt;         // [24]    MAXMIN: store index; COPY: memset (x=b)
    cmp_e       cmp;         // [23:21]
    logic       neg;         // [20]    subtract (VADDSUB) / negate product
    logic       relu;        // [19]    fused ReLU on the stored value
    b_src_e     b_src;       // [18:17]
    a_src_e     a_src;       // [16:15]
    init_src_e  init_src;    // [14:13]
    logic [2:0] store_level; // [12:10]
    logic [2:0] init_level;  // [9:7]
    logic [2:0] outer_level; // [6:4]  number of enabled loops, 1..5
    opcode_e    opcode;      // [3:0]
  } cmd_word_t;

  // The complete configuration of one command, as copied out of the
  // staging area into the controller's command register.
  typedef struct packed {
    cmd_word_t                                  word;
    logic [NUM_LOOPS-1:0][CNT_W-1:0]            loop_max;  // maximum count (iterations-1)
    logic [NUM_AGUS-1:0][ADDR_W-1:0]            agu_base;
    logic [NUM_AGUS-1:0][NUM_LOOPS-1:0][ADDR_W-1:0] agu_stride;
  } ntx_cfg_t;

  // Micro-instruction issued by the controller to the FPU (Cmd FIFO).
  typedef struct packed {
    logic init_mem;  // initialisation from memory: pop RD0, load x
    logic clr;       // body op, x starts from 0.0 (init from constant)
    logic pop_a;     // operand a arrives in RD0
    logic pop_b;     // operand b arrives in RD1
    logic store;     // write x back after this op
  } uop_t;

  // ---------------------------------------------------------- TCDM bus
  // Request/grant, one-cycle read response; also used for the register
  // ports of NTX and DMA.
  typedef struct packed {
    logic              req;
    logic [ADDR_W-1:0] addr;
    logic              we;
    logic [3:0]        be;
    logic [DATA_W-1:0] wdata;
  } tcdm_req_t;

  typedef struct packed {
    logic              gnt;
    logic              rvalid;
    logic [DATA_W-1:0] rdata;
  } tcdm_rsp_t;

  // ---------------------------------------------- AXI4 port (64 bit)
  // The cluster's external memory port. Only INCR bursts, no IDs, no
  // user or cache signals.
  localparam int unsigned AXI_DW = 64;
  typedef struct packed {
    logic              aw_valid;
    logic [ADDR_W-1:0] aw_addr;
    logic [7:0]        aw_len;
    logic [2:0]        aw_size;
    logic [1:0]        aw_burst;
    logic              w_valid;
    logic [AXI_DW-1:0] w_data;
    logic [AXI_DW/8-1:0] w_strb;
    logic              w_last;
    logic              b_ready;
    logic              ar_valid;
    logic [ADDR_W-1:0] ar_addr;
    logic [7:0]        ar_len;
    logic [2:0]        ar_size;
    logic [1:0]        ar_burst;
    logic              r_ready;
  } axi_req_t;

  typedef struct packed {
    logic              aw_ready;
    logic              w_ready;
    logic              b_valid;
    logic [1:0]        b_resp;
    logic              ar_ready;
    logic              r_valid;
    logic [AXI_DW-1:0] r_data;
    logic [1:0]        r_resp;
    logic              r_last;
  } axi_rsp_t;

  // -------------------------------------------------- register map (DMA)
  localparam logic [7:0] DMA_EXT_ADDR    = 8'h00;
  localparam logic [7:0] DMA_TCDM_ADDR   = 8'h04;
  localparam logic [7:0] DMA_ROW_LEN     = 8'h08;  // bytes per row, multiple of 8
  localparam logic [7:0] DMA_NUM_ROWS    = 8'h0c;
  localparam logic [7:0] DMA_EXT_STRIDE  = 8'h10;  // bytes between row starts
  localparam logic [7:0] DMA_TCDM_STRIDE = 8'h14;
  localparam logic [7:0] DMA_CTRL        = 8'h18;  // write starts; bit0 1: TCDM -> ext
  localparam logic [7:0] DMA_STATUS      = 8'h1c;  // bit0 busy

  // -------------------------------------------------- register map (NTX)
  localparam logic [7:0] REG_STATUS = 8'h00;  // RO  bit0 busy, bit1 irq pending
  localparam logic [7:0] REG_CMD    = 8'h04;  // WO  launches the staged command
  localparam logic [7:0] REG_IRQ    = 8'h08;  // R/W1C  irq pending
  localparam logic [7:0] REG_LOOP   = 8'h10;  // 0x10 + 4*i : loop i maximum count
  localparam logic [7:0] REG_AGU    = 8'h40;  // 0x40 + 0x20*j : AGU j base,
                                              //   + 4 + 4*k : AGU j stride k

  // ------------------------------------------------------- fp32 helpers
  localparam logic [31:0] FP_ZERO = 32'h0000_0000;
  localparam logic [31:0] FP_ONE  = 32'h3f80_0000;

  // Compare two fp32 values as real numbers (+0 == -0). NaN is not handled.
  function automatic logic fp_lt(logic [31:0] a, logic [31:0] b);
    logic a_zero, b_zero;
    a_zero = (a[30:0] == '0);
    b_zero = (b[30:0] == '0);
    if (a_zero && b_zero)       return 1'b0;
    if (a[31] != b[31])         return a[31];            // negative < positive
    if (a[31])                  return a[30:0] > b[30:0]; // both negative
    return a[30:0] < b[30:0];
  endfunction

  function automatic logic fp_eq(logic [31:0] a, logic [31:0] b);
    return (a == b) || ((a[30:0] == '0) && (b[30:0] == '0));
  endfunction

  function automatic logic fp_cmp(logic [31:0] a, logic [31:0] b, cmp_e mode);
    unique case (mode)
      CMP_GT:  return fp_lt(b, a);
      CMP_GE:  return !fp_lt(a, b);
      CMP_LT:  return fp_lt(a, b);
      CMP_LE:  return !fp_lt(b, a);
      CMP_EQ:  return fp_eq(a, b);
      CMP_NE:  return !fp_eq(a, b);
      default: return 1'b0;
    endcase
  endfunction

endpackage
