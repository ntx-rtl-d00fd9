// ntx_fmac -- fused multiply-accumulate unit of NTX with a wide fixed-point
// accumulator and deferred rounding.
//
// Every operation multiplies two fp32 operands exactly (24x24 -> 48-bit
// significand product), aligns the product to a fixed-point grid and adds
// it, without rounding, to an ACC_W-bit two's complement accumulator whose
// least significant bit weighs 2^-FRAC. Rounding happens only once, when
// the accumulator is converted back to fp32 (res_o): leading-zero count,
// normalising shift and round-to-nearest-even. With the defaults (300 bits,
// LSB = 2^-150) the accumulator holds every product and sum whose magnitude
// lies between 2^-150 and 2^149 exactly.
//
// Interface / timing: when en_i is high the accumulator is updated at the
// clock edge with
//     acc <= (clr_i ? 0 : acc) + (neg_i ? -1 : +1) * a_i * b_i
// res_o is a combinational function of the accumulator register, so the
// rounded result of an operation issued in cycle t is on res_o in cycle t+1.
// Single-cycle throughput, one cycle latency.
//
// The architecture describes the accumulator as a partial carry-save
// accumulator with two segments whose partial sums are reduced in
// pipelined stages; this implementation uses one plain wide adder and a
// single normalisation stage, which gives the same numbers. Subnormal
// inputs are treated as zero, infinities and NaNs are not handled, results
// below the smallest normal fp32 flush to zero and results above the
// largest become infinity. Products below 2^-150 lose their low bits.
module ntx_fmac #(
  parameter int unsigned ACC_W = 300,
  parameter int unsigned FRAC  = 150
) (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        en_i,
  input  logic        clr_i,
  input  logic        neg_i,
  input  logic [31:0] a_i,
  input  logic [31:0] b_i,
  output logic [31:0] res_o,
  output logic [ACC_W-1:0] acc_o
);
  localparam int unsigned EXT_W = ACC_W + 48;

  // ------------------------------------------------- product alignment
  logic [47:0]        prod;
  logic               prod_sign, prod_zero;
  logic signed [10:0] shamt;        // position of the product's LSB + 48
  logic [EXT_W-1:0]   ext;
  logic [ACC_W-1:0]   prod_fix, addend;
  logic [ACC_W-1:0]   acc_q, acc_d;

  always_comb begin
    prod      = {1'b1, a_i[22:0]} * {1'b1, b_i[22:0]};
    prod_sign = a_i[31] ^ b_i[31] ^ neg_i;
    prod_zero = (a_i[30:23] == '0) || (b_i[30:23] == '0);
    // value = prod * 2^(ea + eb - 254 - 46); in accumulator LSBs the
    // product's LSB sits at ea + eb - 300 + FRAC.
    shamt = 11'(signed'({3'b0, a_i[30:23]})) + 11'(signed'({3'b0, b_i[30:23]}))
          - 11'sd300 + 11'(FRAC) + 11'sd48;
    ext = '0;
    if (!prod_zero && shamt >= 0) begin
      if (shamt > 11'(EXT_W - 1)) ext = '0;
      else                        ext = EXT_W'(prod) << shamt;
    end
    prod_fix = ext[EXT_W-1:48];
    addend   = prod_sign ? (~prod_fix + 1'b1) : prod_fix;
    acc_d    = (clr_i ? '0 : acc_q) + addend;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)   acc_q <= '0;
    else if (en_i) acc_q <= acc_d;
  end

  assign acc_o = acc_q;

  // ------------------------------------------ normalisation and rounding
  logic             sign;
  logic [ACC_W-1:0] mag, norm;
  int unsigned      lz;
  logic [22:0]      mant;
  logic             guard, sticky, round_up;
  logic [23:0]      mant_r;
  int               exp_b;

  always_comb begin
    sign = acc_q[ACC_W-1];
    mag  = sign ? (~acc_q + 1'b1) : acc_q;
    lz   = ACC_W;
    for (int i = 0; i < ACC_W; i++) begin
      if (mag[i]) lz = ACC_W - 1 - i;
    end
    norm     = mag << lz;
    mant     = norm[ACC_W-2 -: 23];
    guard    = norm[ACC_W-25];
    sticky   = |norm[ACC_W-26:0];
    round_up = guard && (sticky || mant[0]);
    mant_r   = {1'b0, mant} + 24'(round_up);
    // exponent of the leading one: (ACC_W-1-lz) - FRAC, biased by 127
    exp_b    = int'(ACC_W) - 1 - int'(lz) - int'(FRAC) + 127 + int'(mant_r[23]);
    if (mag == '0 || exp_b <= 0) res_o = {sign & (mag != '0) & 1'b0, 31'b0};
    else if (exp_b >= 255)       res_o = {sign, 8'hff, 23'b0};
    else                         res_o = {sign, exp_b[7:0], mant_r[22:0]};
  end
endmodule
