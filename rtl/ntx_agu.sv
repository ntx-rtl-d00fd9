// ntx_agu -- one NTX address generator unit.
//
// A 32-bit address register and an adder. load_i sets the address to the
// programmed base; on step_i the address advances by one of five
// programmable strides, the one selected by level_i, which is the
// outermost hardware loop that increments in that step. A level of 5 or
// more (the loop nest ends) leaves the address unchanged. Strides are byte
// offsets in two's complement, so they may be negative; the programmer
// folds the rewind of the inner loops into the stride of each outer loop.
// addr_o is the register output: the address of the current iteration.
module ntx_agu
  import ntx_pkg::*;
#(
  parameter int unsigned N  = NUM_LOOPS,
  parameter int unsigned AW = ADDR_W
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic                 load_i,
  input  logic [AW-1:0]        base_i,
  input  logic                 step_i,
  input  logic [2:0]           level_i,
  input  logic [N-1:0][AW-1:0] stride_i,
  output logic [AW-1:0]        addr_o
);
  logic [AW-1:0] addr_q;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                              addr_q <= '0;
    else if (load_i)                          addr_q <= base_i;
    else if (step_i && (level_i < 3'(N)))     addr_q <= addr_q + stride_i[level_i];
  end

  assign addr_o = addr_q;
endmodule
