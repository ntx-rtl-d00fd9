// ntx_fifo -- synchronous first-in first-out buffer used for every queue in
// NTX (address, read-data, store-data and micro-instruction FIFOs).
//
// push_i/pop_i are qualified internally: a push into a full FIFO or a pop
// from an empty one is ignored (and flagged by an assertion). Data is
// shown at the head (data_o) while empty_o is low; count_o gives the
// occupancy so producers can reserve space for requests in flight.
// Depth is any value >= 1; the architecture uses depths 5 and 7.
module ntx_fifo #(
  parameter type         T     = logic [31:0],
  parameter int unsigned DEPTH = 5
) (
  input  logic                       clk_i,
  input  logic                       rst_ni,
  input  logic                       flush_i,
  input  logic                       push_i,
  input  T                           data_i,
  input  logic                       pop_i,
  output T                           data_o,
  output logic                       full_o,
  output logic                       empty_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o
);
  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH+1);

  T                mem [DEPTH];
  logic [PW-1:0]   rd_ptr, wr_ptr;
  logic [CW-1:0]   count;
  logic            do_push, do_pop;

  assign full_o  = (count == CW'(DEPTH));
  assign empty_o = (count == '0);
  assign count_o = count;
  assign data_o  = mem[rd_ptr];
  assign do_push = push_i && !full_o;
  assign do_pop  = pop_i && !empty_o;

  function automatic logic [PW-1:0] inc(logic [PW-1:0] p);
    return (p == PW'(DEPTH-1)) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else if (flush_i) begin
      rd_ptr <= '0;
      wr_ptr <= '0;
      count  <= '0;
    end else begin
      if (do_push) wr_ptr <= inc(wr_ptr);
      if (do_pop)  rd_ptr <= inc(rd_ptr);
      count <= count + CW'(do_push) - CW'(do_pop);
    end
  end

  always_ff @(posedge clk_i) begin
    if (do_push) mem[wr_ptr] <= data_i;
  end

  a_no_overflow:  assert property (@(posedge clk_i) disable iff (!rst_ni) push_i |-> !full_o)
    else $error("ntx_fifo: push into full FIFO");
  a_no_underflow: assert property (@(posedge clk_i) disable iff (!rst_ni) pop_i |-> !empty_o)
    else $error("ntx_fifo: pop from empty FIFO");
endmodule
