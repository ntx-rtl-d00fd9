// ntx_hwloops -- the five cascaded hardware loop counters of NTX.
//
// Each loop i keeps a 16-bit counter that runs from 0 to its programmable
// maximum count max_i[i] (the loop runs max+1 times) and is enabled when
// i < outer_level_i. On step_i loop 0 increments; a loop that is at its
// maximum wraps to zero and carries into the next higher loop, so the
// counters form one nested loop. level_o names the outermost loop that
// increments in this step (the AGUs pick their stride with it); when every
// enabled loop is at its maximum, the step ends the nest and done_o is high.
// first_o/last_o tell, per loop, whether its counter is at 0 / at its
// maximum (used for init, store and done triggers).
// clear_i zeroes all counters (start of a command). All outputs besides the
// counters are combinational from the counters, the maxima and outer_level_i.
module ntx_hwloops
  import ntx_pkg::*;
#(
  parameter int unsigned N     = NUM_LOOPS,
  parameter int unsigned CW    = CNT_W
) (
  input  logic                    clk_i,
  input  logic                    rst_ni,
  input  logic                    clear_i,
  input  logic                    step_i,
  input  logic [N-1:0][CW-1:0]    max_i,
  input  logic [2:0]              outer_level_i,
  output logic [N-1:0][CW-1:0]    cnt_o,
  output logic [N-1:0]            first_o,
  output logic [N-1:0]            last_o,
  output logic [2:0]              level_o,
  output logic                    done_o
);
  logic [N-1:0][CW-1:0] cnt_q;
  logic [N-1:0]         en;

  always_comb begin
    for (int i = 0; i < N; i++) begin
      en[i]      = (3'(i) < outer_level_i);
      first_o[i] = (cnt_q[i] == '0);
      // A disabled loop counts as finished so that it never blocks a carry.
      last_o[i]  = !en[i] || (cnt_q[i] == max_i[i]);
    end
    // Outermost incrementing loop: the first one, from loop 0 up, that is
    // not at its maximum.
    level_o = 3'(N);
    for (int i = N-1; i >= 0; i--) begin
      if (en[i] && !last_o[i]) level_o = 3'(i);
    end
    done_o = &last_o;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      cnt_q <= '0;
    end else if (clear_i) begin
      cnt_q <= '0;
    end else if (step_i) begin
      for (int i = 0; i < N; i++) begin
        if (3'(i) < level_o)       cnt_q[i] <= '0;              // wraps
        else if (3'(i) == level_o) cnt_q[i] <= cnt_q[i] + 1'b1; // increments
      end
    end
  end

  assign cnt_o = cnt_q;
endmodule
