// mpmc_polling: the POLLING circuit of a PRE.
//
// A counter that visits the port indices 0, 1, ..., N-1, 0, ... one per
// clock, where N is the number of used ports from CONFIG (read every cycle,
// so a new N takes effect at once). With N = 0 the index stays at 0 and
// active is low. Visiting every used port in turn is what spreads the
// bandwidth evenly over the ports. The paper draws POLLING as the ring
// 0 -> 1 -> ... -> N-1; the one-index-per-cycle rate is this design's choice.
module mpmc_polling
  import mpmc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic [IDX_W:0]   n_used,
  output logic [IDX_W-1:0] idx,
  output logic             active     // idx is a used port
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                idx <= '0;
    else if ((IDX_W+1)'(idx) + 1'b1 >= n_used) idx <= '0;
    else                                       idx <= idx + 1'b1;
  end

  assign active = (IDX_W+1)'(idx) < n_used;
endmodule
