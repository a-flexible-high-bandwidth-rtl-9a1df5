// mpmc_sync: two-flip-flop synchronizer for a gray-coded pointer crossing
// into the clock domain of clk. Only one bit of a gray code changes per step,
// so the synchronized value is always either the old or the new pointer.
// Reset clears both stages.
module mpmc_sync #(
  parameter int unsigned W = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [W-1:0] d,
  output logic [W-1:0] q
);
  logic [W-1:0] meta;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      meta <= '0;
      q    <= '0;
    end else begin
      meta <= d;
      q    <= meta;
    end
  end
endmodule
