// mpmc_req_fifo: the request FIFO of a PRE, the write FIFO (WFF) or the read
// FIFO (RFF) of the paper.
//
// A single-clock show-ahead FIFO of request records {i, BC_i, CA_i}: head is
// valid while empty is low and pop removes it. count is the number of stored
// records; the window scheduler in POS takes it as the window size. DEPTH
// must be a power of two and at least the number of ports, since every port
// has at most one request in flight (its FLAG bit is low meanwhile), so the
// FIFO cannot overflow; an assertion checks this. Depth and show-ahead read
// are this design's choices.
module mpmc_req_fifo
  import mpmc_pkg::*;
#(
  parameter int unsigned DEPTH = MAX_PORTS,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  logic    push,
  input  req_t    din,
  input  logic    pop,
  output req_t    head,
  output logic    empty,
  output logic [AW:0] count
);
  req_t        mem [DEPTH];
  logic [AW:0] wp, rp;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp <= '0;
      rp <= '0;
    end else begin
      if (push) begin
        mem[wp[AW-1:0]] <= din;
        wp <= wp + 1'b1;
      end
      if (pop && !empty) rp <= rp + 1'b1;
    end
  end

  assign count = wp - rp;
  assign empty = (wp == rp);
  assign head  = mem[rp[AW-1:0]];

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && count == (AW+1)'(DEPTH) && !pop))
    else $error("request FIFO overflow");
endmodule
