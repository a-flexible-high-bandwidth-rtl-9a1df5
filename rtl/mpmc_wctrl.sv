// mpmc_wctrl: WCTRL, the write control of POS.
//
// Three tasks run in parallel, each a few counters and gates rather than a
// state machine:
//   W_A  takes the next record {i, BC, CA} from the write FIFO (WFF) when the
//        window scheduler allows writes, and returns trans_done with the port
//        index j when the burst is finished;
//   W_B  drives the burst to the PHY: a write request with address CA and
//        burst size BC on the first beat, and on every beat the head word of
//        PORT_i's write DCDWFF, which it pops when the PHY accepts the beat;
//   W_C  counts the beats the PHY accepts (phy_ready) and, after BC of them,
//        ends the burst and tells W_A.
// A new record is taken in the same clock as the last beat of the previous
// burst is accepted, so bursts follow each other without a gap.
// Timing: the write request is raised the clock after the record is taken;
// trans_done is a one-clock pulse the clock after the last beat.
// The task split follows the paper; the PHY handshake (Avalon-style
// write_req / burstbegin / ready) is this design's choice, as the paper does
// not describe the PHY's local interface. phy_wdata is the selected port's
// head word passed straight through: W_B lets the port drive the PHY
// directly, with no register in between.
module mpmc_wctrl
  import mpmc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             allow,        // window grants a write burst
  input  req_t             fifo_head,
  input  logic             fifo_empty,
  output logic             fifo_pop,
  // PORT side
  output logic [IDX_W-1:0] wsel,
  output logic             wf_rd_en,
  input  logic [PHY_W-1:0] wf_rd_q,
  input  logic             wf_empty,
  // PHY side
  output phy_cmd_t         cmd,
  output logic [PHY_W-1:0] wdata,
  input  logic             phy_ready,
  // to PRE
  output logic             trans_done,
  output logic [IDX_W-1:0] j,
  output logic             busy
);
  logic [IDX_W-1:0]  idx;
  logic [ADDR_W-1:0] ca;
  logic [BC_W-1:0]   bc, beats;
  logic              first, beat_ok, last_ok;

  assign busy     = (beats != '0);
  assign beat_ok  = busy && phy_ready;                 // W_C: beat accepted
  assign last_ok  = beat_ok && (beats == BC_W'(1));
  assign fifo_pop = allow && !fifo_empty && (!busy || last_ok);   // W_A

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      idx <= '0; ca <= '0; bc <= '0; beats <= '0; first <= 1'b0;
      trans_done <= 1'b0; j <= '0;
    end else begin
      trans_done <= last_ok;
      if (last_ok) j <= idx;
      if (fifo_pop) begin
        idx   <= fifo_head.idx;
        ca    <= fifo_head.ca;
        bc    <= fifo_head.bc;
        beats <= fifo_head.bc;
        first <= 1'b1;
      end else if (beat_ok) begin
        beats <= beats - 1'b1;
        first <= 1'b0;
      end
    end
  end

  // W_B
  assign wsel     = idx;
  assign wf_rd_en = beat_ok;
  assign wdata    = wf_rd_q;
  always_comb begin
    cmd            = '0;
    cmd.write_req  = busy;
    cmd.burstbegin = busy && first;
    cmd.addr       = ca;
    cmd.size       = bc;
  end

  // The port was only granted with a whole burst stored.
  a_data_ready: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !wf_empty)
    else $error("write burst ran out of port data");
endmodule
