// mpmc_pos: POS, the back half of the arbiter. It holds WCTRL, RCTRL, the
// window scheduler of the window-based first-come-first-serve (WFCFS) scheme
// and the command MUX towards the PHY.
//
// WFCFS: requests wait in the write FIFO (WFF) and read FIFO (RFF). When the
// command bus is free, the scheduler opens a window on one direction whose
// size is the number of records in that FIFO at that moment, and lets the
// matching control serve exactly that many, in arrival order. Records that
// arrive meanwhile wait for the next window. When a window is over (all its
// records taken and the last write burst finished or read command accepted),
// the next window goes to the other direction if that FIFO holds anything,
// otherwise to the same direction again. The bus therefore turns between read
// and write at most once per window instead of once per request.
// Read data returning from the PHY keep flowing into the ports through RCTRL
// during write windows, so both controls work in parallel.
// Outputs win_start / win_dir / win_size report each window opened (for
// measurement). Timing: a new window is opened one clock after the previous
// one ends and its first record is taken the clock after that.
// The window rule follows the paper's example (reads R0, R2, R3 in one
// window, then writes W0..W3); the tie-breaking (other direction first,
// reads first after reset) is this design's choice.
module mpmc_pos
  import mpmc_pkg::*;
#(
  localparam int unsigned FAW = $clog2(MAX_PORTS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // write FIFO
  input  req_t             wff_head,
  input  logic             wff_empty,
  input  logic [FAW:0]     wff_count,
  output logic             wff_pop,
  // read FIFO
  input  req_t             rff_head,
  input  logic             rff_empty,
  input  logic [FAW:0]     rff_count,
  output logic             rff_pop,
  // INTERFACE
  output logic [IDX_W-1:0] wsel,
  output logic             wf_rd_en,
  input  logic [PHY_W-1:0] wf_rd_q,
  input  logic             wf_empty,
  output logic [IDX_W-1:0] rsel,
  output logic             rf_wr_en,
  output logic [PHY_W-1:0] rf_wr_data,
  // PHY
  output phy_cmd_t         phy_cmd,
  output logic [PHY_W-1:0] phy_wdata,
  input  logic             phy_ready,
  input  logic [PHY_W-1:0] phy_rdata,
  input  logic             phy_rdata_valid,
  // to PRE
  output logic             w_trans_done,
  output logic [IDX_W-1:0] w_j,
  output logic             r_trans_done,
  output logic [IDX_W-1:0] r_j,
  // window report
  output logic             win_start,
  output logic             win_dir,      // 1 = write window
  output logic [FAW:0]     win_size,
  output logic             rd_first
);
  logic         dir;                     // 1 = write window
  logic [FAW:0] win_left;
  logic         w_busy, r_busy, idle;
  phy_cmd_t     w_cmd, r_cmd;

  assign idle = (win_left == '0) && !w_busy && !r_busy;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dir       <= 1'b1;                           // as if a write window just ended

      win_left  <= '0;
      win_start <= 1'b0;
      win_size  <= '0;
    end else begin
      win_start <= 1'b0;
      if (idle) begin
        if (!dir && !wff_empty) begin                  // turn to writes
          dir <= 1'b1; win_left <= wff_count; win_start <= 1'b1; win_size <= wff_count;
        end else if (dir && !rff_empty) begin          // turn to reads
          dir <= 1'b0; win_left <= rff_count; win_start <= 1'b1; win_size <= rff_count;
        end else if (dir && !wff_empty) begin          // writes again
          win_left <= wff_count; win_start <= 1'b1; win_size <= wff_count;
        end else if (!dir && !rff_empty) begin         // reads again
          win_left <= rff_count; win_start <= 1'b1; win_size <= rff_count;
        end
      end else if (wff_pop || rff_pop) begin
        win_left <= win_left - 1'b1;
      end
    end
  end

  assign win_dir = dir;

  mpmc_wctrl u_wctrl (
    .clk(clk), .rst_n(rst_n), .allow(dir && win_left != '0),
    .fifo_head(wff_head), .fifo_empty(wff_empty), .fifo_pop(wff_pop),
    .wsel(wsel), .wf_rd_en(wf_rd_en), .wf_rd_q(wf_rd_q), .wf_empty(wf_empty),
    .cmd(w_cmd), .wdata(phy_wdata), .phy_ready(phy_ready && dir),
    .trans_done(w_trans_done), .j(w_j), .busy(w_busy)
  );

  mpmc_rctrl u_rctrl (
    .clk(clk), .rst_n(rst_n), .allow(!dir && win_left != '0),
    .fifo_head(rff_head), .fifo_empty(rff_empty), .fifo_pop(rff_pop),
    .cmd(r_cmd), .phy_ready(phy_ready && !dir),
    .rdata(phy_rdata), .rdata_valid(phy_rdata_valid),
    .rsel(rsel), .rf_wr_en(rf_wr_en), .rf_wr_data(rf_wr_data),
    .trans_done(r_trans_done), .j(r_j), .busy(r_busy), .rd_first(rd_first)
  );

  // command MUX
  assign phy_cmd = dir ? w_cmd : r_cmd;

  a_one_dir: assert property (@(posedge clk) disable iff (!rst_n) !(w_busy && r_busy))
    else $error("read and write commands active together");
endmodule
