// mpmc_rctrl: RCTRL, the read control of POS.
//
// Three tasks run in parallel, built from counters rather than a state
// machine:
//   R_A  takes the next record {i, BC, CA} from the read FIFO (RFF) when the
//        window scheduler allows reads, and returns trans_done with the port
//        index j when all data of that burst are stored in the port;
//   R_B  sends the read command (address CA, burst size BC) to the PHY; one
//        command per clock while the PHY is ready, so a window of k reads
//        takes k clocks of the command bus;
//   R_C  watches the data returning from the PHY (rdata_valid), steers each
//        word into the read DCDWFF of the port that asked for it and counts
//        them; after BC words it signals R_A.
// Several reads may be outstanding. The PHY returns read data in command
// order, so an in-order queue of {i, BC} of the issued commands tells R_C
// where each word belongs. rd_first pulses with the first word of every
// burst (the point the paper takes as the end of a read's latency).
// Timing: the command is raised the clock after the record is taken;
// trans_done is a one-clock pulse the clock after the last word.
// Task split follows the paper; the PHY handshake and the outstanding-command
// queue are this design's choices. The queue reuses the request FIFO, so it
// also stores the address field, which R_C never reads (lint reports those
// bits as unused; a synthesis tool removes them).
module mpmc_rctrl
  import mpmc_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  logic             allow,        // window grants a read command
  input  req_t             fifo_head,
  input  logic             fifo_empty,
  output logic             fifo_pop,
  // PHY side
  output phy_cmd_t         cmd,
  input  logic             phy_ready,
  input  logic [PHY_W-1:0] rdata,
  input  logic             rdata_valid,
  // PORT side
  output logic [IDX_W-1:0] rsel,
  output logic             rf_wr_en,
  output logic [PHY_W-1:0] rf_wr_data,
  // to PRE
  output logic             trans_done,
  output logic [IDX_W-1:0] j,
  output logic             busy,
  output logic             rd_first
);
  localparam int unsigned QAW = $clog2(MAX_PORTS);

  logic              cmd_valid, accept;
  logic [IDX_W-1:0]  idx;
  logic [ADDR_W-1:0] ca;
  logic [BC_W-1:0]   bc;
  req_t              oq_head;
  logic              oq_empty;
  logic [QAW:0]      oq_count;
  logic [BC_W-1:0]   got;
  logic              last_word;

  // R_A / R_B
  assign accept   = cmd_valid && phy_ready;
  assign fifo_pop = allow && !fifo_empty && (oq_count < (QAW+1)'(MAX_PORTS))
                    && (!cmd_valid || phy_ready);
  assign busy     = cmd_valid;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmd_valid <= 1'b0; idx <= '0; ca <= '0; bc <= '0;
    end else if (fifo_pop) begin
      cmd_valid <= 1'b1;
      idx       <= fifo_head.idx;
      ca        <= fifo_head.ca;
      bc        <= fifo_head.bc;
    end else if (accept) begin
      cmd_valid <= 1'b0;
    end
  end

  always_comb begin
    cmd            = '0;
    cmd.read_req   = cmd_valid;
    cmd.burstbegin = cmd_valid;
    cmd.addr       = ca;
    cmd.size       = bc;
  end

  // commands in flight, in issue order
  mpmc_req_fifo #(.DEPTH(MAX_PORTS)) u_outstanding (
    .clk(clk), .rst_n(rst_n),
    .push(accept), .din('{idx: idx, bc: bc, ca: '0}),
    .pop(last_word), .head(oq_head), .empty(oq_empty), .count(oq_count)
  );

  // R_C
  assign rsel       = oq_head.idx;
  assign rf_wr_en   = rdata_valid;
  assign rf_wr_data = rdata;
  assign last_word  = rdata_valid && (got + 1'b1 == oq_head.bc);
  assign rd_first   = rdata_valid && (got == '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      got <= '0; trans_done <= 1'b0; j <= '0;
    end else begin
      trans_done <= last_word;
      if (last_word) begin
        got <= '0;
        j   <= oq_head.idx;
      end else if (rdata_valid) begin
        got <= got + 1'b1;
      end
    end
  end

  a_no_stray_data: assert property (@(posedge clk) disable iff (!rst_n) rdata_valid |-> !oq_empty)
    else $error("read data without an outstanding command");
endmodule
