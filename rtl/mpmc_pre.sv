// mpmc_pre: one PRE sub-module (write PRE or read PRE; both are the same).
//
// PRE decides which ports may start a burst and queues their requests for
// POS. It is a two-stage pipeline:
//   stage 0  POLLING offers port index i. It goes to CONFIG as the lookup
//            index. The DECODER picks mod_en_i (module enabled and its
//            transfer not done) and port_ready_i (the PORT's DCDWFF can take
//            or give a whole burst), the MUX picks FLAG bit F_i. If all three
//            are one the request is accepted: CLR clears F_i at the next
//            clock, marking PORT_i as in progress.
//   stage 1  CONFIG returns CA_i, EA_i and BC_i. The record {i, BC_i, CA_i}
//            is written to the request FIFO (WFF or RFF) and CONFIG is told
//            to advance CA_i by BC_i.
// When POS finishes the burst it returns the index as j with trans_done, and
// SET raises F_j again so the port can be polled for its next burst. Set and
// clear happen in the same clock without conflict (a set bit is never
// cleared by SET and a clear needs F_i = 1).
// All FLAG bits are high after reset. A port whose CA has reached EA by
// stage 1 (a re-configuration in between) is not queued and gets its flag
// back. Pipeline, FLAG, SET/CLR and FIFO record follow the paper; the stage-1
// EA check is this design's choice.
module mpmc_pre
  import mpmc_pkg::*;
#(
  parameter int unsigned NPORTS = MAX_PORTS,
  localparam int unsigned FAW   = $clog2(MAX_PORTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [IDX_W:0]    n_used,
  input  logic [NPORTS-1:0] mod_en,      // from APPSYS
  input  logic [NPORTS-1:0] done,        // CA >= EA, from CONFIG
  input  logic [NPORTS-1:0] port_ready,  // from INTERFACE
  // CONFIG lookup
  output logic [IDX_W-1:0]  cfg_idx,
  input  logic [ADDR_W-1:0] cfg_ca,
  input  logic [ADDR_W-1:0] cfg_ea,
  input  logic [BC_W-1:0]   cfg_bc,
  output logic              cfg_adv,
  output logic [IDX_W-1:0]  cfg_adv_idx,
  // to / from POS
  input  logic              fifo_pop,
  output req_t              fifo_head,
  output logic              fifo_empty,
  output logic [FAW:0]      fifo_count,
  input  logic              trans_done,
  input  logic [IDX_W-1:0]  j,
  output logic [NPORTS-1:0] flags
);
  logic [IDX_W-1:0] i;
  logic             active, hit0, hit1, push;
  logic [IDX_W-1:0] i1;

  mpmc_polling u_poll (.clk(clk), .rst_n(rst_n), .n_used(n_used), .idx(i), .active(active));

  assign cfg_idx = i;

  // DECODER, MUX and the three-input AND
  always_comb begin
    hit0 = 1'b0;
    for (int p = 0; p < NPORTS; p++)
      if (i == IDX_W'(p))
        hit0 = active && flags[p] && mod_en[p] && !done[p] && port_ready[p];
  end

  assign push        = hit1 && (cfg_ca < cfg_ea);
  assign cfg_adv     = push;
  assign cfg_adv_idx = i1;

  // FLAG register with CLR and SET
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      flags <= '1;
      hit1  <= 1'b0;
      i1    <= '0;
    end else begin
      hit1 <= hit0;
      i1   <= i;
      for (int p = 0; p < NPORTS; p++) begin
        if (hit0 && i == IDX_W'(p))                        flags[p] <= 1'b0;  // CLR
        if (trans_done && j == IDX_W'(p))                  flags[p] <= 1'b1;  // SET
        if (hit1 && !push && i1 == IDX_W'(p))              flags[p] <= 1'b1;  // dropped
      end
    end
  end

  mpmc_req_fifo #(.DEPTH(MAX_PORTS)) u_fifo (
    .clk(clk), .rst_n(rst_n),
    .push(push), .din('{idx: i1, bc: cfg_bc, ca: cfg_ca}),
    .pop(fifo_pop), .head(fifo_head), .empty(fifo_empty), .count(fifo_count)
  );

  // SET only ever targets a port that is in progress.
  a_set_busy: assert property (@(posedge clk) disable iff (!rst_n)
                               trans_done |-> !flags[j])
    else $error("trans_done for a port that is not in progress");
endmodule
