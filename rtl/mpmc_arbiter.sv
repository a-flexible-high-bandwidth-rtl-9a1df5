// mpmc_arbiter: ARBITER, the scheduler of the controller: a write PRE, a
// read PRE and POS.
//
// Each PRE polls the used ports for its direction, checks the FLAG, module
// enable, done and port readiness bits, and queues accepted requests
// {i, BC_i, CA_i} in its FIFO (WFF or RFF), advancing CA_i in CONFIG.
// POS empties the two FIFOs window by window (WFCFS), drives the PHY command
// and data buses and returns each finished port index to its PRE. Everything
// runs on the controller clock clk.
// The PRE/POS split follows the paper.
module mpmc_arbiter
  import mpmc_pkg::*;
#(
  parameter int unsigned NPORTS = MAX_PORTS,
  localparam int unsigned FAW   = $clog2(MAX_PORTS)
) (
  input  logic              clk,
  input  logic              rst_n,
  // APPSYS
  input  logic [NPORTS-1:0] mod_en_w,
  input  logic [NPORTS-1:0] mod_en_r,
  // CONFIG
  input  logic [IDX_W:0]    n_used,
  input  logic [NPORTS-1:0] done_w,
  input  logic [NPORTS-1:0] done_r,
  output logic [IDX_W-1:0]  w_idx,
  input  logic [ADDR_W-1:0] w_ca,
  input  logic [ADDR_W-1:0] w_ea,
  input  logic [BC_W-1:0]   w_bc,
  output logic              w_adv,
  output logic [IDX_W-1:0]  w_adv_idx,
  output logic [IDX_W-1:0]  r_idx,
  input  logic [ADDR_W-1:0] r_ca,
  input  logic [ADDR_W-1:0] r_ea,
  input  logic [BC_W-1:0]   r_bc,
  output logic              r_adv,
  output logic [IDX_W-1:0]  r_adv_idx,
  // INTERFACE
  input  logic [NPORTS-1:0] wr_ready,
  input  logic [NPORTS-1:0] rd_ready,
  output logic [IDX_W-1:0]  wsel,
  output logic              wf_rd_en,
  input  logic [PHY_W-1:0]  wf_rd_q,
  input  logic              wf_empty,
  output logic [IDX_W-1:0]  rsel,
  output logic              rf_wr_en,
  output logic [PHY_W-1:0]  rf_wr_data,
  // PHY
  output phy_cmd_t          phy_cmd,
  output logic [PHY_W-1:0]  phy_wdata,
  input  logic              phy_ready,
  input  logic [PHY_W-1:0]  phy_rdata,
  input  logic              phy_rdata_valid,
  // status
  output logic [NPORTS-1:0] flags_w,
  output logic [NPORTS-1:0] flags_r,
  output logic              win_start,
  output logic              win_dir,
  output logic [FAW:0]      win_size,
  output logic              rd_first
);
  req_t         wff_head, rff_head;
  logic         wff_empty, rff_empty, wff_pop, rff_pop;
  logic [FAW:0] wff_count, rff_count;
  logic         w_done, r_done;
  logic [IDX_W-1:0] w_j, r_j;

  mpmc_pre #(.NPORTS(NPORTS)) u_wpre (
    .clk(clk), .rst_n(rst_n), .n_used(n_used),
    .mod_en(mod_en_w), .done(done_w), .port_ready(wr_ready),
    .cfg_idx(w_idx), .cfg_ca(w_ca), .cfg_ea(w_ea), .cfg_bc(w_bc),
    .cfg_adv(w_adv), .cfg_adv_idx(w_adv_idx),
    .fifo_pop(wff_pop), .fifo_head(wff_head), .fifo_empty(wff_empty), .fifo_count(wff_count),
    .trans_done(w_done), .j(w_j), .flags(flags_w)
  );

  mpmc_pre #(.NPORTS(NPORTS)) u_rpre (
    .clk(clk), .rst_n(rst_n), .n_used(n_used),
    .mod_en(mod_en_r), .done(done_r), .port_ready(rd_ready),
    .cfg_idx(r_idx), .cfg_ca(r_ca), .cfg_ea(r_ea), .cfg_bc(r_bc),
    .cfg_adv(r_adv), .cfg_adv_idx(r_adv_idx),
    .fifo_pop(rff_pop), .fifo_head(rff_head), .fifo_empty(rff_empty), .fifo_count(rff_count),
    .trans_done(r_done), .j(r_j), .flags(flags_r)
  );

  mpmc_pos u_pos (
    .clk(clk), .rst_n(rst_n),
    .wff_head(wff_head), .wff_empty(wff_empty), .wff_count(wff_count), .wff_pop(wff_pop),
    .rff_head(rff_head), .rff_empty(rff_empty), .rff_count(rff_count), .rff_pop(rff_pop),
    .wsel(wsel), .wf_rd_en(wf_rd_en), .wf_rd_q(wf_rd_q), .wf_empty(wf_empty),
    .rsel(rsel), .rf_wr_en(rf_wr_en), .rf_wr_data(rf_wr_data),
    .phy_cmd(phy_cmd), .phy_wdata(phy_wdata), .phy_ready(phy_ready),
    .phy_rdata(phy_rdata), .phy_rdata_valid(phy_rdata_valid),
    .w_trans_done(w_done), .w_j(w_j), .r_trans_done(r_done), .r_j(r_j),
    .win_start(win_start), .win_dir(win_dir), .win_size(win_size), .rd_first(rd_first)
  );
endmodule
