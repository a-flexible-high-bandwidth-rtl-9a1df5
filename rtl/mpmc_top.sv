// mpmc_top: the multi-port memory controller front end (INTERFACE, CONFIG
// and ARBITER) with the PHY's local interface brought out as ports.
//
// NPORTS application modules (MODs) each own a bidirectional PORT with its own
// clock mod_clk[p]: they write MOD_W-bit words into the port's write DCDWFF
// and read MOD_W-bit words from its read DCDWFF whenever the FIFO allows,
// without waiting for the memory. The application's CONTROL unit sets up,
// through the cfg_* register port, the number of used ports N and, per port
// and direction, a start address SA, an end address EA and a burst count BC
// (addresses and BC in PHY_W-bit words). With mod_en_w[p] / mod_en_r[p] set,
// the arbiter then moves port p's write data to memory in bursts of BC words
// from SA up to EA, and fills its read DCDWFF from memory likewise;
// done_w[p] / done_r[p] rise when CA has reached EA.
// The PHY side is an Avalon-style burst interface on clk: phy_cmd carries
// write_req / read_req / burstbegin / addr / size, phy_ready accepts a
// command or write beat, read data come back in order with phy_rdata_valid.
// Status outputs expose the FLAG registers and each WFCFS window opened.
// The block structure is the paper's Fig. 1; the PHY handshake, the shared
// MOD_W of all ports and the FIFO depth 2**AW are this design's choices.
module mpmc_top
  import mpmc_pkg::*;
#(
  parameter int unsigned NPORTS = MAX_PORTS,   // physical ports built
  parameter int unsigned MOD_W  = 32,          // MOD-side word width
  parameter int unsigned AW     = 7,           // DCDWFF depth 2**AW PHY words
  localparam int unsigned CFG_AW = $clog2(8 * NPORTS + 1),
  localparam int unsigned FAW    = $clog2(MAX_PORTS)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // CONTROL
  input  logic                          cfg_we,
  input  logic [CFG_AW-1:0]             cfg_addr,
  input  logic [ADDR_W-1:0]             cfg_wdata,
  output logic [ADDR_W-1:0]             cfg_rdata,
  input  logic [NPORTS-1:0]             mod_en_w,
  input  logic [NPORTS-1:0]             mod_en_r,
  output logic [NPORTS-1:0]             done_w,
  output logic [NPORTS-1:0]             done_r,
  // MODs
  input  logic [NPORTS-1:0]             mod_clk,
  input  logic [NPORTS-1:0]             mod_rst_n,
  input  logic [NPORTS-1:0]             mod_wr_en,
  input  logic [NPORTS-1:0][MOD_W-1:0]  mod_wr_data,
  output logic [NPORTS-1:0]             mod_full,
  input  logic [NPORTS-1:0]             mod_rd_en,
  output logic [NPORTS-1:0][MOD_W-1:0]  mod_rd_q,
  output logic [NPORTS-1:0]             mod_empty,
  // PHY local interface
  output phy_cmd_t                      phy_cmd,
  output logic [PHY_W-1:0]              phy_wdata,
  input  logic                          phy_ready,
  input  logic [PHY_W-1:0]              phy_rdata,
  input  logic                          phy_rdata_valid,
  // status
  output logic [NPORTS-1:0]             flags_w,
  output logic [NPORTS-1:0]             flags_r,
  output logic                          win_start,
  output logic                          win_dir,
  output logic [FAW:0]                  win_size,
  output logic                          rd_first
);
  logic [IDX_W:0]              n_used;
  logic [NPORTS-1:0][BC_W-1:0] bc_w_all, bc_r_all;
  logic [IDX_W-1:0]            w_idx, r_idx, w_adv_idx, r_adv_idx, wsel, rsel;
  logic [ADDR_W-1:0]           w_ca, w_ea, r_ca, r_ea;
  logic [BC_W-1:0]             w_bc, r_bc;
  logic                        w_adv, r_adv, wf_rd_en, wf_empty, rf_wr_en;
  logic [PHY_W-1:0]            wf_rd_q, rf_wr_data;
  logic [NPORTS-1:0]           wr_ready, rd_ready;

  mpmc_config #(.NPORTS(NPORTS)) u_config (
    .clk(clk), .rst_n(rst_n),
    .cfg_we(cfg_we), .cfg_addr(cfg_addr), .cfg_wdata(cfg_wdata), .cfg_rdata(cfg_rdata),
    .n_used(n_used), .done_w(done_w), .done_r(done_r),
    .bc_w_all(bc_w_all), .bc_r_all(bc_r_all),
    .w_idx(w_idx), .w_ca(w_ca), .w_ea(w_ea), .w_bc(w_bc), .w_adv(w_adv), .w_adv_idx(w_adv_idx),
    .r_idx(r_idx), .r_ca(r_ca), .r_ea(r_ea), .r_bc(r_bc), .r_adv(r_adv), .r_adv_idx(r_adv_idx)
  );

  mpmc_interface #(.NPORTS(NPORTS), .MOD_W(MOD_W), .AW(AW)) u_interface (
    .clk(clk), .rst_n(rst_n),
    .mod_clk(mod_clk), .mod_rst_n(mod_rst_n),
    .mod_wr_en(mod_wr_en), .mod_wr_data(mod_wr_data), .mod_full(mod_full),
    .mod_rd_en(mod_rd_en), .mod_rd_q(mod_rd_q), .mod_empty(mod_empty),
    .bc_w(bc_w_all), .bc_r(bc_r_all),
    .wsel(wsel), .wf_rd_en(wf_rd_en), .wf_rd_q(wf_rd_q), .wf_empty(wf_empty),
    .rsel(rsel), .rf_wr_en(rf_wr_en), .rf_wr_data(rf_wr_data),
    .wr_ready(wr_ready), .rd_ready(rd_ready)
  );

  mpmc_arbiter #(.NPORTS(NPORTS)) u_arbiter (
    .clk(clk), .rst_n(rst_n),
    .mod_en_w(mod_en_w), .mod_en_r(mod_en_r),
    .n_used(n_used), .done_w(done_w), .done_r(done_r),
    .w_idx(w_idx), .w_ca(w_ca), .w_ea(w_ea), .w_bc(w_bc), .w_adv(w_adv), .w_adv_idx(w_adv_idx),
    .r_idx(r_idx), .r_ca(r_ca), .r_ea(r_ea), .r_bc(r_bc), .r_adv(r_adv), .r_adv_idx(r_adv_idx),
    .wr_ready(wr_ready), .rd_ready(rd_ready),
    .wsel(wsel), .wf_rd_en(wf_rd_en), .wf_rd_q(wf_rd_q), .wf_empty(wf_empty),
    .rsel(rsel), .rf_wr_en(rf_wr_en), .rf_wr_data(rf_wr_data),
    .phy_cmd(phy_cmd), .phy_wdata(phy_wdata), .phy_ready(phy_ready),
    .phy_rdata(phy_rdata), .phy_rdata_valid(phy_rdata_valid),
    .flags_w(flags_w), .flags_r(flags_r),
    .win_start(win_start), .win_dir(win_dir), .win_size(win_size), .rd_first(rd_first)
  );
endmodule
