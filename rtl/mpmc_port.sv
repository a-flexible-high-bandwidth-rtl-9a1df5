// mpmc_port: one PORT of the INTERFACE, a pair of DCDWFFs.
//
// The write DCDWFF takes MOD_W-bit words from the application module (MOD)
// on mod_clk and hands PHY_W-bit words to the PHY side on clk. The read
// DCDWFF takes PHY_W-bit words returned by the PHY on clk and hands MOD_W-bit
// words to the MOD on mod_clk. Both are AW-deep in PHY words.
// Two readiness bits go to the arbiter (the paper's port_full):
//   wr_ready  the write DCDWFF holds at least bc_w PHY words (its
//             almost_full, threshold = this port's write burst count), so a
//             whole write burst can stream to the PHY without a gap;
//   rd_ready  the read DCDWFF has room for at least bc_r PHY words, so a whole
//             read burst can be stored as it returns.
// The paper names both DCDWFFs and the almost_full rule for writes; the room
// test for reads is this design's choice.
module mpmc_port #(
  parameter int unsigned MOD_W = 32,
  parameter int unsigned PHY_W = 128,
  parameter int unsigned AW    = 7,
  parameter int unsigned BC_W  = 7
) (
  input  logic             clk,        // controller / PHY local clock
  input  logic             rst_n,
  // MOD side
  input  logic             mod_clk,
  input  logic             mod_rst_n,
  input  logic             mod_wr_en,
  input  logic [MOD_W-1:0] mod_wr_data,
  output logic             mod_full,
  input  logic             mod_rd_en,
  output logic [MOD_W-1:0] mod_rd_q,
  output logic             mod_empty,
  // PHY side (clk)
  input  logic [BC_W-1:0]  bc_w,
  input  logic [BC_W-1:0]  bc_r,
  input  logic             wf_rd_en,   // pop one PHY word of write data
  output logic [PHY_W-1:0] wf_rd_q,
  output logic             wf_empty,
  input  logic             rf_wr_en,   // push one PHY word of read data
  input  logic [PHY_W-1:0] rf_wr_data,
  output logic             wr_ready,
  output logic             rd_ready
);
  localparam int unsigned DEPTH = 2 ** AW;

  logic [AW:0] wf_wr_level, wf_rd_level, rf_wr_level, rf_rd_level;
  logic        rf_full, rf_af;

  dcdwff #(.WR_W(MOD_W), .RD_W(PHY_W), .AW(AW)) u_wr_fifo (
    .wr_clk(mod_clk), .wr_rst_n(mod_rst_n), .wr_en(mod_wr_en), .wr_data(mod_wr_data),
    .full(mod_full), .wr_level(wf_wr_level),
    .rd_clk(clk), .rd_rst_n(rst_n), .rd_en(wf_rd_en), .rd_q(wf_rd_q),
    .empty(wf_empty), .rd_level(wf_rd_level),
    .af_level((AW+1)'(bc_w)), .almost_full(wr_ready)
  );

  dcdwff #(.WR_W(PHY_W), .RD_W(MOD_W), .AW(AW)) u_rd_fifo (
    .wr_clk(clk), .wr_rst_n(rst_n), .wr_en(rf_wr_en), .wr_data(rf_wr_data),
    .full(rf_full), .wr_level(rf_wr_level),
    .rd_clk(mod_clk), .rd_rst_n(mod_rst_n), .rd_en(mod_rd_en), .rd_q(mod_rd_q),
    .empty(mod_empty), .rd_level(rf_rd_level),
    .af_level('0), .almost_full(rf_af)
  );

  assign rd_ready = ((AW+1)'(DEPTH) - rf_wr_level) >= (AW+1)'(bc_r);

  // Read data only arrives for bursts whose room was checked.
  a_rf_no_drop: assert property (@(posedge clk) disable iff (!rst_n) !(rf_wr_en && rf_full))
    else $error("read data pushed into a full read DCDWFF");

  logic unused;
  assign unused = ^{wf_wr_level, wf_rd_level, rf_rd_level, rf_af};
endmodule
