// mpmc_interface: the INTERFACE block, NPORTS PORTs plus the data-path
// multiplexer towards the PHY and demultiplexer from it.
//
// Every PORT (mpmc_port) has a write DCDWFF and a read DCDWFF, so each
// application module can run on its own clock (mod_clk[p]) and with its own
// word width while the controller side works in PHY words on clk.
// On the PHY side only one write burst and one read burst are in progress at
// a time, so the arbiter names the port it serves:
//   wsel / wf_rd_en  choose the port whose write data go to the PHY
//                    (wf_rd_q is that port's head word, show-ahead) and pop it;
//   rsel / rf_wr_en  choose the port that stores the read word rf_wr_data.
// wr_ready / rd_ready per port go to the write and read PRE.
// All ports share one MOD_W in this RTL (the paper lets every port choose its
// own width; a per-port width would need one MOD_W parameter per port).
module mpmc_interface
  import mpmc_pkg::*;
#(
  parameter int unsigned NPORTS = MAX_PORTS,
  parameter int unsigned MOD_W  = 32,
  parameter int unsigned AW     = 7
) (
  input  logic                          clk,
  input  logic                          rst_n,
  // MOD side, one entry per port
  input  logic [NPORTS-1:0]             mod_clk,
  input  logic [NPORTS-1:0]             mod_rst_n,
  input  logic [NPORTS-1:0]             mod_wr_en,
  input  logic [NPORTS-1:0][MOD_W-1:0]  mod_wr_data,
  output logic [NPORTS-1:0]             mod_full,
  input  logic [NPORTS-1:0]             mod_rd_en,
  output logic [NPORTS-1:0][MOD_W-1:0]  mod_rd_q,
  output logic [NPORTS-1:0]             mod_empty,
  // burst counts of every port, for the readiness tests
  input  logic [NPORTS-1:0][BC_W-1:0]   bc_w,
  input  logic [NPORTS-1:0][BC_W-1:0]   bc_r,
  // write data path to the PHY
  input  logic [IDX_W-1:0]              wsel,
  input  logic                          wf_rd_en,
  output logic [PHY_W-1:0]              wf_rd_q,
  output logic                          wf_empty,
  // read data path from the PHY
  input  logic [IDX_W-1:0]              rsel,
  input  logic                          rf_wr_en,
  input  logic [PHY_W-1:0]              rf_wr_data,
  // DCDWFF status to the arbiter
  output logic [NPORTS-1:0]             wr_ready,
  output logic [NPORTS-1:0]             rd_ready
);
  logic [NPORTS-1:0][PHY_W-1:0] port_wq;
  logic [NPORTS-1:0]            port_wempty;

  for (genvar p = 0; p < NPORTS; p++) begin : g_port
    mpmc_port #(.MOD_W(MOD_W), .PHY_W(PHY_W), .AW(AW), .BC_W(BC_W)) u_port (
      .clk(clk), .rst_n(rst_n),
      .mod_clk(mod_clk[p]), .mod_rst_n(mod_rst_n[p]),
      .mod_wr_en(mod_wr_en[p]), .mod_wr_data(mod_wr_data[p]), .mod_full(mod_full[p]),
      .mod_rd_en(mod_rd_en[p]), .mod_rd_q(mod_rd_q[p]), .mod_empty(mod_empty[p]),
      .bc_w(bc_w[p]), .bc_r(bc_r[p]),
      .wf_rd_en(wf_rd_en && (wsel == IDX_W'(p))), .wf_rd_q(port_wq[p]),
      .wf_empty(port_wempty[p]),
      .rf_wr_en(rf_wr_en && (rsel == IDX_W'(p))), .rf_wr_data(rf_wr_data),
      .wr_ready(wr_ready[p]), .rd_ready(rd_ready[p])
    );
  end

  // MUX towards the PHY
  always_comb begin
    wf_rd_q  = '0;
    wf_empty = 1'b1;
    for (int p = 0; p < NPORTS; p++) begin
      if (wsel == IDX_W'(p)) begin
        wf_rd_q  = port_wq[p];
        wf_empty = port_wempty[p];
      end
    end
  end
endmodule
