// mpmc_config: the CONFIG block, the controller's configuration registers.
//
// It holds 8*NPORTS+1 registers, written one at a time by the application's
// CONTROL unit through a simple write port (cfg_we, cfg_addr, cfg_wdata; cfg_rdata reads back the
// register at cfg_addr):
//   address 0                   N, the number of ports in use (0..NPORTS)
//   1          + d*NPORTS + p   SA, start address
//   1 + 2*NPORTS + d*NPORTS + p EA, end address
//   1 + 4*NPORTS + d*NPORTS + p BC, burst count (1..64 PHY words)
//   1 + 6*NPORTS + d*NPORTS + p CA, current address
// with d = 0 for the write direction and d = 1 for the read direction of port
// p. Writing SA also loads CA with the same value (the "start of transfer"
// case of the address update rule); the arbiter then advances CA by BC each
// time it queues a burst of that port, as long as CA < EA.
// Each direction has a lookup port: the index given on *_idx in one cycle
// returns that port's CA, EA and BC in the next cycle (the PRE pipeline relies
// on this one-cycle latency). done_* per port is high while CA >= EA (the
// transfer is finished) or BC is zero (the port is not configured).
// The register set (N, SA, EA, BC, CA, separate for read and write) and the
// update rule follow the paper; the address map, the SA-loads-CA rule, the
// BC = 0 case and the reset values (all zero) are this design's choices.
module mpmc_config
  import mpmc_pkg::*;
#(
  parameter int unsigned NPORTS = MAX_PORTS,
  localparam int unsigned CFG_AW = $clog2(8 * NPORTS + 1)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // CONTROL write port
  input  logic                        cfg_we,
  input  logic [CFG_AW-1:0]           cfg_addr,
  input  logic [ADDR_W-1:0]           cfg_wdata,
  output logic [ADDR_W-1:0]           cfg_rdata,    // register at cfg_addr
  // to both PRE
  output logic [IDX_W:0]              n_used,
  output logic [NPORTS-1:0]           done_w,
  output logic [NPORTS-1:0]           done_r,
  output logic [NPORTS-1:0][BC_W-1:0] bc_w_all,
  output logic [NPORTS-1:0][BC_W-1:0] bc_r_all,
  // write-direction lookup and CA advance
  input  logic [IDX_W-1:0]            w_idx,
  output logic [ADDR_W-1:0]           w_ca,
  output logic [ADDR_W-1:0]           w_ea,
  output logic [BC_W-1:0]             w_bc,
  input  logic                        w_adv,
  input  logic [IDX_W-1:0]            w_adv_idx,
  // read-direction lookup and CA advance
  input  logic [IDX_W-1:0]            r_idx,
  output logic [ADDR_W-1:0]           r_ca,
  output logic [ADDR_W-1:0]           r_ea,
  output logic [BC_W-1:0]             r_bc,
  input  logic                        r_adv,
  input  logic [IDX_W-1:0]            r_adv_idx
);
  localparam int unsigned NR = 2 * NPORTS;   // registers per group
  localparam int unsigned RW = $clog2(NR);

  logic [ADDR_W-1:0] sa [NR];
  logic [ADDR_W-1:0] ea [NR];
  logic [ADDR_W-1:0] ca [NR];
  logic [BC_W-1:0]   bc [NR];

  // DECODER: which group and which register the write addresses
  cfg_grp_e          grp;
  logic [RW-1:0]     reg_i;
  always_comb begin
    int unsigned k;
    grp   = GRP_NONE;
    reg_i = '0;
    k     = int'(cfg_addr) - 1;
    if (cfg_addr == '0)        grp = GRP_N;
    else if (k < NR)           begin grp = GRP_SA; reg_i = RW'(k);          end
    else if (k < 2 * NR)       begin grp = GRP_EA; reg_i = RW'(k - NR);     end
    else if (k < 3 * NR)       begin grp = GRP_BC; reg_i = RW'(k - 2 * NR); end
    else if (k < 4 * NR)       begin grp = GRP_CA; reg_i = RW'(k - 3 * NR); end
  end

  logic [RW-1:0] wa, ra, wl, rl;  // register numbers of the advance and lookup ports
  assign wa = RW'(w_adv_idx);
  assign ra = RW'(NPORTS + int'(r_adv_idx));
  assign wl = RW'(w_idx);
  assign rl = RW'(NPORTS + int'(r_idx));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      n_used <= '0;
      for (int r = 0; r < NR; r++) begin
        sa[r] <= '0;
        ea[r] <= '0;
        ca[r] <= '0;
        bc[r] <= '0;
      end
    end else begin
      // Eq. (1), second case: CA advances by BC while CA < EA
      if (w_adv && ca[wa] < ea[wa]) ca[wa] <= ca[wa] + ADDR_W'(bc[wa]);
      if (r_adv && ca[ra] < ea[ra]) ca[ra] <= ca[ra] + ADDR_W'(bc[ra]);
      // configuration writes take precedence
      if (cfg_we) begin
        unique case (grp)
          GRP_N:  n_used <= (cfg_wdata > NPORTS) ? (IDX_W+1)'(NPORTS) : (IDX_W+1)'(cfg_wdata);
          GRP_SA: begin sa[reg_i] <= cfg_wdata; ca[reg_i] <= cfg_wdata; end  // Eq. (1), first case
          GRP_EA: ea[reg_i] <= cfg_wdata;
          GRP_BC: bc[reg_i] <= (cfg_wdata > MAX_BC) ? BC_W'(MAX_BC) : BC_W'(cfg_wdata);
          GRP_CA: ca[reg_i] <= cfg_wdata;
          default: ;
        endcase
      end
    end
  end

  // lookup ports, one cycle latency
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_ca <= '0; w_ea <= '0; w_bc <= '0;
      r_ca <= '0; r_ea <= '0; r_bc <= '0;
    end else begin
      w_ca <= ca[wl]; w_ea <= ea[wl]; w_bc <= bc[wl];
      r_ca <= ca[rl]; r_ea <= ea[rl]; r_bc <= bc[rl];
    end
  end

  // CMP: one comparator per port and direction
  always_comb begin
    for (int p = 0; p < NPORTS; p++) begin
      done_w[p]   = (ca[p] >= ea[p]) || (bc[p] == '0);
      done_r[p]   = (ca[NPORTS + p] >= ea[NPORTS + p]) || (bc[NPORTS + p] == '0);
      bc_w_all[p] = bc[p];
      bc_r_all[p] = bc[NPORTS + p];
    end
  end

  // read-back of any register for CONTROL
  always_comb begin
    unique case (grp)
      GRP_N:   cfg_rdata = ADDR_W'(n_used);
      GRP_SA:  cfg_rdata = sa[reg_i];
      GRP_EA:  cfg_rdata = ea[reg_i];
      GRP_BC:  cfg_rdata = ADDR_W'(bc[reg_i]);
      GRP_CA:  cfg_rdata = ca[reg_i];
      default: cfg_rdata = '0;
    endcase
  end
endmodule
