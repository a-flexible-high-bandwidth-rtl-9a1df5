// tb_mpmc_arbiter: self-checking test of the ARBITER (write PRE, read PRE,
// POS) against models of CONFIG, the ports and the PHY.
//
// NPORTS = 8, N = 6 used. Every used port has a write transfer and a read
// transfer with its own SA, EA and BC; port 5 is enabled for reads only. The
// testbench's CONFIG model answers lookups one clock later and applies the
// CA += BC advances; its port model supplies a known word pattern for writes
// and collects read words; the PHY model stores and returns data and imposes
// turnaround and bank waits. Checks: each direction of each port moves
// exactly (EA - SA) words, to or from the right addresses, in order; no
// unused or disabled port is ever served; all FLAG bits are high again at the
// end; windows hold more than one request on average (WFCFS grouping).
module tb_mpmc_arbiter;
  import mpmc_pkg::*;
  localparam int NP = 8, NU = 6;
  localparam int FAW = $clog2(MAX_PORTS);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NP-1:0] mod_en_w = 8'b0001_1111, mod_en_r = 8'b0011_1111, done_w, done_r, flags_w, flags_r;
  logic [IDX_W:0] n_used = NU;
  logic [IDX_W-1:0] w_idx, r_idx, w_adv_idx, r_adv_idx, wsel, rsel;
  logic [ADDR_W-1:0] w_ca, w_ea, r_ca, r_ea;
  logic [BC_W-1:0] w_bc, r_bc;
  logic w_adv, r_adv, wf_rd_en, rf_wr_en, phy_ready, phy_rdata_valid, win_start, win_dir, rd_first;
  logic [PHY_W-1:0] wf_rd_q, rf_wr_data, phy_wdata, phy_rdata;
  logic [FAW:0] win_size;
  phy_cmd_t phy_cmd;

  mpmc_arbiter #(.NPORTS(NP)) dut (
    .clk, .rst_n, .mod_en_w, .mod_en_r, .n_used, .done_w, .done_r,
    .w_idx, .w_ca, .w_ea, .w_bc, .w_adv, .w_adv_idx,
    .r_idx, .r_ca, .r_ea, .r_bc, .r_adv, .r_adv_idx,
    .wr_ready('1), .rd_ready('1),
    .wsel, .wf_rd_en, .wf_rd_q, .wf_empty(1'b0), .rsel, .rf_wr_en, .rf_wr_data,
    .phy_cmd, .phy_wdata, .phy_ready, .phy_rdata, .phy_rdata_valid,
    .flags_w, .flags_r, .win_start, .win_dir, .win_size, .rd_first);

  mpmc_phy_model #(.RD_LAT(8), .TURN(4), .BANK_PEN(5), .BANK_LSB(10), .STALL_PCT(5)) phy (
    .clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata), .ready(phy_ready),
    .rdata(phy_rdata), .rdata_valid(phy_rdata_valid));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [PHY_W-1:0] wpat(int p, int k);
    return {32'(p), 32'(k), 32'h5A5A0000 ^ 32'(k), 32'(p * 1000 + k)};
  endfunction
  function automatic logic [PHY_W-1:0] mpat(longint a);
    return {32'(a), ~32'(a), 32'(a * 7), 32'hC0DE0000 ^ 32'(a)};
  endfunction

  // CONFIG model
  int unsigned sa [2][NP], ea [2][NP], bc [2][NP], ca [2][NP];
  always_comb for (int p = 0; p < NP; p++) begin
    done_w[p] = ca[0][p] >= ea[0][p];
    done_r[p] = ca[1][p] >= ea[1][p];
  end
  always_ff @(posedge clk) begin
    w_ca <= ca[0][w_idx]; w_ea <= ea[0][w_idx]; w_bc <= BC_W'(bc[0][w_idx]);
    r_ca <= ca[1][r_idx]; r_ea <= ea[1][r_idx]; r_bc <= BC_W'(bc[1][r_idx]);
    if (rst_n && w_adv) ca[0][w_adv_idx] <= ca[0][w_adv_idx] + bc[0][w_adv_idx];
    if (rst_n && r_adv) ca[1][r_adv_idx] <= ca[1][r_adv_idx] + bc[1][r_adv_idx];
  end

  // port model
  int pops [32];
  logic [PHY_W-1:0] got [32][$];
  int wins = 0, win_reqs = 0;
  assign wf_rd_q = wpat(int'(wsel), pops[wsel]);
  always @(posedge clk) begin
    automatic bit rs = rst_n, wr = wf_rd_en, rw = rf_wr_en, ws = win_start;
    automatic int wsl = int'(wsel), rsl = int'(rsel), wsz = int'(win_size);
    automatic logic [PHY_W-1:0] rd = rf_wr_data;
    #1;
    if (rs) begin
      if (wr) pops[wsl]++;
      if (rw) got[rsl].push_back(rd);
      if (ws) begin wins++; win_reqs += wsz; end
    end
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      bc[0][p] = 4 << (p % 4); sa[0][p] = 100000 + 1024 * p; ea[0][p] = sa[0][p] + 6 * bc[0][p];
      bc[1][p] = 64 >> (p % 4); sa[1][p] = 1024 * p;         ea[1][p] = sa[1][p] + 5 * bc[1][p];
      ca[0][p] = sa[0][p]; ca[1][p] = sa[1][p];
    end
    for (longint a = 0; a < 8192; a++) phy.mem[a] = mpat(a);
    repeat (2) @(negedge clk);
    rst_n = 1;
    wait ((done_w | ~mod_en_w[NP-1:0] | ~{{(NP-NU){1'b0}}, {NU{1'b1}}}) == '1 &&
          (done_r | ~mod_en_r | ~{{(NP-NU){1'b0}}, {NU{1'b1}}}) == '1);
    repeat (300) @(negedge clk);
    for (int p = 0; p < NP; p++) begin
      automatic bit wen = p < NU && mod_en_w[p], ren = p < NU && mod_en_r[p];
      automatic int nw = wen ? int'(ea[0][p] - sa[0][p]) : 0;
      automatic int nr = ren ? int'(ea[1][p] - sa[1][p]) : 0;
      check(pops[p] == nw, $sformatf("port %0d wrote %0d words, expected %0d", p, pops[p], nw));
      check(got[p].size() == nr, $sformatf("port %0d read %0d words, expected %0d", p, got[p].size(), nr));
      for (int k = 0; k < nw; k++)
        check(phy.peek(longint'(sa[0][p]) + k) == wpat(p, k), $sformatf("port %0d write word %0d", p, k));
      for (int k = 0; k < nr && k < got[p].size(); k++)
        check(got[p][k] == mpat(longint'(sa[1][p]) + k), $sformatf("port %0d read word %0d", p, k));
    end
    check(flags_w == '1 && flags_r == '1, "all FLAG bits set again");
    check(win_reqs > wins, $sformatf("%0d requests in %0d windows", win_reqs, wins));
    $display("windows %0d requests %0d turnarounds %0d bank waits %0d", wins, win_reqs, phy.turns, phy.conflicts);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
