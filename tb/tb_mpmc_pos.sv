// tb_mpmc_pos: self-checking test of POS (WCTRL, RCTRL, WFCFS windows,
// command MUX).
//
// The testbench plays the write FIFO and read FIFO (queues of records), the
// ports' DCDWFFs and, through the PHY model, the memory.
// Scenario 1 is the paper's example: reads R0, R2, R3 and writes W0..W3 are
// all waiting. POS must open a read window of size 3 whose commands leave in
// three consecutive clocks, then one write window of size 4 serving W0..W3 in
// order: a single read/write turnaround for seven requests.
// Scenario 2 feeds reads and writes in random order over time and checks that
// every window serves one direction only, that the bus turns at most once
// per window, and that all data arrive intact. Per-burst trans_done indices
// are checked for both directions.
module tb_mpmc_pos;
  import mpmc_pkg::*;
  localparam int FAW = $clog2(MAX_PORTS);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  req_t wq[$], rq[$];
  req_t wff_head, rff_head;
  logic wff_empty, rff_empty, wff_pop, rff_pop;
  logic [FAW:0] wff_count, rff_count, win_size;
  logic [IDX_W-1:0] wsel, rsel, w_j, r_j;
  logic wf_rd_en, rf_wr_en, phy_ready, phy_rdata_valid, w_td, r_td, win_start, win_dir, rd_first;
  logic [PHY_W-1:0] wf_rd_q, rf_wr_data, phy_wdata, phy_rdata;
  phy_cmd_t phy_cmd;
  int pops [32];

  function automatic logic [PHY_W-1:0] wpat(int p, int k);
    return {32'(p), 32'(k), 32'h5A5A0000 ^ 32'(k), 32'(p * 1000 + k)};
  endfunction
  function automatic logic [PHY_W-1:0] mpat(longint a);
    return {32'(a), ~32'(a), 32'(a * 7), 32'hC0DE0000 ^ 32'(a)};
  endfunction

  assign wff_head  = (wq.size() > 0) ? wq[0] : '0;
  assign wff_empty = (wq.size() == 0);
  assign wff_count = (FAW+1)'(wq.size());
  assign rff_head  = (rq.size() > 0) ? rq[0] : '0;
  assign rff_empty = (rq.size() == 0);
  assign rff_count = (FAW+1)'(rq.size());
  assign wf_rd_q   = wpat(int'(wsel), pops[wsel]);

  mpmc_pos dut (
    .clk, .rst_n,
    .wff_head, .wff_empty, .wff_count, .wff_pop,
    .rff_head, .rff_empty, .rff_count, .rff_pop,
    .wsel, .wf_rd_en, .wf_rd_q, .wf_empty(1'b0),
    .rsel, .rf_wr_en, .rf_wr_data,
    .phy_cmd, .phy_wdata, .phy_ready, .phy_rdata, .phy_rdata_valid,
    .w_trans_done(w_td), .w_j, .r_trans_done(r_td), .r_j,
    .win_start, .win_dir, .win_size, .rd_first);

  mpmc_phy_model #(.RD_LAT(6), .TURN(4), .BANK_PEN(0), .BANK_LSB(10)) phy (
    .clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata), .ready(phy_ready),
    .rdata(phy_rdata), .rdata_valid(phy_rdata_valid));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  int  wj[$], rj[$], wins_dir[$], wins_size[$], rcmd_cyc[$];
  logic [PHY_W-1:0] got [32][$];
  int  cyc = 0, cur_dir = -1, bad_dir = 0;
  always @(posedge clk) begin
    automatic bit rs = rst_n, wp = wff_pop, rp = rff_pop, wr = wf_rd_en, rw = rf_wr_en;
    automatic bit wt = w_td, rt = r_td, ws = win_start, wd = win_dir;
    automatic bit racc = phy_cmd.read_req && phy_ready, wacc = phy_cmd.write_req && phy_ready;
    automatic int wsl = int'(wsel), rsl = int'(rsel), wjs = int'(w_j), rjs = int'(r_j), wsz = int'(win_size);
    automatic logic [PHY_W-1:0] rd = rf_wr_data;
    #1;
    cyc++;
    if (rs) begin
      if (wt) begin
        check(wj.size() > 0 && wjs == wj[0], "write trans_done index");
        if (wj.size() > 0) void'(wj.pop_front());
      end
      if (rt) begin
        check(rj.size() > 0 && rjs == rj[0], "read trans_done index");
        if (rj.size() > 0) void'(rj.pop_front());
      end
      if (ws) begin wins_dir.push_back(wd); wins_size.push_back(wsz); cur_dir = wd; end
      if ((racc && cur_dir != 0) || (wacc && cur_dir != 1)) bad_dir++;
      if (racc) rcmd_cyc.push_back(cyc);
      if (wp) begin wj.push_back(int'(wq[0].idx)); void'(wq.pop_front()); end
      if (rp) begin rj.push_back(int'(rq[0].idx)); void'(rq.pop_front()); end
      if (wr) pops[wsl]++;
      if (rw) got[rsl].push_back(rd);
    end
  end

  req_t wall[$], rall[$];
  task automatic add_w(int p, int bc, int ca);
    req_t r = '{idx: IDX_W'(p), bc: BC_W'(bc), ca: ADDR_W'(ca)};
    wq.push_back(r); wall.push_back(r);
  endtask
  task automatic add_r(int p, int bc, int ca);
    req_t r = '{idx: IDX_W'(p), bc: BC_W'(bc), ca: ADDR_W'(ca)};
    rq.push_back(r); rall.push_back(r);
  endtask

  task automatic verify_data();
    int wpb [32], rpb [32];
    foreach (wall[r]) begin
      automatic int p = int'(wall[r].idx);
      for (int k = 0; k < int'(wall[r].bc); k++)
        check(phy.peek(longint'(wall[r].ca) + k) == wpat(p, wpb[p] + k), "written word");
      wpb[p] += int'(wall[r].bc);
    end
    foreach (rall[r]) begin
      automatic int p = int'(rall[r].idx);
      for (int k = 0; k < int'(rall[r].bc); k++)
        check(got[p].size() > rpb[p] + k && got[p][rpb[p] + k] == mpat(longint'(rall[r].ca) + k), "read word");
      rpb[p] += int'(rall[r].bc);
    end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int t0;
    for (longint a = 0; a < 4096; a++) phy.mem[a] = mpat(a);
    // scenario 1, the paper's example
    add_r(0, 8, 0); add_r(2, 8, 1024); add_r(3, 8, 2048);
    add_w(0, 8, 100000); add_w(1, 4, 100100); add_w(2, 16, 100200); add_w(3, 8, 100300);
    repeat (2) @(negedge clk);
    rst_n = 1;
    repeat (150) @(negedge clk);
    check(wins_dir.size() == 2, $sformatf("two windows, got %0d", wins_dir.size()));
    check(wins_dir.size() > 1 && wins_dir[0] == 0 && wins_size[0] == 3, "read window of size 3 first");
    check(wins_dir.size() > 1 && wins_dir[1] == 1 && wins_size[1] == 4, "then write window of size 4");
    check(rcmd_cyc.size() == 3 && rcmd_cyc[2] - rcmd_cyc[0] == 2, "R0, R2, R3 in consecutive clocks");
    check(phy.turns == 1, $sformatf("one turnaround, got %0d", phy.turns));
    // scenario 2, random arrivals
    t0 = wins_dir.size();
    for (int n = 0; n < 60; n++) begin
      repeat ($urandom % 12) @(negedge clk);
      if ($urandom % 2) add_w(n % 32, 1 + $urandom % 64, 200000 + 100 * n);
      else              add_r(n % 32, 1 + $urandom % 64, 64 * (n % 60));
    end
    wait (wq.size() == 0 && rq.size() == 0);
    repeat (200) @(negedge clk);
    check(bad_dir == 0, "every window served one direction only");
    check(phy.turns <= wins_dir.size() - 1, $sformatf("%0d turnarounds for %0d windows", phy.turns, wins_dir.size()));
    check(wins_dir.size() - t0 < 60, $sformatf("requests grouped into %0d windows", wins_dir.size() - t0));
    check(wj.size() == 0 && rj.size() == 0, "all trans_done returned");
    verify_data();
    $display("windows %0d, turnarounds %0d", wins_dir.size(), phy.turns);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
