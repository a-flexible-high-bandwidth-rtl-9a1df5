// tb_mpmc_rctrl: self-checking test of the read control.
//
// The PHY model's memory is preloaded with a known pattern. The testbench
// plays the read FIFO (a queue of records {i, BC, CA}) and the ports' read
// DCDWFFs (it collects the words steered to each port). Phase 1 queues a
// window of eight reads to different banks: the commands must go out one per
// clock (eight commands in eight clocks, as in the paper's example where
// R0, R2, R3 leave in clocks 0, 1, 2). Every returned word must reach the
// port that asked for it, in order; rd_first must mark the first word of each
// burst; trans_done must return each index once, in order, after the burst's
// last word. Phase 2 repeats with random PHY stalls.
module tb_mpmc_rctrl;
  import mpmc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  req_t             q[$];
  req_t             head;
  logic             allow = 0, fifo_empty, fifo_pop, phy_ready, rdata_valid;
  logic             rf_wr_en, trans_done, busy, rd_first;
  logic [IDX_W-1:0] rsel, j;
  logic [PHY_W-1:0] rdata, rf_wr_data;
  phy_cmd_t         cmd;

  assign head       = (q.size() > 0) ? q[0] : '0;
  assign fifo_empty = (q.size() == 0);

  mpmc_rctrl dut (
    .clk, .rst_n, .allow, .fifo_head(head), .fifo_empty, .fifo_pop,
    .cmd, .phy_ready, .rdata, .rdata_valid,
    .rsel, .rf_wr_en, .rf_wr_data, .trans_done, .j, .busy, .rd_first);

  mpmc_phy_model #(.RD_LAT(6), .TURN(0), .BANK_PEN(2), .BANK_LSB(10)) phy (
    .clk, .rst_n, .cmd, .wdata('0), .ready(phy_ready), .rdata, .rdata_valid);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [PHY_W-1:0] pat(longint a);
    return {32'(a), ~32'(a), 32'(a * 7), 32'hC0DE0000 ^ 32'(a)};
  endfunction

  logic [PHY_W-1:0] got [8][$];
  int  exp_j[$];
  int  cmd_first = -1, cmd_last = -1, cyc = 0, firsts = 0, words_left = 0;
  always @(posedge clk) begin
    automatic bit pop_s = fifo_pop, acc_s = cmd.read_req && phy_ready, wr_s = rf_wr_en;
    automatic bit td_s = trans_done, f_s = rd_first;
    automatic int rs_s = int'(rsel), j_s = int'(j);
    automatic logic [PHY_W-1:0] d_s = rf_wr_data;
    #1;
    cyc++;
    if (td_s && rst_n) begin
      check(exp_j.size() > 0 && j_s == exp_j[0], $sformatf("trans_done index %0d at %0d (%0d expected)", j_s, cyc, exp_j.size()));
      if (exp_j.size() > 0) void'(exp_j.pop_front());
    end
    if (pop_s) begin
      exp_j.push_back(int'(q[0].idx));
      void'(q.pop_front());
    end
    if (acc_s) begin
      if (cmd_first < 0) cmd_first = cyc;
      cmd_last = cyc;
    end
    if (wr_s) got[rs_s].push_back(d_s);
    if (f_s) firsts++;
  end

  task automatic run(input req_t recs[$], input bit timed);
    int n0 [8];
    int f0 = firsts;
    for (int p = 0; p < 8; p++) n0[p] = got[p].size();
    cmd_first = -1;
    foreach (recs[r]) q.push_back(recs[r]);
    @(negedge clk); allow = 1;
    wait (q.size() == 0);
    @(negedge clk); allow = 0;
    repeat (400) @(negedge clk);
    if (timed)
      check(cmd_last - cmd_first + 1 == recs.size(),
            $sformatf("%0d read commands in %0d clocks", recs.size(), cmd_last - cmd_first + 1));
    check(exp_j.size() == 0, "every read returned trans_done");
    check(firsts - f0 == recs.size(), "rd_first once per burst");
    foreach (recs[r]) begin
      automatic int p = int'(recs[r].idx);
      for (int k = 0; k < int'(recs[r].bc); k++) begin
        check(got[p].size() > n0[p] && got[p][n0[p]] == pat(longint'(recs[r].ca) + k),
              $sformatf("port %0d word %0d", p, k));
        n0[p]++;
      end
    end
    for (int p = 0; p < 8; p++) check(got[p].size() == n0[p], "no extra words");
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    req_t recs[$];
    for (longint a = 0; a < 9000; a++) phy.mem[a] = pat(a);
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int r = 0; r < 8; r++)
      recs.push_back('{idx: IDX_W'(r), bc: BC_W'(2 + 3 * r), ca: ADDR_W'(1024 * r + r)});
    run(recs, 1);
    recs.delete();
    for (int r = 0; r < 6; r++)
      recs.push_back('{idx: IDX_W'(7 - r), bc: BC_W'(64 >> r), ca: ADDR_W'(100 * r)});
    run(recs, 0);
    check(phy.conflicts >= 5, "phase 2 saw bank waits");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
