// tb_mpmc_wctrl: self-checking test of the write control.
//
// The testbench plays the write FIFO (a queue of records {i, BC, CA}) and the
// ports' write DCDWFFs (port p's k-th word is a known pattern of p and k), and
// connects the PHY model. Phase 1 sends six bursts to six different banks, so
// the PHY never holds ready low: the bursts must follow each other with no
// gap (sum of BC clocks from first to last beat + 1). Phase 2 sends bursts to
// one bank, so the PHY inserts waits. In both, every word written to memory
// must be the right port's next word, burstbegin must mark exactly the first
// beat, and trans_done must return each port index once, in order, after its
// last beat.
module tb_mpmc_wctrl;
  import mpmc_pkg::*;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  req_t             q[$];
  req_t             head;
  logic             allow = 0, fifo_empty, fifo_pop, wf_rd_en, phy_ready, trans_done, busy;
  logic [IDX_W-1:0] wsel, j;
  logic [PHY_W-1:0] wf_rd_q, wdata, rdata;
  logic             rdata_valid;
  phy_cmd_t         cmd;
  int               pops [8];

  function automatic logic [PHY_W-1:0] pat(int p, int k);
    return {32'(p), 32'(k), 32'hA5A50000 ^ 32'(k), 32'(p * 1000 + k)};
  endfunction

  assign head       = (q.size() > 0) ? q[0] : '0;
  assign fifo_empty = (q.size() == 0);
  assign wf_rd_q    = pat(int'(wsel), pops[wsel]);

  mpmc_wctrl dut (
    .clk, .rst_n, .allow, .fifo_head(head), .fifo_empty, .fifo_pop,
    .wsel, .wf_rd_en, .wf_rd_q, .wf_empty(1'b0),
    .cmd, .wdata, .phy_ready, .trans_done, .j, .busy);

  mpmc_phy_model #(.RD_LAT(4), .TURN(0), .BANK_PEN(3), .BANK_LSB(10)) phy (
    .clk, .rst_n, .cmd, .wdata, .ready(phy_ready), .rdata, .rdata_valid);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // bookkeeping at every edge
  req_t sent[$];
  int   exp_j[$];
  int   base [8];
  int   first_beat = -1, last_beat = -1, cyc = 0, beats_in_burst = 0;
  // Signals are sampled at the edge and the testbench's own state is changed
  // 1 time unit later, so the DUT and the PHY model never race with it.
  always @(posedge clk) begin
    automatic bit               pop_s = fifo_pop, rd_s = wf_rd_en, bb_s = cmd.burstbegin;
    automatic bit               td_s = trans_done;
    automatic int               sz_s = int'(cmd.size), ws_s = int'(wsel), j_s = int'(j);
    #1;
    cyc++;
    if (td_s && rst_n) begin
      check(exp_j.size() > 0 && j_s == exp_j[0], $sformatf("trans_done index %0d", j_s));
      check(beats_in_burst == 0, "trans_done after the last beat");
      if (exp_j.size() > 0) void'(exp_j.pop_front());
    end
    if (pop_s) begin
      sent.push_back(q[0]);
      exp_j.push_back(int'(q[0].idx));
      void'(q.pop_front());
    end
    if (rd_s) begin
      pops[ws_s]++;
      if (first_beat < 0) first_beat = cyc;
      last_beat = cyc;
      if (bb_s) begin
        check(beats_in_burst == 0, "burstbegin only on the first beat");
        beats_in_burst = sz_s;
      end
      beats_in_burst--;
    end
  end

  task automatic run(input req_t recs[$]);
    int pb [8];
    for (int p = 0; p < 8; p++) pb[p] = pops[p];
    foreach (recs[r]) q.push_back(recs[r]);
    @(negedge clk); allow = 1;
    wait (q.size() == 0);
    @(negedge clk); allow = 0;
    wait (!busy);
    repeat (3) @(negedge clk);
    check(exp_j.size() == 0, "every burst returned trans_done");
    // memory contents
    foreach (recs[r]) begin
      automatic int p = int'(recs[r].idx);
      for (int k = 0; k < int'(recs[r].bc); k++) begin
        automatic logic [PHY_W-1:0] got = phy.peek(longint'(recs[r].ca) + longint'(k));
        check(got == pat(p, pb[p] + k), $sformatf("port %0d word %0d at %0d", p, k, recs[r].ca + k));
      end
      pb[p] += int'(recs[r].bc);
    end
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
    int   total;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // phase 1: six bursts in six banks, back to back
    total = 0;
    for (int r = 0; r < 6; r++) begin
      recs.push_back('{idx: IDX_W'(r % 4), bc: BC_W'(4 << (r % 3)), ca: ADDR_W'(1024 * r + 8 * r)});
      total += 4 << (r % 3);
    end
    run(recs);
    check(last_beat - first_beat + 1 == total,
          $sformatf("phase 1: %0d beats in %0d clocks", total, last_beat - first_beat + 1));
    // phase 2: same bank, the PHY inserts waits
    recs.delete();
    first_beat = -1;
    for (int r = 0; r < 5; r++)
      recs.push_back('{idx: IDX_W'(r % 2 + 5), bc: BC_W'(64 >> r), ca: ADDR_W'(20000 + 100 * r)});
    run(recs);
    check(phy.conflicts >= 4, $sformatf("phase 2 saw %0d bank waits", phy.conflicts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
