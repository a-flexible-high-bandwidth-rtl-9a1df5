// tb_mpmc_top: end-to-end test of the whole controller at its default size
// (32 ports, 32-bit MODs, 128-bit PHY words, DCDWFF depth 128).
//
// Every port gets its own MOD clock (periods from 4 to 19.5 time units; the
// controller clock period is 10). The PHY model stands in for the DDR3 PHY
// and memory; it inserts read/write turnaround waits, bank waits and random
// ready gaps.
//   Phase A  CONTROL writes N = 32 and, for every port, a write transfer
//            (SA, EA, BC) and a read transfer from a preloaded memory region.
//            All MODs stream their write words in and read their words out
//            concurrently, so read and write windows alternate.
//   Phase B  The read transfers are re-armed (SA written again) to point at
//            the regions written in phase A, and every MOD reads its own
//            words back.
// Every word is compared with its expected value, the memory image of every
// written region is compared word by word, and done must rise for every
// port and direction. The mechanisms of the design must each be seen at
// least once, otherwise a failure is counted: a MOD stopped by full, a
// burst waiting for read room (rd_ready low), read and write windows, windows
// holding several requests, a read/write turnaround, a PHY ready gap, a
// bank wait, FLAG bits cleared and set again, and the rd_first marker.
module tb_mpmc_top;
  import mpmc_pkg::*;
  localparam int NP = 32, AW = 7, MOD_W = 32;
  localparam int CAW = $clog2(8 * NP + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] mclk = '0, mrst_n = '0;
  for (genvar p = 0; p < NP; p++) begin : g_clk
    initial forever #(2.0 + 0.25 * p) mclk[p] = ~mclk[p];
  end

  logic cfg_we = 0;
  logic [CAW-1:0] cfg_addr = '0;
  logic [ADDR_W-1:0] cfg_wdata = '0, cfg_rdata;
  logic [NP-1:0] mod_en_w = '0, mod_en_r = '0, done_w, done_r, flags_w, flags_r;
  logic [NP-1:0] wen = '0, full, ren = '0, empty;
  logic [NP-1:0][MOD_W-1:0] wd = '0, rq;
  phy_cmd_t phy_cmd;
  logic [PHY_W-1:0] phy_wdata, phy_rdata;
  logic phy_ready, phy_rdata_valid, win_start, win_dir, rd_first;
  logic [5:0] win_size;

  mpmc_top dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .mod_en_w, .mod_en_r, .done_w, .done_r,
    .mod_clk(mclk), .mod_rst_n(mrst_n), .mod_wr_en(wen), .mod_wr_data(wd), .mod_full(full),
    .mod_rd_en(ren), .mod_rd_q(rq), .mod_empty(empty),
    .phy_cmd, .phy_wdata, .phy_ready, .phy_rdata, .phy_rdata_valid,
    .flags_w, .flags_r, .win_start, .win_dir, .win_size, .rd_first);

  mpmc_phy_model #(.RD_LAT(10), .TURN(6), .BANK_PEN(8), .BANK_LSB(12), .STALL_PCT(3)) phy (
    .clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata), .ready(phy_ready),
    .rdata(phy_rdata), .rdata_valid(phy_rdata_valid));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [PHY_W-1:0] mpat(longint a);
    return {32'(a), ~32'(a), 32'(a * 7), 32'hC0DE0000 ^ 32'(a)};
  endfunction
  function automatic logic [31:0] wword(int p, int k);
    return {8'(p), 24'(k)};
  endfunction

  task automatic cfg(int a, int unsigned d);
    @(negedge clk); cfg_we = 1; cfg_addr = CAW'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  function automatic int a_sa(int d, int p); return 1 + d * NP + p; endfunction
  function automatic int a_ea(int d, int p); return 1 + 2 * NP + d * NP + p; endfunction
  function automatic int a_bc(int d, int p); return 1 + 4 * NP + d * NP + p; endfunction

  // per-port transfer plan, in PHY words
  int unsigned wsa [NP], wbc [NP], wlen [NP], rsa [NP], rbc [NP], rlen [NP];

  // mechanism counters
  int n_full = 0, n_rd_wait = 0, n_win_r = 0, n_win_w = 0, n_win_multi = 0, n_flag_set = 0, n_first = 0;
  logic [NP-1:0] flags_w_q = '1;
  always @(posedge clk) if (rst_n) begin
    if (win_start && win_dir)  n_win_w++;
    if (win_start && !win_dir) n_win_r++;
    if (win_start && win_size > 1) n_win_multi++;
    if ((mod_en_r & ~done_r & flags_r & ~dut.rd_ready) != '0) n_rd_wait++;
    n_flag_set += $countones(flags_w & ~flags_w_q);
    flags_w_q <= flags_w;
    if (rd_first) n_first++;
  end

  // MOD writer: writes n words, counting cycles stopped by full
  task automatic mod_writer(int p, int n);
    int k = 0;
    while (k < n) begin
      @(negedge mclk[p]);
      wen[p] = 1; wd[p] = wword(p, k);
      @(posedge mclk[p]);
      if (!full[p]) k++; else n_full++;
    end
    @(negedge mclk[p]); wen[p] = 0;
  endtask

  // MOD reader: reads n words and compares them
  task automatic mod_reader(int p, int n, bit from_writes, int delay);
    repeat (delay) @(posedge mclk[p]);
    for (int k = 0; k < n; k++) begin
      logic [31:0] e;
      @(negedge mclk[p]);
      while (empty[p]) @(negedge mclk[p]);
      e = from_writes ? wword(p, k) : mpat(longint'(rsa[p]) + longint'(k) / 4)[32 * (k % 4) +: 32];
      check(rq[p] == e, $sformatf("port %0d read word %0d: %h, expected %h", p, k, rq[p], e));
      ren[p] = 1;
      @(posedge mclk[p]); #0.1;
      ren[p] = 0;
    end
  endtask

  // one writer and one reader process per port
  int phase = 0;
  logic [NP-1:0][1:0] finished = '0;
  logic [NP-1:0]      finished_b = '0;
  for (genvar p = 0; p < NP; p++) begin : g_mod
    initial begin
      wait (phase == 1);
      mod_writer(p, 4 * wlen[p]);
      finished[p][0] = 1;
    end
    initial begin
      wait (phase == 1);
      mod_reader(p, 4 * rlen[p], 0, (p == 1) ? 10000 : 0);
      finished[p][1] = 1;
      wait (phase == 2);
      mod_reader(p, 4 * wlen[p], 1, 0);
      finished_b[p] = 1;
    end
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (done_w %h done_r %h flags_w %h flags_r %h mod_en_w %h empty %h full %h)",
             done_w, done_r, flags_w, flags_r, mod_en_w, empty, full);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint t_start;
    for (longint a = 0; a < 40000; a++) phy.mem[a] = mpat(a);
    for (int p = 0; p < NP; p++) begin
      wbc[p] = 4 << (p % 5);                        // 4, 8, 16, 32, 64
      wlen[p] = wbc[p] * (2 + p % 3);
      wsa[p] = 1000000 + 4096 * p;                  // consecutive ports in different banks
      rbc[p] = 64 >> (p % 5);
      rlen[p] = (p == 1) ? rbc[p] * 8 : rbc[p] * (2 + (p + 1) % 3);  // port 1: twice its DCDWFF
      rsa[p] = 1024 * p;
    end
    repeat (3) @(negedge clk);
    rst_n = 1; mrst_n = '1;
    // CONTROL: configuration
    cfg(0, NP);
    for (int p = 0; p < NP; p++) begin
      cfg(a_sa(0, p), wsa[p]); cfg(a_ea(0, p), wsa[p] + wlen[p]); cfg(a_bc(0, p), wbc[p]);
      cfg(a_sa(1, p), rsa[p]); cfg(a_ea(1, p), rsa[p] + rlen[p]); cfg(a_bc(1, p), rbc[p]);
    end
    @(negedge clk); cfg_addr = CAW'(a_ea(1, 5)); #1;
    check(cfg_rdata == rsa[5] + rlen[5], "configuration read-back");
    // Phase A. Port 0's writes are enabled late, so its MOD meets full; port 1
    // reads late, so its read DCDWFF fills up and read bursts must wait.
    t_start = $time;
    @(negedge clk); mod_en_w = ~32'h1; mod_en_r = '1;
    phase = 1;
    repeat (1500) @(negedge clk);
    mod_en_w[0] = 1;
    wait (finished == {NP{2'b11}});
    wait (done_w == '1 && flags_w == '1 && done_r == '1 && flags_r == '1);
    repeat (20) @(negedge clk);
    $display("phase A done after %0d clocks", ($time - t_start) / 10);
    for (int p = 0; p < NP; p++)
      for (int a = 0; a < int'(wlen[p]); a++)
        check(phy.peek(longint'(wsa[p]) + longint'(a)) ==
              {wword(p, 4 * a + 3), wword(p, 4 * a + 2), wword(p, 4 * a + 1), wword(p, 4 * a)},
              $sformatf("memory word %0d of port %0d", a, p));
    // Phase B: read every port's written region back. The read transfers are
    // disabled while they are re-configured.
    @(negedge clk); mod_en_r = '0;
    for (int p = 0; p < NP; p++) begin
      cfg(a_ea(1, p), wsa[p] + wlen[p]); cfg(a_bc(1, p), wbc[p]); cfg(a_sa(1, p), wsa[p]);
    end
    @(negedge clk); mod_en_r = '1;
    phase = 2;
    wait (finished_b == '1);
    wait (done_r == '1 && flags_r == '1);
    check(done_w == '1 && done_r == '1, "every transfer done");
    repeat (20) @(negedge clk);
    check(empty == '1, "every read DCDWFF drained");
    // mechanisms
    check(n_full > 0, $sformatf("MOD stopped by full: %0d", n_full));
    check(n_rd_wait > 0, $sformatf("read burst waiting for room: %0d clocks", n_rd_wait));
    check(n_win_r > 0 && n_win_w > 0, $sformatf("read windows %0d, write windows %0d", n_win_r, n_win_w));
    check(n_win_multi > 0, $sformatf("windows with several requests: %0d", n_win_multi));
    check(phy.turns > 0, $sformatf("read/write turnarounds: %0d", phy.turns));
    check(phy.stalls > 0, $sformatf("PHY ready gaps: %0d", phy.stalls));
    check(phy.conflicts > 0, $sformatf("bank waits: %0d", phy.conflicts));
    check(n_flag_set > NP, $sformatf("FLAG set events: %0d", n_flag_set));
    check(n_first > 0, $sformatf("rd_first markers: %0d", n_first));
    $display("mechanisms: full=%0d rd_wait=%0d win_r=%0d win_w=%0d multi=%0d turns=%0d stalls=%0d bank=%0d flagset=%0d first=%0d",
             n_full, n_rd_wait, n_win_r, n_win_w, n_win_multi, phy.turns, phy.stalls, phy.conflicts, n_flag_set, n_first);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
