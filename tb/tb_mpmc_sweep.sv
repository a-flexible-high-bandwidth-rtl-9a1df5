// tb_mpmc_sweep: port-count and burst-count sweep of the full-size
// controller (32 ports built).
//
// The controller runs 25 experiments, one after the other with a reset
// between them: N = 2, 4, 8, 16 and 32 used ports (set in the N register),
// each with BC = 4, 8, 16, 32 and 64. In each, every used port writes LEN
// memory words and reads LEN other words at the same time. Port p's regions
// lie in bank p mod 8, so neighbouring ports use different banks. MODs use
// 128-bit words so that they never limit the rate. The memory model shares
// one data bus between reads and writes and holds ready low for read/write
// turnarounds and same-bank bursts; its timing numbers are placeholders, so
// the efficiency printed (data words moved / clocks from the first command
// to the end) shows trends, not DDR3 figures.
// A second part runs write-only and read-only transfers at N = 2, 4, 8 and
// BC = 16, 32, 64, to compare the two directions separately.
// Checks: every read word and every written memory word is right, unused
// ports are never served, every transfer finishes, for every N BC = 64 is
// more efficient than BC = 4, and a single direction (no turnarounds) is at
// least as efficient as mixed traffic at the same N and BC. The efficiency
// tables are printed.
// The mechanisms counted (bank waits, turnarounds, windows holding several
// requests) must each occur.
module tb_mpmc_sweep;
  import mpmc_pkg::*;
  localparam int NP = 32, AW = 7, MOD_W = 128, LEN = 256, BANK_LSB = 10;
  localparam int CAW = $clog2(8 * NP + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] mclk = '0, mrst_n = '0;
  for (genvar p = 0; p < NP; p++) begin : g_clk
    initial forever #(3.0 + 0.125 * p) mclk[p] = ~mclk[p];
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

  mpmc_top #(.MOD_W(MOD_W)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata,
    .mod_en_w, .mod_en_r, .done_w, .done_r,
    .mod_clk(mclk), .mod_rst_n(mrst_n), .mod_wr_en(wen), .mod_wr_data(wd), .mod_full(full),
    .mod_rd_en(ren), .mod_rd_q(rq), .mod_empty(empty),
    .phy_cmd, .phy_wdata, .phy_ready, .phy_rdata, .phy_rdata_valid,
    .flags_w, .flags_r, .win_start, .win_dir, .win_size, .rd_first);

  mpmc_phy_model #(.RD_LAT(10), .TURN(6), .BANK_PEN(8), .BANK_LSB(BANK_LSB), .STALL_PCT(0),
                   .SHARED_BUS(1)) phy (
    .clk, .rst_n, .cmd(phy_cmd), .wdata(phy_wdata), .ready(phy_ready),
    .rdata(phy_rdata), .rdata_valid(phy_rdata_valid));

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [PHY_W-1:0] mpat(longint a);
    return {32'(a), ~32'(a), 32'(a * 5), 32'hBA0C0000 ^ 32'(a)};
  endfunction
  function automatic logic [MOD_W-1:0] wword(int r, int p, int k);
    return {32'hA5A5_0000 | 32'(r), 32'(p), 32'(k), ~32'(k)};
  endfunction

  task automatic cfg(int a, int unsigned d);
    @(negedge clk); cfg_we = 1; cfg_addr = CAW'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask
  function automatic int a_sa(int d, int p); return 1 + d * NP + p; endfunction
  function automatic int a_ea(int d, int p); return 1 + 2 * NP + d * NP + p; endfunction
  function automatic int a_bc(int d, int p); return 1 + 4 * NP + d * NP + p; endfunction

  // port p lies in bank p mod 8; rows differ per port and direction
  function automatic int unsigned region(int p, int d);
    return unsigned'(((1 + 2 * p + d) << (BANK_LSB + 3)) | ((p % 8) << BANK_LSB));
  endfunction
  localparam int NS [5] = '{2, 4, 8, 16, 32};

  int run = -1, cur_n = 0, cur_mode = 0;  // mode 0: both, 1: write only, 2: read only
  bit go = 0;
  logic [NP-1:0] w_fin = '0, r_fin = '0;
  int n_multi = 0;
  always @(posedge clk) if (rst_n && win_start && win_size > 1) n_multi++;

  for (genvar gp = 0; gp < NP; gp++) begin : g_mod
    initial begin : writer
      automatic int p = gp;
      for (int r = 0; r < 43; r++) begin
        wait (go && run == r);
        if (p >= cur_n || cur_mode == 2) begin wait (!go); continue; end
        for (int k = 0; k < LEN; ) begin
          @(negedge mclk[p]);
          wen[p] = 1; wd[p] = wword(r, p, k);
          @(posedge mclk[p]);
          if (!full[p]) k++;
        end
        @(negedge mclk[p]); wen[p] = 0;
        w_fin[p] = 1;
        wait (!go);
      end
    end
    initial begin : reader
      automatic int p = gp;
      for (int r = 0; r < 43; r++) begin
        wait (go && run == r);
        if (p >= cur_n || cur_mode == 1) begin wait (!go); continue; end
        for (int k = 0; k < LEN; k++) begin
          @(negedge mclk[p]);
          while (empty[p]) @(negedge mclk[p]);
          check(rq[p] == mpat(longint'(region(p, 1)) + longint'(k)),
                $sformatf("run %0d port %0d read word %0d", r, p, k));
          ren[p] = 1;
          @(posedge mclk[p]); #0.1;
          ren[p] = 0;
        end
        r_fin[p] = 1;
        wait (!go);
      end
    end
  end

  initial begin
    repeat (2000000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (run %0d done_w %h done_r %h)", run, done_w, done_r);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  real eff [5][5];
  real eff1 [2][3][3];  // [write/read only][N = 2, 4, 8][BC = 16, 32, 64]
  int  unused_served = 0, wrong_dir = 0;
  // efficiency is timed from the first command the PHY accepts, so the time
  // a write port needs to collect its first burst is not counted
  longint first_cmd = -1;
  always @(posedge clk)
    if (rst_n && go && first_cmd < 0 && phy_ready && phy_cmd.burstbegin &&
        (phy_cmd.write_req || phy_cmd.read_req)) first_cmd = phy.cyc;
  always @(posedge clk)
    if (rst_n && go && ((cur_mode == 1 && phy_cmd.read_req) || (cur_mode == 2 && phy_cmd.write_req)))
      wrong_dir++;
  always @(posedge clk)
    if (rst_n && go && (phy_cmd.write_req || phy_cmd.read_req) && phy_cmd.burstbegin &&
        32'(phy_cmd.addr >> (BANK_LSB + 3)) > 32'(2 * cur_n)) unused_served++;
  initial begin
    int total_turns = 0, total_conf = 0;
    for (int p = 0; p < NP; p++)
      for (int a = 0; a < LEN; a++)
        phy.mem[longint'(region(p, 1)) + longint'(a)] = mpat(longint'(region(p, 1)) + longint'(a));
    for (int e = 0; e < 5; e++) begin
      for (int b = 0; b < 5; b++) begin
        automatic int bc = 4 << b;
        automatic int n = NS[e];
        logic [NP-1:0] used;
        longint t0, t1;
        int c0, tu0;
        run++; cur_n = n;
        used = NP'((64'(1) << n) - 1);
        // reset between experiments
        @(negedge clk); rst_n = 0; mrst_n = '0; mod_en_w = '0; mod_en_r = '0;
        repeat (4) @(negedge clk);
        rst_n = 1; mrst_n = '1;
        cfg(0, n);
        // every port is configured and enabled; only the first n are used
        for (int p = 0; p < NP; p++)
          for (int d = 0; d < 2; d++) begin
            cfg(a_ea(d, p), region(p, d) + LEN); cfg(a_bc(d, p), bc); cfg(a_sa(d, p), region(p, d));
          end
        w_fin = ~used; r_fin = ~used;
        c0 = phy.conflicts; tu0 = phy.turns;
        @(negedge clk); first_cmd = -1; go = 1; mod_en_w = '1; mod_en_r = '1;
        wait ((done_w & used) == used && (done_r & used) == used && flags_w == '1 && flags_r == '1 &&
              r_fin == '1 && w_fin == '1);
        t1 = phy.cyc; t0 = first_cmd;
        eff[e][b] = real'(2 * n * LEN) / real'(t1 - t0 + 1);
        total_conf += phy.conflicts - c0;
        total_turns += phy.turns - tu0;
        check((done_w & ~used) == '0 && (done_r & ~used) == '0, $sformatf("run %0d: an unused port advanced", run));
        for (int p = 0; p < n; p++)
          for (int a = 0; a < LEN; a++)
            check(phy.peek(longint'(region(p, 0)) + longint'(a)) == wword(run, p, a),
                  $sformatf("run %0d port %0d memory word %0d", run, p, a));
        @(negedge clk); go = 0; mod_en_w = '0; mod_en_r = '0;
        repeat (2) @(negedge clk);
      end
    end
    // write-only and read-only runs
    for (int mode = 1; mode <= 2; mode++)
      for (int e = 0; e < 3; e++)
        for (int b = 2; b < 5; b++) begin
          automatic int bc = 4 << b;
          automatic int n = NS[e];
          logic [NP-1:0] used;
          longint t0, t1;
          run++; cur_n = n; cur_mode = mode; wrong_dir = 0;
          used = NP'((64'(1) << n) - 1);
          @(negedge clk); rst_n = 0; mrst_n = '0; mod_en_w = '0; mod_en_r = '0;
          repeat (4) @(negedge clk);
          rst_n = 1; mrst_n = '1;
          cfg(0, n);
          for (int p = 0; p < n; p++)
            for (int d = 0; d < 2; d++) begin
              cfg(a_ea(d, p), region(p, d) + LEN); cfg(a_bc(d, p), bc); cfg(a_sa(d, p), region(p, d));
            end
          w_fin = (mode == 1) ? ~used : '1; r_fin = (mode == 2) ? ~used : '1;
          @(negedge clk); first_cmd = -1; go = 1;
          if (mode == 1) mod_en_w = used; else mod_en_r = used;
          wait (((mode == 1 ? done_w : done_r) & used) == used && flags_w == '1 && flags_r == '1 &&
                r_fin == '1 && w_fin == '1);
          t1 = phy.cyc; t0 = first_cmd;
          eff1[mode - 1][e][b - 2] = real'(n * LEN) / real'(t1 - t0 + 1);
          check(wrong_dir == 0, $sformatf("run %0d: %0d commands of the disabled direction", run, wrong_dir));
          if (mode == 1)
            for (int p = 0; p < n; p++)
              for (int a = 0; a < LEN; a++)
                check(phy.peek(longint'(region(p, 0)) + longint'(a)) == wword(run, p, a),
                      $sformatf("run %0d port %0d memory word %0d", run, p, a));
          @(negedge clk); go = 0; mod_en_w = '0; mod_en_r = '0;
          repeat (2) @(negedge clk);
        end
    cur_mode = 0;
    $display("efficiency (words moved per clock), BC = 4 8 16 32 64:");
    for (int e = 0; e < 5; e++)
      $display("  N=%2d  %5.3f %5.3f %5.3f %5.3f %5.3f", NS[e],
               eff[e][0], eff[e][1], eff[e][2], eff[e][3], eff[e][4]);
    $display("write-only / read-only efficiency, BC = 16 32 64:");
    for (int e = 0; e < 3; e++)
      $display("  N=%2d  write %5.3f %5.3f %5.3f   read %5.3f %5.3f %5.3f", NS[e],
               eff1[0][e][0], eff1[0][e][1], eff1[0][e][2], eff1[1][e][0], eff1[1][e][1], eff1[1][e][2]);
    for (int m = 0; m < 2; m++)
      for (int e = 0; e < 3; e++)
        for (int b = 0; b < 3; b++)
          check(eff1[m][e][b] >= eff[e][b + 2] - 0.01,
                $sformatf("%s-only N=%0d BC=%0d: %f below mixed %f", m ? "read" : "write", NS[e], 16 << b,
                          eff1[m][e][b], eff[e][b + 2]));
    for (int e = 0; e < 5; e++)
      check(eff[e][4] > eff[e][0], $sformatf("N=%0d: BC=64 not more efficient than BC=4", NS[e]));
    check(unused_served == 0, $sformatf("bursts to unused ports: %0d", unused_served));
    check(total_conf > 0, $sformatf("bank waits: %0d", total_conf));
    check(total_turns > 0, $sformatf("turnarounds: %0d", total_turns));
    check(n_multi > 0, $sformatf("windows with several requests: %0d", n_multi));
    $display("mechanisms: bank=%0d turns=%0d multi=%0d", total_conf, total_turns, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
