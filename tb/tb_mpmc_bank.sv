// tb_mpmc_bank: bank-interleaving workload for the controller: four ports,
// three bank maps, burst counts 4 to 64.
//
// The controller (NPORTS = 4, 128-bit MOD words so that the MODs never limit
// the rate) runs 15 experiments, one after the other with a reset between
// them. In each, every port writes LEN memory words and reads LEN other words
// at the same time, all with the same burst count BC. The three bank maps:
//   EXPA  ports 0..3 all in bank 0,
//   EXPB  ports 0 and 2 in bank 0, ports 1 and 3 in bank 1,
//   EXPC  port p in bank p.
// The memory model shares one data bus between reads and writes, and holds
// ready low for a read/write turnaround and for a burst to the same bank as
// the previous burst. Its timing numbers are placeholders, so the measured
// efficiency (data words moved / clocks taken) shows trends, not DDR3
// figures.
// Checks: every read word and every written memory word is right, every
// transfer finishes, and the trends the bank maps should give hold:
//   * at every BC, EXPC is at least as efficient as EXPB, and EXPB at least
//     as efficient as EXPA (1 % tolerance);
//   * EXPA meets more bank waits than EXPC;
//   * in every map, BC = 64 is more efficient than BC = 4.
// The efficiency table is printed. The mechanisms counted are bank waits,
// turnarounds and windows holding several requests; each must occur.
module tb_mpmc_bank;
  import mpmc_pkg::*;
  localparam int NP = 4, AW = 7, MOD_W = 128, LEN = 512, BANK_LSB = 10;
  localparam int CAW = $clog2(8 * NP + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [NP-1:0] mclk = '0, mrst_n = '0;
  for (genvar p = 0; p < NP; p++) begin : g_clk
    initial forever #(3.0 + 0.5 * p) mclk[p] = ~mclk[p];
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

  mpmc_top #(.NPORTS(NP), .MOD_W(MOD_W), .AW(AW)) dut (
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

  // bank of port p in experiment e (Table of bank maps above)
  function automatic int bank(int e, int p);
    case (e)
      0:       return 0;
      1:       return p % 2;
      default: return p;
    endcase
  endfunction
  // regions: row (address bits above the bank field) differs per port and direction
  function automatic int unsigned region(int e, int p, int d);
    return unsigned'(((1 + 2 * p + d) << (BANK_LSB + 3)) | (bank(e, p) << BANK_LSB));
  endfunction

  int run = -1, cur_e = 0;
  bit go = 0;
  logic [NP-1:0] w_fin = '0, r_fin = '0;
  int n_multi = 0;
  always @(posedge clk) if (rst_n && win_start && win_size > 1) n_multi++;

  for (genvar gp = 0; gp < NP; gp++) begin : g_mod
    initial begin : writer
      automatic int p = gp;
      for (int r = 0; r < 15; r++) begin
        wait (go && run == r);
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
      for (int r = 0; r < 15; r++) begin
        wait (go && run == r);
        for (int k = 0; k < LEN; k++) begin
          @(negedge mclk[p]);
          while (empty[p]) @(negedge mclk[p]);
          check(rq[p] == mpat(longint'(region(cur_e, p, 1)) + longint'(k)),
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

  real eff [3][5];
  int  conf [3][5];
  initial begin
    string names [3] = '{"EXPA", "EXPB", "EXPC"};
    int total_turns = 0, total_conf = 0;
    for (int e = 0; e < 3; e++)
      for (int p = 0; p < NP; p++)
        for (int a = 0; a < LEN; a++)
          phy.mem[longint'(region(e, p, 1)) + longint'(a)] = mpat(longint'(region(e, p, 1)) + longint'(a));
    for (int e = 0; e < 3; e++) begin
      for (int b = 0; b < 5; b++) begin
        automatic int bc = 4 << b;
        longint t0, t1;
        int c0, tu0;
        run++; cur_e = e;
        // reset between experiments
        @(negedge clk); rst_n = 0; mrst_n = '0; mod_en_w = '0; mod_en_r = '0;
        repeat (4) @(negedge clk);
        rst_n = 1; mrst_n = '1;
        cfg(0, NP);
        for (int p = 0; p < NP; p++)
          for (int d = 0; d < 2; d++) begin
            cfg(a_ea(d, p), region(e, p, d) + LEN); cfg(a_bc(d, p), bc); cfg(a_sa(d, p), region(e, p, d));
          end
        w_fin = '0; r_fin = '0;
        c0 = phy.conflicts; tu0 = phy.turns;
        @(negedge clk); go = 1; mod_en_w = '1; mod_en_r = '1;
        t0 = phy.cyc;
        wait (done_w == '1 && done_r == '1 && flags_w == '1 && flags_r == '1 && r_fin == '1 && w_fin == '1);
        t1 = phy.cyc;
        eff[e][b] = real'(2 * NP * LEN) / real'(t1 - t0);
        conf[e][b] = phy.conflicts - c0;
        total_conf += conf[e][b];
        total_turns += phy.turns - tu0;
        for (int p = 0; p < NP; p++)
          for (int a = 0; a < LEN; a++)
            check(phy.peek(longint'(region(e, p, 0)) + longint'(a)) == wword(run, p, a),
                  $sformatf("run %0d port %0d memory word %0d", run, p, a));
        @(negedge clk); go = 0; mod_en_w = '0; mod_en_r = '0;
        repeat (2) @(negedge clk);
      end
    end
    $display("efficiency (words moved per clock), BC = 4 8 16 32 64:");
    for (int e = 0; e < 3; e++)
      $display("  %s  %5.3f %5.3f %5.3f %5.3f %5.3f   bank waits %0d %0d %0d %0d %0d", names[e],
               eff[e][0], eff[e][1], eff[e][2], eff[e][3], eff[e][4],
               conf[e][0], conf[e][1], conf[e][2], conf[e][3], conf[e][4]);
    for (int b = 0; b < 5; b++) begin
      check(eff[2][b] >= eff[1][b] - 0.01, $sformatf("BC=%0d: EXPC %f below EXPB %f", 4 << b, eff[2][b], eff[1][b]));
      check(eff[1][b] >= eff[0][b] - 0.01, $sformatf("BC=%0d: EXPB %f below EXPA %f", 4 << b, eff[1][b], eff[0][b]));
      check(conf[0][b] > conf[2][b], $sformatf("BC=%0d: EXPA bank waits %0d not above EXPC %0d", 4 << b, conf[0][b], conf[2][b]));
    end
    for (int e = 0; e < 3; e++)
      check(eff[e][4] > eff[e][0], $sformatf("%s: BC=64 not more efficient than BC=4", names[e]));
    check(total_conf > 0, $sformatf("bank waits: %0d", total_conf));
    check(total_turns > 0, $sformatf("turnarounds: %0d", total_turns));
    check(n_multi > 0, $sformatf("windows with several requests: %0d", n_multi));
    $display("mechanisms: bank=%0d turns=%0d multi=%0d", total_conf, total_turns, n_multi);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
