// tb_mpmc_config: self-checking test of the configuration registers.
//
// With NPORTS = 4 it writes N, SA, EA and BC of every port and direction
// through the register port, reads every register back, checks that writing
// SA also set CA, that the lookup ports return CA/EA/BC exactly one clock
// after the index, that each advance adds BC to CA only while CA < EA
// (address update rule), that done rises when CA reaches EA, and that
// oversize N and BC values are clipped. Ends with the TB_RESULT line.
module tb_mpmc_config;
  import mpmc_pkg::*;
  localparam int NP = 4;
  localparam int CAW = $clog2(8 * NP + 1);

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic              cfg_we = 0;
  logic [CAW-1:0]    cfg_addr = 0;
  logic [ADDR_W-1:0] cfg_wdata = 0, cfg_rdata;
  logic [IDX_W:0]    n_used;
  logic [NP-1:0]     done_w, done_r;
  logic [NP-1:0][BC_W-1:0] bcw, bcr;
  logic [IDX_W-1:0]  w_idx = 0, r_idx = 0, w_adv_idx = 0, r_adv_idx = 0;
  logic [ADDR_W-1:0] w_ca, w_ea, r_ca, r_ea;
  logic [BC_W-1:0]   w_bc, r_bc;
  logic              w_adv = 0, r_adv = 0;

  mpmc_config #(.NPORTS(NP)) dut (
    .clk, .rst_n, .cfg_we, .cfg_addr, .cfg_wdata, .cfg_rdata, .n_used, .done_w, .done_r,
    .bc_w_all(bcw), .bc_r_all(bcr),
    .w_idx, .w_ca, .w_ea, .w_bc, .w_adv, .w_adv_idx,
    .r_idx, .r_ca, .r_ea, .r_bc, .r_adv, .r_adv_idx);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic wr(input int a, input int unsigned d);
    @(negedge clk); cfg_we = 1; cfg_addr = CAW'(a); cfg_wdata = d;
    @(negedge clk); cfg_we = 0;
  endtask

  function automatic int a_sa(int d, int p); return 1 + d * NP + p; endfunction
  function automatic int a_ea(int d, int p); return 1 + 2 * NP + d * NP + p; endfunction
  function automatic int a_bc(int d, int p); return 1 + 4 * NP + d * NP + p; endfunction
  function automatic int a_ca(int d, int p); return 1 + 6 * NP + d * NP + p; endfunction

  int unsigned sa [2][NP], ea [2][NP], bc [2][NP], ca [2][NP];

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1;
    check(n_used == 0 && done_w == '1 && done_r == '1, "reset state");
    wr(0, 99);
    check(n_used == NP, "N clipped to NPORTS");
    wr(0, 3);
    check(n_used == 3, "N written");
    for (int d = 0; d < 2; d++)
      for (int p = 0; p < NP; p++) begin
        sa[d][p] = 1000 * (d * NP + p + 1);
        bc[d][p] = 4 << p;
        ea[d][p] = sa[d][p] + 3 * bc[d][p];
        ca[d][p] = sa[d][p];
        wr(a_sa(d, p), sa[d][p]);
        wr(a_ea(d, p), ea[d][p]);
        wr(a_bc(d, p), bc[d][p]);
      end
    // read back
    for (int d = 0; d < 2; d++)
      for (int p = 0; p < NP; p++) begin
        @(negedge clk); cfg_addr = CAW'(a_sa(d, p)); #1 check(cfg_rdata == sa[d][p], "SA readback");
        cfg_addr = CAW'(a_ea(d, p)); #1 check(cfg_rdata == ea[d][p], "EA readback");
        cfg_addr = CAW'(a_bc(d, p)); #1 check(cfg_rdata == bc[d][p], "BC readback");
        cfg_addr = CAW'(a_ca(d, p)); #1 check(cfg_rdata == sa[d][p], "CA loaded from SA");
      end
    check(bcw[2] == 16 && bcr[3] == 32, "BC arrays");
    check(done_w == '0 && done_r == '0, "not done after configuration");
    // lookup latency: index at one edge, data after the next
    @(negedge clk); w_idx = 2; r_idx = 1;
    @(posedge clk); #1;
    check(w_ca == ca[0][2] && w_ea == ea[0][2] && w_bc == bc[0][2], "write lookup after one clock");
    check(r_ca == ca[1][1] && r_ea == ea[1][1] && r_bc == bc[1][1], "read lookup after one clock");
    // advance until done, Eq. (1)
    for (int step = 0; step < 5; step++) begin
      @(negedge clk); w_adv = 1; w_adv_idx = 2; r_adv = 1; r_adv_idx = 0;
      @(negedge clk); w_adv = 0; r_adv = 0;
      if (ca[0][2] < ea[0][2]) ca[0][2] += bc[0][2];
      if (ca[1][0] < ea[1][0]) ca[1][0] += bc[1][0];
      cfg_addr = CAW'(a_ca(0, 2)); #1 check(cfg_rdata == ca[0][2], $sformatf("write CA step %0d", step));
      cfg_addr = CAW'(a_ca(1, 0)); #1 check(cfg_rdata == ca[1][0], $sformatf("read CA step %0d", step));
      check(done_w[2] == (ca[0][2] >= ea[0][2]), "done_w follows CA >= EA");
      check(done_r[0] == (ca[1][0] >= ea[1][0]), "done_r follows CA >= EA");
    end
    check(done_w == 4'b0100 && done_r == 4'b0001, "only the advanced ports are done");
    // restart a transfer by writing SA again
    wr(a_sa(0, 2), 5);
    check(done_w[2] == 0, "new SA restarts the transfer");
    wr(a_bc(0, 1), 200);
    check(bcw[1] == 64, "BC clipped to 64");
    wr(a_bc(1, 3), 0);
    check(done_r[3] == 1, "BC of zero counts as done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
