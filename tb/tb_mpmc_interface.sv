// tb_mpmc_interface: self-checking test of the INTERFACE (four PORTs with
// their DCDWFFs and the data MUX/DEMUX).
//
// NPORTS = 4, MOD_W = 32, PHY words of 128 bits, DCDWFF depth 16. Each MOD
// runs on its own clock (periods 6, 7, 9 and 13 time units; the controller
// clock is 10). Checks:
//   * write path: each MOD writes 32-bit words; the controller side pops them
//     per port as 128-bit words, four MOD words per PHY word, first word in
//     the low bits, and never sees another port's data;
//   * wr_ready (the paper's port_full for writes) rises only once BC PHY
//     words are stored;
//   * mod_full stops a MOD that fills its write DCDWFF;
//   * read path: PHY words pushed for a port come out of that port only, as
//     four 32-bit words each;
//   * rd_ready falls when the read DCDWFF has no room for a burst of BC.
module tb_mpmc_interface;
  import mpmc_pkg::*;
  localparam int NP = 4, AW = 4, DEPTH = 16;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  logic [NP-1:0] mclk = '0, mrst_n = '0;
  always #5 clk = ~clk;
  always #3 mclk[0] = ~mclk[0];
  always #3.5 mclk[1] = ~mclk[1];
  always #4.5 mclk[2] = ~mclk[2];
  always #6.5 mclk[3] = ~mclk[3];

  logic [NP-1:0] wen = '0, full, ren = '0, empty, wr_ready, rd_ready;
  logic [NP-1:0][31:0] wd = '0, rq;
  logic [NP-1:0][BC_W-1:0] bcw, bcr;
  logic [IDX_W-1:0] wsel = 0, rsel = 0;
  logic wf_rd_en = 0, wf_empty, rf_wr_en = 0;
  logic [PHY_W-1:0] wf_rd_q, rf_wr_data = '0;

  mpmc_interface #(.NPORTS(NP), .MOD_W(32), .AW(AW)) dut (
    .clk, .rst_n, .mod_clk(mclk), .mod_rst_n(mrst_n),
    .mod_wr_en(wen), .mod_wr_data(wd), .mod_full(full),
    .mod_rd_en(ren), .mod_rd_q(rq), .mod_empty(empty),
    .bc_w(bcw), .bc_r(bcr),
    .wsel, .wf_rd_en, .wf_rd_q, .wf_empty, .rsel, .rf_wr_en, .rf_wr_data,
    .wr_ready, .rd_ready);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic logic [31:0] mw(int p, int k); return 32'(p << 24 | k); endfunction

  // MOD p writes n words; returns how many were accepted
  task automatic mod_write(int p, int n, output int acc);
    acc = 0;
    for (int k = 0; k < n; k++) begin
      @(negedge mclk[p]); wen[p] = 1; wd[p] = mw(p, 1000 + k);
      @(posedge mclk[p]); if (!full[p]) acc++;
      #0;
    end
    @(negedge mclk[p]); wen[p] = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc;
    for (int p = 0; p < NP; p++) begin bcw[p] = BC_W'(2 + p); bcr[p] = BC_W'(4); end
    repeat (3) @(negedge clk);
    rst_n = 1; mrst_n = '1;
    repeat (3) @(negedge clk);
    check(wr_ready == '0 && rd_ready == '1 && wf_empty, "ready bits after reset");
    // write path: port p writes 4*(bc_w+1) words (bc_w+1 PHY words), port 3 overfills
    fork
      begin mod_write(0, 4 * 3, acc); end
      begin mod_write(1, 4 * 4, acc); end
      begin mod_write(2, 4 * 1, acc); end
      begin int a3; mod_write(3, 4 * DEPTH + 12, a3); check(a3 == 4 * DEPTH, $sformatf("port 3 accepted %0d words before full", a3)); end
    join
    repeat (10) @(negedge clk);
    check(wr_ready == 4'b1011, $sformatf("wr_ready %b (port 2 holds 1 of BC 4)", wr_ready));
    // pop and check every port's words
    for (int p = 0; p < NP; p++) begin
      automatic int n = (p == 0) ? 3 : (p == 1) ? 4 : (p == 2) ? 1 : DEPTH;
      @(negedge clk); wsel = IDX_W'(p);
      for (int w = 0; w < n; w++) begin
        @(negedge clk); #1;
        check(!wf_empty, "data present");
        check(wf_rd_q == {mw(p, 1000 + 4 * w + 3), mw(p, 1000 + 4 * w + 2), mw(p, 1000 + 4 * w + 1), mw(p, 1000 + 4 * w)},
              $sformatf("port %0d PHY word %0d = %h", p, w, wf_rd_q));
        wf_rd_en = 1;
        @(negedge clk); wf_rd_en = 0;
      end
      repeat (2) @(negedge clk);
      check(wf_empty, $sformatf("port %0d empty after its words", p));
    end
    check(wr_ready == '0, "wr_ready low when drained");
    // read path: push PHY words into ports 3, 1, 0
    for (int w = 0; w < DEPTH - 3; w++) begin
      @(negedge clk); rsel = 3; rf_wr_en = 1; rf_wr_data = {4{32'(w)}} ^ {32'd3, 32'd2, 32'd1, 32'd0};
    end
    @(negedge clk); rsel = 1; rf_wr_data = {32'hB3, 32'hB2, 32'hB1, 32'hB0};
    @(negedge clk); rf_wr_en = 0;
    @(negedge clk);
    check(rd_ready == 4'b0111, $sformatf("rd_ready %b (port 3 has room for 3 < BC 4)", rd_ready));
    // MODs read back
    fork
      begin
        for (int k = 0; k < 4 * (DEPTH - 3); k++) begin
          @(negedge mclk[3]); #1 check(!empty[3] || k == 0, "port 3 data");
          wait (!empty[3]);
          check(rq[3] == (32'(k / 4) ^ 32'(k % 4)), $sformatf("port 3 read word %0d = %h", k, rq[3]));
          ren[3] = 1; @(posedge mclk[3]); #1 ren[3] = 0;
        end
      end
      begin
        for (int k = 0; k < 4; k++) begin
          wait (!empty[1]);
          @(negedge mclk[1]);
          check(rq[1] == 32'hB0 + 32'(k), "port 1 read word");
          ren[1] = 1; @(posedge mclk[1]); #1 ren[1] = 0;
        end
      end
    join
    repeat (10) @(negedge clk);
    check(empty == '1, "all read DCDWFFs empty");
    check(rd_ready == '1, "room again in every port");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
