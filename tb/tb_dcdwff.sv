// tb_dcdwff: self-checking test of the dual-clock dual-width FIFO.
//
// Two FIFOs are tested, each with unrelated write and read clocks:
//   u_up    32-bit writes, 128-bit reads (a write PORT's direction),
//   u_down  128-bit writes, 32-bit reads (a read PORT's direction).
// Phase 1 fills each FIFO without reading and checks that exactly the
// capacity (2**AW DPM words) is accepted before full rises, that empty falls
// and almost_full follows the threshold. Phase 2 streams random data with
// random enables on both sides and compares every read word with a model
// queue built from the written words (first written word in the least
// significant bits). Ends with the TB_RESULT line.
module tb_dcdwff;
  localparam int AW = 4;
  localparam int DEPTH = 2 ** AW;

  int checks = 0, failures = 0;
  logic wclk = 0, rclk = 0, wrst_n = 0, rrst_n = 0;
  always #5 wclk = ~wclk;
  always #3.5 rclk = ~rclk;

  // up: 32 -> 128
  logic         u_wen, u_ren, u_full, u_empty, u_af;
  logic [31:0]  u_wd;
  logic [127:0] u_q;
  logic [AW:0]  u_wl, u_rl, u_afl;
  dcdwff #(.WR_W(32), .RD_W(128), .AW(AW)) u_up (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en(u_wen), .wr_data(u_wd), .full(u_full), .wr_level(u_wl),
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en(u_ren), .rd_q(u_q), .empty(u_empty), .rd_level(u_rl),
    .af_level(u_afl), .almost_full(u_af));

  // down: 128 -> 32
  logic         d_wen, d_ren, d_full, d_empty, d_af;
  logic [127:0] d_wd;
  logic [31:0]  d_q;
  logic [AW:0]  d_wl, d_rl;
  dcdwff #(.WR_W(128), .RD_W(32), .AW(AW)) u_down (
    .wr_clk(wclk), .wr_rst_n(wrst_n), .wr_en(d_wen), .wr_data(d_wd), .full(d_full), .wr_level(d_wl),
    .rd_clk(rclk), .rd_rst_n(rrst_n), .rd_en(d_ren), .rd_q(d_q), .empty(d_empty), .rd_level(d_rl),
    .af_level(5'd4), .almost_full(d_af));

  logic [127:0] up_exp[$];
  logic [31:0]  down_exp[$];
  logic [31:0]  up_part[$];
  int unsigned  seq = 1;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // write side: accepted words go to the model
  always @(posedge wclk) begin
    if (u_wen && !u_full) begin
      up_part.push_back(u_wd);
      if (up_part.size() == 4) begin
        up_exp.push_back({up_part[3], up_part[2], up_part[1], up_part[0]});
        up_part.delete();
      end
    end
    if (d_wen && !d_full)
      for (int k = 0; k < 4; k++) down_exp.push_back(d_wd[32*k +: 32]);
  end

  // read side: every accepted word is checked
  always @(posedge rclk) begin
    if (u_ren && !u_empty) begin
      if (up_exp.size() == 0) check(0, "up: read with nothing written");
      else check(u_q == up_exp.pop_front(), $sformatf("up: data %h", u_q));
    end
    if (d_ren && !d_empty) begin
      if (down_exp.size() == 0) check(0, "down: read with nothing written");
      else check(d_q == down_exp.pop_front(), $sformatf("down: data %h", d_q));
    end
  end

  initial begin
    repeat (20000) @(posedge wclk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int acc_u, acc_d;
    u_wen = 0; u_ren = 0; u_wd = 0; d_wen = 0; d_ren = 0; d_wd = 0; u_afl = 5'd6;
    repeat (3) @(posedge wclk);
    wrst_n = 1; rrst_n = 1;
    repeat (3) @(posedge rclk);
    check(u_empty && d_empty && !u_full && !d_full && !u_af, "flags after reset");

    // Phase 1: fill both without reading
    acc_u = 0; acc_d = 0;
    for (int c = 0; c < DEPTH * 4 + 20; c++) begin
      @(negedge wclk);
      u_wen = 1; u_wd = seq++;
      d_wen = 1; d_wd = {$urandom, $urandom, $urandom, $urandom};
      @(posedge wclk);
      if (!u_full) acc_u++;
      if (!d_full) acc_d++;
    end
    @(negedge wclk); u_wen = 0; d_wen = 0;
    check(acc_u == DEPTH * 4, $sformatf("up accepted %0d 32-bit words", acc_u));
    check(acc_d == DEPTH, $sformatf("down accepted %0d 128-bit words", acc_d));
    check(u_full && d_full, "full at capacity");
    check(u_wl == DEPTH && d_wl == DEPTH, "write-side level at capacity");
    repeat (4) @(posedge rclk);
    check(!u_empty && !d_empty, "not empty once the pointer has crossed");
    check(u_rl == DEPTH && u_af, "read-side level and almost_full");

    // drain the up FIFO partly and check almost_full follows the threshold
    for (int k = 0; k < DEPTH - 5; k++) begin
      @(negedge rclk); u_ren = 1;
      @(posedge rclk);
    end
    @(negedge rclk); u_ren = 0;
    @(posedge rclk); #1;
    check(u_rl == 5 && !u_af, $sformatf("almost_full low at level %0d (threshold 6)", u_rl));

    // Phase 2: random traffic on both sides
    fork
      begin
        for (int c = 0; c < 3000; c++) begin
          @(negedge wclk);
          u_wen = ($urandom % 3) != 0; u_wd = seq++;
          d_wen = ($urandom % 4) == 0; d_wd = {$urandom, $urandom, $urandom, $urandom};
        end
        @(negedge wclk); u_wen = 0; d_wen = 0;
      end
      begin
        for (int c = 0; c < 6000; c++) begin
          @(negedge rclk);
          u_ren = ($urandom % 2) == 0;
          d_ren = ($urandom % 4) != 0;
        end
        // drain
        u_ren = 1; d_ren = 1;
        repeat (400) @(posedge rclk);
        @(negedge rclk); u_ren = 0; d_ren = 0;
      end
    join
    repeat (5) @(posedge rclk);
    check(u_empty && d_empty, "both empty after draining");
    check(up_exp.size() == 0 && down_exp.size() == 0, "every written word was read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
