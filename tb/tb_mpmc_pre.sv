// tb_mpmc_pre: self-checking test of one PRE (polling, FLAG, request FIFO).
//
// NPORTS = 4, N = 4. The testbench plays CONFIG (a register model with the
// one-clock lookup latency and the CA += BC advance) and POS (it pops records
// at random times and, some clocks later, returns the port index with
// trans_done). Port 3 is disabled (mod_en low) and port 2 is "not ready" for
// the first part of the run. Checks:
//   * every queued record carries the index, BC and the CA that port had
//     (SA, SA+BC, SA+2BC, ...);
//   * a port never has two records in flight (its FLAG bit is low meanwhile);
//   * disabled, not-ready and done ports are never queued;
//   * a record enters the FIFO two clocks after POLLING offered its port;
//   * the enabled ports get the same number of bursts (fair polling);
//   * every port stops exactly when CA reaches EA.
module tb_mpmc_pre;
  import mpmc_pkg::*;
  localparam int NP = 4;

  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [IDX_W:0]    n_used = 4;
  logic [NP-1:0]     mod_en = 4'b0111, done, port_ready = 4'b1011;
  logic [IDX_W-1:0]  cfg_idx, cfg_adv_idx, j = 0;
  logic [ADDR_W-1:0] cfg_ca, cfg_ea;
  logic [BC_W-1:0]   cfg_bc;
  logic              cfg_adv, fifo_pop = 0, fifo_empty, trans_done = 0;
  req_t              fifo_head;
  logic [5:0]        fifo_count;
  logic [NP-1:0]     flags;

  mpmc_pre #(.NPORTS(NP)) dut (
    .clk, .rst_n, .n_used, .mod_en, .done, .port_ready,
    .cfg_idx, .cfg_ca, .cfg_ea, .cfg_bc, .cfg_adv, .cfg_adv_idx,
    .fifo_pop, .fifo_head, .fifo_empty, .fifo_count, .trans_done, .j, .flags);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // CONFIG model
  int unsigned sa [NP], ea [NP], bc [NP], ca [NP], exp_ca [NP];
  always_comb for (int p = 0; p < NP; p++) done[p] = ca[p] >= ea[p];
  always_ff @(posedge clk) begin
    cfg_ca <= ca[cfg_idx]; cfg_ea <= ea[cfg_idx]; cfg_bc <= BC_W'(bc[cfg_idx]);
    if (rst_n && cfg_adv && ca[cfg_adv_idx] < ea[cfg_adv_idx]) ca[cfg_adv_idx] <= ca[cfg_adv_idx] + bc[cfg_adv_idx];
  end

  // checks on every push
  int in_flight [NP];
  int served [NP];
  int offered_at [NP];
  int cyc = 0;
  always @(posedge clk) begin
    cyc++;
    if (rst_n && flags[cfg_idx] && mod_en[cfg_idx] && port_ready[cfg_idx] && !done[cfg_idx])
      offered_at[cfg_idx] = cyc;
    if (rst_n && dut.push) begin
      automatic int p = int'(cfg_adv_idx);
      check(in_flight[p] == 0, $sformatf("port %0d queued twice", p));
      check(mod_en[p] && port_ready[p], $sformatf("port %0d queued while disabled or not ready", p));
      check(cfg_ca == exp_ca[p] && cfg_bc == bc[p], $sformatf("record of port %0d: CA %0d BC %0d", p, cfg_ca, cfg_bc));
      check(cyc - offered_at[p] == 1, $sformatf("port %0d record one clock after its poll", p));
      in_flight[p]++;
      served[p]++;
      exp_ca[p] += bc[p];
    end
  end

  // POS model
  initial begin
    forever begin
      @(negedge clk);
      if (!fifo_empty && ($urandom % 3) == 0) begin
        automatic req_t r = fifo_head;
        fifo_pop = 1;
        @(negedge clk); fifo_pop = 0;
        repeat ($urandom % 6) @(negedge clk);
        trans_done = 1; j = r.idx;
        in_flight[r.idx]--;
        @(negedge clk); trans_done = 0;
      end
    end
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int p = 0; p < NP; p++) begin
      sa[p] = 64 * p; bc[p] = 4; ea[p] = sa[p] + 40 * bc[p]; ca[p] = sa[p]; exp_ca[p] = sa[p];
    end
    repeat (2) @(negedge clk);
    check(flags == '1, "all FLAG bits high in reset");
    rst_n = 1;
    repeat (200) @(negedge clk);
    check(served[2] == 0 && served[3] == 0, "not-ready and disabled ports not served");
    check(served[0] > 5 && served[0] - served[1] <= 1 && served[1] - served[0] <= 1,
          $sformatf("fair share ports 0/1: %0d %0d", served[0], served[1]));
    port_ready[2] = 1;
    repeat (1200) @(negedge clk);
    for (int p = 0; p < 3; p++) begin
      check(served[p] == 40, $sformatf("port %0d served %0d bursts", p, served[p]));
      check(done[p] && ca[p] == ea[p], $sformatf("port %0d reached EA", p));
    end
    check(served[3] == 0, "disabled port never served");
    check(fifo_empty && flags == '1, "idle at the end");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
