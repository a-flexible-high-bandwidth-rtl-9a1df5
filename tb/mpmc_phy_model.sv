// mpmc_phy_model: behavioural model of the DDR3 PHY and SDRAM behind the
// controller, for simulation only (not synthesizable, not part of the design).
//
// It speaks the controller's Avalon-style local interface: a command
// (write_req or read_req with burstbegin, addr, size) is accepted when ready
// is high; a write burst then delivers size beats of wdata, one per accepted
// clock; a read burst returns size words on rdata with rdata_valid, in
// command order, RD_LAT clocks after the command at the earliest. Storage is
// a sparse array of PHY words indexed by word address.
// Simple SDRAM timing effects are imitated by holding ready low before a new
// burst: TURN clocks when the bus direction changes (read/write turnaround)
// and BANK_PEN clocks when the burst goes to the same bank as the previous
// one (precharge and activate), the bank being address bits
// [BANK_LSB +: 3]. STALL_PCT adds random ready gaps. The counters turns,
// conflicts, wbeats and rwords let a testbench measure bus efficiency.
// With SHARED_BUS = 1 the read and write data share one bus, as on a real
// DRAM: no write beat is accepted while read words are still due to return.
// These timing numbers are placeholders, not DDR3 datasheet values.
module mpmc_phy_model
  import mpmc_pkg::*;
#(
  parameter int RD_LAT    = 8,
  parameter int TURN      = 4,
  parameter int BANK_PEN  = 6,
  parameter int BANK_LSB  = 10,
  parameter int STALL_PCT = 0,
  parameter bit SHARED_BUS = 0
) (
  input  logic             clk,
  input  logic             rst_n,
  input  phy_cmd_t         cmd,
  input  logic [PHY_W-1:0] wdata,
  output logic             ready,
  output logic [PHY_W-1:0] rdata,
  output logic             rdata_valid
);
  logic [PHY_W-1:0] mem [longint unsigned];

  typedef struct { longint unsigned addr; int size; longint due; } rd_t;
  rd_t rq[$];

  longint cyc = 0;
  int  turns = 0, conflicts = 0, wbeats = 0, rwords = 0, stalls = 0;
  int  pen_cnt = 0;
  bit  pen_done = 0, stall = 0, last_wr = 0, have_last = 0;
  int  last_bank = -1;
  longint unsigned waddr;
  int  wk = 0, rk = 0;

  function automatic int bank_of(logic [ADDR_W-1:0] a);
    return int'((a >> BANK_LSB) & 7);
  endfunction

  function automatic int penalty();
    int p = 0;
    if (have_last && cmd.write_req != last_wr) p += TURN;
    if (have_last && bank_of(cmd.addr) == last_bank) p += BANK_PEN;
    return p;
  endfunction

  logic cmd_new;
  assign cmd_new = (cmd.write_req || cmd.read_req) && cmd.burstbegin;
  assign ready   = rst_n && !stall && pen_cnt == 0 && !(cmd_new && !pen_done && penalty() > 0) &&
                   !(SHARED_BUS && cmd.write_req && rq.size() > 0);

  function automatic logic [PHY_W-1:0] peek(longint unsigned a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  // State read by ready is updated with nonblocking assignments, so the
  // controller and the model see the same ready at every clock edge.
  always @(posedge clk) begin
    cyc++;
    rdata_valid <= 1'b0;
    if (!rst_n) begin
      rq.delete();
      pen_cnt <= 0; pen_done <= 0; have_last <= 0; stall <= 0;
    end else begin
      // penalty countdown before a new burst
      if (pen_cnt > 0) pen_cnt <= pen_cnt - 1;
      else if (cmd_new && !pen_done && penalty() > 0) begin
        if (have_last && cmd.write_req != last_wr) turns++;
        if (have_last && bank_of(cmd.addr) == last_bank) conflicts++;
        pen_cnt  <= penalty() - 1;
        pen_done <= 1;
      end
      // accepted command / beat
      if (ready && (cmd.write_req || cmd.read_req)) begin
        if (cmd.burstbegin) begin
          pen_done <= 0; have_last <= 1; last_wr <= cmd.write_req; last_bank <= bank_of(cmd.addr);
        end
        if (cmd.write_req) begin
          if (cmd.burstbegin) begin waddr = longint'(cmd.addr); wk = 0; end
          mem[waddr + longint'(wk)] = wdata;
          wk++; wbeats++;
        end else begin
          rq.push_back('{addr: longint'(cmd.addr), size: int'(cmd.size), due: cyc + longint'(RD_LAT)});
        end
      end
      // read return
      if (rq.size() > 0 && cyc >= rq[0].due) begin
        rdata       <= peek(rq[0].addr + longint'(rk));
        rdata_valid <= 1'b1;
        rwords++;
        rk++;
        if (rk == rq[0].size) begin rk = 0; void'(rq.pop_front()); end
      end
      stall <= STALL_PCT > 0 && int'($urandom % 100) < STALL_PCT;
      if (stall) stalls++;
    end
  end
endmodule
