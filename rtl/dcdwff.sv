// dcdwff: dual-clock dual-data-width FIFO, the building block of every PORT.
//
// The write side runs on wr_clk and takes WR_W-bit words, the read side runs
// on rd_clk and delivers RD_W-bit words. The dual-port memory (DPM) is
// MEM_W = max(WR_W, RD_W) bits wide; one of the widths must divide the other.
// Following the paper's structure (a shift register, a gray counter and a
// control unit on each side, one DPM, registered status flags):
//   * write shift register: when WR_W < MEM_W it collects MEM_W/WR_W words,
//     first word in the least significant bits, and writes the packed word
//     to the DPM with the last of them;
//   * read shift register: when RD_W < MEM_W it hands out a DPM word in
//     MEM_W/RD_W slices, least significant first;
//   * gray counters: the binary write and read pointers are kept together
//     with their gray codes; each gray pointer crosses to the other clock
//     through a two-flip-flop synchronizer;
//   * control unit + register: full, empty, almost_full and the two fill
//     levels are computed from the next pointer value and the synchronized
//     pointer of the other side and registered. Because the other side's
//     pointer is seen late, every flag is conservative: full and empty
//     release a few cycles late, never early.
// As in the paper's Fig. 2, wr_en only counts when full is low and rd_en only
// when empty is low; writes while full and reads while empty are ignored.
// almost_full is a read-side signal: it is high when at least af_level DPM
// words are stored, which tells the arbiter a whole burst can be read without
// a gap. The read side is show-ahead: rd_q shows the head word while empty is
// low, and rd_en moves on to the next one.
// Levels are in DPM words. Word order inside a DPM word, the show-ahead read
// and the level outputs are this design's choices.
module dcdwff #(
  parameter int unsigned WR_W = 32,   // write-side word width
  parameter int unsigned RD_W = 128,  // read-side word width
  parameter int unsigned AW   = 7     // DPM depth is 2**AW words
) (
  // write side (MOD for a write PORT, PHY side for a read PORT)
  input  logic            wr_clk,
  input  logic            wr_rst_n,
  input  logic            wr_en,
  input  logic [WR_W-1:0] wr_data,
  output logic            full,
  output logic [AW:0]     wr_level,     // DPM words stored, seen from wr_clk
  // read side
  input  logic            rd_clk,
  input  logic            rd_rst_n,
  input  logic            rd_en,
  output logic [RD_W-1:0] rd_q,
  output logic            empty,
  output logic [AW:0]     rd_level,     // DPM words stored, seen from rd_clk
  input  logic [AW:0]     af_level,     // almost_full threshold (DPM words)
  output logic            almost_full
);
  localparam int unsigned MEM_W  = (WR_W > RD_W) ? WR_W : RD_W;
  localparam int unsigned WR_R   = MEM_W / WR_W;   // write words per DPM word
  localparam int unsigned RD_R   = MEM_W / RD_W;   // read words per DPM word
  localparam int unsigned WSEL_W = (WR_R > 1) ? $clog2(WR_R) : 1;
  localparam int unsigned RSEL_W = (RD_R > 1) ? $clog2(RD_R) : 1;
  localparam int unsigned DEPTH  = 2 ** AW;

  function automatic logic [AW:0] bin2gray(input logic [AW:0] b);
    return b ^ (b >> 1);
  endfunction

  function automatic logic [AW:0] gray2bin(input logic [AW:0] g);
    logic [AW:0] b;
    b[AW] = g[AW];
    for (int k = int'(AW) - 1; k >= 0; k--) b[k] = b[k+1] ^ g[k];
    return b;
  endfunction

  // ---------------------------------------------------------------- write side
  logic [AW:0]      wbin, wgray, wbin_next;
  logic [AW:0]      rbin, rgray, rbin_next;
  logic [AW:0]      rgray_sync, rbin_sync;
  logic             wr_ok, mem_we;
  logic [MEM_W-1:0] wr_shift;            // word written to the DPM

  assign wr_ok = wr_en && !full;

  if (WR_R == 1) begin : g_wr_direct
    assign mem_we   = wr_ok;
    assign wr_shift = wr_data;
  end else begin : g_wr_shift
    logic [MEM_W-WR_W-1:0] shreg;        // words already collected
    logic [WSEL_W-1:0]     cnt;
    always_ff @(posedge wr_clk or negedge wr_rst_n) begin
      if (!wr_rst_n) begin
        cnt   <= '0;
        shreg <= '0;
      end else if (wr_ok) begin
        cnt <= (cnt == WSEL_W'(WR_R - 1)) ? '0 : cnt + 1'b1;
        shreg[cnt*WR_W +: WR_W] <= wr_data;
      end
    end
    assign mem_we   = wr_ok && (cnt == WSEL_W'(WR_R - 1));
    assign wr_shift = {wr_data, shreg};
  end

  assign wbin_next = wbin + (AW+1)'(mem_we);

  mpmc_sync #(.W(AW+1)) u_sync_r2w (
    .clk(wr_clk), .rst_n(wr_rst_n), .d(rgray), .q(rgray_sync)
  );
  assign rbin_sync = gray2bin(rgray_sync);

  always_ff @(posedge wr_clk or negedge wr_rst_n) begin
    if (!wr_rst_n) begin
      wbin     <= '0;
      wgray    <= '0;
      full     <= 1'b0;
      wr_level <= '0;
    end else begin
      wbin     <= wbin_next;
      wgray    <= bin2gray(wbin_next);
      full     <= (wbin_next - rbin_sync) == (AW+1)'(DEPTH);
      wr_level <= wbin_next - rbin_sync;
    end
  end

  // ----------------------------------------------------------------- read side
  logic [AW:0]       wgray_sync, wbin_sync;
  logic              rd_ok, rd_adv;
  logic [MEM_W-1:0]  rd_shift;           // DPM word at the read pointer

  assign rd_ok = rd_en && !empty;

  if (RD_R == 1) begin : g_rd_direct
    assign rd_adv = rd_ok;
    assign rd_q   = rd_shift;
  end else begin : g_rd_shift
    logic [RSEL_W-1:0] cnt;
    always_ff @(posedge rd_clk or negedge rd_rst_n) begin
      if (!rd_rst_n)  cnt <= '0;
      else if (rd_ok) cnt <= (cnt == RSEL_W'(RD_R - 1)) ? '0 : cnt + 1'b1;
    end
    assign rd_adv = rd_ok && (cnt == RSEL_W'(RD_R - 1));
    assign rd_q   = rd_shift[cnt*RD_W +: RD_W];
  end

  assign rbin_next = rbin + (AW+1)'(rd_adv);

  mpmc_sync #(.W(AW+1)) u_sync_w2r (
    .clk(rd_clk), .rst_n(rd_rst_n), .d(wgray), .q(wgray_sync)
  );
  assign wbin_sync = gray2bin(wgray_sync);

  always_ff @(posedge rd_clk or negedge rd_rst_n) begin
    if (!rd_rst_n) begin
      rbin        <= '0;
      rgray       <= '0;
      empty       <= 1'b1;
      rd_level    <= '0;
      almost_full <= 1'b0;
    end else begin
      rbin        <= rbin_next;
      rgray       <= bin2gray(rbin_next);
      empty       <= (wbin_sync == rbin_next);
      rd_level    <= wbin_sync - rbin_next;
      almost_full <= (wbin_sync - rbin_next) >= af_level;
    end
  end

  // ------------------------------------------------------------------- memory
  mpmc_dpm #(.W(MEM_W), .AW(AW)) u_dpm (
    .wr_clk(wr_clk), .we(mem_we), .waddr(wbin[AW-1:0]), .wdata(wr_shift),
    .raddr(rbin[AW-1:0]), .rdata(rd_shift)
  );

  // The fill level can never exceed the depth.
  a_no_overflow: assert property (@(posedge wr_clk) disable iff (!wr_rst_n)
                                  wr_level <= (AW+1)'(DEPTH))
    else $error("dcdwff overflow");
endmodule
