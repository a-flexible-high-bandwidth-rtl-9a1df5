// mpmc_dpm: the dual-port memory (DPM) inside a DCDWFF.
//
// One write port clocked by wr_clk and one read port. The read port is
// asynchronous (the word at raddr appears on rdata in the same cycle), which
// gives the FIFO a show-ahead read side: the head word is already on the
// output before rd_en is asserted. On an FPGA this maps to distributed
// (LUT) RAM; the asynchronous read is this design's choice, the paper only
// names the block "dual-port memory". No reset: contents are only read after
// being written.
module mpmc_dpm #(
  parameter int unsigned W  = 128,  // word width
  parameter int unsigned AW = 7     // address width, depth 2**AW
) (
  input  logic          wr_clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [2**AW];

  always_ff @(posedge wr_clk) begin
    if (we) mem[waddr] <= wdata;
  end

  assign rdata = mem[raddr];
endmodule
