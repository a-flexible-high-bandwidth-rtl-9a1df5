// mpmc_pkg: types and constants shared by the multi-port memory controller.
//
// The controller sits between up to MAX_PORTS application modules and a DDR3
// PHY whose local (user-side) interface moves one PHY_W-bit word per
// controller clock. Addresses and burst counts are counted in those PHY words,
// so a request at current address CA with burst count BC covers the words
// CA .. CA+BC-1 and the next request of the same port starts at CA+BC, which is
// exactly the address update rule of the configuration block.
//
// From the paper: up to 32 ports, burst counts up to 64, 32-bit (4 GB)
// start/end/current addresses. Own choices: PHY_W = 128 (a 32-bit DDR3 bus at
// 300 MHz carries 128 bits per 150 MHz controller clock), the request record
// layout {index, BC, CA} in that order, and the gray-code helpers.
package mpmc_pkg;

  localparam int unsigned MAX_PORTS = 32;   // most ports the design supports
  localparam int unsigned IDX_W     = 5;    // width of a port index
  localparam int unsigned ADDR_W    = 32;   // SA / EA / CA width
  localparam int unsigned BC_W      = 7;    // burst count 0..64
  localparam int unsigned MAX_BC    = 64;
  localparam int unsigned PHY_W     = 128;  // PHY local data word

  // One entry of the write FIFO (WFF) or read FIFO (RFF): wr_data = {i, BC_i, CA_i}.
  typedef struct packed {
    logic [IDX_W-1:0]  idx;
    logic [BC_W-1:0]   bc;
    logic [ADDR_W-1:0] ca;
  } req_t;

  // Command bus towards the PHY (Avalon-style local interface).
  typedef struct packed {
    logic              write_req;
    logic              read_req;
    logic              burstbegin;
    logic [ADDR_W-1:0] addr;
    logic [BC_W-1:0]   size;
  } phy_cmd_t;

  // Configuration register groups, in address order (see mpmc_config).
  typedef enum logic [2:0] {
    GRP_N  = 3'd0,
    GRP_SA = 3'd1,
    GRP_EA = 3'd2,
    GRP_BC = 3'd3,
    GRP_CA = 3'd4,
    GRP_NONE = 3'd7
  } cfg_grp_e;

endpackage
