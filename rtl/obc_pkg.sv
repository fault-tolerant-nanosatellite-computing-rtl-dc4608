// obc_pkg: types and constants shared by the tiled on-board-computer MPSoC.
//
// Every on-chip link in the design (core to tile interconnect, tile to
// global crossbar, crossbar to memory controllers) uses one simple
// memory-mapped bus, defined here as two structs:
//   bus_req_t  master -> slave: valid, we, addr, wdata, wstrb. The slave
//              accepts with a separate 'ready' signal; the master holds the
//              request stable while valid && !ready.
//   bus_rsp_t  slave -> master: a one-cycle 'valid' pulse carrying the read
//              data and an error flag. A master has at most one request
//              outstanding, so responses need no tag.
// The bus itself is this design's choice: the system it follows is built
// from vendor AXI interconnect, which is not reproduced here.
//
// The tile address map is the same on every tile, so that software and
// thread state are portable between tiles (the property the architecture
// relies on for thread migration). Addresses below are this design's
// choice; only their uniformity follows the architecture.
//
// Lint note: when a single module is checked on its own, the constants it
// does not use are reported as unused parameters; each one is used somewhere
// in the design.
package obc_pkg;

  localparam int unsigned AW = 32;   // address width
  localparam int unsigned DW = 32;   // data width

  typedef struct packed {
    logic            valid;
    logic            we;
    logic [AW-1:0]   addr;
    logic [DW-1:0]   wdata;
    logic [DW/8-1:0] wstrb;
  } bus_req_t;

  typedef struct packed {
    logic          valid;
    logic [DW-1:0] rdata;
    logic          err;
  } bus_rsp_t;

  // ---- Tile-local address map (identical on every tile) ----
  // State memory of this tile, read/write (port A).
  localparam logic [AW-1:0] SM_BASE     = 32'h1000_0000;
  // State memories of all tiles, read-only, through Xs. Tile t's memory is
  // at XS_BASE + t * XS_STRIDE.
  localparam logic [AW-1:0] XS_BASE     = 32'h1100_0000;
  localparam logic [AW-1:0] XS_STRIDE   = 32'h0001_0000;
  // Interrupt controller and checkpoint timer registers.
  localparam logic [AW-1:0] IRQ_BASE    = 32'h2000_0000;
  // Peripheral interfaces (I2C, SPI, GPIO controllers outside this RTL).
  localparam logic [AW-1:0] IF_BASE     = 32'h3000_0000;
  // Local regions are decoded on the upper byte of the address, except Xs
  // which is decoded on the upper byte as well and indexed by the next bits.
  localparam logic [7:0]    SM_PAGE     = 8'h10;
  localparam logic [7:0]    XS_PAGE     = 8'h11;
  localparam logic [7:0]    IRQ_PAGE    = 8'h20;
  localparam logic [7:0]    IF_PAGE     = 8'h30;

  // Global region as seen by a tile's core, through its MMU:
  // the tile's own main-memory segment (read/write, remapped per tile),
  localparam logic [AW-1:0] OWN_BASE    = 32'h8000_0000;
  // all of main memory, read-only,
  localparam logic [AW-1:0] RO_BASE     = 32'hA000_0000;
  // and the non-volatile memories behind the QSPI controller.
  localparam logic [AW-1:0] NV_BASE     = 32'hC000_0000;

  // ---- Physical map behind the global crossbar ----
  localparam logic [AW-1:0] PHYS_DDR_BASE = 32'h0000_0000;
  localparam logic [AW-1:0] PHYS_NV_BASE  = 32'h4000_0000;
  localparam logic [AW-1:0] NV_BYTES      = 32'h1000_0000;

  // ---- Interrupt sources of a tile ----
  localparam int unsigned IRQ_CKPT_TIMER = 0;  // time-triggered checkpoint
  localparam int unsigned IRQ_CKPT_SUP   = 1;  // checkpoint induced by the supervisor
  localparam int unsigned IRQ_EXT_FIRST  = 2;  // first peripheral interrupt

  function automatic logic [DW-1:0] apply_wstrb(logic [DW-1:0] old_d,
                                                logic [DW-1:0] new_d,
                                                logic [DW/8-1:0] strb);
    logic [DW-1:0] r;
    for (int b = 0; b < DW/8; b++)
      r[8*b +: 8] = strb[b] ? new_d[8*b +: 8] : old_d[8*b +: 8];
    return r;
  endfunction

endpackage
