// tile: one compartment of the tiled MPSoC.
//
// A tile is a small, self-contained system: a processor core with its
// cache, a local interconnect, an interrupt controller, a state memory, a
// memory management unit, peripheral interfaces, a debug bridge for the
// supervisor, and its own clock and reset. Tiles share as little as
// possible; they meet only in two places: the read-only state-memory
// crossbar (Xs), over which every tile can read every tile's state memory,
// and the global crossbar to shared main and non-volatile memory. All tiles
// have the same address map, so threads can be moved between them.
//
// This module holds the tile's own logic: reset generator, local
// interconnect (tile_xbar), state memory, interrupt controller with
// checkpoint timer, and MMU. The processor core with its cache, the debug
// bridge and the peripheral controllers (I2C master, SPI master, GPIO) are
// vendor IP and attach through ports:
//   core_l_*  the core's uncached port to local IP (state memory, Xs, IRQ,
//             interfaces);
//   core_m_*  the core's cached port to main and non-volatile memory, via
//             the MMU;
//   dbg_*     the debug bridge's master port, through which the supervisor
//             reads and writes the tile's local address space;
//   if_*      the local bus towards the peripheral controllers.
// The supervisor controls the tile through sup_rst (reset the tile),
// sup_ckpt_req (induce a checkpoint interrupt), isolate (disconnect the tile
// from the global crossbar) and seg_base (which main memory segment the tile
// owns).
//
// Following the architecture: the set of blocks and how they connect. This
// design's choices: the address map and bus (obc_pkg), and that every block
// here runs on one clock, 'clk', the tile's clock. Each tile is meant to run
// in its own clock domain; crossing into the shared crossbars is not modelled
// here, so at the top all tiles share one clock.
module tile
  import obc_pkg::*;
#(
  parameter int unsigned   SM_WORDS  = 1024,
  parameter int unsigned   N_EXT     = 3,
  parameter logic [AW-1:0] SEG_BYTES = 32'h0400_0000,
  parameter logic [AW-1:0] MEM_BYTES = 32'h2000_0000,
  parameter int unsigned   RST_STRETCH = 16
) (
  input  logic                        clk,
  input  logic                        ext_rst_n,
  output logic                        tile_rst_n,
  // supervisor control
  input  logic                        sup_rst,
  input  logic                        sup_ckpt_req,
  input  logic                        isolate,
  input  logic [AW-1:0]               seg_base,
  output logic [15:0]                 mmu_rejected,
  // core, uncached local port
  input  bus_req_t                    core_l_req,
  output logic                        core_l_ready,
  output bus_rsp_t                    core_l_rsp,
  // core, cached memory port
  input  bus_req_t                    core_m_req,
  output logic                        core_m_ready,
  output bus_rsp_t                    core_m_rsp,
  // debug bridge master
  input  bus_req_t                    dbg_req,
  output logic                        dbg_ready,
  output bus_rsp_t                    dbg_rsp,
  // peripheral interfaces
  output bus_req_t                    if_req,
  input  logic                        if_ready,
  input  bus_rsp_t                    if_rsp,
  input  logic [N_EXT-1:0]            ext_irq,
  output logic                        irq,
  output logic                        ckpt_tick,
  // to the state-memory crossbar Xs: this tile as master ...
  output bus_req_t                    xs_req,
  input  logic                        xs_ready,
  input  bus_rsp_t                    xs_rsp,
  // ... and this tile's state memory as read-only slave
  input  logic                        smb_en,
  input  logic [$clog2(SM_WORDS)-1:0] smb_addr,
  output logic [DW-1:0]               smb_rdata,
  // to the global crossbar
  output bus_req_t                    gm_req,
  input  logic                        gm_ready,
  input  bus_rsp_t                    gm_rsp
);
  logic rst_n;

  tile_reset_gen #(.STRETCH(RST_STRETCH)) u_rst (
    .clk, .ext_rst_n, .sup_rst, .tile_rst_n(rst_n)
  );
  assign tile_rst_n = rst_n;

  // local interconnect: masters core (0) and debug bridge (1);
  // slaves SM (0), Xs (1), IRQ (2), IF (3)
  bus_req_t [1:0] xm_req;
  logic     [1:0] xm_ready;
  bus_rsp_t [1:0] xm_rsp;
  bus_req_t [3:0] xs_req_l;
  logic     [3:0] xs_ready_l;
  bus_rsp_t [3:0] xs_rsp_l;

  assign xm_req       = {dbg_req, core_l_req};
  assign core_l_ready = xm_ready[0];
  assign dbg_ready    = xm_ready[1];
  assign core_l_rsp   = xm_rsp[0];
  assign dbg_rsp      = xm_rsp[1];

  tile_xbar #(.N_M(2), .N_S(4)) u_x (
    .clk, .rst_n,
    .m_req (xm_req), .m_ready (xm_ready), .m_rsp (xm_rsp),
    .s_req (xs_req_l), .s_ready (xs_ready_l), .s_rsp (xs_rsp_l)
  );

  state_memory #(.WORDS(SM_WORDS)) u_sm (
    .clk, .rst_n,
    .a_req (xs_req_l[0]), .a_ready (xs_ready_l[0]), .a_rsp (xs_rsp_l[0]),
    .b_en (smb_en), .b_addr (smb_addr), .b_rdata (smb_rdata)
  );

  assign xs_req        = xs_req_l[1];
  assign xs_ready_l[1] = xs_ready;
  assign xs_rsp_l[1]   = xs_rsp;

  tile_irq #(.N_EXT(N_EXT)) u_irq (
    .clk, .rst_n,
    .req (xs_req_l[2]), .ready (xs_ready_l[2]), .rsp (xs_rsp_l[2]),
    .sup_ckpt_req, .ext_irq, .irq, .ckpt_tick
  );

  assign if_req        = xs_req_l[3];
  assign xs_ready_l[3] = if_ready;
  assign xs_rsp_l[3]   = if_rsp;

  tile_mmu #(.SEG_BYTES(SEG_BYTES), .MEM_BYTES(MEM_BYTES)) u_mmu (
    .clk, .rst_n,
    .s_req (core_m_req), .s_ready (core_m_ready), .s_rsp (core_m_rsp),
    .m_req (gm_req), .m_ready (gm_ready), .m_rsp (gm_rsp),
    .seg_base, .isolate, .rejected (mmu_rejected)
  );

endmodule
