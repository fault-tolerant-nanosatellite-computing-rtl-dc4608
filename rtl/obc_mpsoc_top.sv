// obc_mpsoc_top: the tiled, fault-tolerant on-board-computer MPSoC.
//
// N_TILES identical tiles run replicated application threads in
// coarse-grain lockstep under the control of an off-chip supervisor. The
// chip provides what that software scheme needs from hardware:
//   * isolated tiles with a uniform address map, each with its own reset,
//     checkpoint timer and supervisor-induced checkpoint interrupt;
//   * a state memory per tile, writable only by its tile (and the
//     supervisor), readable by all tiles through the read-only crossbar Xs,
//     for exchanging checksums and thread state at checkpoints;
//   * a global crossbar to N_DDR SECDED-protected, segment-interleaved main
//     memory channels and to the non-volatile memory controller, with a
//     per-tile MMU that gives each tile its own segment at a fixed address,
//     read-only access to the rest, and lets the supervisor cut a tile off;
//   * a main-memory scrubber controlled by the supervisor;
//   * a fail-over switch between redundant non-volatile memory paths;
//   * buffered majority voters for the SPI and I2C outputs of a lockstep
//     group, so replicated tiles can drive one set of "dumb" devices.
//
// Parts that are vendor IP or off-chip connect through ports: the
// processor cores with their caches (core_l_*, core_m_*), the debug bridges
// the supervisor uses (dbg_*), the peripheral controllers (if_*, and the
// per-tile SPI/I2C pins feeding the voters), the DDR controller/PHY and
// DRAM behind each ECC front end (mem_*), the N_NV redundant QSPI
// controllers with FeRAM, MRAM and NAND flash (nv_*, active one chosen by
// nv_sel), and the supervisor's own direct memory port
// (sup_m_*) and control lines (sup_*, isolate, seg_base, vote_mask,
// scrub_*). Arrays indexed [t] belong to tile t.
//
// Following the architecture: the topology (tiles, Xs, global crossbar,
// DDR controllers with ECC, DDR scrubber, non-volatile memory controller),
// four tiles and two DDR channels by default, duplicated non-volatile
// memory paths, interface voting. This
// design's choices: one clock for the whole chip (each tile is meant to be
// its own clock domain; the voters synchronise their inputs as if it were),
// the bus and address map (obc_pkg), memory sizes, and the voter depth.
module obc_mpsoc_top
  import obc_pkg::*;
  import ecc_pkg::*;
#(
  parameter int unsigned   N_TILES     = 4,
  parameter int unsigned   N_DDR       = 2,
  parameter int unsigned   SM_WORDS    = 1024,
  parameter logic [AW-1:0] SEG_BYTES   = 32'h0400_0000,
  parameter logic [AW-1:0] MEM_BYTES   = 32'h2000_0000,
  parameter int unsigned   VOTE_DEPTH  = 8,
  parameter int unsigned   RST_STRETCH = 16,
  parameter int unsigned   N_NV        = 2,
  localparam int unsigned  N_EXT       = 3,
  localparam int unsigned  MAW         = $clog2(MEM_BYTES / N_DDR) - 2,
  localparam int unsigned  SMW         = $clog2(SM_WORDS),
  localparam int unsigned  NVS         = (N_NV > 1) ? $clog2(N_NV) : 1
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // ---- per tile: supervisor control ----
  input  logic     [N_TILES-1:0]             sup_rst,
  input  logic     [N_TILES-1:0]             sup_ckpt_req,
  input  logic     [N_TILES-1:0]             isolate,
  input  logic     [N_TILES-1:0][AW-1:0]     seg_base,
  output logic     [N_TILES-1:0]             tile_rst_n,
  output logic     [N_TILES-1:0][15:0]       mmu_rejected,
  // ---- per tile: processor core ----
  input  bus_req_t [N_TILES-1:0]             core_l_req,
  output logic     [N_TILES-1:0]             core_l_ready,
  output bus_rsp_t [N_TILES-1:0]             core_l_rsp,
  input  bus_req_t [N_TILES-1:0]             core_m_req,
  output logic     [N_TILES-1:0]             core_m_ready,
  output bus_rsp_t [N_TILES-1:0]             core_m_rsp,
  output logic     [N_TILES-1:0]             irq,
  output logic     [N_TILES-1:0]             ckpt_tick,
  // ---- per tile: debug bridge ----
  input  bus_req_t [N_TILES-1:0]             dbg_req,
  output logic     [N_TILES-1:0]             dbg_ready,
  output bus_rsp_t [N_TILES-1:0]             dbg_rsp,
  // ---- per tile: peripheral controllers ----
  output bus_req_t [N_TILES-1:0]             if_req,
  input  logic     [N_TILES-1:0]             if_ready,
  input  bus_rsp_t [N_TILES-1:0]             if_rsp,
  input  logic     [N_TILES-1:0][N_EXT-1:0]  ext_irq,
  // ---- per tile: interface pins into the voters ----
  input  logic     [N_TILES-1:0]             spi_cs_n,
  input  logic     [N_TILES-1:0]             spi_sclk,
  input  logic     [N_TILES-1:0]             spi_mosi,
  input  logic     [N_TILES-1:0]             i2c_act,
  input  logic     [N_TILES-1:0]             i2c_scl_oe,
  input  logic     [N_TILES-1:0]             i2c_sda_oe,
  input  logic     [N_TILES-1:0]             vote_mask,
  output logic                               v_spi_cs_n,
  output logic                               v_spi_sclk,
  output logic                               v_spi_mosi,
  output logic                               v_i2c_act,
  output logic                               v_i2c_scl_oe,
  output logic                               v_i2c_sda_oe,
  output logic     [15:0]                    v_spi_minority,
  output logic     [15:0]                    v_i2c_minority,
  output logic     [15:0]                    v_overflows,
  // ---- supervisor direct port to the memory controllers ----
  input  bus_req_t                           sup_m_req,
  output logic                               sup_m_ready,
  output bus_rsp_t                           sup_m_rsp,
  // ---- scrubber control and status ----
  input  logic                               scrub_enable,
  input  logic     [AW-1:0]                  scrub_start,
  input  logic     [AW-1:0]                  scrub_end,
  input  logic     [15:0]                    scrub_interval,
  output logic     [AW-1:0]                  scrub_addr,
  output logic     [31:0]                    scrub_words,
  output logic     [15:0]                    scrub_passes,
  output logic     [15:0]                    scrub_errors,
  // ---- DDR channels, memory side of the ECC front ends ----
  output logic     [N_DDR-1:0]               mem_valid,
  output logic     [N_DDR-1:0]               mem_we,
  output logic     [N_DDR-1:0][MAW-1:0]      mem_addr,
  output logic     [N_DDR-1:0][ECC_CW-1:0]   mem_wdata,
  input  logic     [N_DDR-1:0]               mem_ready,
  input  logic     [N_DDR-1:0]               mem_rvalid,
  input  logic     [N_DDR-1:0][ECC_CW-1:0]   mem_rdata,
  output logic     [N_DDR-1:0][15:0]         ecc_corr,
  output logic     [N_DDR-1:0][15:0]         ecc_uncorr,
  output logic     [N_DDR-1:0][AW-1:0]       ecc_last_addr,
  // ---- redundant non-volatile memory controllers (QSPI) ----
  input  logic     [NVS-1:0]                 nv_sel,
  output bus_req_t [N_NV-1:0]                nv_req,
  input  logic     [N_NV-1:0]                nv_ready,
  input  bus_rsp_t [N_NV-1:0]                nv_rsp,
  output logic     [N_NV-1:0][15:0]          nv_errors,
  // ---- status ----
  output logic     [15:0]                    xs_blocked_writes
);
  localparam int unsigned N_GM = N_TILES + 2;   // tiles, scrubber, supervisor

  // ---- Xs wiring ----
  bus_req_t [N_TILES-1:0]           xs_req;
  logic     [N_TILES-1:0]           xs_ready;
  bus_rsp_t [N_TILES-1:0]           xs_rsp;
  logic     [N_TILES-1:0]           smb_en;
  logic     [N_TILES-1:0][SMW-1:0]  smb_addr;
  logic     [N_TILES-1:0][DW-1:0]   smb_rdata;

  // ---- global crossbar wiring ----
  bus_req_t [N_GM-1:0]  gm_req;
  logic     [N_GM-1:0]  gm_ready;
  bus_rsp_t [N_GM-1:0]  gm_rsp;
  bus_req_t [N_DDR:0]   gs_req;
  logic     [N_DDR:0]   gs_ready;
  bus_rsp_t [N_DDR:0]   gs_rsp;

  for (genvar t = 0; t < N_TILES; t++) begin : g_tile
    tile #(
      .SM_WORDS (SM_WORDS), .N_EXT (N_EXT),
      .SEG_BYTES (SEG_BYTES), .MEM_BYTES (MEM_BYTES),
      .RST_STRETCH (RST_STRETCH)
    ) u_tile (
      .clk,
      .ext_rst_n    (rst_n),
      .tile_rst_n   (tile_rst_n[t]),
      .sup_rst      (sup_rst[t]),
      .sup_ckpt_req (sup_ckpt_req[t]),
      .isolate      (isolate[t]),
      .seg_base     (seg_base[t]),
      .mmu_rejected (mmu_rejected[t]),
      .core_l_req   (core_l_req[t]), .core_l_ready (core_l_ready[t]), .core_l_rsp (core_l_rsp[t]),
      .core_m_req   (core_m_req[t]), .core_m_ready (core_m_ready[t]), .core_m_rsp (core_m_rsp[t]),
      .dbg_req      (dbg_req[t]),    .dbg_ready    (dbg_ready[t]),    .dbg_rsp    (dbg_rsp[t]),
      .if_req       (if_req[t]),     .if_ready     (if_ready[t]),     .if_rsp     (if_rsp[t]),
      .ext_irq      (ext_irq[t]),
      .irq          (irq[t]),
      .ckpt_tick    (ckpt_tick[t]),
      .xs_req       (xs_req[t]),     .xs_ready     (xs_ready[t]),     .xs_rsp     (xs_rsp[t]),
      .smb_en       (smb_en[t]),     .smb_addr     (smb_addr[t]),     .smb_rdata  (smb_rdata[t]),
      .gm_req       (gm_req[t]),     .gm_ready     (gm_ready[t]),     .gm_rsp     (gm_rsp[t])
    );
  end

  xs_ro_xbar #(.N_TILES (N_TILES), .SM_WORDS (SM_WORDS)) u_xs (
    .clk, .rst_n,
    .m_req (xs_req), .m_ready (xs_ready), .m_rsp (xs_rsp),
    .sm_en (smb_en), .sm_addr (smb_addr), .sm_rdata (smb_rdata),
    .blocked_writes (xs_blocked_writes)
  );

  // ---- scrubber (master N_TILES) and supervisor (master N_TILES+1) ----
  ddr_scrubber u_scrub (
    .clk, .rst_n,
    .enable (scrub_enable), .start_addr (scrub_start), .end_addr (scrub_end),
    .interval (scrub_interval),
    .m_req (gm_req[N_TILES]), .m_ready (gm_ready[N_TILES]), .m_rsp (gm_rsp[N_TILES]),
    .cur_addr (scrub_addr), .words (scrub_words), .passes (scrub_passes),
    .err_count (scrub_errors)
  );

  assign gm_req[N_TILES+1] = sup_m_req;
  assign sup_m_ready       = gm_ready[N_TILES+1];
  assign sup_m_rsp         = gm_rsp[N_TILES+1];

  global_xbar #(
    .N_M (N_GM), .N_DDR (N_DDR), .SEG_BYTES (SEG_BYTES), .MEM_BYTES (MEM_BYTES)
  ) u_xa (
    .clk, .rst_n,
    .m_req (gm_req), .m_ready (gm_ready), .m_rsp (gm_rsp),
    .s_req (gs_req), .s_ready (gs_ready), .s_rsp (gs_rsp)
  );

  for (genvar c = 0; c < N_DDR; c++) begin : g_ddr
    ddr_ecc_ctrl #(
      .N_DDR (N_DDR), .SEG_BYTES (SEG_BYTES), .MEM_BYTES (MEM_BYTES)
    ) u_ecc (
      .clk, .rst_n,
      .req (gs_req[c]), .ready (gs_ready[c]), .rsp (gs_rsp[c]),
      .mem_valid (mem_valid[c]), .mem_we (mem_we[c]), .mem_addr (mem_addr[c]),
      .mem_wdata (mem_wdata[c]), .mem_ready (mem_ready[c]),
      .mem_rvalid (mem_rvalid[c]), .mem_rdata (mem_rdata[c]),
      .corr_count (ecc_corr[c]), .uncorr_count (ecc_uncorr[c]),
      .last_err_addr (ecc_last_addr[c])
    );
  end

  nv_failover #(.N_NV (N_NV)) u_nv (
    .clk, .rst_n,
    .s_req (gs_req[N_DDR]), .s_ready (gs_ready[N_DDR]), .s_rsp (gs_rsp[N_DDR]),
    .sel (nv_sel),
    .m_req (nv_req), .m_ready (nv_ready), .m_rsp (nv_rsp),
    .err_count (nv_errors)
  );

  // ---- interface voters ----
  logic [N_TILES-1:0][1:0] spi_lines, i2c_lines;
  logic [1:0]              v_spi_l, v_i2c_l;
  logic                    v_spi_act;
  logic [15:0]             spi_ovf, i2c_ovf;
  always_comb
    for (int t = 0; t < N_TILES; t++) begin
      spi_lines[t] = {spi_mosi[t], spi_sclk[t]};
      i2c_lines[t] = {i2c_sda_oe[t], i2c_scl_oe[t]};
    end

  io_voter #(.N_TILES (N_TILES), .W (2), .DEPTH (VOTE_DEPTH), .IDLE (2'b00)) u_vote_spi (
    .clk, .rst_n,
    .act (~spi_cs_n), .lines (spi_lines), .vote_mask,
    .out_act (v_spi_act), .out_lines (v_spi_l),
    .minority_cycles (v_spi_minority), .overflows (spi_ovf)
  );
  io_voter #(.N_TILES (N_TILES), .W (2), .DEPTH (VOTE_DEPTH), .IDLE (2'b00)) u_vote_i2c (
    .clk, .rst_n,
    .act (i2c_act), .lines (i2c_lines), .vote_mask,
    .out_act (v_i2c_act), .out_lines (v_i2c_l),
    .minority_cycles (v_i2c_minority), .overflows (i2c_ovf)
  );
  assign v_spi_cs_n   = !v_spi_act;
  assign v_spi_sclk   = v_spi_l[0];
  assign v_spi_mosi   = v_spi_l[1];
  assign v_i2c_scl_oe = v_i2c_l[0];
  assign v_i2c_sda_oe = v_i2c_l[1];
  assign v_overflows  = spi_ovf + i2c_ovf;

endmodule
