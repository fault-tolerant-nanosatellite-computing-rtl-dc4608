// tb_obc_scale: the chip built with eight tiles (the largest configuration
// reported for the architecture, alongside six) and run through one
// lockstep round.
//
// All eight tiles compute the same sixteen results into their own segments,
// spread over the two DDR channels by the interleaving (four tiles per
// channel, eight 64 MiB segments filling the 512 MiB of DRAM). One tile gets
// a word wrong. Every tile writes its checksum to its state memory and reads
// all eight checksums through Xs; all must name the same faulty tile. The
// supervisor then isolates and resets that tile, copies a good segment over
// and the next checkpoint must agree. Last, all eight tiles send the same
// SPI word, one of them wrong and all of them skewed by up to 7 cycles,
// and the voted word must be right.
//
// Tile count and the two channels follow the published configurations; the
// other sizes are the design's defaults, the data and skews are the
// testbench's own. Mechanism counters: global crossbar contention, Xs
// contention, majority decision, recovery, outvoting.
module tb_obc_scale;
  import obc_pkg::*;
  import ecc_pkg::*;

  localparam int unsigned NT = 8, ND = 2, MAW = 26;
  localparam logic [31:0] SEG = 32'h0400_0000;
  localparam int BAD = 5;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  logic     [NT-1:0]        sup_rst, sup_ckpt_req, isolate, tile_rst_n, irq, ckpt_tick;
  logic     [NT-1:0][31:0]  seg_base;
  logic     [NT-1:0][15:0]  mmu_rejected;
  bus_req_t [NT-1:0]        core_l_req, core_m_req, dbg_req, if_req;
  logic     [NT-1:0]        core_l_ready, core_m_ready, dbg_ready, if_ready;
  bus_rsp_t [NT-1:0]        core_l_rsp, core_m_rsp, dbg_rsp, if_rsp;
  logic     [NT-1:0][2:0]   ext_irq;
  logic     [NT-1:0]        spi_cs_n, spi_sclk, spi_mosi, i2c_act, i2c_scl_oe, i2c_sda_oe, vote_mask;
  logic v_spi_cs_n, v_spi_sclk, v_spi_mosi, v_i2c_act, v_i2c_scl_oe, v_i2c_sda_oe;
  logic [15:0] v_spi_minority, v_i2c_minority, v_overflows;
  bus_req_t sup_m_req;
  logic     sup_m_ready;
  bus_rsp_t sup_m_rsp;
  logic              nv_sel;
  bus_req_t [1:0]    nv_req;
  logic     [1:0]    nv_ready;
  bus_rsp_t [1:0]    nv_rsp;
  logic     [1:0][15:0] nv_errors;
  logic        scrub_enable;
  logic [31:0] scrub_start, scrub_end, scrub_addr, scrub_words;
  logic [15:0] scrub_interval, scrub_passes, scrub_errors;
  logic [ND-1:0]           mem_valid, mem_we, mem_ready, mem_rvalid;
  logic [ND-1:0][MAW-1:0]  mem_addr;
  logic [ND-1:0][38:0]     mem_wdata, mem_rdata;
  logic [ND-1:0][15:0]     ecc_corr, ecc_uncorr;
  logic [ND-1:0][31:0]     ecc_last_addr;
  logic [15:0]             xs_blocked_writes;

  obc_mpsoc_top #(.N_TILES(NT)) dut (.*);

  tb_ddr_mem #(.AW_W(MAW), .RANDOM(1)) ddr0 (.clk, .mem_valid(mem_valid[0]), .mem_we(mem_we[0]),
    .mem_addr(mem_addr[0]), .mem_wdata(mem_wdata[0]), .mem_ready(mem_ready[0]),
    .mem_rvalid(mem_rvalid[0]), .mem_rdata(mem_rdata[0]));
  tb_ddr_mem #(.AW_W(MAW), .RANDOM(1)) ddr1 (.clk, .mem_valid(mem_valid[1]), .mem_we(mem_we[1]),
    .mem_addr(mem_addr[1]), .mem_wdata(mem_wdata[1]), .mem_ready(mem_ready[1]),
    .mem_rvalid(mem_rvalid[1]), .mem_rdata(mem_rdata[1]));
  tb_bus_slave #(.MAX_LAT(3), .CHECK_PAGE(1), .PAGE(8'h40)) nv (.clk, .req(nv_req[0]), .ready(nv_ready[0]), .rsp(nv_rsp[0]));
  tb_bus_slave #(.MAX_LAT(3), .CHECK_PAGE(1), .PAGE(8'h40)) nv_b (.clk, .req(nv_req[1]), .ready(nv_ready[1]), .rsp(nv_rsp[1]));
  for (genvar t = 0; t < NT; t++) begin : g_if
    tb_bus_slave #(.MAX_LAT(2), .CHECK_PAGE(1), .PAGE(IF_PAGE)) ifs (.clk, .req(if_req[t]), .ready(if_ready[t]), .rsp(if_rsp[t]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  int n_gx_stall = 0, n_xs_stall = 0, n_majority = 0, n_recovered = 0, n_outvote = 0;
  always @(posedge clk)
    for (int t = 0; t < NT; t++) begin
      if (core_m_req[t].valid && !core_m_ready[t]) n_gx_stall++;
      if (core_l_req[t].valid && !core_l_ready[t] && core_l_req[t].addr[31:24] == XS_PAGE) n_xs_stall++;
    end

  // port: 0 core local, 1 core memory, 3 supervisor memory
  task automatic xfer(int t, int port, bit we, logic [31:0] addr, logic [31:0] d, output bus_rsp_t r);
    bus_req_t q;
    bit ok;
    q = '{valid: 1'b1, we: we, addr: addr, wdata: d, wstrb: 4'hF};
    @(negedge clk);
    case (port) 0: core_l_req[t] = q; 1: core_m_req[t] = q; default: sup_m_req = q; endcase
    do begin
      #4;
      case (port) 0: ok = core_l_ready[t]; 1: ok = core_m_ready[t]; default: ok = sup_m_ready; endcase
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    case (port) 0: core_l_req[t] = '0; 1: core_m_req[t] = '0; default: sup_m_req = '0; endcase
    forever begin
      case (port) 0: r = core_l_rsp[t]; 1: r = core_m_rsp[t]; default: r = sup_m_rsp; endcase
      if (r.valid) break;
      @(negedge clk);
    end
  endtask

  function automatic logic [31:0] result(int i);
    return 32'hBEEF_0000 + 32'(i * 13 + 1);
  endfunction

  task automatic compute(int t, bit produce);
    bus_rsp_t r;
    logic [31:0] s;
    s = 0;
    for (int i = 0; i < 16 && produce; i++) begin
      automatic logic [31:0] v = result(i) ^ ((t == BAD && i == 9) ? 32'h100 : 32'h0);
      xfer(t, 1, 1, OWN_BASE + 32'(i * 4), v, r);
    end
    for (int i = 0; i < 16; i++) begin
      xfer(t, 1, 0, OWN_BASE + 32'(i * 4), 0, r);
      s += r.rdata;
    end
    xfer(t, 0, 1, SM_BASE, s, r);
  endtask

  int suspect [NT];
  task automatic checkpoint(int t);
    bus_rsp_t r;
    logic [31:0] cs [NT];
    for (int u = 0; u < NT; u++) begin
      xfer(t, 0, 0, XS_BASE + 32'(u) * 32'h1_0000, 0, r);
      cs[u] = r.rdata;
    end
    suspect[t] = -1;
    for (int u = 0; u < NT; u++) begin
      automatic int agree = 0;
      for (int v = 0; v < NT; v++) if (cs[v] == cs[u]) agree++;
      if (agree < NT / 2 + 1) suspect[t] = u;
    end
  endtask

  task automatic all_compute();
    for (int t = 0; t < NT; t++) fork automatic int tt = t; compute(tt, 1'b1); join_none
    wait fork;
  endtask
  task automatic all_checkpoint();
    for (int t = 0; t < NT; t++) fork automatic int tt = t; checkpoint(tt); join_none
    wait fork;
  endtask

  logic [31:0] spi_word = 32'h3C5A_96E1;
  task automatic spi_send(int t, int skew, bit wrong);
    repeat (skew) @(negedge clk);
    spi_cs_n[t] = 0;
    for (int b = 31; b >= 0; b--) begin
      spi_mosi[t] = spi_word[b] ^ wrong;
      spi_sclk[t] = 0; @(negedge clk);
      spi_sclk[t] = 1; @(negedge clk);
    end
    spi_cs_n[t] = 1; spi_sclk[t] = 0; spi_mosi[t] = 0;
  endtask

  logic [31:0] spi_got;  int spi_bits = 0;
  logic v_sclk_q = 0;
  always @(posedge clk) begin
    v_sclk_q <= v_spi_sclk;
    if (!v_spi_cs_n && v_spi_sclk && !v_sclk_q) begin spi_got = {spi_got[30:0], v_spi_mosi}; spi_bits++; end
  end

  initial begin
    #20000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_rsp_t r;
    logic [31:0] d;
    sup_rst = '0; sup_ckpt_req = '0; isolate = '0; ext_irq = '0;
    for (int t = 0; t < NT; t++) seg_base[t] = 32'(t) * SEG;
    core_l_req = '0; core_m_req = '0; dbg_req = '0; sup_m_req = '0;
    spi_cs_n = '1; spi_sclk = '0; spi_mosi = '0;
    i2c_act = '0; i2c_scl_oe = '0; i2c_sda_oe = '0; vote_mask = '1;
    scrub_enable = 0; scrub_start = 0; scrub_end = 0; scrub_interval = 0; nv_sel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (&tile_rst_n);

    all_compute();
    check(ddr0.writes == 16 * NT / 2 && ddr1.writes == 16 * NT / 2,
          $sformatf("four tiles per channel: %0d / %0d writes", ddr0.writes, ddr1.writes));
    check(ddr1.peek(MAW'({3'd3, 24'd0})) == secded_encode(result(0)), "tile 7 segment at the top of channel 1");
    all_checkpoint();
    for (int t = 0; t < NT; t++) begin
      check(suspect[t] == BAD, $sformatf("tile %0d names tile %0d (%0d)", t, BAD, suspect[t]));
      if (suspect[t] == BAD) n_majority++;
    end

    isolate[BAD] = 1;
    @(negedge clk); sup_rst[BAD] = 1; @(negedge clk); sup_rst[BAD] = 0;
    wait (tile_rst_n[BAD]);
    for (int i = 0; i < 16; i++) begin
      xfer(0, 3, 0, 32'(i * 4), 0, r);
      d = r.rdata;
      xfer(0, 3, 1, BAD * SEG + 32'(i * 4), d, r);
    end
    isolate[BAD] = 0;
    compute(BAD, 1'b0);                // checksum of the restored segment
    all_checkpoint();
    for (int t = 0; t < NT; t++) begin
      check(suspect[t] == -1, $sformatf("tile %0d: all agree after recovery", t));
      if (suspect[t] == -1) n_recovered++;
    end

    for (int t = 0; t < NT; t++)
      fork automatic int tt = t; spi_send(tt, (tt * 3) % 8, tt == 2); join_none
    wait fork;
    repeat (20) @(negedge clk);
    check(spi_bits == 32 && spi_got == spi_word, $sformatf("SPI voted word %h (%0d bits)", spi_got, spi_bits));
    if (v_spi_minority != 0) n_outvote++;

    $display("mechanisms: gx_stall=%0d xs_stall=%0d majority=%0d recovered=%0d outvote=%0d",
             n_gx_stall, n_xs_stall, n_majority, n_recovered, n_outvote);
    check(n_gx_stall > 0, "mechanism: global crossbar contention");
    check(n_xs_stall > 0, "mechanism: Xs contention");
    check(n_majority == NT, "mechanism: majority decision");
    check(n_recovered == NT, "mechanism: recovery");
    check(n_outvote > 0, "mechanism: outvoting");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
