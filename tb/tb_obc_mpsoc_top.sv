// tb_obc_mpsoc_top: end-to-end test of the whole chip at its default size
// (four tiles, two DDR channels, 64 MiB segments, 1024-word state memories,
// voter depth 8), with no parameter overrides.
//
// The testbench stands in for what is outside the chip: the processor cores
// (bus transactions on core_l/core_m), the supervisor (debug bridges,
// direct memory port, control lines), two DDR channels (tb_ddr_mem, in
// which bit errors are injected), the two non-volatile memory controllers and
// the peripheral controllers (tb_bus_slave). It runs one round of the
// coarse-grain lockstep scheme:
//   1. all tiles compute the same result into their own segment at the same
//      address (tile 2 gets one word wrong), write a checksum to their state
//      memory and, at a checkpoint, read every tile's checksum through Xs
//      and take a majority decision that singles out tile 2;
//   2. the supervisor isolates tile 2, resets it, copies a correct tile's
//      segment and state memory over and releases it, after which tile 2
//      agrees again;
//   3. protection: Xs write and read-only-window write are refused, an
//      isolated tile is refused;
//   4. single and double bit errors in DRAM are corrected / reported, and
//      the scrubber repairs a latent error;
//   5. checkpoint timer and supervisor-induced checkpoint interrupts;
//   6. non-volatile memory accesses, also after a fail-over to the spare
//      path, and peripheral accesses;
//   7. replicated SPI and I2C transfers with skew between tiles and a wrong
//      tile go through the voters, also with a three-tile vote_mask.
// Every mechanism has a counter; the test fails if any stayed at zero.
//
// The recovery sequence (majority decision, isolation, reset, state update
// by the supervisor) follows the architecture; the checksum scheme, data,
// skews and error positions are this testbench's own.
module tb_obc_mpsoc_top;
  import obc_pkg::*;
  import ecc_pkg::*;

  localparam int unsigned NT = 4, ND = 2, MAW = 26;
  localparam logic [31:0] SEG = 32'h0400_0000;

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

  obc_mpsoc_top dut (.*);

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

  // ---- mechanism counters ----
  int n_gx_stall = 0, n_xs_stall = 0, n_ticks = 0, n_resets = 0;
  int n_majority_fault = 0, n_recovered = 0, n_sup_ckpt = 0, n_dbg_sm = 0, n_sup_copy = 0;
  int n_ro_reject = 0, n_iso_reject = 0, n_xs_block = 0, n_ecc_corr = 0, n_ecc_uncorr = 0;
  int n_scrub_fix = 0, n_nv = 0, n_nv_failover = 0, n_if = 0, n_outvote = 0, n_skew_ok = 0, n_masked_vote = 0;
  logic [NT-1:0] rst_q = '1;
  always @(posedge clk) begin
    for (int t = 0; t < NT; t++) begin
      if (core_m_req[t].valid && !core_m_ready[t]) n_gx_stall++;
      if (core_l_req[t].valid && !core_l_ready[t] && core_l_req[t].addr[31:24] == XS_PAGE) n_xs_stall++;
      if (ckpt_tick[t]) n_ticks++;
      if (rst_q[t] && !tile_rst_n[t]) n_resets++;
    end
    rst_q <= tile_rst_n;
  end

  // port: 0 core local, 1 core memory, 2 debug bridge, 3 supervisor memory
  task automatic xfer(int t, int port, bit we, logic [31:0] addr, logic [31:0] d, output bus_rsp_t r);
    bus_req_t q;
    bit ok;
    q = '{valid: 1'b1, we: we, addr: addr, wdata: d, wstrb: 4'hF};
    @(negedge clk);
    case (port)
      0: core_l_req[t] = q;
      1: core_m_req[t] = q;
      2: dbg_req[t] = q;
      default: sup_m_req = q;
    endcase
    do begin
      #4;
      case (port)
        0: ok = core_l_ready[t];
        1: ok = core_m_ready[t];
        2: ok = dbg_ready[t];
        default: ok = sup_m_ready;
      endcase
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    case (port)
      0: core_l_req[t] = '0;
      1: core_m_req[t] = '0;
      2: dbg_req[t] = '0;
      default: sup_m_req = '0;
    endcase
    forever begin
      case (port)
        0: r = core_l_rsp[t];
        1: r = core_m_rsp[t];
        2: r = dbg_rsp[t];
        default: r = sup_m_rsp;
      endcase
      if (r.valid) break;
      @(negedge clk);
    end
  endtask

  // channel and channel-local word of a physical DRAM byte address
  function automatic int chan(logic [31:0] a);
    return int'(a[26]);
  endfunction
  function automatic logic [MAW-1:0] cword(logic [31:0] a);
    return MAW'({a[31:27], a[25:2]});
  endfunction

  function automatic logic [31:0] result(int i);
    return 32'h1234_0000 + 32'(i * i * 7);
  endfunction

  // one tile's share of the replicated thread, then its checkpoint
  logic [NT-1:0][31:0] sum;
  task automatic compute(int t, bit wrong);
    bus_rsp_t r;
    sum[t] = 0;
    for (int i = 0; i < 16; i++) begin
      automatic logic [31:0] v = result(i) ^ ((wrong && i == 5) ? 32'h10 : 32'h0);
      xfer(t, 1, 1, OWN_BASE + 32'(i * 4), v, r);
      check(!r.err, "write own segment");
    end
    for (int i = 0; i < 16; i++) begin
      xfer(t, 1, 0, OWN_BASE + 32'(i * 4), 0, r);
      sum[t] += r.rdata;
    end
    xfer(t, 0, 1, SM_BASE, sum[t], r);
    check(!r.err, "checksum to state memory");
  endtask

  // checkpoint: read all checksums through Xs, majority decision
  int suspect [NT];
  task automatic checkpoint(int t);
    bus_rsp_t r;
    logic [31:0] cs [NT];
    for (int u = 0; u < NT; u++) begin
      xfer(t, 0, 0, XS_BASE + 32'(u) * 32'h1_0000, 0, r);
      check(!r.err, "Xs read");
      cs[u] = r.rdata;
    end
    suspect[t] = -1;
    for (int u = 0; u < NT; u++) begin
      automatic int agree = 0;
      for (int v = 0; v < NT; v++) if (cs[v] == cs[u]) agree++;
      if (agree < NT / 2 + 1) suspect[t] = u;
    end
  endtask

  // replicated serial transfer on the SPI pins of tile t, 'skew' cycles late
  logic [31:0] spi_word = 32'hA5C3_0F96;
  task automatic spi_send(int t, int skew, bit wrong);
    repeat (skew) @(negedge clk);
    spi_cs_n[t] = 0;
    for (int b = 31; b >= 0; b--) begin
      spi_mosi[t] = spi_word[b] ^ (wrong && b[0]);
      spi_sclk[t] = 0; @(negedge clk);
      spi_sclk[t] = 1; @(negedge clk);
    end
    spi_cs_n[t] = 1; spi_sclk[t] = 0; spi_mosi[t] = 0;
  endtask

  logic [15:0] i2c_word = 16'h5A3C;
  task automatic i2c_send(int t, int skew, bit wrong);
    repeat (skew) @(negedge clk);
    i2c_act[t] = 1;
    for (int b = 15; b >= 0; b--) begin
      i2c_sda_oe[t] = i2c_word[b] ^ wrong;
      i2c_scl_oe[t] = 1; @(negedge clk);
      i2c_scl_oe[t] = 0; @(negedge clk);
    end
    i2c_act[t] = 0; i2c_sda_oe[t] = 0; i2c_scl_oe[t] = 0;
  endtask

  // voted-output recorders: a bit is taken at each rising voted clock
  logic [31:0] spi_got;  int spi_bits = 0;
  logic [15:0] i2c_got;  int i2c_bits = 0;
  logic v_sclk_q = 0, v_scl_q = 0;
  always @(posedge clk) begin
    v_sclk_q <= v_spi_sclk;
    v_scl_q  <= v_i2c_scl_oe;
    if (!v_spi_cs_n && v_spi_sclk && !v_sclk_q) begin spi_got = {spi_got[30:0], v_spi_mosi}; spi_bits++; end
    if (v_i2c_act && !v_i2c_scl_oe && v_scl_q) begin i2c_got = {i2c_got[14:0], v_i2c_sda_oe}; i2c_bits++; end
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
    logic [15:0] rej;
    logic [38:0] cw;
    sup_rst = '0; sup_ckpt_req = '0; isolate = '0; ext_irq = '0;
    for (int t = 0; t < NT; t++) seg_base[t] = 32'(t) * SEG;
    core_l_req = '0; core_m_req = '0; dbg_req = '0; sup_m_req = '0;
    spi_cs_n = '1; spi_sclk = '0; spi_mosi = '0;
    i2c_act = '0; i2c_scl_oe = '0; i2c_sda_oe = '0; vote_mask = '1;
    scrub_enable = 0; scrub_start = 0; scrub_end = 0; scrub_interval = 0; nv_sel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    wait (&tile_rst_n);

    // ---- 1. replicated computation and checkpoint ----
    for (int t = 0; t < NT; t++) begin
      xfer(t, 0, 1, IRQ_BASE + 32'h4, 32'h1f, r);
      xfer(t, 0, 1, IRQ_BASE + 32'h8, 32'd400, r);
    end
    fork
      compute(0, 0); compute(1, 0); compute(2, 1); compute(3, 0);
    join
    check(ddr0.writes >= 32 && ddr1.writes >= 32, "both DDR channels used (segment interleaving)");
    check(ddr0.peek(cword(32'h0 + 20)) == secded_encode(result(5)), "tile 0 result in channel 0");
    check(ddr1.peek(cword(SEG + 20)) == secded_encode(result(5)), "tile 1 result in channel 1");
    check(ddr0.peek(cword(2 * SEG + 20)) == secded_encode(result(5) ^ 32'h10), "tile 2 wrong result in channel 0");
    fork
      checkpoint(0); checkpoint(1); checkpoint(2); checkpoint(3);
    join
    for (int t = 0; t < NT; t++) begin
      check(suspect[t] == 2, $sformatf("tile %0d names tile 2 in the majority decision (%0d)", t, suspect[t]));
      if (suspect[t] == 2) n_majority_fault++;
    end

    // ---- 3. protection ----
    xfer(1, 0, 1, XS_BASE, 32'hdead, r);
    check(r.err && xs_blocked_writes == 1, "write through Xs refused");
    if (xs_blocked_writes == 1) n_xs_block++;
    xfer(1, 1, 0, RO_BASE + 32'd20, 0, r);
    check(!r.err && r.rdata == result(5), "tile 1 reads tile 0's segment read-only");
    xfer(1, 1, 1, RO_BASE + 32'd20, 0, r);
    check(r.err && mmu_rejected[1] == 1, "write through read-only window refused");
    if (r.err) n_ro_reject++;
    d = 0;
    xfer(0, 1, 0, 32'd20, 0, r);
    check(r.err, "address outside the MMU windows refused");

    // ---- 2. supervisor replaces tile 2's state ----
    isolate[2] = 1;
    rej = mmu_rejected[2];
    xfer(2, 1, 1, OWN_BASE, 32'h0, r);
    check(r.err && mmu_rejected[2] == rej + 1, "isolated tile refused");
    if (r.err) n_iso_reject++;
    @(negedge clk); sup_rst[2] = 1; @(negedge clk); sup_rst[2] = 0;
    wait (tile_rst_n[2]);
    for (int i = 0; i < 16; i++) begin
      xfer(0, 3, 0, 32'(i * 4), 0, r);
      d = r.rdata;
      xfer(0, 3, 1, 2 * SEG + 32'(i * 4), d, r);
      check(!r.err, "supervisor copies segment");
      if (!r.err) n_sup_copy++;
    end
    for (int i = 0; i < 4; i++) begin
      xfer(0, 2, 0, SM_BASE + 32'(i * 4), 0, r);
      d = r.rdata;
      xfer(2, 2, 1, SM_BASE + 32'(i * 4), d, r);
      check(!r.err, "supervisor restores state memory");
      if (!r.err) n_dbg_sm++;
    end
    isolate[2] = 0;
    xfer(2, 1, 0, OWN_BASE + 32'd20, 0, r);
    check(!r.err && r.rdata == result(5), "tile 2 sees repaired segment");
    xfer(2, 0, 1, IRQ_BASE + 32'h4, 32'h1f, r);
    xfer(2, 0, 1, IRQ_BASE + 32'h8, 32'd400, r);
    fork
      checkpoint(0); checkpoint(1); checkpoint(2); checkpoint(3);
    join
    for (int t = 0; t < NT; t++) begin
      check(suspect[t] == -1, $sformatf("tile %0d: all agree after recovery", t));
      if (suspect[t] == -1) n_recovered++;
    end

    // ---- 5. interrupts ----
    for (int t = 0; t < NT; t++) xfer(t, 0, 1, IRQ_BASE, 32'h1f, r);
    sup_ckpt_req = '1;
    repeat (6) @(negedge clk);
    for (int t = 0; t < NT; t++) begin
      xfer(t, 0, 0, IRQ_BASE, 0, r);
      check(irq[t] && r.rdata[IRQ_CKPT_SUP], "supervisor-induced checkpoint interrupt");
      if (r.rdata[IRQ_CKPT_SUP]) n_sup_ckpt++;
    end
    sup_ckpt_req = '0;
    ext_irq[3] = 3'b001; @(negedge clk); ext_irq[3] = '0;

    // ---- 4. ECC and scrubbing ----
    ddr0.flip(cword(32'd8), 39'h1 << 17);
    xfer(0, 1, 0, OWN_BASE + 32'd8, 0, r);
    check(!r.err && r.rdata == result(2) && ecc_corr[0] == 1, "single bit error corrected");
    if (ecc_corr[0] == 1) n_ecc_corr++;
    repeat (4) @(negedge clk);
    check(ddr0.peek(cword(32'd8)) == secded_encode(result(2)), "corrected word written back");
    ddr0.flip(cword(32'd12), 39'h3 << 20);
    xfer(0, 1, 0, OWN_BASE + 32'd12, 0, r);
    check(r.err && ecc_uncorr[0] == 1 && ecc_last_addr[0] == 32'd12, "double bit error reported");
    if (r.err) n_ecc_uncorr++;
    xfer(0, 1, 1, OWN_BASE + 32'd12, result(3), r);
    check(!r.err, "full-word write repairs an uncorrectable word");
    cw = ddr1.peek(cword(SEG + 32'd36));
    ddr1.flip(cword(SEG + 32'd36), 39'h1 << 30);
    scrub_start = SEG; scrub_end = SEG + 32'd64; scrub_interval = 16'd3; scrub_enable = 1;
    wait (scrub_passes == 2);
    scrub_enable = 0;
    check(ecc_corr[1] == 1 && ddr1.peek(cword(SEG + 32'd36)) == cw, "scrubber repaired latent error");
    check(scrub_errors == 0 && scrub_words >= 32, "scrubber read the range twice");
    if (ecc_corr[1] == 1) n_scrub_fix++;

    // ---- 6. non-volatile memory and peripherals ----
    xfer(3, 1, 1, NV_BASE + 32'h100, 32'hc0de, r);
    xfer(3, 1, 0, NV_BASE + 32'h100, 0, r);
    check(!r.err && r.rdata == 32'hc0de && nv.bad_addr == 0 && nv.mem.exists(PHYS_NV_BASE + 32'h100),
          "non-volatile memory through the QSPI port");
    n_nv = nv.accepted;
    nv_sel = 1;                          // supervisor fails over to the spare path
    xfer(3, 1, 1, NV_BASE + 32'h200, 32'hfa11, r);
    xfer(3, 1, 0, NV_BASE + 32'h200, 0, r);
    check(!r.err && r.rdata == 32'hfa11 && nv_b.accepted == 2 && nv.accepted == n_nv
          && nv_b.mem.exists(PHYS_NV_BASE + 32'h200) && nv_errors == '0, "non-volatile fail-over");
    if (nv_b.accepted == 2) n_nv_failover++;
    nv_sel = 0;
    fork
      xfer(0, 0, 1, IF_BASE + 32'h8, 32'h11, r);
      xfer(1, 0, 1, IF_BASE + 32'h8, 32'h11, r);
      xfer(2, 0, 1, IF_BASE + 32'h8, 32'h11, r);
      xfer(3, 0, 1, IF_BASE + 32'h8, 32'h11, r);
    join
    n_if = g_if[0].ifs.accepted + g_if[1].ifs.accepted + g_if[2].ifs.accepted + g_if[3].ifs.accepted;
    check(n_if == 4, "peripheral accesses");

    // ---- 7. interface voting ----
    fork
      spi_send(0, 0, 0); spi_send(1, 3, 0); spi_send(2, 1, 1); spi_send(3, 6, 0);
    join
    repeat (20) @(negedge clk);
    check(spi_bits == 32 && spi_got == spi_word, $sformatf("SPI voted word %h (%0d bits)", spi_got, spi_bits));
    check(v_spi_minority != 0, "wrong tile outvoted");
    if (spi_got == spi_word) n_skew_ok++;
    if (v_spi_minority != 0) n_outvote++;
    vote_mask = 4'b0111;                 // three-tile group: tile 3 left out
    fork
      i2c_send(0, 2, 0); i2c_send(1, 0, 0); i2c_send(2, 4, 0); i2c_send(3, 0, 1);
    join
    repeat (20) @(negedge clk);
    check(i2c_bits == 16 && i2c_got == i2c_word, $sformatf("I2C voted word %h (%0d bits)", i2c_got, i2c_bits));
    check(v_i2c_minority == 0, "masked-out tile ignored");
    if (i2c_got == i2c_word && v_i2c_minority == 0) n_masked_vote++;
    check(v_overflows == 0, "no voter sample lost");

    // ---- mechanism summary ----
    check(irq[3], "peripheral interrupt");
    $display("mechanisms: gx_stall=%0d xs_stall=%0d ticks=%0d resets=%0d majority=%0d recovered=%0d",
             n_gx_stall, n_xs_stall, n_ticks, n_resets, n_majority_fault, n_recovered);
    $display("  sup_ckpt=%0d dbg_sm=%0d sup_copy=%0d ro_reject=%0d iso_reject=%0d xs_block=%0d",
             n_sup_ckpt, n_dbg_sm, n_sup_copy, n_ro_reject, n_iso_reject, n_xs_block);
    $display("  ecc_corr=%0d ecc_uncorr=%0d scrub_fix=%0d nv=%0d nv_failover=%0d if=%0d outvote=%0d skew_ok=%0d masked=%0d",
             n_ecc_corr, n_ecc_uncorr, n_scrub_fix, n_nv, n_nv_failover, n_if, n_outvote, n_skew_ok, n_masked_vote);
    check(n_gx_stall > 0, "mechanism: global crossbar contention");
    check(n_xs_stall > 0, "mechanism: Xs contention");
    check(n_ticks > 0, "mechanism: checkpoint timer");
    check(n_resets == NT + 1, "mechanism: tile reset");
    check(n_majority_fault == NT, "mechanism: majority decision finds faulty tile");
    check(n_recovered == NT, "mechanism: recovery");
    check(n_sup_ckpt == NT, "mechanism: supervisor checkpoint");
    check(n_dbg_sm > 0, "mechanism: debug bridge state update");
    check(n_sup_copy > 0, "mechanism: supervisor memory copy");
    check(n_ro_reject > 0, "mechanism: read-only window");
    check(n_iso_reject > 0, "mechanism: isolation");
    check(n_xs_block > 0, "mechanism: Xs write block");
    check(n_ecc_corr > 0, "mechanism: ECC correction");
    check(n_ecc_uncorr > 0, "mechanism: ECC detection");
    check(n_scrub_fix > 0, "mechanism: scrubbing");
    check(n_nv > 0, "mechanism: non-volatile memory");
    check(n_nv_failover > 0, "mechanism: non-volatile fail-over");
    check(n_if > 0, "mechanism: peripheral access");
    check(n_outvote > 0, "mechanism: outvoting");
    check(n_skew_ok > 0, "mechanism: skew compensation");
    check(n_masked_vote > 0, "mechanism: vote mask");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
