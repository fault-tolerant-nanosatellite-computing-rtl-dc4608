// tb_tile: self-checking test of one tile with its blocks wired together.
// The tile's link to the state-memory crossbar is looped back through a
// one-tile xs_ro_xbar to its own state memory; the global crossbar and the
// peripheral controllers are tb_bus_slave models. The testbench plays both
// the core (uncached local port and cached memory port) and the supervisor
// (debug bridge and control lines). Checks: state memory written by the
// core is read by the supervisor through the debug bridge and through Xs,
// Xs refuses writes; checkpoint timer interrupt, supervisor-induced
// checkpoint interrupt and peripheral interrupt reach the core's irq line;
// the own-segment window lands at seg_base on the global bus; isolation;
// peripheral accesses reach the interface port; a supervisor reset resets
// the tile's registers for RST_STRETCH cycles and leaves the state memory
// content intact.
//
// The tile contents follow the architecture; the address map and register
// offsets used are this design's own.
module tb_tile;
  import obc_pkg::*;
  localparam int unsigned SMW = 64, STRETCH = 6;
  localparam logic [31:0] SEG = 32'h1000, MEM = 32'h10000;

  logic clk = 0, ext_rst_n = 1;
  initial #1 ext_rst_n = 0;
  always #5 clk = ~clk;

  logic        tile_rst_n, sup_rst, sup_ckpt_req, isolate;
  logic [31:0] seg_base;
  logic [15:0] mmu_rejected;
  bus_req_t    core_l_req, core_m_req, dbg_req, if_req, xs_req, gm_req;
  logic        core_l_ready, core_m_ready, dbg_ready, if_ready, xs_ready, gm_ready;
  bus_rsp_t    core_l_rsp, core_m_rsp, dbg_rsp, if_rsp, xs_rsp, gm_rsp;
  logic [2:0]  ext_irq;
  logic        irq, ckpt_tick;
  logic        smb_en;
  logic [$clog2(SMW)-1:0] smb_addr;
  logic [31:0] smb_rdata;
  logic [15:0] blocked;

  tile #(.SM_WORDS(SMW), .N_EXT(3), .SEG_BYTES(SEG), .MEM_BYTES(MEM), .RST_STRETCH(STRETCH)) dut (
    .clk, .ext_rst_n, .tile_rst_n, .sup_rst, .sup_ckpt_req, .isolate, .seg_base, .mmu_rejected,
    .core_l_req, .core_l_ready, .core_l_rsp, .core_m_req, .core_m_ready, .core_m_rsp,
    .dbg_req, .dbg_ready, .dbg_rsp, .if_req, .if_ready, .if_rsp, .ext_irq, .irq, .ckpt_tick,
    .xs_req, .xs_ready, .xs_rsp, .smb_en, .smb_addr, .smb_rdata, .gm_req, .gm_ready, .gm_rsp);

  xs_ro_xbar #(.N_TILES(1), .SM_WORDS(SMW)) u_xs (
    .clk, .rst_n(ext_rst_n), .m_req(xs_req), .m_ready(xs_ready), .m_rsp(xs_rsp),
    .sm_en(smb_en), .sm_addr(smb_addr), .sm_rdata(smb_rdata), .blocked_writes(blocked));

  tb_bus_slave #(.MAX_LAT(2)) gm (.clk, .req(gm_req), .ready(gm_ready), .rsp(gm_rsp));
  tb_bus_slave #(.MAX_LAT(2), .CHECK_PAGE(1), .PAGE(IF_PAGE)) ifs (.clk, .req(if_req), .ready(if_ready), .rsp(if_rsp));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  // port: 0 core local, 1 core memory, 2 debug bridge
  task automatic xfer(int port, bit we, logic [31:0] addr, logic [31:0] d, output bus_rsp_t r);
    bus_req_t q;
    bit ok;
    q = '{valid: 1'b1, we: we, addr: addr, wdata: d, wstrb: 4'hF};
    @(negedge clk);
    case (port) 0: core_l_req = q; 1: core_m_req = q; default: dbg_req = q; endcase
    do begin
      #4;
      case (port) 0: ok = core_l_ready; 1: ok = core_m_ready; default: ok = dbg_ready; endcase
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    case (port) 0: core_l_req = '0; 1: core_m_req = '0; default: dbg_req = '0; endcase
    forever begin
      case (port) 0: r = core_l_rsp; 1: r = core_m_rsp; default: r = dbg_rsp; endcase
      if (r.valid) break;
      @(negedge clk);
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_rsp_t r;
    logic [31:0] d;
    int n;
    core_l_req = '0; core_m_req = '0; dbg_req = '0;
    sup_rst = 0; sup_ckpt_req = 0; isolate = 0; seg_base = 32'h0000_5000; ext_irq = '0;
    repeat (3) @(negedge clk);
    ext_rst_n = 1;
    wait (tile_rst_n);
    // state memory: core writes, supervisor and Xs read
    for (int i = 0; i < 8; i++) begin
      d = $urandom;
      xfer(0, 1, SM_BASE + 32'(i * 4), d, r);
      check(!r.err, "core writes state memory");
      xfer(2, 0, SM_BASE + 32'(i * 4), 0, r);
      check(!r.err && r.rdata == d, "supervisor reads state memory via debug bridge");
      xfer(0, 0, XS_BASE + 32'(i * 4), 0, r);
      check(!r.err && r.rdata == d, "core reads state memory via Xs");
    end
    xfer(0, 1, XS_BASE, 32'h0, r);
    check(r.err, "Xs write refused");
    xfer(2, 1, SM_BASE, 32'h5a5a, r);
    xfer(0, 0, SM_BASE, 0, r);
    check(r.rdata == 32'h5a5a, "supervisor modifies state memory");
    // checkpoint timer
    xfer(0, 1, IRQ_BASE + 32'h4, 32'h1f, r);       // enable all
    xfer(0, 1, IRQ_BASE + 32'h8, 32'd30, r);
    n = 0;
    repeat (95) begin @(negedge clk); if (ckpt_tick) n++; end
    check(n == 3, $sformatf("timer ticks in 95 cycles: %0d", n));
    check(irq, "checkpoint irq");
    xfer(0, 1, IRQ_BASE + 32'h8, 32'd0, r);
    xfer(0, 1, IRQ_BASE + 32'h0, 32'h1f, r);
    @(negedge clk);
    check(!irq, "irq cleared");
    // supervisor checkpoint request
    sup_ckpt_req = 1;
    repeat (5) @(negedge clk);
    check(irq, "supervisor-induced checkpoint");
    xfer(0, 0, IRQ_BASE, 0, r);
    check(r.rdata == 32'h2, "pending: supervisor source");
    sup_ckpt_req = 0;
    xfer(0, 1, IRQ_BASE + 32'h0, 32'h1f, r);
    // peripheral interrupt and access
    ext_irq = 3'b100; @(negedge clk); ext_irq = 0;
    @(negedge clk);
    check(irq, "peripheral irq");
    xfer(0, 1, IRQ_BASE + 32'h0, 32'h1f, r);
    xfer(0, 1, IF_BASE + 32'h10, 32'h77, r);
    check(!r.err && ifs.accepted == 1 && ifs.mem[IF_BASE + 32'h10] == 32'h77, "peripheral write");
    // main memory through the MMU
    xfer(1, 1, OWN_BASE + 32'h24, 32'hfeed, r);
    check(!r.err && gm.mem.exists(32'h5024) && gm.mem[32'h5024] == 32'hfeed, "own segment at seg_base");
    xfer(1, 0, RO_BASE + 32'h5024, 0, r);
    check(!r.err && r.rdata == 32'hfeed, "read-only window");
    isolate = 1;
    xfer(1, 0, OWN_BASE + 32'h24, 0, r);
    check(r.err && mmu_rejected == 1, "isolated");
    isolate = 0;
    // debug bridge cannot reach main memory
    xfer(2, 0, OWN_BASE, 0, r);
    check(r.err, "debug bridge has no path to main memory");
    // supervisor reset
    xfer(0, 1, IRQ_BASE + 32'h8, 32'd100, r);
    @(negedge clk); sup_rst = 1; @(negedge clk); sup_rst = 0;
    check(!tile_rst_n, "tile in reset");
    n = 0;
    while (!tile_rst_n) begin @(posedge clk); #1; n++; end
    check(n == STRETCH, $sformatf("reset length %0d", n));
    xfer(0, 0, IRQ_BASE + 32'h8, 0, r);
    check(r.rdata == 0, "timer period reset");
    xfer(0, 0, SM_BASE, 0, r);
    check(r.rdata == 32'h5a5a, "state memory survives tile reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
