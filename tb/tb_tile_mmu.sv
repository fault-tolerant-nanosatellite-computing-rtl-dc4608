// tb_tile_mmu: self-checking test of the tile MMU.
// The global crossbar side is modelled here as a memory with random
// acceptance and response delays that stores words by physical address.
// Checks: the own-segment window is translated to seg_base + offset and is
// writable; the read-only window reaches all of main memory and refuses
// writes; the non-volatile window is passed through; unmapped addresses
// and every access while isolated are refused without reaching the
// crossbar; the rejected-access counter; moving the segment (seg_base) to
// another physical place.
//
// Own segment at a uniform address, read-only view and disconnection follow
// the architecture; window addresses are this design's own.
module tb_tile_mmu;
  import obc_pkg::*;
  localparam logic [31:0] SEG = 32'h0000_1000, MEM = 32'h0001_0000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  bus_req_t    s_req, m_req;
  logic        s_ready, m_ready;
  bus_rsp_t    s_rsp, m_rsp;
  logic [31:0] seg_base;
  logic        isolate;
  logic [15:0] rejected;

  tile_mmu #(.SEG_BYTES(SEG), .MEM_BYTES(MEM)) dut (.*);

  // ---- crossbar/memory model ----
  logic [31:0] phys_mem [logic [31:0]];
  int          fwd_count = 0;
  logic        busy = 0;
  int          lat;
  bus_req_t    held;
  logic        rdy_rand;
  always @(posedge clk) rdy_rand <= 1'($urandom);
  assign m_ready = !busy && rdy_rand;
  always @(posedge clk) begin
    m_rsp <= '0;
    if (!busy && m_req.valid && m_ready) begin
      busy <= 1; held <= m_req; lat <= $urandom_range(2); fwd_count++;
    end else if (busy) begin
      if (lat == 0) begin
        busy <= 0;
        m_rsp.valid <= 1;
        if (held.we) phys_mem[held.addr] = held.wdata;
        else m_rsp.rdata <= phys_mem.exists(held.addr) ? phys_mem[held.addr] : 32'h0;
      end else lat <= lat - 1;
    end
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(bit we, logic [31:0] addr, logic [31:0] d, output bus_rsp_t r);
    bit ok;
    @(negedge clk);
    s_req.valid = 1; s_req.we = we; s_req.addr = addr; s_req.wdata = d; s_req.wstrb = '1;
    do begin
      #4; ok = s_ready;
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    s_req.valid = 0;
    while (!s_rsp.valid) @(negedge clk);
    r = s_rsp;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_rsp_t r;
    int f0, n_rej;
    logic [31:0] d;
    s_req = '0; isolate = 0; seg_base = 32'h0000_3000;
    repeat (3) @(posedge clk);
    rst_n = 1;
    n_rej = 0;
    // own segment: write, then find it at the physical place
    for (int i = 0; i < 20; i++) begin
      automatic logic [31:0] off = 32'($urandom_range(SEG / 4 - 1)) * 4;
      d = $urandom;
      xfer(1, OWN_BASE + off, d, r);
      check(!r.err, "own write ok");
      check(phys_mem.exists(seg_base + off) && phys_mem[seg_base + off] == d, "own write translated");
      xfer(0, OWN_BASE + off, 0, r);
      check(!r.err && r.rdata == d, "own read back");
      xfer(0, RO_BASE + seg_base + off, 0, r);
      check(!r.err && r.rdata == d, "same word through read-only window");
    end
    // read-only window refuses writes without forwarding
    f0 = fwd_count;
    xfer(1, RO_BASE + 32'h40, 32'h1234, r);
    n_rej++;
    check(r.err, "read-only window write refused");
    check(fwd_count == f0, "refused write not forwarded");
    // end of own window and of main memory
    xfer(0, OWN_BASE + SEG, 0, r); n_rej++;
    check(r.err, "past own segment refused");
    xfer(0, RO_BASE + MEM, 0, r); n_rej++;
    check(r.err, "past main memory refused");
    xfer(0, 32'h0000_0100, 0, r); n_rej++;
    check(r.err, "unmapped refused");
    // non-volatile window
    xfer(1, NV_BASE + 32'h20, 32'hcafe, r);
    check(!r.err && phys_mem.exists(PHYS_NV_BASE + 32'h20), "nv translated");
    // move the segment
    d = $urandom;
    xfer(1, OWN_BASE + 32'h8, d, r);
    seg_base = 32'h0000_8000;
    xfer(0, OWN_BASE + 32'h8, 0, r);
    check(r.rdata != d || d == phys_mem[32'h8008], "moved segment reads new place");
    xfer(1, OWN_BASE + 32'h8, ~d, r);
    check(phys_mem[32'h8008] == ~d && phys_mem[32'h3008] == d, "moved segment writes new place");
    // isolation
    isolate = 1;
    f0 = fwd_count;
    xfer(0, OWN_BASE, 0, r); n_rej++;
    check(r.err, "isolated read refused");
    xfer(1, NV_BASE, 0, r); n_rej++;
    check(r.err, "isolated write refused");
    check(fwd_count == f0, "nothing forwarded while isolated");
    isolate = 0;
    xfer(0, OWN_BASE + 32'h8, 0, r);
    check(!r.err && r.rdata == ~d, "reconnected");
    check(int'(rejected) == n_rej, $sformatf("rejected count %0d vs %0d", rejected, n_rej));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
