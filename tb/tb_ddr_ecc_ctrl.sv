// tb_ddr_ecc_ctrl: self-checking test of the SECDED ECC front end of a DDR
// channel, with a behavioural DDR model (tb_ddr_mem).
// Checks: data written reads back; every one of the 39 single-bit errors in
// a stored word is corrected, counted, and written back corrected to memory
// (scrub on read); double-bit errors are reported as bus errors and
// counted, and their address is recorded; partial writes merge bytes
// (read-modify-write); the channel-local word address for segment
// interleaving; rising clock edges from request to response for a clean
// read (4), a corrected read (5) and a full write (2), with a memory that
// is always ready and returns read data one cycle after the request.

//
// What is checked follows the architecture's demand for SECDED on main
// memory; the expected codewords come from the testbench's own use of the
// code, and the cycle counts checked are this design's own timing.
module tb_ddr_ecc_ctrl;
  import obc_pkg::*;
  localparam int unsigned NDDR = 2;
  localparam logic [31:0] SEG = 32'h100, MEM = 32'h1000;
  localparam int unsigned MAW = $clog2(MEM / NDDR) - 2;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  bus_req_t req;
  logic     ready;
  bus_rsp_t rsp;
  logic     mem_valid, mem_we, mem_ready, mem_rvalid;
  logic [MAW-1:0] mem_addr;
  logic [38:0] mem_wdata, mem_rdata;
  logic [15:0] corr_count, uncorr_count;
  logic [31:0] last_err_addr;

  ddr_ecc_ctrl #(.N_DDR(NDDR), .SEG_BYTES(SEG), .MEM_BYTES(MEM)) dut (.*);
  tb_ddr_mem #(.AW_W(MAW), .RANDOM(0)) mem (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(bit we, logic [31:0] addr, logic [31:0] d, logic [3:0] strb,
                      output bus_rsp_t r, output int cyc);
    bit ok;
    @(negedge clk);
    req.valid = 1; req.we = we; req.addr = addr; req.wdata = d; req.wstrb = strb;
    cyc = 0;
    do begin
      #4; ok = ready;
      @(posedge clk); cyc++;
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    req.valid = 0;
    while (!rsp.valid) begin @(negedge clk); cyc++; end
    r = rsp;
  endtask

  // independent model of the channel-local word index
  function automatic logic [MAW-1:0] local_idx(logic [31:0] a);
    return MAW'(((a / SEG) / NDDR) * (SEG / 4) + (a % SEG) / 4);
  endfunction

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_rsp_t r; int cyc;
    logic [31:0] a, d, ref_d;
    logic [38:0] cw;
    int exp_corr = 0, exp_unc = 0;
    req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // latency, clean write and read
    a = 32'h0000_0344;   // segment 3 -> channel 1, local segment 1
    d = 32'h1234_5678;
    xfer(1, a, d, 4'hF, r, cyc);
    check(!r.err, "write ok");
    check(cyc == 2, $sformatf("write cycles %0d", cyc));
    check(mem.mem.exists(local_idx(a)), $sformatf("local word index %0d", local_idx(a)));
    xfer(0, a, 0, 4'h0, r, cyc);
    check(!r.err && r.rdata == d, "read back");
    check(cyc == 4, $sformatf("read cycles %0d", cyc));
    // every single-bit error is corrected and written back
    cw = mem.peek(local_idx(a));
    for (int b = 0; b < 39; b++) begin
      mem.flip(local_idx(a), 39'(1) << b);
      xfer(0, a, 0, 4'h0, r, cyc);
      exp_corr++;
      check(!r.err && r.rdata == d, $sformatf("bit %0d corrected", b));
      check(mem.peek(local_idx(a)) == cw, $sformatf("bit %0d written back", b));
      check(cyc == 5, $sformatf("corrected read cycles %0d", cyc));
    end
    check(int'(corr_count) == exp_corr, "correction count");
    check(last_err_addr == a, "last error address");
    // random words, random double-bit errors
    for (int k = 0; k < 40; k++) begin
      int b1, b2;
      a = 32'($urandom_range(MEM / 4 - 1)) * 4;
      d = $urandom;
      xfer(1, a, d, 4'hF, r, cyc);
      b1 = $urandom_range(38);
      do b2 = $urandom_range(38); while (b2 == b1);
      mem.flip(local_idx(a), (39'(1) << b1) | (39'(1) << b2));
      xfer(0, a, 0, 4'h0, r, cyc);
      exp_unc++;
      check(r.err, $sformatf("double error bits %0d,%0d detected", b1, b2));
      check(last_err_addr == a, "double error address");
      // a partial write to a broken word is refused
      xfer(1, a, 32'hFFFF_FFFF, 4'h1, r, cyc);
      exp_unc++;
      check(r.err, "partial write over double error refused");
      // a full write repairs it
      xfer(1, a, d, 4'hF, r, cyc);
      xfer(0, a, 0, 4'h0, r, cyc);
      check(!r.err && r.rdata == d, "repaired by full write");
    end
    check(int'(uncorr_count) == exp_unc, $sformatf("uncorrectable count %0d vs %0d", uncorr_count, exp_unc));
    // partial writes
    a = 32'h0000_0010;
    ref_d = 32'hAABB_CCDD;
    xfer(1, a, ref_d, 4'hF, r, cyc);
    for (int k = 0; k < 30; k++) begin
      automatic logic [3:0] s = 4'($urandom);
      d = $urandom;
      ref_d = apply_wstrb(ref_d, d, s);
      xfer(1, a, d, s, r, cyc);
      check(!r.err, "partial write ok");
      xfer(0, a, 0, 4'h0, r, cyc);
      check(r.rdata == ref_d, $sformatf("partial write merge %h vs %h", r.rdata, ref_d));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
