// tb_xs_ro_xbar: self-checking test of the read-only state-memory crossbar.
// Four tile masters issue random reads of random tiles' state memories at
// the same time; the state memories are modelled here as arrays with a
// one-cycle read port. Checks read data, that writes are refused with an
// error and never reach a memory, errors for a tile index past N_TILES and
// for an offset past the memory, the counter of blocked writes, and the
// latency (ready in the request cycle, response one cycle later) of an
// uncontended read.
//
// Read-only access to every tile's state memory follows the architecture;
// arbitration and error responses checked are this design's own.
module tb_xs_ro_xbar;
  import obc_pkg::*;
  localparam int unsigned N = 4, WORDS = 16;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  bus_req_t [N-1:0]  m_req;
  logic     [N-1:0]  m_ready;
  bus_rsp_t [N-1:0]  m_rsp;
  logic     [N-1:0]  sm_en;
  logic     [N-1:0][$clog2(WORDS)-1:0] sm_addr;
  logic     [N-1:0][31:0] sm_rdata;
  logic     [15:0]   blocked_writes;

  xs_ro_xbar #(.N_TILES(N), .SM_WORDS(WORDS)) dut (.*);

  logic [31:0] sm [N][WORDS];
  always_ff @(posedge clk)
    for (int s = 0; s < N; s++) if (sm_en[s]) sm_rdata[s] <= sm[s][sm_addr[s]];

  int checks = 0, failures = 0;
  int n_writes = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  // one transaction of master m; returns response and cycles from the
  // cycle the request is raised to the cycle the response is seen
  task automatic xfer(int m, bit we, logic [31:0] addr, output bus_rsp_t r, output int cyc);
    bit ok;
    @(negedge clk);
    m_req[m].valid = 1; m_req[m].we = we; m_req[m].addr = addr;
    m_req[m].wdata = 32'hbad0bad0; m_req[m].wstrb = 4'hF;
    cyc = 0;
    do begin
      #4; ok = m_ready[m];           // sampled just before the rising edge
      @(posedge clk); cyc++;
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    m_req[m].valid = 0;
    while (!m_rsp[m].valid) begin @(negedge clk); cyc++; end
    r = m_rsp[m];
  endtask

  task automatic master(int m, int n);
    for (int k = 0; k < n; k++) begin
      bus_rsp_t r; int cyc;
      int kind = $urandom_range(9);
      int t = $urandom_range(N - 1);
      int w = $urandom_range(WORDS - 1);
      logic [31:0] a = XS_BASE + 32'(t) * XS_STRIDE + 32'(w * 4);
      if (kind == 0) begin
        xfer(m, 1, a, r, cyc);
        n_writes++;
        check(r.err, "write refused");
      end else if (kind == 1) begin
        xfer(m, 0, XS_BASE + 32'(N) * XS_STRIDE, r, cyc);
        check(r.err, "bad tile index refused");
      end else if (kind == 2) begin
        xfer(m, 0, XS_BASE + 32'(t) * XS_STRIDE + 32'(WORDS * 4), r, cyc);
        check(r.err, "offset past end refused");
      end else begin
        xfer(m, 0, a, r, cyc);
        check(!r.err && r.rdata == sm[t][w],
              $sformatf("m%0d read tile %0d word %0d: %h vs %h", m, t, w, r.rdata, sm[t][w]));
      end
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_rsp_t r; int cyc;
    m_req = '0;
    for (int s = 0; s < N; s++)
      for (int w = 0; w < WORDS; w++) sm[s][w] = {8'(s), 8'(w), 16'($urandom)};
    repeat (3) @(posedge clk);
    rst_n = 1;
    // uncontended read: one cycle to accept, response in the next
    xfer(2, 0, XS_BASE + 32'd1 * XS_STRIDE + 32'd12, r, cyc);
    check(!r.err && r.rdata == sm[1][3], "single read data");
    check(cyc == 1, $sformatf("single read latency %0d", cyc));
    // all masters together
    fork
      master(0, 200);
      master(1, 200);
      master(2, 200);
      master(3, 200);
    join
    // state memories unchanged by the refused writes
    for (int s = 0; s < N; s++)
      for (int w = 0; w < WORDS; w++)
        check(sm[s][w][31:16] == {8'(s), 8'(w)}, "memory untouched");
    check(int'(blocked_writes) == n_writes, $sformatf("blocked writes %0d vs %0d", blocked_writes, n_writes));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
