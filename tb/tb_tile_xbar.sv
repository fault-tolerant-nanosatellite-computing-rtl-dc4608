// tb_tile_xbar: self-checking test of the tile-local interconnect.
// The core and the debug bridge issue random reads and writes at the same
// time to the four local slaves (modelled by tb_bus_slave with random
// delays) and to unmapped addresses. Checks: every access reaches the slave
// of its page and only that one; data written by one master is read back by
// either; unmapped addresses are answered with an error; per-slave access
// counts match what was sent.
//
// Which masters and slaves meet on the tile crossbar follows the tile
// diagram of the architecture; the address decode checked is this design's
// own.
module tb_tile_xbar;
  import obc_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  bus_req_t [1:0] m_req;
  logic     [1:0] m_ready;
  bus_rsp_t [1:0] m_rsp;
  bus_req_t [3:0] s_req;
  logic     [3:0] s_ready;
  bus_rsp_t [3:0] s_rsp;

  tile_xbar #(.N_M(2), .N_S(4)) dut (.*);

  localparam logic [7:0] PAGES [4] = '{SM_PAGE, XS_PAGE, IRQ_PAGE, IF_PAGE};
  tb_bus_slave #(.MAX_LAT(2), .CHECK_PAGE(1), .PAGE(SM_PAGE))  s0 (.clk, .req(s_req[0]), .ready(s_ready[0]), .rsp(s_rsp[0]));
  tb_bus_slave #(.MAX_LAT(2), .CHECK_PAGE(1), .PAGE(XS_PAGE))  s1 (.clk, .req(s_req[1]), .ready(s_ready[1]), .rsp(s_rsp[1]));
  tb_bus_slave #(.MAX_LAT(2), .CHECK_PAGE(1), .PAGE(IRQ_PAGE)) s2 (.clk, .req(s_req[2]), .ready(s_ready[2]), .rsp(s_rsp[2]));
  tb_bus_slave #(.MAX_LAT(2), .CHECK_PAGE(1), .PAGE(IF_PAGE))  s3 (.clk, .req(s_req[3]), .ready(s_ready[3]), .rsp(s_rsp[3]));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(int m, bit we, logic [31:0] addr, logic [31:0] d,
                      output bus_rsp_t r, output int cyc);
    bit ok;
    @(negedge clk);
    m_req[m].valid = 1; m_req[m].we = we; m_req[m].addr = addr;
    m_req[m].wdata = d; m_req[m].wstrb = '1;
    cyc = 0;
    do begin
      #4; ok = m_ready[m];
      @(posedge clk); cyc++;
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    m_req[m].valid = 0;
    while (!m_rsp[m].valid) begin @(negedge clk); cyc++; end
    r = m_rsp[m];
  endtask

  // reference: last value written per address (each master owns half the
  // word offsets, so the two never race on one address)
  logic [31:0] ref_mem [logic [31:0]];
  int n_acc [4] = '{0, 0, 0, 0};

  task automatic master(int m, int n);
    for (int k = 0; k < n; k++) begin
      bus_rsp_t r; int cyc;
      int s = $urandom_range(4);
      logic [31:0] a = {(s < 4) ? PAGES[s] : 8'h55, 16'h0, 5'($urandom), 1'(m), 2'b00};
      if (s < 4) n_acc[s]++;
      if ($urandom_range(1) == 0) begin
        logic [31:0] d = $urandom;
        xfer(m, 1, a, d, r, cyc);
        if (s < 4) begin
          ref_mem[a] = d;
          check(!r.err, "write ok");
        end else check(r.err, "unmapped write error");
      end else begin
        xfer(m, 0, a, 0, r, cyc);
        if (s < 4) check(!r.err && r.rdata == (ref_mem.exists(a) ? ref_mem[a] : 32'h0),
                         $sformatf("m%0d read %h", m, a));
        else check(r.err, "unmapped read error");
      end
    end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      master(0, 300);
      master(1, 300);
    join
    check(s0.bad_addr + s1.bad_addr + s2.bad_addr + s3.bad_addr == 0, "no misrouted access");
    check(s0.accepted == n_acc[0] && s1.accepted == n_acc[1] &&
          s2.accepted == n_acc[2] && s3.accepted == n_acc[3], "access counts per slave");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
