// tb_nv_failover: self-checking test of the non-volatile memory fail-over
// switch. Two controller models hold separate memories, accept requests
// after a random delay and answer after a random latency; a 'broken' flag
// makes one answer every request with an error, as a controller after a
// functional interrupt would. Random reads and writes are sent while the
// selection changes at random moments, also while a request is in flight.
// Checks: each request reaches exactly the path selected when it was taken
// and its response comes from that path; the inactive path sees nothing;
// data read back matches a per-path reference; error responses of the
// broken path are counted on that path only.
//
// Redundant paths with fail-over follow the architecture; supervisor
// selection and the counters are this design's own.
module tb_nv_failover;
  import obc_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;
  always #5 clk = ~clk;

  bus_req_t            s_req;
  logic                s_ready;
  bus_rsp_t            s_rsp;
  logic                sel;
  bus_req_t [1:0]      m_req;
  logic     [1:0]      m_ready;
  bus_rsp_t [1:0]      m_rsp;
  logic     [1:0][15:0] err_count;

  nv_failover #(.N_NV(2)) dut (.*);

  // controller models
  logic [31:0] mem [2][logic [31:0]];
  logic [1:0]  busy = '0, rdy = '0, broken = '0;
  int          lat [2];
  bus_req_t    held [2];
  int          taken [2];
  always @(posedge clk) begin
    for (int p = 0; p < 2; p++) begin
      rdy[p] <= 1'($urandom);
      m_rsp[p] <= '0;
      if (!busy[p] && m_req[p].valid && m_ready[p]) begin
        busy[p] <= 1; held[p] <= m_req[p]; lat[p] <= $urandom_range(3); taken[p]++;
      end else if (busy[p]) begin
        if (lat[p] == 0) begin
          busy[p] <= 0;
          m_rsp[p].valid <= 1;
          m_rsp[p].err   <= broken[p];
          if (held[p].we && !broken[p]) mem[p][held[p].addr] = held[p].wdata;
          else if (!held[p].we) m_rsp[p].rdata <= mem[p].exists(held[p].addr) ? mem[p][held[p].addr] : 32'h0;
        end else lat[p] <= lat[p] - 1;
      end
    end
  end
  assign m_ready = rdy & ~busy;

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] ref_mem [2][logic [31:0]];
  int          ref_err [2];
  initial begin
    taken[0] = 0; taken[1] = 0; ref_err[0] = 0; ref_err[1] = 0;
    m_rsp = '0; s_req = '0; sel = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    for (int n = 0; n < 400; n++) begin
      automatic bit          we = 1'($urandom);
      automatic logic [31:0] a  = PHYS_NV_BASE + 32'($urandom_range(15) * 4);
      automatic logic [31:0] d  = $urandom;
      automatic int          path;
      automatic int          t0 = taken[0], t1 = taken[1];
      automatic bit          ok;
      broken = (n >= 200 && n < 300) ? 2'b01 : 2'b00;
      if ($urandom_range(3) == 0) sel = ~sel;
      @(negedge clk);
      s_req = '{valid: 1'b1, we: we, addr: a, wdata: d, wstrb: 4'hF};
      do begin
        #4;
        ok = s_ready;
        path = int'(sel);
        @(posedge clk);
        if (!ok) @(negedge clk);
      end while (!ok);
      @(negedge clk);
      s_req = '0;
      if ($urandom_range(1) == 0) sel = ~sel;    // switch while in flight
      while (!s_rsp.valid) @(negedge clk);
      check(taken[path] == (path == 0 ? t0 : t1) + 1 && taken[1 - path] == (path == 0 ? t1 : t0),
            "request reached only the selected path");
      check(s_rsp.err == broken[path], "error only from the broken path");
      if (s_rsp.err) ref_err[path]++;
      else if (we) ref_mem[path][a] = d;
      else check(s_rsp.rdata == (ref_mem[path].exists(a) ? ref_mem[path][a] : 32'h0), "read data of the path");
    end
    @(negedge clk);
    check(err_count[0] == 16'(ref_err[0]) && err_count[1] == 16'(ref_err[1]) && ref_err[0] > 0,
          $sformatf("error counters %0d %0d", err_count[0], err_count[1]));
    check(taken[0] > 100 && taken[1] > 100, "both paths used");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
