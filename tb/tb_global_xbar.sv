// tb_global_xbar: self-checking test of the global crossbar.
// Six masters (four tiles, scrubber, supervisor) issue random reads and
// writes at the same time to main memory, to the non-volatile region and
// to unmapped addresses. The two DDR channels and the non-volatile
// controller are tb_bus_slave models with random delays. Checks: data
// integrity; segment interleaving (a write to segment k lands in channel
// k mod 2, and only there); unmapped addresses answered with an error; that
// both channels were used; that two masters on different channels are
// served in parallel (both accepted in the same cycle).
//
// Segment interleaving and the masters (tiles, scrubber, supervisor) follow
// the architecture; the expected channel and local address come from the
// interleaving formula, computed independently in the testbench.
module tb_global_xbar;
  import obc_pkg::*;
  localparam int unsigned NM = 6, NDDR = 2;
  localparam logic [31:0] SEG = 32'h100, MEM = 32'h1000;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  bus_req_t [NM-1:0]   m_req;
  logic     [NM-1:0]   m_ready;
  bus_rsp_t [NM-1:0]   m_rsp;
  bus_req_t [NDDR:0]   s_req;
  logic     [NDDR:0]   s_ready;
  bus_rsp_t [NDDR:0]   s_rsp;

  global_xbar #(.N_M(NM), .N_DDR(NDDR), .SEG_BYTES(SEG), .MEM_BYTES(MEM)) dut (.*);

  tb_bus_slave #(.MAX_LAT(3)) ch0 (.clk, .req(s_req[0]), .ready(s_ready[0]), .rsp(s_rsp[0]));
  tb_bus_slave #(.MAX_LAT(3)) ch1 (.clk, .req(s_req[1]), .ready(s_ready[1]), .rsp(s_rsp[1]));
  tb_bus_slave #(.MAX_LAT(3)) nv  (.clk, .req(s_req[2]), .ready(s_ready[2]), .rsp(s_rsp[2]));

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(int m, bit we, logic [31:0] addr, logic [31:0] d, output bus_rsp_t r);
    bit ok;
    @(negedge clk);
    m_req[m].valid = 1; m_req[m].we = we; m_req[m].addr = addr;
    m_req[m].wdata = d; m_req[m].wstrb = '1;
    do begin
      #4; ok = m_ready[m];
      @(posedge clk);
      if (!ok) @(negedge clk);
    end while (!ok);
    @(negedge clk);
    m_req[m].valid = 0;
    while (!m_rsp[m].valid) @(negedge clk);
    r = m_rsp[m];
  endtask

  logic [31:0] ref_mem [logic [31:0]];
  int parallel_accepts = 0;
  always @(posedge clk) if (s_req[0].valid && s_ready[0] && s_req[1].valid && s_ready[1]) parallel_accepts++;

  function automatic bit in_slave(int c, logic [31:0] a, logic [31:0] d);
    case (c)
      0: return ch0.mem.exists(a) && ch0.mem[a] == d;
      1: return ch1.mem.exists(a) && ch1.mem[a] == d;
      default: return nv.mem.exists(a) && nv.mem[a] == d;
    endcase
  endfunction

  task automatic master(int m, int n);
    for (int k = 0; k < n; k++) begin
      bus_rsp_t r;
      int kind = $urandom_range(9);
      // word offset within a segment carries the master id: no two masters share a word
      logic [31:0] off = {26'($urandom_range(7)), 3'(m), 2'b00};
      logic [31:0] a;
      int c;
      if (kind < 7) begin
        a = PHYS_DDR_BASE + 32'($urandom_range(MEM / SEG - 1)) * SEG + off;
        c = int'((a / SEG) % NDDR);
      end else if (kind < 9) begin
        a = PHYS_NV_BASE + off;
        c = NDDR;
      end else begin
        a = 32'h8000_0000 + off;
        c = -1;
      end
      if ($urandom_range(1) == 0) begin
        logic [31:0] d = $urandom;
        xfer(m, 1, a, d, r);
        if (c < 0) check(r.err, "unmapped write refused");
        else begin
          ref_mem[a] = d;
          check(!r.err, "write ok");
          check(in_slave(c, a, d), $sformatf("m%0d write %h landed in slave %0d", m, a, c));
          check(!in_slave(c ^ 1, a, d) || c == NDDR, "not in the other channel");
        end
      end else begin
        xfer(m, 0, a, 0, r);
        if (c < 0) check(r.err, "unmapped read refused");
        else check(!r.err && r.rdata == (ref_mem.exists(a) ? ref_mem[a] : 32'h0),
                   $sformatf("m%0d read %h", m, a));
      end
    end
  endtask

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    m_req = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    fork
      master(0, 200); master(1, 200); master(2, 200);
      master(3, 200); master(4, 200); master(5, 200);
    join
    check(ch0.accepted > 100 && ch1.accepted > 100, "both channels used");
    check(parallel_accepts > 0, $sformatf("channels served in parallel %0d times", parallel_accepts));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
