// tb_state_memory: self-checking test of the state memory.
// Writes random words (with random byte strobes) through the tile port A,
// reads them back through both port A and the read-only port B, and checks
// them against a reference copy kept here. Also checks the one-cycle
// latency of both ports and the error response past the end of the memory.
//
// Dual porting with a read-only system port follows the architecture; the
// byte strobes and one-cycle latency checked are this design's own.
module tb_state_memory;
  import obc_pkg::*;
  localparam int unsigned WORDS = 64;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  bus_req_t a_req;
  logic     a_ready;
  bus_rsp_t a_rsp;
  logic     b_en;
  logic [$clog2(WORDS)-1:0] b_addr;
  logic [31:0] b_rdata;

  state_memory #(.WORDS(WORDS)) dut (.*);

  int checks = 0, failures = 0;
  logic [31:0] ref_mem [WORDS];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic a_access(input bit we, input int idx, input logic [31:0] d,
                          input logic [3:0] strb, output bus_rsp_t r);
    a_req.valid = 1; a_req.we = we; a_req.addr = SM_BASE + 32'(idx * 4);
    a_req.wdata = d; a_req.wstrb = strb;
    @(posedge clk); #1;
    a_req.valid = 0;
    r = a_rsp;               // response one cycle after acceptance
  endtask

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_rsp_t r;
    a_req = '0; b_en = 0; b_addr = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // full writes
    for (int i = 0; i < WORDS; i++) begin
      ref_mem[i] = $urandom;
      a_access(1, i, ref_mem[i], 4'hF, r);
      check(r.valid && !r.err, "write response");
    end
    // partial writes
    for (int k = 0; k < 100; k++) begin
      automatic int i = $urandom_range(WORDS - 1);
      automatic logic [31:0] d = $urandom;
      automatic logic [3:0] s = 4'($urandom);
      ref_mem[i] = apply_wstrb(ref_mem[i], d, s);
      a_access(1, i, d, s, r);
    end
    // read back, port A
    for (int i = 0; i < WORDS; i++) begin
      a_access(0, i, '0, '0, r);
      check(r.valid && !r.err && r.rdata == ref_mem[i], $sformatf("port A read %0d", i));
    end
    // read back, port B, one-cycle latency
    for (int i = 0; i < WORDS; i++) begin
      b_en = 1; b_addr = 6'(i);
      @(posedge clk); #1;
      b_en = 0;
      check(b_rdata == ref_mem[i], $sformatf("port B read %0d", i));
    end
    // out of range
    a_access(0, WORDS, '0, '0, r);
    check(r.valid && r.err, "error past the end");
    a_access(1, WORDS + 3, 32'hdead, 4'hF, r);
    check(r.valid && r.err, "write error past the end");
    // no response without request
    @(posedge clk); #1;
    check(!a_rsp.valid, "idle: no response");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
