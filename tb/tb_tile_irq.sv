// tb_tile_irq: self-checking test of the interrupt controller and its
// checkpoint timer. Checks the timer period (cycles between ticks), that a
// tick sets the pending bit and raises irq only when enabled, write-1-to-
// clear, the supervisor checkpoint request (edge detected, through the
// synchroniser), peripheral interrupts, register read-back and the error
// response for an unknown offset.
//
// Timer and supervisor checkpoint interrupts follow the architecture; the
// register map and tick timing checked are this design's own.
module tb_tile_irq;
  import obc_pkg::*;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  bus_req_t   req;
  logic       ready;
  bus_rsp_t   rsp;
  logic       sup_ckpt_req;
  logic [2:0] ext_irq;
  logic       irq, ckpt_tick;

  tile_irq #(.N_EXT(3)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  task automatic xfer(bit we, logic [3:0] off, logic [31:0] d, output bus_rsp_t r);
    @(negedge clk);
    req.valid = 1; req.we = we; req.addr = IRQ_BASE + 32'(off); req.wdata = d; req.wstrb = '1;
    @(posedge clk);           // always ready
    @(negedge clk);
    req.valid = 0;
    r = rsp;
  endtask

  // count cycles between timer ticks
  int tick_times[$];
  int cycle = 0;
  always @(posedge clk) begin
    cycle++;
    if (ckpt_tick) tick_times.push_back(cycle);
  end

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bus_rsp_t r;
    req = '0; sup_ckpt_req = 0; ext_irq = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    xfer(0, 4'h0, 0, r);
    check(r.valid && !r.err && r.rdata == 0, "pending clear after reset");
    check(!irq, "no irq after reset");
    // timer, period 20, not enabled
    xfer(1, 4'h8, 20, r);
    xfer(0, 4'h8, 0, r);
    check(r.rdata == 20, "period read back");
    repeat (70) @(posedge clk);
    check(tick_times.size() >= 3, "ticks seen");
    for (int i = 1; i < tick_times.size(); i++)
      check(tick_times[i] - tick_times[i-1] == 20, $sformatf("tick interval %0d", tick_times[i] - tick_times[i-1]));
    xfer(0, 4'h0, 0, r);
    check(r.rdata[0] == 1'b1, "timer pending");
    check(!irq, "irq masked");
    xfer(1, 4'h4, 32'h1, r);
    @(negedge clk);
    check(irq, "irq enabled");
    // stop timer and clear
    xfer(1, 4'h8, 0, r);
    xfer(1, 4'h0, 32'h1, r);
    @(negedge clk);
    check(!irq, "irq cleared");
    xfer(0, 4'h0, 0, r);
    check(r.rdata == 0, "pending empty");
    // supervisor request
    xfer(1, 4'h4, 32'h3, r);
    @(negedge clk); sup_ckpt_req = 1;
    @(negedge clk);
    check(!irq, "sup request not yet through synchroniser");
    repeat (3) @(negedge clk);
    check(irq, "sup request irq");
    xfer(0, 4'h0, 0, r);
    check(r.rdata == 32'h2, "sup pending bit");
    xfer(1, 4'h0, 32'h2, r);
    repeat (3) @(negedge clk);
    check(!irq, "level held high does not re-trigger");
    sup_ckpt_req = 0;
    // peripheral interrupt 1 (pending bit 3), latched
    @(negedge clk); ext_irq = 3'b010;
    @(negedge clk); ext_irq = 0;
    xfer(0, 4'h0, 0, r);
    check(r.rdata == 32'h8, "ext irq latched");
    check(!irq, "ext irq not enabled");
    xfer(1, 4'h4, 32'h8, r);
    @(negedge clk);
    check(irq, "ext irq enabled");
    xfer(0, 4'h4, 0, r);
    check(r.rdata == 32'h8, "enable read back");
    // unknown offset
    xfer(0, 4'h6, 0, r);
    check(r.valid && r.err, "misaligned offset error");
    @(negedge clk); req.valid = 1; req.we = 0; req.addr = IRQ_BASE + 32'h100;
    @(negedge clk); req.valid = 0;
    check(rsp.valid && rsp.err, "unknown offset error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
