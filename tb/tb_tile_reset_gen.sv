// tb_tile_reset_gen: self-checking test of the per-tile reset generator.
// Checks that the tile reset asserts at once (without a clock edge) on the
// chip reset and on the supervisor's request, and that it is released
// exactly STRETCH clock edges after the request goes away.
//
// Independent tile reset follows the architecture; the stretch length and
// release timing checked are this design's own.
module tb_tile_reset_gen;
  localparam int unsigned STRETCH = 5;
  logic clk = 0, ext_rst_n = 0, sup_rst = 0, tile_rst_n;
  always #5 clk = ~clk;

  tile_reset_gen #(.STRETCH(STRETCH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  task automatic release_and_count(output int edges);
    edges = 0;
    while (!tile_rst_n && edges < 100) begin
      @(posedge clk); #1;
      edges++;
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int e;
    #12;
    check(!tile_rst_n, "in reset with chip reset");
    @(negedge clk); ext_rst_n = 1;
    release_and_count(e);
    check(e == STRETCH, $sformatf("release after chip reset: %0d edges", e));
    repeat (4) @(posedge clk);
    check(tile_rst_n, "stays out of reset");
    // supervisor request between clock edges: immediate
    #2 sup_rst = 1; #1;
    check(!tile_rst_n, "asynchronous assertion by supervisor");
    repeat (10) @(posedge clk);
    #1 check(!tile_rst_n, "held while requested");
    @(negedge clk); sup_rst = 0;
    release_and_count(e);
    check(e == STRETCH, $sformatf("release after supervisor reset: %0d edges", e));
    // a short pulse still gives a full-length reset
    @(negedge clk); sup_rst = 1; #1 sup_rst = 0;
    check(!tile_rst_n, "short pulse asserts");
    release_and_count(e);
    check(e == STRETCH, $sformatf("short pulse stretched: %0d edges", e));
    // chip reset
    #3 ext_rst_n = 0; #1;
    check(!tile_rst_n, "asynchronous chip reset");
    @(negedge clk); ext_rst_n = 1;
    release_and_count(e);
    check(e == STRETCH, "release after second chip reset");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
