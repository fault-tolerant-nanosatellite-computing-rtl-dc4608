// tb_ddr_scrubber: self-checking test of the main-memory scrubber, driving
// a DDR ECC front end (ddr_ecc_ctrl) with a behavioural DDR model whose
// content is preloaded with valid codewords and then hit by bit errors.
// Checks: after one pass over the range every single-bit error is gone from
// memory (corrected by the ECC and written back because the scrubber read
// the word); words outside the range are untouched; double-bit errors are
// counted by the scrubber; word and pass counters; the spacing between a
// response and the next read equals the programmed interval; disabling
// stops the reads.
//
// That the scrubber reads through the ECC path under supervisor control
// follows the architecture; range, interval and the checked spacing are this
// design's own interface.
module tb_ddr_scrubber;
  import obc_pkg::*;
  import ecc_pkg::*;
  localparam int unsigned NDDR = 1;
  localparam logic [31:0] SEG = 32'h100, MEM = 32'h400;
  localparam int unsigned MAW = $clog2(MEM / NDDR) - 2;
  localparam int unsigned NW = MEM / 4;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  logic        enable;
  logic [31:0] start_addr, end_addr;
  logic [15:0] interval;
  bus_req_t    m_req;
  logic        m_ready;
  bus_rsp_t    m_rsp;
  logic [31:0] cur_addr, words;
  logic [15:0] passes, err_count;

  ddr_scrubber dut (.*);

  logic     mem_valid, mem_we, mem_ready, mem_rvalid;
  logic [MAW-1:0] mem_addr;
  logic [38:0] mem_wdata, mem_rdata;
  logic [15:0] corr_count, uncorr_count;
  logic [31:0] last_err_addr;
  ddr_ecc_ctrl #(.N_DDR(NDDR), .SEG_BYTES(SEG), .MEM_BYTES(MEM)) ecc (
    .clk, .rst_n, .req(m_req), .ready(m_ready), .rsp(m_rsp),
    .mem_valid, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rvalid, .mem_rdata,
    .corr_count, .uncorr_count, .last_err_addr);
  tb_ddr_mem #(.AW_W(MAW), .RANDOM(1)) mem (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  // spacing between a response and the next request
  int cycle = 0, last_rsp = -1, gap_bad = 0, gaps = 0;
  logic prev_valid = 0;
  always @(posedge clk) begin
    cycle++;
    if (m_req.valid && !prev_valid && last_rsp >= 0) begin
      gaps++;
      if (cycle - last_rsp != int'(interval)) gap_bad++;
    end
    prev_valid <= m_req.valid;
    if (m_rsp.valid) last_rsp = cycle;
  end

  logic [38:0] golden [NW];

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lo, hi, n_double;
    int hit [$];
    enable = 0; start_addr = 0; end_addr = 0; interval = 3;
    for (int w = 0; w < NW; w++) begin
      golden[w] = secded_encode($urandom);
      mem.mem[MAW'(w)] = golden[w];
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    lo = 16; hi = 200;                      // word range [lo, hi)
    // single-bit errors inside and outside the range, two double errors inside
    for (int k = 0; k < 30; k++) begin
      automatic int w = $urandom_range(NW - 1);
      if ((hit.size() > 0 && w inside {hit}) || w == lo + 1 || w == hi - 2) continue;
      hit.push_back(w);
      mem.flip(MAW'(w), 39'(1) << $urandom_range(38));
    end
    mem.flip(MAW'(lo + 1), 39'h3);
    mem.flip(MAW'(hi - 2), 39'h30);
    n_double = 2;
    start_addr = 32'(lo * 4); end_addr = 32'(hi * 4);
    @(negedge clk); enable = 1;
    wait (passes == 1);
    @(negedge clk);
    check(words == 32'(hi - lo), $sformatf("words read %0d", words));
    check(int'(err_count) == n_double, $sformatf("double errors counted %0d", err_count));
    for (int w = 0; w < NW; w++) begin
      automatic logic [38:0] now = mem.peek(MAW'(w));
      if (w == lo + 1 || w == hi - 2) continue;
      if (w >= lo && w < hi) check(now == golden[w], $sformatf("word %0d scrubbed", w));
      else if (w inside {hit}) check(now != golden[w], $sformatf("word %0d outside range untouched", w));
    end
    check(gaps > 100 && gap_bad == 0, $sformatf("read spacing: %0d gaps, %0d wrong", gaps, gap_bad));
    // second pass: no new corrections
    begin
      automatic int c0 = int'(corr_count);
      wait (passes == 2);
      check(int'(corr_count) == c0, "second pass finds nothing new to correct");
    end
    // disable
    @(negedge clk); enable = 0;
    repeat (20) @(negedge clk);
    begin
      automatic logic [31:0] w0 = words;
      repeat (50) @(negedge clk);
      check(words == w0 && !m_req.valid, "disabled scrubber is idle");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
