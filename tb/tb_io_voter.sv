// tb_io_voter: self-checking test of the buffered interface voter.
// Four tiles; tiles 0..2 form the lockstep group (vote_mask), tile 3 is a
// spare that drives noise and must be ignored. For each transaction a
// reference waveform (chip select plus two lines, e.g. SPI clock and data)
// is generated; each tile of the group replays it starting a random number
// of cycles after the first (0..DEPTH-1). In some transactions one tile is
// corrupted (lines flipped in random cycles) or lags by more than the
// buffer can absorb. Checks: the voted output equals the reference
// waveform, cycle for cycle, DEPTH+3 cycles after the earliest tile started
// (two synchroniser stages, DEPTH buffer cycles, one output register); the
// voted chip select is idle before and after; outvoted tiles are counted
// (minority_cycles) and no sample is lost (overflows stays 0).
//
// Per-line majority, chip-select activity and FIFO delay compensation
// follow the architecture; the expected output is recomputed in the
// testbench from the driven waveforms, with the voter's own latency.
module tb_io_voter;
  localparam int unsigned N = 4, W = 2, DEPTH = 6, LAT = DEPTH + 3;

  logic clk = 0, rst_n = 1;
  initial #1 rst_n = 0;       // a falling edge, so asynchronous resets take effect
  always #5 clk = ~clk;

  logic [N-1:0]        act;
  logic [N-1:0][W-1:0] lines;
  logic [N-1:0]        vote_mask;
  logic                out_act;
  logic [W-1:0]        out_lines;
  logic [15:0]         minority_cycles, overflows;

  io_voter #(.N_TILES(N), .W(W), .DEPTH(DEPTH), .IDLE('0)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks = checks + 1;
    if (!ok) begin failures = failures + 1; $display("FAIL: %s", what); end
  endtask

  // record the voted output at every falling edge
  int cycle = 0;
  logic [W:0] rec [int];
  always @(negedge clk) begin
    cycle++;
    rec[cycle] = {out_act, out_lines};
  end

  logic [W-1:0] wave [64];

  task automatic drive(int t, int skew, int len, bit corrupt);
    repeat (skew) @(negedge clk);
    for (int k = 0; k < len; k++) begin
      act[t]   = 1'b1;
      lines[t] = wave[k] ^ ((corrupt && $urandom_range(2) == 0) ? W'($urandom_range(1, 3)) : '0);
      @(negedge clk);
    end
    act[t] = 1'b0; lines[t] = '0;
  endtask

  task automatic noise(int len);
    for (int k = 0; k < len; k++) begin
      act[3] = 1'($urandom); lines[3] = W'($urandom);
      @(negedge clk);
    end
    act[3] = 0; lines[3] = '0;
  endtask

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_bad_tx = 0;
    act = '0; lines = '0; vote_mask = 4'b0111;
    repeat (3) @(posedge clk);
    rst_n = 1;
    for (int tx = 0; tx < 40; tx++) begin
      int len, t0, s1, s2, mode, bad;
      len = $urandom_range(8, 40);
      for (int k = 0; k < len; k++) wave[k] = W'($urandom);
      s1 = $urandom_range(DEPTH - 1);
      s2 = $urandom_range(DEPTH - 1);
      mode = (tx < 5) ? 0 : $urandom_range(2);   // 0 clean, 1 corrupt tile, 2 late tile
      bad = $urandom_range(2);
      @(negedge clk);
      t0 = cycle + 1;          // the first sample is applied after this edge
      if (mode != 0) n_bad_tx++;
      fork
        drive(0, 0, len, mode == 1 && bad == 0);
        drive(1, (mode == 2 && bad == 1) ? DEPTH + 4 : s1, len, mode == 1 && bad == 1);
        drive(2, (mode == 2 && bad == 2) ? DEPTH + 4 : s2, len, mode == 1 && bad == 2);
        noise(len + 10);
      join
      repeat (LAT + 2 * DEPTH + 12) @(negedge clk);
      // compare
      check(rec[t0 + LAT - 1][W] == 1'b0, $sformatf("tx %0d: idle before", tx));
      for (int k = 0; k < len; k++)
        check(rec[t0 + LAT + k] == {1'b1, wave[k]},
              $sformatf("tx %0d mode %0d sample %0d: %b vs %b", tx, mode, k, rec[t0 + LAT + k], {1'b1, wave[k]}));
      check(rec[t0 + LAT + len][W] == 1'b0, $sformatf("tx %0d: idle after", tx));
    end
    check(minority_cycles > 0 && n_bad_tx > 0, "outvoted tiles counted");
    check(overflows == 0, "no sample lost");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
