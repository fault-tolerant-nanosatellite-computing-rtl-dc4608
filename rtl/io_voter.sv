// io_voter: buffered majority voter for a simple peripheral interface (SPI
// or I2C) driven by several tiles running the same thread in lockstep.
//
// Coarse-grain lockstep lets the replicas of a thread drift apart by a few
// clock cycles, so their interface outputs cannot be voted cycle by cycle.
// Each tile signals that its interface is active through its chip-select
// line ('act', active high here). While a tile's act is high, its output
// lines are sampled every cycle into a FIFO of its own. When the first tile
// becomes active, the voter waits DEPTH-1 cycles and then pops one sample
// from every non-empty FIFO per cycle, so the samples of tiles that started
// up to DEPTH-1 cycles later line up with those of the first. Each line is
// then decided by a simple majority of the tiles selected in vote_mask (the
// current lockstep group); a selected tile whose FIFO is empty counts as
// showing the line's idle level, and as inactive. The voted act is the
// majority of "has data". A tile that lags by more than the buffer depth is
// outvoted. The FIFO depth therefore sets the largest skew the voter can
// absorb, at the price of the same delay on the voted output.
//
// Following the architecture: per-line majority decision; interface
// activity taken from the chip-select pins; voting delayed by a set of FIFO
// buffers whose depth sets the maximum delay compensated. This design's
// choices: the depth, two-flop input synchronisers (tiles run in their own
// clock domains), the vote_mask input, idle levels for empty FIFOs, and the
// status counters.
//
// Timing: inputs pass two synchroniser flops; the first sample is pushed the
// cycle after that; voted outputs are registered. The voted output thus
// follows the earliest tile by DEPTH + 3 cycles.
module io_voter #(
  parameter int unsigned     N_TILES = 4,
  parameter int unsigned     W       = 2,      // voted lines besides act
  parameter int unsigned     DEPTH   = 8,
  parameter logic [W-1:0]    IDLE    = '0      // level of an idle line
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic [N_TILES-1:0]        act,       // per-tile interface active
  input  logic [N_TILES-1:0][W-1:0] lines,     // per-tile output lines
  input  logic [N_TILES-1:0]        vote_mask, // tiles that take part in the vote
  output logic                      out_act,
  output logic [W-1:0]              out_lines,
  output logic [15:0]               minority_cycles, // cycles a selected tile was outvoted
  output logic [15:0]               overflows        // samples lost to a full FIFO
);
  localparam int unsigned PW = $clog2(DEPTH);
  localparam int unsigned CW = $clog2(DEPTH + 1);
  localparam int unsigned NW = $clog2(N_TILES + 1);

  // ---- synchronisers ----
  logic [N_TILES-1:0]        act_s1, act_s;
  logic [N_TILES-1:0][W-1:0] lines_s1, lines_s;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_s1 <= '0; act_s <= '0; lines_s1 <= '0; lines_s <= '0;
    end else begin
      act_s1 <= act;   act_s <= act_s1;
      lines_s1 <= lines; lines_s <= lines_s1;
    end
  end

  // ---- per-tile FIFOs ----
  logic [W-1:0]               fifo [N_TILES][DEPTH];
  logic [N_TILES-1:0][PW-1:0] wptr, rptr;
  logic [N_TILES-1:0][CW-1:0] cnt;
  logic [N_TILES-1:0]         nonempty, push, pop;
  logic [N_TILES-1:0][W-1:0]  head;

  typedef enum logic [1:0] {IDLE_S, DELAY_S, STREAM_S} state_e;
  state_e      state;
  logic [CW-1:0] dly;

  always_comb begin
    for (int t = 0; t < N_TILES; t++) begin
      nonempty[t] = (cnt[t] != '0);
      head[t]     = fifo[t][rptr[t]];
      pop[t]      = (state == STREAM_S) && nonempty[t];
      push[t]     = act_s[t] && (cnt[t] != CW'(DEPTH) || pop[t]);
    end
  end

  always_ff @(posedge clk) begin
    for (int t = 0; t < N_TILES; t++)
      if (push[t]) fifo[t][wptr[t]] <= lines_s[t];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr <= '0; rptr <= '0; cnt <= '0; overflows <= '0;
    end else begin
      for (int t = 0; t < N_TILES; t++) begin
        if (push[t]) wptr[t] <= (int'(wptr[t]) == DEPTH - 1) ? '0 : wptr[t] + 1'b1;
        if (pop[t])  rptr[t] <= (int'(rptr[t]) == DEPTH - 1) ? '0 : rptr[t] + 1'b1;
        cnt[t] <= cnt[t] + CW'(push[t]) - CW'(pop[t]);
      end
      if (|(act_s & ~push) && overflows != '1) overflows <= overflows + 16'd1;
    end
  end

  // ---- vote ----
  logic [NW-1:0] n_sel, thr, n_act;
  logic [W-1:0]  v_lines;
  logic          v_act;
  logic [N_TILES-1:0] minority;
  always_comb begin
    n_sel = '0;
    n_act = '0;
    for (int t = 0; t < N_TILES; t++) begin
      n_sel += NW'(vote_mask[t]);
      n_act += NW'(vote_mask[t] && nonempty[t]);
    end
    thr   = n_sel / 2 + 1;
    v_act = (n_sel != 0) && (n_act >= thr);
    for (int l = 0; l < W; l++) begin
      logic [NW-1:0] ones;
      ones = '0;
      for (int t = 0; t < N_TILES; t++)
        if (vote_mask[t]) ones += NW'(nonempty[t] ? head[t][l] : IDLE[l]);
      v_lines[l] = (n_sel != 0) ? (ones >= thr) : IDLE[l];
    end
    minority = '0;
    for (int t = 0; t < N_TILES; t++) begin
      logic [W-1:0] shown;
      shown       = nonempty[t] ? head[t] : IDLE;
      minority[t] = vote_mask[t] && (state == STREAM_S)
                    && ((shown != v_lines) || (nonempty[t] != v_act));
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state           <= IDLE_S;
      dly             <= '0;
      out_act         <= 1'b0;
      out_lines       <= IDLE;
      minority_cycles <= '0;
    end else begin
      unique case (state)
        IDLE_S: if (|push) begin
          dly   <= CW'(1);
          state <= DELAY_S;
        end
        DELAY_S: begin
          dly <= dly + 1'b1;
          if (dly == CW'(DEPTH - 1)) state <= STREAM_S;
        end
        STREAM_S: if (!(|nonempty) && !(|push)) state <= IDLE_S;
        default: state <= IDLE_S;
      endcase
      if (state == STREAM_S) begin
        out_act   <= v_act;
        out_lines <= v_lines;
      end else begin
        out_act   <= 1'b0;
        out_lines <= IDLE;
      end
      if (|minority && minority_cycles != '1) minority_cycles <= minority_cycles + 16'd1;
    end
  end

endmodule
