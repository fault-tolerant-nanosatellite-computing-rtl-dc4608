// xs_ro_xbar: the read-only state-memory crossbar "Xs" of the MPSoC.
//
// Every tile's local interconnect is a master here, and every tile's state
// memory (its read-only port B) is a slave. A tile can thus read the
// checksums, thread mapping and exposed state of every other tile without
// going through main memory and without any cache coherence. The crossbar
// cannot write: a write request is answered with an error and never reaches
// a state memory, which is what makes the state memories write-protected
// against faulty neighbours.
//
// Following the architecture: one read-only crossbar joining all tiles to
// all state memories. This design's choices: the address layout (tile t's
// memory at XS_BASE + t*XS_STRIDE), round-robin arbitration per state
// memory, error responses for writes, for a tile index past N_TILES and for
// an offset past the memory size.
//
// Timing: a request is accepted (ready) in the cycle it wins arbitration for
// its target memory, at the earliest the cycle it is raised; the response
// follows one cycle later. Requests to different memories proceed in
// parallel.
module xs_ro_xbar
  import obc_pkg::*;
#(
  parameter int unsigned N_TILES  = 4,
  parameter int unsigned SM_WORDS = 1024
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // masters: one per tile
  input  bus_req_t [N_TILES-1:0]             m_req,
  output logic     [N_TILES-1:0]             m_ready,
  output bus_rsp_t [N_TILES-1:0]             m_rsp,
  // slaves: read port B of each tile's state memory
  output logic     [N_TILES-1:0]             sm_en,
  output logic     [N_TILES-1:0][$clog2(SM_WORDS)-1:0] sm_addr,
  input  logic     [N_TILES-1:0][DW-1:0]     sm_rdata,
  // count of write attempts that were blocked (for the supervisor)
  output logic     [15:0]                    blocked_writes
);
  localparam int unsigned IW = $clog2(SM_WORDS);
  localparam int unsigned TW = (N_TILES > 1) ? $clog2(N_TILES) : 1;

  // Decode of each master's request
  logic [N_TILES-1:0]         dec_ok;      // legal read
  logic [N_TILES-1:0][7:0]    dec_tile;
  logic [N_TILES-1:0][IW-1:0] dec_idx;
  always_comb begin
    for (int m = 0; m < N_TILES; m++) begin
      dec_tile[m] = m_req[m].addr[23:16];
      dec_idx[m]  = m_req[m].addr[IW+1:2];
      dec_ok[m]   = !m_req[m].we
                    && (m_req[m].addr[31:24] == XS_PAGE)
                    && (int'(dec_tile[m]) < N_TILES)
                    && (m_req[m].addr[15:0] < 16'(SM_WORDS * 4));
    end
  end

  // Per-slave arbitration
  logic [N_TILES-1:0][N_TILES-1:0] req_to;  // [slave][master]
  logic [N_TILES-1:0][N_TILES-1:0] gnt;     // [slave][master]
  always_comb begin
    for (int s = 0; s < N_TILES; s++)
      for (int m = 0; m < N_TILES; m++)
        req_to[s][m] = m_req[m].valid && dec_ok[m] && (int'(dec_tile[m]) == s);
  end

  for (genvar s = 0; s < N_TILES; s++) begin : g_arb
    rr_arbiter #(.N(N_TILES)) u_arb (
      .clk, .rst_n,
      .req     (req_to[s]),
      .advance (|req_to[s]),
      .grant   (gnt[s])
    );
  end

  always_comb begin
    for (int s = 0; s < N_TILES; s++) begin
      sm_en[s]   = |gnt[s];
      sm_addr[s] = '0;
      for (int m = 0; m < N_TILES; m++)
        if (gnt[s][m]) sm_addr[s] = dec_idx[m];
    end
    for (int m = 0; m < N_TILES; m++) begin
      m_ready[m] = m_req[m].valid && !dec_ok[m];   // errors accepted at once
      for (int s = 0; s < N_TILES; s++)
        if (gnt[s][m]) m_ready[m] = 1'b1;
    end
  end

  logic [N_TILES-1:0] wr_attempt;
  always_comb
    for (int m = 0; m < N_TILES; m++) wr_attempt[m] = m_req[m].valid && m_req[m].we;

  // Response stage
  logic [N_TILES-1:0]         pend, pend_err;
  logic [N_TILES-1:0][TW-1:0] pend_src;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pend           <= '0;
      pend_err       <= '0;
      pend_src       <= '0;
      blocked_writes <= '0;
    end else begin
      for (int m = 0; m < N_TILES; m++) begin
        pend[m]     <= m_req[m].valid && m_ready[m];
        pend_err[m] <= !dec_ok[m];
        pend_src[m] <= dec_tile[m][TW-1:0];
      end
      if (blocked_writes <= 16'hFFFF - 16'(N_TILES))
        blocked_writes <= blocked_writes + 16'($countones(wr_attempt));
    end
  end

  always_comb begin
    for (int m = 0; m < N_TILES; m++) begin
      m_rsp[m].valid = pend[m];
      m_rsp[m].err   = pend[m] && pend_err[m];
      m_rsp[m].rdata = (pend[m] && !pend_err[m]) ? sm_rdata[pend_src[m]] : '0;
    end
  end

endmodule
