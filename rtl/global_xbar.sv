// global_xbar: the global crossbar ("X" in the MPSoC view, "Xa" in the tile
// view) that joins the tiles to the shared memory controllers.
//
// Masters are the MMUs of all tiles, the DDR scrubber and the supervisor's
// direct port (the supervisor can reach the main memory controllers
// directly). Slaves are N_DDR main-memory channels, each a DDR controller
// with ECC, and the controller of the non-volatile memories (FeRAM with the
// OS code, MRAM with application code, NAND flash with payload data). Main
// memory is interleaved by segment across the DDR channels: segment k lives
// on channel k mod N_DDR, so tiles that own neighbouring segments load
// different channels. Each slave serves one master at a time; slaves work in
// parallel, so two tiles on different channels do not wait for each other.
//
// Following the architecture: a crossbar between tiles and the shared main
// and non-volatile memory controllers, two DDR4 channels, segment
// interleaving, supervisor access to the memory controllers. This design's
// choices: the bus protocol (obc_pkg), round-robin arbitration per slave,
// the physical address map, error responses for unmapped addresses.
//
// Timing: in the cycle after a slave is free and a master requests it, the
// arbiter's winner is presented to the slave; ready returns to the master
// when the slave accepts, and the slave's response is passed back unchanged.
// A request to an unmapped address is accepted at once and answered with an
// error one cycle later.
module global_xbar
  import obc_pkg::*;
#(
  parameter int unsigned     N_M       = 6,              // 4 tiles + scrubber + supervisor
  parameter int unsigned     N_DDR     = 2,              // DDR channels
  parameter logic [AW-1:0]   SEG_BYTES = 32'h0400_0000,  // interleave unit
  parameter logic [AW-1:0]   MEM_BYTES = 32'h2000_0000,
  localparam int unsigned    N_S       = N_DDR + 1       // + non-volatile memory
) (
  input  logic                clk,
  input  logic                rst_n,
  input  bus_req_t [N_M-1:0]  m_req,
  output logic     [N_M-1:0]  m_ready,
  output bus_rsp_t [N_M-1:0]  m_rsp,
  output bus_req_t [N_S-1:0]  s_req,
  input  logic     [N_S-1:0]  s_ready,
  input  bus_rsp_t [N_S-1:0]  s_rsp
);
  localparam int unsigned MW  = (N_M > 1) ? $clog2(N_M) : 1;
  localparam int unsigned SGW = $clog2(SEG_BYTES);

  // ---- decode ----
  logic [N_M-1:0][N_S-1:0] dec;     // one-hot target, all zero = unmapped
  always_comb begin
    for (int m = 0; m < N_M; m++) begin
      logic [AW-1:0] a;
      a      = m_req[m].addr;
      dec[m] = '0;
      if ((a - PHYS_DDR_BASE) < MEM_BYTES)          // wraps below the base
        dec[m][((a - PHYS_DDR_BASE) >> SGW) % N_DDR] = 1'b1;
      else if ((a - PHYS_NV_BASE) < NV_BYTES)
        dec[m][N_DDR] = 1'b1;
    end
  end

  // ---- per-slave arbitration and ownership ----
  typedef enum logic [1:0] {FREE, REQ, WAIT} sstate_e;
  sstate_e [N_S-1:0]          sst;
  logic    [N_S-1:0][MW-1:0]  own;
  logic    [N_S-1:0][N_M-1:0] req_to, gnt;
  logic    [N_M-1:0]          claimed;   // master already owned by a slave

  always_comb begin
    claimed = '0;
    for (int s = 0; s < N_S; s++)
      if (sst[s] != FREE) claimed[own[s]] = 1'b1;
    for (int s = 0; s < N_S; s++)
      for (int m = 0; m < N_M; m++)
        req_to[s][m] = m_req[m].valid && dec[m][s] && !claimed[m];
  end

  for (genvar s = 0; s < N_S; s++) begin : g_slave
    rr_arbiter #(.N(N_M)) u_arb (
      .clk, .rst_n,
      .req     (req_to[s]),
      .advance (sst[s] == FREE),
      .grant   (gnt[s])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        sst[s] <= FREE;
        own[s] <= '0;
      end else begin
        unique case (sst[s])
          FREE: if (|gnt[s]) begin
            for (int m = 0; m < N_M; m++) if (gnt[s][m]) own[s] <= MW'(m);
            sst[s] <= REQ;
          end
          // a master that withdraws (e.g. its tile was reset) frees the slave
          REQ:  if (!m_req[own[s]].valid) sst[s] <= FREE;
                else if (s_ready[s])     sst[s] <= WAIT;
          WAIT: if (s_rsp[s].valid) sst[s] <= FREE;
          default: sst[s] <= FREE;
        endcase
      end
    end
  end

  // ---- unmapped addresses ----
  logic [N_M-1:0] err_pend;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) err_pend <= '0;
    else
      for (int m = 0; m < N_M; m++)
        err_pend[m] <= m_req[m].valid && (dec[m] == '0) && !err_pend[m];
  end

  // ---- routing ----
  always_comb begin
    s_req   = '0;
    m_ready = '0;
    m_rsp   = '0;
    for (int m = 0; m < N_M; m++) begin
      if (m_req[m].valid && dec[m] == '0 && !err_pend[m]) m_ready[m] = 1'b1;
      if (err_pend[m]) begin
        m_rsp[m].valid = 1'b1;
        m_rsp[m].err   = 1'b1;
      end
    end
    for (int s = 0; s < N_S; s++) begin
      if (sst[s] == REQ) begin
        s_req[s]       = m_req[own[s]];
        m_ready[own[s]] = s_ready[s];
      end
      if (sst[s] == WAIT) m_rsp[own[s]] = s_rsp[s];
    end
  end

endmodule
