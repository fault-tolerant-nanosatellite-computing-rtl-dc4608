// tile_mmu: the memory management unit between a tile's cached core port and
// the global crossbar.
//
// Main memory is shared by all tiles, but each tile owns one segment of it.
// The MMU makes every tile see its own segment at the same address
// (OWN_BASE), so that code and data structures stay valid when a thread
// moves to another tile. It also offers all of main memory at RO_BASE, for
// reading only, which lets tiles fetch a sibling's state for
// synchronisation and exchange data without being able to corrupt it. The
// non-volatile memories (OS code, application code, payload data) are passed
// through at NV_BASE. The supervisor sets which physical segment a tile owns
// (seg_base) and can disconnect a faulty tile from the global interconnect
// (isolate), so that a failed tile cannot degrade the others by flooding
// main or program memory with requests.
//
// Following the architecture: per-tile segment mapped to the same address
// on all tiles; read-only access to all of main memory; supervisor can
// disconnect the tile from the global interconnect. This design's choices:
// window addresses and sizes, error responses for writes to the read-only
// window, for unmapped addresses and while isolated, and a counter of
// such rejected accesses.
//
// Timing: a legal request is passed straight through (same cycle) to the
// global crossbar and the crossbar's response is returned unchanged. A
// rejected request is accepted at once and answered with err one cycle
// later. One request is outstanding at a time; isolation takes effect for
// the next request, an outstanding one still completes.
module tile_mmu
  import obc_pkg::*;
#(
  parameter logic [AW-1:0] SEG_BYTES = 32'h0400_0000,   // 64 MiB
  parameter logic [AW-1:0] MEM_BYTES = 32'h2000_0000    // 512 MiB
) (
  input  logic            clk,
  input  logic            rst_n,
  // from the core (cached path)
  input  bus_req_t        s_req,
  output logic            s_ready,
  output bus_rsp_t        s_rsp,
  // to the global crossbar
  output bus_req_t        m_req,
  input  logic            m_ready,
  input  bus_rsp_t        m_rsp,
  // supervisor control
  input  logic [AW-1:0]   seg_base,     // physical base of this tile's segment
  input  logic            isolate,      // disconnect from the global interconnect
  output logic [15:0]     rejected      // rejected accesses (saturating)
);
  typedef enum logic [1:0] {IDLE, FWD, LOCAL_ERR} state_e;
  state_e state;

  logic [AW-1:0] off_own, off_ro, off_nv;
  logic          in_own, in_ro, in_nv, legal;
  logic [AW-1:0] phys;

  always_comb begin
    off_own = s_req.addr - OWN_BASE;
    off_ro  = s_req.addr - RO_BASE;
    off_nv  = s_req.addr - NV_BASE;
    in_own  = (s_req.addr >= OWN_BASE) && (off_own < SEG_BYTES);
    in_ro   = (s_req.addr >= RO_BASE)  && (off_ro  < MEM_BYTES);
    in_nv   = (s_req.addr >= NV_BASE)  && (off_nv  < NV_BYTES);
    phys    = '0;
    legal   = 1'b0;
    if (in_own) begin
      phys  = seg_base + off_own;
      legal = 1'b1;
    end else if (in_ro) begin
      phys  = PHYS_DDR_BASE + off_ro;
      legal = !s_req.we;
    end else if (in_nv) begin
      phys  = PHYS_NV_BASE + off_nv;
      legal = 1'b1;
    end
    legal = legal && !isolate;
  end

  always_comb begin
    m_req       = s_req;
    m_req.addr  = phys;
    m_req.valid = s_req.valid && legal && (state == IDLE);
    s_ready     = (state == IDLE) && s_req.valid && (legal ? m_ready : 1'b1);
    s_rsp       = '0;
    if (state == FWD)       s_rsp = m_rsp;
    if (state == LOCAL_ERR) begin
      s_rsp.valid = 1'b1;
      s_rsp.err   = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= IDLE;
      rejected <= '0;
    end else begin
      unique case (state)
        IDLE: if (s_req.valid && s_ready) begin
          if (legal) begin
            state <= FWD;
          end else begin
            state <= LOCAL_ERR;
            if (rejected != '1) rejected <= rejected + 16'd1;
          end
        end
        FWD:       if (m_rsp.valid) state <= IDLE;
        LOCAL_ERR: state <= IDLE;
        default:   state <= IDLE;
      endcase
    end
  end

  // The core may not change a request it is waiting on. The check is off
  // while the tile is in reset, which also makes the linter report rst_n
  // as used both asynchronously and synchronously; that use is only in this
  // assertion and adds no logic.
  property p_req_stable;
    @(posedge clk) disable iff (!rst_n)
      (s_req.valid && !s_ready) |=> (s_req.valid && $stable(s_req.addr) && $stable(s_req.we));
  endproperty
  a_req_stable: assert property (p_req_stable);

endmodule
