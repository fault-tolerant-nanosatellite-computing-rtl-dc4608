// tile_xbar: a tile's local interconnect "X".
//
// Two masters share the tile's uncached local address space: the processor
// core (its uncached port: access to local IP bypasses the cache) and the
// debug bridge, through which the off-chip supervisor reads and modifies the
// tile's state memory, thread mapping and peripherals without the core's
// cooperation. The slaves, decoded on the upper address byte, are
//   0 the tile's own state memory, port A   (SM_PAGE)
//   1 the state-memory crossbar Xs, to read any tile's state memory (XS_PAGE)
//   2 the interrupt controller / checkpoint timer                 (IRQ_PAGE)
//   3 the peripheral interfaces                                    (IF_PAGE)
// Any other address is answered with an error.
//
// Following the architecture: the local interconnect joining core, debug
// bridge, IRQ, interfaces, memory scrub and state memory, with an outgoing
// link to Xs. This design's choices: the address map, round-robin
// arbitration between the two masters, one transaction at a time.
//
// Timing: a request is registered by the arbiter in the cycle it is seen and
// presented to its slave from the next cycle; the master sees ready when the
// slave accepts, and the slave's response is passed back unchanged. With a
// one-cycle slave (state memory, IRQ) a read takes 3 cycles from valid to
// response.
//
// Lint note: the address decoder looks only at the upper address byte, so
// the lower 24 bits of its argument are unused by design.
module tile_xbar
  import obc_pkg::*;
#(
  parameter int unsigned N_M = 2,   // masters: 0 core (uncached), 1 debug bridge
  parameter int unsigned N_S = 4    // slaves: SM, Xs, IRQ, IF
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
  localparam int unsigned MW = (N_M > 1) ? $clog2(N_M) : 1;
  localparam int unsigned SW = $clog2(N_S + 1);     // N_S encodes "no slave"

  typedef enum logic [1:0] {IDLE, REQ, WAIT, ERR} state_e;
  state_e         state;
  logic [MW-1:0]  owner;
  logic [SW-1:0]  sel;

  logic [N_M-1:0] m_valid, gnt;
  always_comb
    for (int m = 0; m < N_M; m++) m_valid[m] = m_req[m].valid;

  rr_arbiter #(.N(N_M)) u_arb (
    .clk, .rst_n,
    .req     (m_valid),
    .advance (state == IDLE),
    .grant   (gnt)
  );

  function automatic logic [SW-1:0] decode(logic [AW-1:0] a);
    unique case (a[31:24])
      SM_PAGE:  return SW'(0);
      XS_PAGE:  return SW'(1);
      IRQ_PAGE: return SW'(2);
      IF_PAGE:  return SW'(3);
      default:  return SW'(N_S);
    endcase
  endfunction

  bus_req_t cur;
  logic [SW-1:0] cur_sel;
  assign cur     = m_req[owner];
  assign cur_sel = decode(cur.addr);

  always_comb begin
    s_req   = '0;
    m_ready = '0;
    m_rsp   = '0;
    if (state == REQ) begin
      m_ready[owner] = 1'b1;                 // no slave: take it, answer err
      for (int s = 0; s < N_S; s++)
        if (int'(cur_sel) == s) begin
          s_req[s]       = cur;
          m_ready[owner] = s_ready[s];
        end
    end
    if (state == WAIT)
      for (int s = 0; s < N_S; s++)
        if (int'(sel) == s) m_rsp[owner] = s_rsp[s];
    if (state == ERR) begin
      m_rsp[owner].valid = 1'b1;
      m_rsp[owner].err   = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= IDLE;
      owner <= '0;
      sel   <= '0;
    end else begin
      unique case (state)
        IDLE: if (|gnt) begin
          for (int m = 0; m < N_M; m++) if (gnt[m]) owner <= MW'(m);
          state <= REQ;
        end
        REQ: if (m_ready[owner]) begin
          sel   <= cur_sel;
          state <= (int'(cur_sel) < N_S) ? WAIT : ERR;
        end
        WAIT: if (int'(sel) < N_S && s_rsp[sel].valid) state <= IDLE;
        ERR:  state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

endmodule
