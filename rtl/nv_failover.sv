// nv_failover: fail-over switch between redundant non-volatile memory paths.
//
// The non-volatile memories (FeRAM with the OS code, MRAM with application
// code, NAND flash with payload data) and their QSPI controllers are built
// N_NV times, so that a controller hit by a functional interrupt or a
// permanent fault can be replaced by its twin. This block sits between the
// global crossbar's non-volatile slave port and the N_NV controller ports.
// The supervisor chooses the active path with 'sel'; every new request goes
// to that path. A request already taken is completed on the path that took
// it, so 'sel' may change at any time. Error responses are counted per path
// (err_count) so the supervisor can see a failing controller and switch.
//
// Following the architecture: redundant non-volatile memories, controllers
// and interconnect to allow fail-over. This design's choices: the switch
// is commanded by the supervisor rather than automatic, one transaction at
// a time, and the error counters.
//
// Timing: combinational request and ready path to the selected port; the
// response is passed straight back from the path that took the request.
module nv_failover
  import obc_pkg::*;
#(
  parameter int unsigned N_NV = 2,
  localparam int unsigned SW  = (N_NV > 1) ? $clog2(N_NV) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  bus_req_t                   s_req,
  output logic                       s_ready,
  output bus_rsp_t                   s_rsp,
  input  logic [SW-1:0]              sel,       // active path (supervisor)
  output bus_req_t [N_NV-1:0]        m_req,
  input  logic     [N_NV-1:0]        m_ready,
  input  bus_rsp_t [N_NV-1:0]        m_rsp,
  output logic     [N_NV-1:0][15:0]  err_count  // error responses per path
);
  logic          busy;
  logic [SW-1:0] tgt;

  always_comb begin
    m_req   = '0;
    s_ready = 1'b0;
    s_rsp   = '0;
    for (int p = 0; p < N_NV; p++) begin
      if (!busy && int'(sel) == p) begin
        m_req[p] = s_req;
        s_ready  = m_ready[p];
      end
      if (busy && int'(tgt) == p) s_rsp = m_rsp[p];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy      <= 1'b0;
      tgt       <= '0;
      err_count <= '0;
    end else begin
      if (!busy && s_req.valid && s_ready) begin
        busy <= 1'b1;
        tgt  <= sel;
      end else if (busy && s_rsp.valid) begin
        busy <= 1'b0;
        for (int p = 0; p < N_NV; p++)
          if (int'(tgt) == p && s_rsp.err && err_count[p] != '1) err_count[p] <= err_count[p] + 16'd1;
      end
    end
  end

  // A selection outside the built paths would stall the bus.
  a_sel_valid: assert property (@(posedge clk) int'(sel) < N_NV);

endmodule
