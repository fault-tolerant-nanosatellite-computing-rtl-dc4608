// tile_irq: a tile's interrupt controller with its checkpoint timer.
//
// Checkpoints of the coarse-grain lockstep interrupt application execution.
// They are normally time-triggered on each tile independently, and can also
// be induced by the supervisor through an interrupt (for instance to tell a
// tile that its thread assignment changed). This block provides both:
//   source 0  checkpoint timer: fires every CKPT_PERIOD cycles when the
//             period register is non-zero;
//   source 1  supervisor checkpoint request: a rising edge on sup_ckpt_req,
//             which comes from off-chip and is synchronised here;
//   source 2+ peripheral interrupts (level, latched).
// Pending bits are sticky until the core writes 1 to clear them; the core
// interrupt line is the OR of pending & enabled sources.
//
// Following the architecture: per-tile IRQ block, time-triggered checkpoints,
// supervisor-induced checkpoints. This design's choices: the register map,
// the number of peripheral sources (one each for the I2C master, SPI master
// and GPIO controller), the two-flop synchroniser.
//
// Registers (offset in the IRQ page, bus slave, always ready, response one
// cycle after the request; other offsets answer with an error):
//   0x00 PENDING   read; write 1 to clear
//   0x04 ENABLE    read/write
//   0x08 PERIOD    read/write, checkpoint timer period in cycles, 0 = off
//   0x0C COUNT     read, current timer value
// Writing PERIOD restarts the timer. The timer interrupt is set in the cycle
// after COUNT reaches PERIOD-1.
//
// Lint note: the byte strobes of a request are not used; the registers are
// written as whole words.
module tile_irq
  import obc_pkg::*;
#(
  parameter int unsigned N_EXT = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  bus_req_t          req,
  output logic              ready,
  output bus_rsp_t          rsp,
  input  logic              sup_ckpt_req,   // asynchronous, from the supervisor
  input  logic [N_EXT-1:0]  ext_irq,        // peripheral interrupt levels
  output logic              irq,            // to the core
  output logic              ckpt_tick       // one-cycle pulse per timer expiry
);
  localparam int unsigned NS = 2 + N_EXT;

  logic [NS-1:0] pending, enable;
  logic [31:0]   period, count;
  logic [2:0]    sup_sync;

  logic [3:0] reg_off;
  logic       sel_ok;
  assign reg_off = req.addr[3:0];
  assign sel_ok  = (req.addr[23:4] == '0) && (reg_off[1:0] == 2'b00);
  assign ready   = 1'b1;

  logic wr;
  assign wr = req.valid && req.we && sel_ok;

  assign ckpt_tick = (period != 0) && (count == period - 1);

  logic sup_edge;
  assign sup_edge = sup_sync[1] && !sup_sync[2];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      pending  <= '0;
      enable   <= '0;
      period   <= '0;
      count    <= '0;
      sup_sync <= '0;
      rsp      <= '0;
    end else begin
      sup_sync <= {sup_sync[1:0], sup_ckpt_req};

      // timer
      if (wr && reg_off == 4'h8) begin
        period <= req.wdata;
        count  <= '0;
      end else if (period == 0 || ckpt_tick) begin
        count  <= '0;
      end else begin
        count  <= count + 1;
      end

      if (wr && reg_off == 4'h4) enable <= req.wdata[NS-1:0];

      // pending: clear first, then set (a new event wins over a clear)
      begin
        logic [NS-1:0] p;
        p = pending;
        if (wr && reg_off == 4'h0) p = p & ~req.wdata[NS-1:0];
        if (ckpt_tick) p[IRQ_CKPT_TIMER] = 1'b1;
        if (sup_edge)  p[IRQ_CKPT_SUP]   = 1'b1;
        p[NS-1:IRQ_EXT_FIRST] = p[NS-1:IRQ_EXT_FIRST] | ext_irq;
        pending <= p;
      end

      // bus response
      rsp.valid <= req.valid;
      rsp.err   <= req.valid && !sel_ok;
      rsp.rdata <= '0;
      if (req.valid && !req.we && sel_ok) begin
        unique case (reg_off)
          4'h0: rsp.rdata <= 32'(pending);
          4'h4: rsp.rdata <= 32'(enable);
          4'h8: rsp.rdata <= period;
          4'hC: rsp.rdata <= count;
          default: rsp.rdata <= '0;
        endcase
      end
    end
  end

  assign irq = |(pending & enable);

endmodule
