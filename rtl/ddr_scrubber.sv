// ddr_scrubber: the main-memory scrubber.
//
// Bit flips in main memory accumulate while nobody reads the affected
// words; once two hit the same word, SECDED can no longer correct it. The
// scrubber walks an address range of main memory in the background and reads
// every word, one read every INTERVAL cycles. Each read passes through the
// DDR controller's ECC, which corrects a single-bit error and writes the
// corrected word back; the scrubber itself only has to keep reading. Reads
// that come back with an error (a double-bit error) are counted. The
// scrubber is controlled only by the supervisor (enable, range, rate), not
// by the tiles, so a malfunctioning tile cannot interfere with it.
//
// Following the architecture: a main-memory scrubber on the global
// interconnect, controlled by the supervisor. This design's choices: read
// only (correction and write-back are done in the ECC controller), a fixed
// read interval, wrapping back to the start of the range, the counters.
//
// Interface and timing: bus master on the global crossbar. After enable
// rises (or the range changes while disabled), the first read is issued at
// start_addr; each following read is issued INTERVAL cycles (at least one)
// after the cycle in which the previous response arrived. When the end of the range (end_addr,
// exclusive) is reached, 'passes' is incremented and the walk restarts.
//
// Lint note: only the valid and err bits of the read response are used; the
// read data itself is of no interest to the scrubber.
module ddr_scrubber
  import obc_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // supervisor control
  input  logic            enable,
  input  logic [AW-1:0]   start_addr,
  input  logic [AW-1:0]   end_addr,
  input  logic [15:0]     interval,
  // bus master
  output bus_req_t        m_req,
  input  logic            m_ready,
  input  bus_rsp_t        m_rsp,
  // status
  output logic [AW-1:0]   cur_addr,
  output logic [31:0]     words,
  output logic [15:0]     passes,
  output logic [15:0]     err_count
);
  typedef enum logic [1:0] {OFF, WAITT, ISSUE, RESP} state_e;
  state_e      state;
  logic [15:0] timer;

  always_comb begin
    m_req       = '0;
    m_req.valid = (state == ISSUE);
    m_req.addr  = cur_addr;
    m_req.wstrb = '1;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= OFF;
      timer     <= '0;
      cur_addr  <= '0;
      words     <= '0;
      passes    <= '0;
      err_count <= '0;
    end else begin
      unique case (state)
        OFF: begin
          cur_addr <= start_addr;
          timer    <= '0;
          if (enable && end_addr > start_addr) state <= ISSUE;
        end
        WAITT: begin
          timer <= timer + 16'd1;
          if (!enable) state <= OFF;
          else if (timer + 16'd1 >= interval) state <= ISSUE;
        end
        ISSUE: if (m_ready) state <= RESP;
        RESP: if (m_rsp.valid) begin
          words <= words + 32'd1;
          if (m_rsp.err && err_count != '1) err_count <= err_count + 16'd1;
          if (cur_addr + 4 >= end_addr) begin
            cur_addr <= start_addr;
            passes   <= passes + 16'd1;
          end else begin
            cur_addr <= cur_addr + 4;
          end
          timer <= 16'd1;
          if (!enable)           state <= OFF;
          else if (interval <= 1) state <= ISSUE;
          else                   state <= WAITT;
        end
        default: state <= OFF;
      endcase
    end
  end

endmodule
