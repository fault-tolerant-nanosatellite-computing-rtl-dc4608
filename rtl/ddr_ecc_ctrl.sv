// ddr_ecc_ctrl: the ECC front end of one main-memory (DDR) channel.
//
// Main memory is dense commodity DRAM, so single-event upsets are expected;
// for low Earth orbit a SECDED code is sufficient. Every 32-bit word is
// stored as a 39-bit codeword (ecc_pkg). On a read the word is decoded: a
// single flipped bit is corrected, and the corrected codeword is written
// back to memory at once (scrub on read), so an error does not stay in
// memory to pair up with a second one later. A double error is reported to
// the requester as a bus error and counted. A write with a partial byte
// strobe is a read-modify-write. The counters and the address of the last
// error are status for the supervisor.
//
// Following the architecture: a DDR controller with SECDED ECC on each main
// memory channel. This design's choices: the code (ecc_pkg), scrub on read,
// the counters, and the memory-side port. The DDR protocol engine and PHY
// (vendor IP) and the DRAM itself are outside this block: its memory-side
// port is a plain word-addressed request/response port, meant to be joined
// to such a controller's user interface.
//
// Main memory is interleaved by segment across N_DDR channels (see
// global_xbar); this channel turns a physical byte address into its local
// word index by dropping the channel part of the segment number.
//
// Timing: the bus request is accepted when the controller is idle. A read
// costs one memory read, plus one memory write when a bit was corrected; a
// full-word write costs one memory write; a partial write one read and one
// write. The response is given the cycle after the last memory operation
// completes (write accepted or read data returned).
module ddr_ecc_ctrl
  import obc_pkg::*;
  import ecc_pkg::*;
#(
  parameter int unsigned   N_DDR     = 2,
  parameter logic [AW-1:0] SEG_BYTES = 32'h0400_0000,
  parameter logic [AW-1:0] MEM_BYTES = 32'h2000_0000,
  localparam int unsigned  MAW = $clog2(MEM_BYTES / N_DDR) - 2   // word address width
) (
  input  logic               clk,
  input  logic               rst_n,
  // bus slave
  input  bus_req_t           req,
  output logic               ready,
  output bus_rsp_t           rsp,
  // memory side
  output logic               mem_valid,
  output logic               mem_we,
  output logic [MAW-1:0]     mem_addr,
  output logic [ECC_CW-1:0]  mem_wdata,
  input  logic               mem_ready,
  input  logic               mem_rvalid,
  input  logic [ECC_CW-1:0]  mem_rdata,
  // status for the supervisor
  output logic [15:0]        corr_count,
  output logic [15:0]        uncorr_count,
  output logic [AW-1:0]      last_err_addr
);
  localparam int unsigned SGW = $clog2(SEG_BYTES);
  localparam int unsigned CHW = (N_DDR > 1) ? $clog2(N_DDR) : 0;

  typedef enum logic [2:0] {IDLE, RD, RWAIT, WR, RESP} state_e;
  state_e state;

  logic            op_we, rsp_err;
  logic [AW-1:0]   op_addr;
  logic [DW-1:0]   op_wdata, word;
  logic [DW/8-1:0] op_wstrb;
  ecc_dec_t        dec;

  function automatic logic [MAW-1:0] local_word(logic [AW-1:0] a);
    logic [AW-1:0] off, seg, lseg;
    off  = a - PHYS_DDR_BASE;
    seg  = off >> SGW;
    lseg = seg >> CHW;
    return MAW'((lseg << (SGW - 2)) | ((off & (SEG_BYTES - 1)) >> 2));
  endfunction

  assign ready = (state == IDLE);
  assign dec   = secded_decode(mem_rdata);

  always_comb begin
    mem_valid = (state == RD) || (state == WR);
    mem_we    = (state == WR);
    mem_addr  = local_word(op_addr);
    mem_wdata = secded_encode(word);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= IDLE;
      op_we         <= 1'b0;
      op_addr       <= '0;
      op_wdata      <= '0;
      op_wstrb      <= '0;
      word          <= '0;
      rsp_err       <= 1'b0;
      corr_count    <= '0;
      uncorr_count  <= '0;
      last_err_addr <= '0;
    end else begin
      unique case (state)
        IDLE: if (req.valid) begin
          op_we    <= req.we;
          op_addr  <= req.addr;
          op_wdata <= req.wdata;
          op_wstrb <= req.wstrb;
          word     <= req.wdata;
          rsp_err  <= 1'b0;
          state    <= (req.we && req.wstrb == '1) ? WR : RD;
        end
        RD:    if (mem_ready) state <= RWAIT;
        RWAIT: if (mem_rvalid) begin
          if (dec.uncorrectable) begin
            rsp_err       <= 1'b1;
            word          <= dec.data;
            last_err_addr <= op_addr;
            if (uncorr_count != '1) uncorr_count <= uncorr_count + 16'd1;
            state         <= RESP;
          end else begin
            word <= op_we ? apply_wstrb(dec.data, op_wdata, op_wstrb) : dec.data;
            if (dec.corrected) begin
              last_err_addr <= op_addr;
              if (corr_count != '1) corr_count <= corr_count + 16'd1;
            end
            state <= (op_we || dec.corrected) ? WR : RESP;
          end
        end
        WR:    if (mem_ready) state <= RESP;
        RESP:  state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  always_comb begin
    rsp       = '0;
    rsp.valid = (state == RESP);
    rsp.err   = (state == RESP) && rsp_err;
    rsp.rdata = (state == RESP && !op_we) ? word : '0;
  end

endmodule
