// tb_ddr_mem: behavioural model of a DDR channel behind the ECC front end
// (DDR controller user port, PHY and DRAM together). Stores 39-bit
// codewords by word address in an associative array. With RANDOM=0 it
// accepts every request at once and returns read data in the next cycle;
// with RANDOM=1 acceptance and read latency (1..4 cycles) are random.
// flip() lets a testbench inject bit errors, as a particle strike would.
//
// It models no DDR timing; the word-level port and the latencies are this
// design's own simplification of a DDR controller's user interface.
module tb_ddr_mem #(
  parameter int unsigned AW_W   = 26,
  parameter bit          RANDOM = 1'b0
) (
  input  logic            clk,
  input  logic            mem_valid,
  input  logic            mem_we,
  input  logic [AW_W-1:0] mem_addr,
  input  logic [38:0]     mem_wdata,
  output logic            mem_ready,
  output logic            mem_rvalid,
  output logic [38:0]     mem_rdata
);
  logic [38:0] mem [logic [AW_W-1:0]];
  int          writes = 0, reads = 0;
  logic        rdy_rand = 1;
  logic [AW_W-1:0] rd_addr;
  int          rd_lat = -1;

  always @(posedge clk) rdy_rand <= RANDOM ? 1'($urandom) : 1'b1;
  assign mem_ready = rdy_rand && (rd_lat < 0);

  initial begin mem_rvalid = 0; mem_rdata = '0; end
  always @(posedge clk) begin
    mem_rvalid <= 0;
    if (rd_lat == 0) begin
      mem_rvalid <= 1;
      mem_rdata  <= mem.exists(rd_addr) ? mem[rd_addr] : 39'h0;
      rd_lat     <= -1;
    end else if (rd_lat > 0) rd_lat <= rd_lat - 1;
    if (mem_valid && mem_ready) begin
      if (mem_we) begin
        mem[mem_addr] = mem_wdata;
        writes++;
      end else begin
        rd_addr <= mem_addr;
        rd_lat  <= RANDOM ? $urandom_range(3) : 0;
        reads++;
      end
    end
  end

  function automatic void flip(logic [AW_W-1:0] a, logic [38:0] mask);
    mem[a] = (mem.exists(a) ? mem[a] : 39'h0) ^ mask;
  endfunction

  function automatic logic [38:0] peek(logic [AW_W-1:0] a);
    return mem.exists(a) ? mem[a] : 39'h0;
  endfunction
endmodule
