// tb_bus_slave: behavioural bus slave for testbenches. Stores words by full
// address in an associative array, accepts a request when it is idle and a
// random 'ready' bit is high, and answers 1 to MAX_LAT+1 cycles later.
// 'accepted' counts requests taken; 'bad_addr' counts requests whose upper
// address byte is not PAGE (when CHECK_PAGE is set).
//
// The bus protocol it follows is this design's own (obc_pkg); the latency
// range is an arbitrary test choice.
module tb_bus_slave
  import obc_pkg::*;
#(
  parameter int unsigned MAX_LAT    = 2,
  parameter bit          CHECK_PAGE = 1'b0,
  parameter logic [7:0]  PAGE       = 8'h00
) (
  input  logic     clk,
  input  bus_req_t req,
  output logic     ready,
  output bus_rsp_t rsp
);
  logic [31:0] mem [logic [31:0]];
  int       accepted = 0;
  int       bad_addr = 0;
  logic     busy = 0;
  int       lat = 0;
  bus_req_t held;
  logic     rdy_rand = 0;

  always @(posedge clk) rdy_rand <= 1'($urandom);
  assign ready = !busy && rdy_rand;

  initial rsp = '0;
  always @(posedge clk) begin
    rsp <= '0;
    if (!busy && req.valid && ready) begin
      busy <= 1; held <= req; lat <= $urandom_range(MAX_LAT); accepted++;
      if (CHECK_PAGE && req.addr[31:24] != PAGE) bad_addr++;
    end else if (busy) begin
      if (lat == 0) begin
        busy <= 0;
        rsp.valid <= 1;
        if (held.we) mem[held.addr] = apply_wstrb(mem.exists(held.addr) ? mem[held.addr] : 32'h0,
                                                  held.wdata, held.wstrb);
        else rsp.rdata <= mem.exists(held.addr) ? mem[held.addr] : 32'h0;
      end else lat <= lat - 1;
    end
  end
endmodule
