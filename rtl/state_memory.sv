// state_memory: a tile's state memory (SM), a dual-ported on-chip RAM that
// holds the thread allocation and coarse-grain lockstep data of one tile.
//
// Port A belongs to the tile: its processor core (and the supervisor,
// through the tile's debug bridge) reads and writes it over the tile-local
// bus. Port B faces the rest of the system: it can only read, so other tiles
// can fetch this tile's checksums and exposed state with low latency, but
// can never modify it. Write protection is structural: port B has no write
// data path at all.
//
// Following the architecture: dual-ported block RAM, one port read/write for
// the tile, one read-only port for the system. This design's choices: the
// size (1024 x 32 bit, one 36 Kbit block RAM), byte write strobes, an error
// response for addresses past the end of the memory, and a one-cycle read
// latency on both ports.
//
// Interface and timing:
//   port A  bus slave (obc_pkg bus). Always ready; the response comes one
//           cycle after the request is accepted. The byte offset inside the
//           state-memory page selects the word.
//   port B  b_en/b_addr (word index) in, b_rdata valid one cycle after b_en.
module state_memory
  import obc_pkg::*;
#(
  parameter int unsigned WORDS = 1024
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // port A: tile-side, read/write
  input  bus_req_t                  a_req,
  output logic                      a_ready,
  output bus_rsp_t                  a_rsp,
  // port B: system-side, read-only
  input  logic                      b_en,
  input  logic [$clog2(WORDS)-1:0]  b_addr,
  output logic [DW-1:0]             b_rdata
);
  localparam int unsigned IW = $clog2(WORDS);

  logic [DW-1:0] mem [WORDS];

  logic [IW-1:0] a_idx;
  logic          a_in_range;
  assign a_idx      = a_req.addr[IW+1:2];
  assign a_in_range = (a_req.addr[23:0] < 24'(WORDS * 4));
  assign a_ready    = 1'b1;

  // Port A write
  always_ff @(posedge clk) begin
    if (a_req.valid && a_req.we && a_in_range)
      mem[a_idx] <= apply_wstrb(mem[a_idx], a_req.wdata, a_req.wstrb);
  end

  // Port A response (read-before-write data on a write is not returned)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_rsp <= '0;
    end else begin
      a_rsp.valid <= a_req.valid;
      a_rsp.err   <= a_req.valid && !a_in_range;
      a_rsp.rdata <= (a_req.valid && !a_req.we && a_in_range) ? mem[a_idx] : '0;
    end
  end

  // Port B: read-only
  always_ff @(posedge clk) begin
    if (b_en) b_rdata <= mem[b_addr];
  end

endmodule
