// ecc_pkg: SECDED (single error correct, double error detect) code used by
// the DDR controller's ECC and checked by the scrubber.
//
// The code is an extended Hamming code over 32 data bits: 6 Hamming check
// bits plus one overall parity bit, 39 bits per word. Codeword bit p
// (1..38) holds a check bit when p is a power of two and a data bit
// otherwise, in increasing order; check bit 2^k is the XOR of all codeword
// bits whose position has bit k set. Bit 0 is the parity of bits 1..38.
// On decoding, the syndrome (XOR of the positions of all set bits 1..38)
// points at a single flipped bit when the overall parity is wrong; a
// non-zero syndrome with correct overall parity means two bits flipped.
// Which code the memory controller uses is this design's choice; the
// architecture asks only for SECDED ECC on main memory.
package ecc_pkg;

  localparam int unsigned ECC_DW = 32;
  localparam int unsigned ECC_CW = 39;

  typedef struct packed {
    logic [ECC_DW-1:0] data;
    logic              corrected;   // one bit was wrong and has been fixed
    logic              uncorrectable;
  } ecc_dec_t;

  function automatic logic is_pow2(int unsigned p);
    return (p & (p - 1)) == 0;
  endfunction

  function automatic logic [ECC_CW-1:0] secded_encode(logic [ECC_DW-1:0] d);
    logic [ECC_CW-1:0] c;
    int unsigned j;
    c = '0;
    j = 0;
    for (int unsigned p = 1; p < ECC_CW; p++)
      if (!is_pow2(p)) begin
        c[p] = d[j];
        j++;
      end
    for (int unsigned k = 0; k < 6; k++) begin
      logic par;
      par = 1'b0;
      for (int unsigned p = 1; p < ECC_CW; p++)
        if (((p >> k) & 1) == 1) par ^= c[p];
      c[1 << k] = par;
    end
    c[0] = ^c[ECC_CW-1:1];
    return c;
  endfunction

  function automatic ecc_dec_t secded_decode(logic [ECC_CW-1:0] c_in);
    ecc_dec_t     r;
    logic [ECC_CW-1:0] c;
    logic [5:0]   syn;
    logic         ovr;
    int unsigned  j;
    c   = c_in;
    syn = '0;
    for (int unsigned p = 1; p < ECC_CW; p++)
      if (c[p]) syn ^= 6'(p);
    ovr = ^c;
    r.corrected     = 1'b0;
    r.uncorrectable = 1'b0;
    if (ovr) begin
      if (int'(syn) < ECC_CW) begin
        c[syn]      = ~c[syn];     // syn == 0: the parity bit itself
        r.corrected = 1'b1;
      end else begin
        r.uncorrectable = 1'b1;
      end
    end else if (syn != 0) begin
      r.uncorrectable = 1'b1;
    end
    j = 0;
    r.data = '0;
    for (int unsigned p = 1; p < ECC_CW; p++)
      if (!is_pow2(p)) begin
        r.data[j] = c[p];
        j++;
      end
    return r;
  endfunction

endpackage
