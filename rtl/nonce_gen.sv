// nonce_gen: 64-bit nonce source of the encryption engine.
//
// A counter-block fetch that misses both the counter cache and the SMAC
// cache is tagged with a fresh nonce; the NVDIMM encrypts the verified
// counter block under it, so a replayed old response from the bus cannot
// decrypt to a valid counter. Uniqueness is what matters, so a xorshift64
// generator (period 2^64-1, never zero) is used; a zero seed is replaced by
// a fixed constant. A true random source would slot in behind the same
// ports.
//
// Timing: nonce holds the current value; a one-cycle pulse on next loads the
// following value on the next clock edge.
module nonce_gen (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [63:0] seed,
  input  logic        next,
  output logic [63:0] nonce
);
  function automatic logic [63:0] xs64(logic [63:0] x);
    logic [63:0] y = x;
    y = y ^ (y << 13);
    y = y ^ (y >> 7);
    y = y ^ (y << 17);
    return y;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    nonce <= (seed == '0) ? 64'h9e3779b97f4a7c15 : seed;
    else if (next) nonce <= xs64(nonce);
  end
endmodule
