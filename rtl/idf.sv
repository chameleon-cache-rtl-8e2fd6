// idf: index derivation function of the randomized skewed cache.
//
// For every division i the line address is encrypted under that division's
// key K_i (idf_cipher) and the low log2(SETS) bits of the ciphertext are the
// set index idx_i used in division i. This follows the source design's IDF
// algorithm; which ciphertext bits are sliced out is not given there, the
// low bits are this design's choice.
//
// Interface: addr and keys[DIVS] in, idx[DIVS] out. Combinational.
module idf
  import cc_pkg::*;
#(
  parameter int unsigned DIVS   = 4,
  parameter int unsigned SETS   = 16384,
  parameter int unsigned ROUNDS = 4,
  localparam int unsigned IDX_W = (SETS > 1) ? $clog2(SETS) : 1
) (
  input  line_addr_t             addr,
  input  key_t       [DIVS-1:0]  keys,
  output logic [DIVS-1:0][IDX_W-1:0] idx
);

  for (genvar i = 0; i < DIVS; i++) begin : g_div
    line_addr_t enc;
    idf_cipher #(.ROUNDS(ROUNDS)) u_cipher (.addr(addr), .key(keys[i]), .enc(enc));
    assign idx[i] = enc[IDX_W-1:0];
  end

endmodule
