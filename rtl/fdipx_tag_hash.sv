// fdipx_tag_hash: 16-bit compressed BTB tag.
//
// The 8 low-order bits of the full tag are kept as they are. The remaining
// FULL_W-8 bits are cut into blocks of 8 and all blocks are XORed together to
// form the 8 high-order bits of the compressed tag (folded XOR). The last
// block is zero-padded when FULL_W-8 is not a multiple of 8. The scheme and
// the 16-bit result follow the paper; the exact bit pairing (bit 8+i of the
// full tag folds into bit 8+(i mod 8)) is this design's choice.
//
// Purely combinational. With the defaults (39-bit tag, the tag of a 128-set
// BTB over 46-bit word addresses) 31 upper bits fold into 8.
module fdipx_tag_hash #(
  parameter int FULL_W = 39,
  parameter int HASH_W = 16
) (
  input  logic [FULL_W-1:0] full_tag,
  output logic [HASH_W-1:0] hashed_tag
);
  localparam int LOW_W = HASH_W / 2;

  function automatic logic [HASH_W-1:0] fold(logic [FULL_W-1:0] t);
    logic [HASH_W-1:0] h;
    h = '0;
    for (int i = 0; i < FULL_W; i++) begin
      if (i < LOW_W || FULL_W <= HASH_W) h[i % HASH_W] = t[i];
      else h[LOW_W + ((i - LOW_W) % LOW_W)] ^= t[i];
    end
    return h;
  endfunction

  assign hashed_tag = fold(full_tag);
endmodule
