// shield_write_policy: SHIELD's action on a cache write, combinational.
//
// Takes the compressor's result and forms what goes into the block: the 4-bit encoding of
// the published encoding table, the data word and the byte enables of the STT-RAM write.
// A state with payload 0 < CW <= 32 bytes (repeat, B8D1, B4D1, B8D2) is stored twice, the
// second copy right behind the first; other states are stored once from byte 0; an all-zero
// line writes no byte at all. Placing the copies back to back from byte 0 follows the
// published block picture; the mask bytes that ride with a base-delta image are this
// design's own (see bdi_bd_pack) and are duplicated with it.
module shield_write_policy
  import shield_pkg::*;
(
  input  bdi_state_e state_i,
  input  line_t      image_i,     // image in the low img_len bytes, zeros above
  output enc_e       enc_o,
  output line_t      wdata_o,
  output byte_en_t   wbe_o,
  output logic [6:0] wr_bytes_o   // bytes written to the STT-RAM block
);
  int unsigned len;
  logic        two;

  always_comb begin
    len        = image_bytes(state_i);
    two        = (copies_of(state_i) == 2);
    enc_o      = enc_of(state_i, two);
    wdata_o    = two ? (image_i | (image_i << (len * 8))) : image_i;
    wbe_o      = low_bytes(two ? 2 * len : len);
    wr_bytes_o = 7'(two ? 2 * len : len);
  end
endmodule
