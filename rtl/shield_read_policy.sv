// shield_read_policy: SHIELD's action on a cache read hit, combinational.
//
// From the block's 4-bit encoding it decides:
//   * 0000 (all zero): the block is not sensed at all and needs no restore;
//   * two-copy encodings (0011, 0110, 1101, 0111): one copy is sensed, no restore is issued
//     and the encoding drops to the one-copy form (0001, 0010, 1100, 0101);
//   * every other encoding: the single copy is sensed and a restore follows, the encoding
//     stays.
// The copy sensed from a two-copy block is the second one (bytes [L,2L) for image length
// L), so the copy left intact is the one at byte 0, where a one-copy block keeps its image.
// Which copy to sense is this design's choice. The second half of the module realigns the
// sensed bytes (raw_i) so the image starts at byte 0 for the decompressor.
module shield_read_policy
  import shield_pkg::*;
(
  input  logic [3:0] enc_i,
  input  line_t      raw_i,       // sensed line from the array (unsensed bytes don't care)
  output logic       access_o,    // the STT-RAM block must be sensed
  output byte_en_t   sense_be_o,  // bytes to sense
  output logic       restore_o,   // a restore write must follow the read
  output logic [3:0] new_enc_o,   // encoding after the read
  output bdi_state_e state_o,
  output line_t      image_o,     // sensed image moved to byte 0, zeros above its length
  output logic [6:0] rd_bytes_o   // bytes sensed
);
  int unsigned len;
  logic        two;

  always_comb begin
    state_o   = state_of(enc_i);
    len       = image_bytes(state_o);
    two       = is_two_copy(enc_i);
    access_o  = (enc_i != ENC_ZERO);
    restore_o = access_o && !two;
    new_enc_o = two ? enc_of(state_o, 1'b0) : enc_i;
    sense_be_o = two ? (low_bytes(2 * len) & ~low_bytes(len)) : low_bytes(len);
    if (!access_o) sense_be_o = '0;
    rd_bytes_o = access_o ? 7'(len) : 7'd0;
    image_o = two ? (raw_i >> (len * 8)) : raw_i;
    for (int unsigned b = 0; b < LINE_BYTES; b++)
      if (b >= len) image_o[b*8 +: 8] = 8'h00;
  end
endmodule
