// shield_pkg: types, constants and helper functions shared by the SHIELD L2 cache.
//
// SHIELD stores every L2 line compressed with base-delta-immediate (BDI) compression and
// keeps a 4-bit encoding per block in a read-disturbance-free memory. The encoding names
// the BDI state and how many copies of the compressed image sit in the STT-RAM block.
// The encoding values and the payload sizes below are the ones of the published encoding
// table; the layout of an image inside the block (base, deltas, then the base mask) is this
// design's own choice and is described with bdi_compressor.
package shield_pkg;

  localparam int unsigned LINE_BYTES = 64;
  localparam int unsigned LINE_BITS  = LINE_BYTES * 8;

  typedef logic [LINE_BITS-1:0]  line_t;
  typedef logic [LINE_BYTES-1:0] byte_en_t;

  // BDI states, in the order in which the compressor prefers them (smallest payload first).
  typedef enum logic [3:0] {
    ST_ZERO   = 4'd0,
    ST_REPEAT = 4'd1,
    ST_B8D1   = 4'd2,
    ST_B4D1   = 4'd3,
    ST_B8D2   = 4'd4,
    ST_B2D1   = 4'd5,
    ST_B4D2   = 4'd6,
    ST_B8D4   = 4'd7,
    ST_UNCOMP = 4'd8
  } bdi_state_e;

  // 4-bit block encodings (state plus number of stored copies).
  typedef enum logic [3:0] {
    ENC_ZERO      = 4'b0000,
    ENC_REPEAT_1  = 4'b0001,
    ENC_REPEAT_2  = 4'b0011,
    ENC_B8D1_1    = 4'b0010,
    ENC_B8D1_2    = 4'b0110,
    ENC_B8D2_1    = 4'b0101,
    ENC_B8D2_2    = 4'b0111,
    ENC_B4D1_1    = 4'b1100,
    ENC_B4D1_2    = 4'b1101,
    ENC_B4D2_1    = 4'b0100,
    ENC_B2D1_1    = 4'b1110,
    ENC_B8D4_1    = 4'b1000,
    ENC_UNCOMP    = 4'b1111
  } enc_e;

  // Payload bytes of a state: base plus one delta per element except the base element.
  function automatic int unsigned payload_bytes(bdi_state_e s);
    case (s)
      ST_ZERO:   return 0;
      ST_REPEAT: return 8;
      ST_B8D1:   return 15;
      ST_B4D1:   return 19;
      ST_B8D2:   return 22;
      ST_B2D1:   return 33;
      ST_B4D2:   return 34;
      ST_B8D4:   return 36;
      default:   return 64;
    endcase
  endfunction

  // Base size p and delta size q of a base-delta state, in bytes.
  function automatic int unsigned base_size(bdi_state_e s);
    case (s)
      ST_B8D1, ST_B8D2, ST_B8D4: return 8;
      ST_B4D1, ST_B4D2:          return 4;
      ST_B2D1:                   return 2;
      default:                   return 0;
    endcase
  endfunction

  function automatic int unsigned delta_size(bdi_state_e s);
    case (s)
      ST_B8D1, ST_B4D1, ST_B2D1: return 1;
      ST_B8D2, ST_B4D2:          return 2;
      ST_B8D4:                   return 4;
      default:                   return 0;
    endcase
  endfunction

  // Bytes of one stored image: the payload, plus one mask bit per element for the
  // base-delta states (which base each element uses), rounded up to whole bytes.
  function automatic int unsigned image_bytes(bdi_state_e s);
    if (base_size(s) != 0) return payload_bytes(s) + (LINE_BYTES / base_size(s)) / 8;
    return payload_bytes(s);
  endfunction

  // Number of copies SHIELD keeps for a state: two for 0 < CW <= 32 bytes.
  function automatic int unsigned copies_of(bdi_state_e s);
    return (payload_bytes(s) > 0 && payload_bytes(s) <= 32) ? 2 : 1;
  endfunction

  function automatic enc_e enc_of(bdi_state_e s, logic two_copies);
    case (s)
      ST_ZERO:   return ENC_ZERO;
      ST_REPEAT: return two_copies ? ENC_REPEAT_2 : ENC_REPEAT_1;
      ST_B8D1:   return two_copies ? ENC_B8D1_2 : ENC_B8D1_1;
      ST_B8D2:   return two_copies ? ENC_B8D2_2 : ENC_B8D2_1;
      ST_B4D1:   return two_copies ? ENC_B4D1_2 : ENC_B4D1_1;
      ST_B4D2:   return ENC_B4D2_1;
      ST_B2D1:   return ENC_B2D1_1;
      ST_B8D4:   return ENC_B8D4_1;
      default:   return ENC_UNCOMP;
    endcase
  endfunction

  // State named by an encoding; the three unused encodings decode as uncompressed.
  function automatic bdi_state_e state_of(logic [3:0] e);
    case (e)
      4'b0000:          return ST_ZERO;
      4'b0001, 4'b0011: return ST_REPEAT;
      4'b0010, 4'b0110: return ST_B8D1;
      4'b0101, 4'b0111: return ST_B8D2;
      4'b1100, 4'b1101: return ST_B4D1;
      4'b0100:          return ST_B4D2;
      4'b1110:          return ST_B2D1;
      4'b1000:          return ST_B8D4;
      default:          return ST_UNCOMP;
    endcase
  endfunction

  function automatic logic is_two_copy(logic [3:0] e);
    return e == ENC_REPEAT_2 || e == ENC_B8D1_2 || e == ENC_B4D1_2 || e == ENC_B8D2_2;
  endfunction

  // One-cycle event pulses of the L2 controller, for counting in a testbench or by
  // performance counters.
  typedef struct packed {
    logic rd_hit;      // read request hit
    logic wr_hit;      // write request hit
    logic rd_miss;     // read request missed
    logic wr_miss;     // write request missed
    logic zero_read;   // read hit on an all-zero block: nothing sensed, no restore
    logic copy_read;   // read hit on a two-copy block: one copy consumed, no restore
    logic restore;     // restore write issued after a read
    logic writeback;   // dirty victim sent to memory
    logic zero_write;  // all-zero line stored: no byte written
    logic dup_write;   // line stored with two copies
  } shield_events_t;

  // Byte-enable mask with the low n bytes set.
  function automatic byte_en_t low_bytes(int unsigned n);
    byte_en_t m;
    for (int unsigned i = 0; i < LINE_BYTES; i++) m[i] = (i < n);
    return m;
  endfunction

endpackage
