// bdi_bd_pack: one base-delta pattern (B<P>Delta<Q>) of the BDI compressor, combinational.
//
// The 64-byte line is cut into N = 64/P little-endian elements of P bytes. An element that
// fits in a signed Q-byte value uses the implicit zero base. The first element that does not
// becomes the non-zero base (element 0 when every element fits the zero base); every other
// element must then fit either base with a signed Q-byte delta, or the pattern fails (ok=0).
// The base element's own delta is always zero and is not stored.
//
// Image layout (this design's choice; only the sizes are published): bytes [0,P) hold the
// base, then N-1 deltas of Q bytes in element order with the base element skipped, then N
// mask bits (bit i set: element i uses the non-zero base), rounded up to whole bytes.
// Bytes past the image are zero.
module bdi_bd_pack
  import shield_pkg::*;
#(
  parameter int unsigned P = 8,
  parameter int unsigned Q = 1
) (
  input  line_t line_i,
  output logic  ok_o,
  output line_t image_o
);
  localparam int unsigned N     = LINE_BYTES / P;
  localparam int unsigned MASKB = P + (N - 1) * Q;   // byte offset of the mask

  logic [8*P-1:0] elem      [N];
  logic [8*P-1:0] diff      [N];
  logic [N-1:0]   fits_zero;
  logic [N-1:0]   fits_base;
  logic [N-1:0]   mask;
  logic [8*P-1:0] base;
  int unsigned    base_idx;

  // True when v is the sign extension of its low Q bytes.
  function automatic logic fits(logic [8*P-1:0] v);
    logic [8*P-1:0] ext;
    ext = {{(8*P-8*Q){v[8*Q-1]}}, v[8*Q-1:0]};
    return ext == v;
  endfunction

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      elem[i]      = line_i[i*8*P +: 8*P];
      fits_zero[i] = fits(elem[i]);
    end
    base_idx = 0;
    for (int i = N - 1; i >= 0; i--)
      if (!fits_zero[i]) base_idx = i;
    base = elem[base_idx];
    for (int unsigned i = 0; i < N; i++) begin
      diff[i]      = elem[i] - base;
      fits_base[i] = fits(diff[i]);
      mask[i]      = (i == base_idx) || !fits_zero[i];
    end
    ok_o = &(fits_zero | fits_base);

    image_o = '0;
    image_o[0 +: 8*P] = base;
    for (int unsigned k = 0; k < N - 1; k++) begin
      int unsigned j;
      j = (k < base_idx) ? k : k + 1;
      image_o[(P + k*Q)*8 +: 8*Q] = mask[j] ? diff[j][8*Q-1:0] : elem[j][8*Q-1:0];
    end
    image_o[MASKB*8 +: N] = mask;
  end
endmodule
