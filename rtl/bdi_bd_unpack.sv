// bdi_bd_unpack: inverse of bdi_bd_pack for one base-delta pattern, combinational.
//
// Reads the base from bytes [0,P), the mask after the N-1 deltas, finds the base element as
// the lowest set mask bit and rebuilds every element: the base element is the base itself,
// an element with its mask bit set is base + sign-extended delta, any other element is the
// sign-extended delta alone (zero base).
module bdi_bd_unpack
  import shield_pkg::*;
#(
  parameter int unsigned P = 8,
  parameter int unsigned Q = 1
) (
  input  line_t image_i,
  output line_t line_o
);
  localparam int unsigned N     = LINE_BYTES / P;
  localparam int unsigned MASKB = P + (N - 1) * Q;

  logic [8*P-1:0] base;
  logic [N-1:0]   mask;
  int unsigned    base_idx;

  always_comb begin
    base = image_i[0 +: 8*P];
    mask = image_i[MASKB*8 +: N];
    base_idx = 0;
    for (int i = N - 1; i >= 0; i--)
      if (mask[i]) base_idx = i;
    line_o = '0;
    for (int unsigned i = 0; i < N; i++) begin
      int unsigned    k;
      logic [8*Q-1:0] d;
      logic [8*P-1:0] dx;
      k  = (i < base_idx) ? i : i - 1;
      d  = image_i[(P + k*Q)*8 +: 8*Q];
      dx = {{(8*P-8*Q){d[8*Q-1]}}, d};
      if (i == base_idx)  line_o[i*8*P +: 8*P] = base;
      else if (mask[i])   line_o[i*8*P +: 8*P] = base + dx;
      else                line_o[i*8*P +: 8*P] = dx;
    end
  end
endmodule
