// bdi_decompressor: rebuilds a 64-byte line from a BDI image, one-cycle latency.
//
// All unpackers (one per base-delta pattern, see bdi_bd_unpack) run in parallel on the image
// and the BDI state picks the result: all-zero gives zeros without looking at the image,
// repeat copies bytes [0,8) eight times, uncompressed passes the image through. The result
// is registered: out_valid_o follows in_valid_i by one clock edge, the one-cycle
// decompression latency SHIELD assumes.
module bdi_decompressor
  import shield_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid_i,
  input  bdi_state_e state_i,
  input  line_t      image_i,
  output logic       out_valid_o,
  output line_t      line_o
);
  line_t ln_b8d1, ln_b8d2, ln_b8d4, ln_b4d1, ln_b4d2, ln_b2d1;
  line_t ln;

  bdi_bd_unpack #(.P(8), .Q(1)) u_b8d1 (.image_i(image_i), .line_o(ln_b8d1));
  bdi_bd_unpack #(.P(8), .Q(2)) u_b8d2 (.image_i(image_i), .line_o(ln_b8d2));
  bdi_bd_unpack #(.P(8), .Q(4)) u_b8d4 (.image_i(image_i), .line_o(ln_b8d4));
  bdi_bd_unpack #(.P(4), .Q(1)) u_b4d1 (.image_i(image_i), .line_o(ln_b4d1));
  bdi_bd_unpack #(.P(4), .Q(2)) u_b4d2 (.image_i(image_i), .line_o(ln_b4d2));
  bdi_bd_unpack #(.P(2), .Q(1)) u_b2d1 (.image_i(image_i), .line_o(ln_b2d1));

  always_comb begin
    case (state_i)
      ST_ZERO:   ln = '0;
      ST_REPEAT: ln = {8{image_i[63:0]}};
      ST_B8D1:   ln = ln_b8d1;
      ST_B8D2:   ln = ln_b8d2;
      ST_B8D4:   ln = ln_b8d4;
      ST_B4D1:   ln = ln_b4d1;
      ST_B4D2:   ln = ln_b4d2;
      ST_B2D1:   ln = ln_b2d1;
      default:   ln = image_i;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid_o <= 1'b0;
    else        out_valid_o <= in_valid_i;

  always_ff @(posedge clk)
    if (in_valid_i) line_o <= ln;
endmodule
