// bdi_compressor: SHIELD's base-delta-immediate (BDI) compressor, two-cycle pipeline.
//
// A 64-byte line is tried against eight states at once: all-zero, one repeated 8-byte value,
// and the six base-delta patterns B8D1, B8D2, B8D4, B4D1, B4D2 and B2D1 (one bdi_bd_pack
// each). The state with the smallest payload wins; a line that fits none stays uncompressed.
// Two SHIELD changes to plain BDI are built in: an all-zero line has an empty image, and the
// zero delta of the base element is not stored, which gives the payload sizes 0, 8, 15, 19,
// 22, 33, 34, 36 and 64 bytes. Base-delta images also carry one mask bit per element after
// the deltas (see bdi_bd_pack); cw_o is the payload size, img_len_o the full image size.
//
// Timing: in_valid_i/line_i are registered in cycle 1, the pattern checks and packing run
// in cycle 2, and out_valid_o rises two clock edges after in_valid_i, matching the two-cycle
// compression latency SHIELD assumes. The pipeline accepts one line per cycle, with no stall.
module bdi_compressor
  import shield_pkg::*;
(
  input  logic       clk,
  input  logic       rst_n,
  input  logic       in_valid_i,
  input  line_t      line_i,
  output logic       out_valid_o,
  output bdi_state_e state_o,
  output line_t      image_o,
  output logic [6:0] cw_o,
  output logic [6:0] img_len_o
);
  logic  s1_valid;
  line_t s1_line;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) s1_valid <= 1'b0;
    else        s1_valid <= in_valid_i;

  always_ff @(posedge clk)
    if (in_valid_i) s1_line <= line_i;

  // Stage 2: every pattern in parallel.
  logic  ok_b8d1, ok_b8d2, ok_b8d4, ok_b4d1, ok_b4d2, ok_b2d1;
  line_t im_b8d1, im_b8d2, im_b8d4, im_b4d1, im_b4d2, im_b2d1;

  bdi_bd_pack #(.P(8), .Q(1)) u_b8d1 (.line_i(s1_line), .ok_o(ok_b8d1), .image_o(im_b8d1));
  bdi_bd_pack #(.P(8), .Q(2)) u_b8d2 (.line_i(s1_line), .ok_o(ok_b8d2), .image_o(im_b8d2));
  bdi_bd_pack #(.P(8), .Q(4)) u_b8d4 (.line_i(s1_line), .ok_o(ok_b8d4), .image_o(im_b8d4));
  bdi_bd_pack #(.P(4), .Q(1)) u_b4d1 (.line_i(s1_line), .ok_o(ok_b4d1), .image_o(im_b4d1));
  bdi_bd_pack #(.P(4), .Q(2)) u_b4d2 (.line_i(s1_line), .ok_o(ok_b4d2), .image_o(im_b4d2));
  bdi_bd_pack #(.P(2), .Q(1)) u_b2d1 (.line_i(s1_line), .ok_o(ok_b2d1), .image_o(im_b2d1));

  logic is_zero, is_repeat;
  bdi_state_e sel_state;
  line_t      sel_image;

  always_comb begin
    is_zero   = (s1_line == '0);
    is_repeat = 1'b1;
    for (int unsigned i = 1; i < 8; i++)
      if (s1_line[i*64 +: 64] != s1_line[63:0]) is_repeat = 1'b0;

    sel_state = ST_UNCOMP;
    sel_image = s1_line;
    if (is_zero) begin
      sel_state = ST_ZERO;
      sel_image = '0;
    end else if (is_repeat) begin
      sel_state = ST_REPEAT;
      sel_image = {{(LINE_BITS-64){1'b0}}, s1_line[63:0]};
    end else if (ok_b8d1) begin
      sel_state = ST_B8D1;  sel_image = im_b8d1;
    end else if (ok_b4d1) begin
      sel_state = ST_B4D1;  sel_image = im_b4d1;
    end else if (ok_b8d2) begin
      sel_state = ST_B8D2;  sel_image = im_b8d2;
    end else if (ok_b2d1) begin
      sel_state = ST_B2D1;  sel_image = im_b2d1;
    end else if (ok_b4d2) begin
      sel_state = ST_B4D2;  sel_image = im_b4d2;
    end else if (ok_b8d4) begin
      sel_state = ST_B8D4;  sel_image = im_b8d4;
    end
  end

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) out_valid_o <= 1'b0;
    else        out_valid_o <= s1_valid;

  always_ff @(posedge clk)
    if (s1_valid) begin
      state_o   <= sel_state;
      image_o   <= sel_image;
      cw_o      <= 7'(payload_bytes(sel_state));
      img_len_o <= 7'(image_bytes(sel_state));
    end
endmodule
