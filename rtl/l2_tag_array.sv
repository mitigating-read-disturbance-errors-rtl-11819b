// l2_tag_array: tag, valid and dirty bits of the set-associative L2, with the tag compare.
//
// One row per set holds WAYS entries of {valid, dirty, tag}. The row is read through a
// registered port (rd_row_o valid the cycle after rd_en_i) and written whole. The compare
// works on the registered row: hit_o/hit_way_o for lookup_tag_i, and the lowest invalid
// way (inv_found_o/inv_way_o) for replacement. The L2 is write-back, so the dirty bit
// decides whether a victim goes back to memory. The array itself has no reset: the
// controller clears one set per cycle after reset.
module l2_tag_array #(
  parameter int unsigned SETS  = 4096,
  parameter int unsigned WAYS  = 16,
  parameter int unsigned TAG_W = 30,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic                       clk,
  input  logic                       rd_en_i,
  input  logic [SET_W-1:0]           rd_set_i,
  output logic [WAYS-1:0][TAG_W+1:0] rd_row_o,   // per way {valid, dirty, tag}
  input  logic                       wr_en_i,
  input  logic [SET_W-1:0]           wr_set_i,
  input  logic [WAYS-1:0][TAG_W+1:0] wr_row_i,
  input  logic [TAG_W-1:0]           lookup_tag_i,
  output logic                       hit_o,
  output logic [WAY_W-1:0]           hit_way_o,
  output logic                       inv_found_o,
  output logic [WAY_W-1:0]           inv_way_o
);
  logic [WAYS-1:0][TAG_W+1:0] mem [SETS];

  always_ff @(posedge clk) begin
    if (rd_en_i) rd_row_o <= mem[rd_set_i];
    if (wr_en_i) mem[wr_set_i] <= wr_row_i;
  end

  always_comb begin
    hit_o       = 1'b0;
    hit_way_o   = '0;
    inv_found_o = 1'b0;
    inv_way_o   = '0;
    for (int w = WAYS - 1; w >= 0; w--) begin
      if (rd_row_o[w][TAG_W+1] && rd_row_o[w][TAG_W-1:0] == lookup_tag_i) begin
        hit_o     = 1'b1;
        hit_way_o = WAY_W'(w);
      end
      if (!rd_row_o[w][TAG_W+1]) begin
        inv_found_o = 1'b1;
        inv_way_o   = WAY_W'(w);
      end
    end
  end
endmodule
