// lru_policy: true least-recently-used replacement state of the L2.
//
// Each set keeps a WAY_W-bit age per way; the ages of a set are always a permutation of
// 0..WAYS-1, 0 being the most recently used. The row is read through a registered port
// (rd_en_i, result the next cycle) and victim_o is the way of age WAYS-1 in that row.
// touch_i marks touch_way_i of the row last read as most recent: it gets age 0, ways that
// were younger age by one, and the new row is written back to touch_set_i (which must be
// the set last read). init_i writes the identity permutation (way w has age w) into
// init_set_i, used by the reset sweep.
module lru_policy #(
  parameter int unsigned SETS = 4096,
  parameter int unsigned WAYS = 16,
  localparam int unsigned SET_W = $clog2(SETS),
  localparam int unsigned WAY_W = $clog2(WAYS)
) (
  input  logic             clk,
  input  logic             rd_en_i,
  input  logic [SET_W-1:0] rd_set_i,
  output logic [WAY_W-1:0] victim_o,
  input  logic             touch_i,
  input  logic [SET_W-1:0] touch_set_i,
  input  logic [WAY_W-1:0] touch_way_i,
  input  logic             init_i,
  input  logic [SET_W-1:0] init_set_i
);
  typedef logic [WAYS-1:0][WAY_W-1:0] row_t;

  row_t mem [SETS];
  row_t row;
  row_t touched;
  row_t ident;

  always_comb begin
    victim_o = '0;
    for (int w = 0; w < WAYS; w++)
      if (row[w] == WAY_W'(WAYS - 1)) victim_o = WAY_W'(w);
    for (int w = 0; w < WAYS; w++) begin
      ident[w] = WAY_W'(w);
      if (w == int'(touch_way_i))         touched[w] = '0;
      else if (row[w] < row[touch_way_i]) touched[w] = row[w] + 1'b1;
      else                                touched[w] = row[w];
    end
  end

  always_ff @(posedge clk) begin
    if (rd_en_i)      row <= mem[rd_set_i];
    else if (touch_i) row <= touched;
    if (init_i)       mem[init_set_i]  <= ident;
    else if (touch_i) mem[touch_set_i] <= touched;
  end
endmodule
