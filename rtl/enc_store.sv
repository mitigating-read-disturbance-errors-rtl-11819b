// enc_store: the per-block 4-bit encoding memory of SHIELD.
//
// One 4-bit word per cache block, indexed by {set, way}. SHIELD keeps this state in a
// memory that does not suffer read disturbance (SRAM), so reading it costs no restore.
// One registered read port (data valid the cycle after rd_en_i) and one write port; a read
// and a write to the same word in one cycle return the old value. No reset: the tag array's
// valid bits decide whether an entry is meaningful.
module enc_store #(
  parameter int unsigned SETS = 4096,
  parameter int unsigned WAYS = 16,
  localparam int unsigned IDX_W = $clog2(SETS * WAYS)
) (
  input  logic             clk,
  input  logic             rd_en_i,
  input  logic [IDX_W-1:0] rd_idx_i,
  output logic [3:0]       rd_enc_o,
  input  logic             wr_en_i,
  input  logic [IDX_W-1:0] wr_idx_i,
  input  logic [3:0]       wr_enc_i
);
  logic [3:0] mem [SETS*WAYS];

  always_ff @(posedge clk) begin
    if (rd_en_i) rd_enc_o <= mem[rd_idx_i];
    if (wr_en_i) mem[wr_idx_i] <= wr_enc_i;
  end
endmodule
