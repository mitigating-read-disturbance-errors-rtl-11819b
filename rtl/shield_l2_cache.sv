// shield_l2_cache: STT-RAM last-level cache protected against read disturbance by SHIELD.
//
// A set-associative (default 4 MB, 16-way, 64-byte lines), write-back, LRU L2 whose data
// array is STT-RAM, where a read may flip the cells it senses. Every line is stored BDI
// compressed (bdi_compressor) with a 4-bit encoding per block kept in SRAM (enc_store):
//   * all-zero lines store no byte; reading them senses nothing and needs no restore;
//   * lines of payload 0 < CW <= 32 bytes are stored twice (shield_write_policy); the first
//     read senses one copy and only downgrades the encoding, avoiding one restore;
//   * any other read senses the single copy and restores (rewrites) the sensed bytes.
// Only the compressed bytes are ever sensed or written, which also cuts write traffic.
//
// One request at a time (req_valid_i/req_ready_o handshake; req_ready_o is high only in
// the idle state). A read request (req_write_i=0) is answered by one resp_valid_o pulse
// with the line in resp_rdata_o. A write request carries a whole line (an L1 write-back)
// and gets no response. Misses allocate (write-allocate; a write miss needs no fetch since
// the line is whole), a dirty victim is decompressed and written back first, read misses
// fetch from memory through mem_req_*/mem_resp_* and are answered with the fetched line
// before the fill is compressed and stored. A restore keeps the cache busy, so the next
// request waits for it (the port obstruction SHIELD tries to avoid).
//
// Access is sequential, tag then data. Read-hit timing with default latencies: accept,
// tag lookup, encoding read, sense (READ_LAT), decompress (1 cycle), response; then
// WRITE_LAT cycles of restore if one is needed. Writes add the 2-cycle compression.
// After reset, one set per cycle is cleared (SETS cycles) before init_done_o rises.
//
// The SHIELD rules follow the published technique; the FSM, the handshakes, the request
// interface, the reset sweep, the 48-bit address and which copy is sensed first are this
// design's choices.
//
// Lint notes: the low six address bits (byte offset inside a line) and the byte counts
// that the compressor and the policies report (cw_o, img_len_o, wr_bytes_o, rd_bytes_o)
// are left unused here on purpose, since the data array counts bytes itself. rst_n is
// the asynchronous reset of the registers and also disables the assertions at the end of
// the file, which a linter may report as a net used both ways; that is intended.
module shield_l2_cache
  import shield_pkg::*;
#(
  parameter int unsigned SETS         = 4096,
  parameter int unsigned WAYS         = 16,
  parameter int unsigned ADDR_W       = 48,
  parameter int unsigned READ_LAT     = 5,
  parameter int unsigned WRITE_LAT    = 10,
  parameter logic [7:0]  RDE_AND_MASK = 8'h00
) (
  input  logic              clk,
  input  logic              rst_n,
  output logic              init_done_o,
  // request port (from the L1 side)
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  logic              req_write_i,
  input  logic [ADDR_W-1:0] req_addr_i,
  input  line_t             req_wdata_i,
  output logic              resp_valid_o,
  output line_t             resp_rdata_o,
  // memory port
  output logic              mem_req_valid_o,
  input  logic              mem_req_ready_i,
  output logic              mem_req_write_o,
  output logic [ADDR_W-1:0] mem_req_addr_o,
  output line_t             mem_req_wdata_o,
  input  logic              mem_resp_valid_i,
  input  line_t             mem_resp_rdata_i,
  // statistics
  output shield_events_t    events_o,
  output logic [31:0]       bytes_sensed_o,
  output logic [31:0]       bytes_written_o
);
  localparam int unsigned SET_W = $clog2(SETS);
  localparam int unsigned WAY_W = $clog2(WAYS);
  localparam int unsigned OFF_W = $clog2(LINE_BYTES);
  localparam int unsigned TAG_W = ADDR_W - OFF_W - SET_W;
  localparam int unsigned IDX_W = SET_W + WAY_W;

  typedef enum logic [4:0] {
    S_INIT, S_IDLE, S_LOOKUP, S_ENC, S_RD_ISSUE, S_RD_WAIT, S_RD_DEC, S_DECOMP,
    S_RESTORE, S_EV_MEM, S_FETCH, S_FETCH_WAIT, S_COMP, S_WR_ISSUE, S_WR_WAIT
  } state_e;

  state_e                     state;
  logic [SET_W-1:0]           init_cnt;
  logic                       r_write;
  logic                       r_evict;      // current data read is for a victim write-back
  logic [SET_W-1:0]           r_set;
  logic [TAG_W-1:0]           r_tag;
  logic [TAG_W-1:0]           r_vtag;
  logic [WAY_W-1:0]           r_way;
  logic [3:0]                 r_enc;
  line_t                      r_wdata;      // line to be stored (request data or fill)
  line_t                      r_raw;        // sensed bytes, also the restore data
  line_t                      r_evline;
  enc_e                       r_wr_enc;
  line_t                      r_wr_data;
  byte_en_t                   r_wr_be;

  // ---------------------------------------------------------------- sub-blocks
  logic                       tag_rd_en, tag_wr_en;
  logic [SET_W-1:0]           tag_wr_set;
  logic [WAYS-1:0][TAG_W+1:0] tag_row, tag_wr_row;
  logic                       tag_hit, inv_found;
  logic [WAY_W-1:0]           hit_way, inv_way, lru_victim;
  logic                       lru_touch;
  logic [WAY_W-1:0]           lru_touch_way;

  l2_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TAG_W)) u_tags (
    .clk, .rd_en_i(tag_rd_en), .rd_set_i(req_addr_i[OFF_W +: SET_W]), .rd_row_o(tag_row),
    .wr_en_i(tag_wr_en), .wr_set_i(tag_wr_set), .wr_row_i(tag_wr_row),
    .lookup_tag_i(r_tag), .hit_o(tag_hit), .hit_way_o(hit_way),
    .inv_found_o(inv_found), .inv_way_o(inv_way));

  lru_policy #(.SETS(SETS), .WAYS(WAYS)) u_lru (
    .clk, .rd_en_i(tag_rd_en), .rd_set_i(req_addr_i[OFF_W +: SET_W]), .victim_o(lru_victim),
    .touch_i(lru_touch), .touch_set_i(r_set), .touch_way_i(lru_touch_way),
    .init_i(state == S_INIT), .init_set_i(init_cnt));

  logic       enc_rd_en, enc_wr_en;
  logic [3:0] enc_rd, enc_wr;

  enc_store #(.SETS(SETS), .WAYS(WAYS)) u_enc (
    .clk, .rd_en_i(enc_rd_en), .rd_idx_i(IDX_W'({r_set, lru_touch_way})), .rd_enc_o(enc_rd),
    .wr_en_i(enc_wr_en), .wr_idx_i(IDX_W'({r_set, r_way})), .wr_enc_i(enc_wr));

  logic     arr_req, arr_write, arr_ready, arr_rd_valid;
  byte_en_t arr_be;
  line_t    arr_wdata, arr_rdata;

  sttram_data_array #(.LINES(SETS * WAYS), .READ_LAT(READ_LAT), .WRITE_LAT(WRITE_LAT),
                      .RDE_AND_MASK(RDE_AND_MASK)) u_data (
    .clk, .rst_n, .req_valid_i(arr_req), .ready_o(arr_ready), .req_write_i(arr_write),
    .req_idx_i(IDX_W'({r_set, r_way})), .req_be_i(arr_be), .req_wdata_i(arr_wdata),
    .rd_valid_o(arr_rd_valid), .rd_data_o(arr_rdata),
    .bytes_sensed_o, .bytes_written_o);

  // read side
  logic       rp_access, rp_restore;
  byte_en_t   rp_be;
  logic [3:0] rp_new_enc;
  bdi_state_e rp_state;
  line_t      rp_image;
  logic [6:0] rp_bytes;

  shield_read_policy u_rpol (
    .enc_i(r_enc), .raw_i(r_raw), .access_o(rp_access), .sense_be_o(rp_be),
    .restore_o(rp_restore), .new_enc_o(rp_new_enc), .state_o(rp_state), .image_o(rp_image),
    .rd_bytes_o(rp_bytes));

  logic  dec_in_valid, dec_out_valid;
  line_t dec_line;

  bdi_decompressor u_dec (
    .clk, .rst_n, .in_valid_i(dec_in_valid), .state_i(rp_state), .image_i(rp_image),
    .out_valid_o(dec_out_valid), .line_o(dec_line));

  // write side
  logic       comp_in_valid, comp_out_valid;
  line_t      comp_line, comp_image;
  bdi_state_e comp_state;
  logic [6:0] comp_cw, comp_len;

  bdi_compressor u_comp (
    .clk, .rst_n, .in_valid_i(comp_in_valid), .line_i(comp_line),
    .out_valid_o(comp_out_valid), .state_o(comp_state), .image_o(comp_image),
    .cw_o(comp_cw), .img_len_o(comp_len));

  enc_e       wp_enc;
  line_t      wp_data;
  byte_en_t   wp_be;
  logic [6:0] wp_bytes;

  shield_write_policy u_wpol (
    .state_i(comp_state), .image_i(comp_image), .enc_o(wp_enc), .wdata_o(wp_data),
    .wbe_o(wp_be), .wr_bytes_o(wp_bytes));

  // ---------------------------------------------------------------- control
  logic miss_dirty;
  assign lru_touch_way = tag_hit ? hit_way : (inv_found ? inv_way : lru_victim);
  assign miss_dirty    = !tag_hit && tag_row[lru_touch_way][TAG_W+1] &&
                         tag_row[lru_touch_way][TAG_W];

  always_comb begin
    tag_rd_en       = (state == S_IDLE) && req_valid_i;
    tag_wr_en       = 1'b0;
    tag_wr_set      = r_set;
    tag_wr_row      = tag_row;
    lru_touch       = 1'b0;
    enc_rd_en       = 1'b0;
    enc_wr_en       = 1'b0;
    enc_wr          = r_wr_enc;
    arr_req         = 1'b0;
    arr_write       = 1'b0;
    arr_be          = rp_be;
    arr_wdata       = r_raw;
    dec_in_valid    = 1'b0;
    comp_in_valid   = 1'b0;
    comp_line       = r_wdata;
    mem_req_valid_o = 1'b0;
    mem_req_write_o = 1'b0;
    mem_req_addr_o  = {r_tag, r_set, {OFF_W{1'b0}}};
    mem_req_wdata_o = r_evline;
    events_o        = '0;

    case (state)
      S_INIT: begin
        tag_wr_en  = 1'b1;
        tag_wr_set = init_cnt;
        tag_wr_row = '0;
      end
      S_LOOKUP: begin
        lru_touch = 1'b1;
        enc_rd_en = 1'b1;
        if (tag_hit && r_write) tag_wr_row[hit_way][TAG_W] = 1'b1;
        if (!tag_hit) tag_wr_row[lru_touch_way] = {1'b1, r_write, r_tag};
        tag_wr_en       = r_write || !tag_hit;
        events_o.rd_hit  = tag_hit && !r_write;
        events_o.wr_hit  = tag_hit && r_write;
        events_o.rd_miss = !tag_hit && !r_write;
        events_o.wr_miss = !tag_hit && r_write;
        comp_in_valid   = r_write && (tag_hit || !miss_dirty);
      end
      S_RD_ISSUE: begin
        if (!rp_access) begin
          dec_in_valid       = 1'b1;
          events_o.zero_read = !r_evict;
        end else if (arr_ready) begin
          arr_req            = 1'b1;
          events_o.copy_read = !r_evict && !rp_restore;
        end
      end
      S_RD_DEC: begin
        dec_in_valid = 1'b1;
        enc_wr_en    = !r_evict && (rp_new_enc != r_enc);
        enc_wr       = rp_new_enc;
      end
      S_RESTORE: begin
        if (arr_ready) begin
          arr_req          = 1'b1;
          arr_write        = 1'b1;
          events_o.restore = 1'b1;
        end
      end
      S_EV_MEM: begin
        mem_req_valid_o    = 1'b1;
        mem_req_write_o    = 1'b1;
        mem_req_addr_o     = {r_vtag, r_set, {OFF_W{1'b0}}};
        events_o.writeback = mem_req_ready_i;
        comp_in_valid      = mem_req_ready_i && r_write;
      end
      S_FETCH: mem_req_valid_o = 1'b1;
      S_FETCH_WAIT: begin
        comp_in_valid = mem_resp_valid_i;
        comp_line     = mem_resp_rdata_i;
      end
      S_WR_ISSUE: begin
        if (r_wr_enc == ENC_ZERO || arr_ready) begin
          enc_wr_en           = 1'b1;
          arr_req             = (r_wr_enc != ENC_ZERO);
          arr_write           = 1'b1;
          arr_be              = r_wr_be;
          arr_wdata           = r_wr_data;
          events_o.zero_write = (r_wr_enc == ENC_ZERO);
          events_o.dup_write  = is_two_copy(r_wr_enc);
        end
      end
      default: ;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_INIT;
      init_cnt     <= '0;
      init_done_o  <= 1'b0;
      resp_valid_o <= 1'b0;
    end else begin
      resp_valid_o <= 1'b0;
      case (state)
        S_INIT: begin
          init_cnt <= init_cnt + 1'b1;
          if (init_cnt == SET_W'(SETS - 1)) begin
            state       <= S_IDLE;
            init_done_o <= 1'b1;
          end
        end
        S_IDLE:
          if (req_valid_i) state <= S_LOOKUP;
        S_LOOKUP: begin
          r_way  <= lru_touch_way;
          r_vtag <= tag_row[lru_touch_way][TAG_W-1:0];
          if (tag_hit)         state <= r_write ? S_COMP : S_ENC;
          else if (miss_dirty) state <= S_ENC;
          else                 state <= r_write ? S_COMP : S_FETCH;
          r_evict <= !tag_hit;
        end
        S_ENC: begin
          r_enc <= enc_rd;
          state <= S_RD_ISSUE;
        end
        S_RD_ISSUE:
          if (!rp_access)     state <= S_DECOMP;
          else if (arr_ready) state <= S_RD_WAIT;
        S_RD_WAIT:
          if (arr_rd_valid) begin
            r_raw <= arr_rdata;
            state <= S_RD_DEC;
          end
        S_RD_DEC: state <= S_DECOMP;
        S_DECOMP:
          if (dec_out_valid) begin
            if (r_evict) begin
              r_evline <= dec_line;
              state    <= S_EV_MEM;
            end else begin
              resp_valid_o <= 1'b1;
              resp_rdata_o <= dec_line;
              state        <= rp_restore ? S_RESTORE : S_IDLE;
            end
          end
        S_RESTORE:
          if (arr_ready) state <= S_WR_WAIT;
        S_EV_MEM:
          if (mem_req_ready_i) state <= r_write ? S_COMP : S_FETCH;
        S_FETCH:
          if (mem_req_ready_i) state <= S_FETCH_WAIT;
        S_FETCH_WAIT:
          if (mem_resp_valid_i) begin
            resp_valid_o <= 1'b1;
            resp_rdata_o <= mem_resp_rdata_i;
            state        <= S_COMP;
          end
        S_COMP:
          if (comp_out_valid) begin
            r_wr_enc  <= wp_enc;
            r_wr_data <= wp_data;
            r_wr_be   <= wp_be;
            state     <= S_WR_ISSUE;
          end
        S_WR_ISSUE:
          if (r_wr_enc == ENC_ZERO) state <= S_IDLE;
          else if (arr_ready)       state <= S_WR_WAIT;
        S_WR_WAIT:
          if (arr_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // request capture
  always_ff @(posedge clk)
    if (state == S_IDLE && req_valid_i) begin
      r_write <= req_write_i;
      r_set   <= req_addr_i[OFF_W +: SET_W];
      r_tag   <= req_addr_i[ADDR_W-1 -: TAG_W];
      r_wdata <= req_wdata_i;
    end

  assign req_ready_o = (state == S_IDLE);

  // ---------------------------------------------------------------- checks
  // The data array is only addressed when it is free, and a stored encoding is always one
  // of the thirteen defined values.
  a_arr_free: assert property (@(posedge clk) disable iff (!rst_n) arr_req |-> arr_ready);
  a_enc_legal: assert property (@(posedge clk) disable iff (!rst_n)
      enc_wr_en |-> !(enc_wr inside {4'b1001, 4'b1010, 4'b1011}));
  a_mem_resp: assert property (@(posedge clk) disable iff (!rst_n)
      mem_resp_valid_i |-> state == S_FETCH_WAIT);
endmodule
