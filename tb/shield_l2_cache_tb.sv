// shield_l2_cache_tb: end-to-end test of the SHIELD L2 with a small number of sets.
//
// A random stream of line reads and line writes (L1 write-backs) over more addresses than
// the cache holds, with data of every compressibility class, is checked against a golden
// copy of memory: every read must return the last value written, although the data array
// model destroys every byte it senses (worst-case read disturbance). Each mechanism must
// happen at least once: read/write hits and misses, zero-line reads with no sensing,
// two-copy reads without restore, restores, dirty write-backs, zero-line writes and
// duplicated writes. The read-hit latencies are checked: a zero read senses nothing and is
// READ_LAT+2 cycles shorter than a sensed read (sensing, capture, realignment).
module shield_l2_cache_tb;
  import shield_pkg::*;
  import bdi_ref_pkg::gen_line;

  localparam int SETS = 4, WAYS = 16, AW = 48, RL = 5, WL = 10;
  localparam int NADDR = 100, NOPS = 4000;

  logic clk = 0, rst_n = 0;
  logic init_done;
  logic req_valid = 0, req_ready, req_write = 0;
  logic [AW-1:0] req_addr = '0;
  shield_pkg::line_t req_wdata = '0, resp_rdata;
  logic resp_valid;
  logic mem_req_valid, mem_req_ready, mem_req_write, mem_resp_valid;
  logic [AW-1:0] mem_req_addr;
  shield_pkg::line_t mem_req_wdata, mem_resp_rdata;
  shield_events_t ev;
  logic [31:0] nsensed, nwritten;

  shield_l2_cache #(.SETS(SETS), .WAYS(WAYS), .ADDR_W(AW), .READ_LAT(RL),
                    .WRITE_LAT(WL)) dut (
    .clk, .rst_n, .init_done_o(init_done),
    .req_valid_i(req_valid), .req_ready_o(req_ready), .req_write_i(req_write),
    .req_addr_i(req_addr), .req_wdata_i(req_wdata), .resp_valid_o(resp_valid),
    .resp_rdata_o(resp_rdata),
    .mem_req_valid_o(mem_req_valid), .mem_req_ready_i(mem_req_ready),
    .mem_req_write_o(mem_req_write), .mem_req_addr_o(mem_req_addr),
    .mem_req_wdata_o(mem_req_wdata), .mem_resp_valid_i(mem_resp_valid),
    .mem_resp_rdata_i(mem_resp_rdata), .events_o(ev),
    .bytes_sensed_o(nsensed), .bytes_written_o(nwritten));

  main_memory_model #(.ADDR_W(AW), .LAT(20)) u_mem (
    .clk, .rst_n, .req_valid_i(mem_req_valid), .req_ready_o(mem_req_ready),
    .req_write_i(mem_req_write), .req_addr_i(mem_req_addr), .req_wdata_i(mem_req_wdata),
    .resp_valid_o(mem_resp_valid), .resp_rdata_o(mem_resp_rdata));

  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_rd_hit = 0, n_wr_hit = 0, n_rd_miss = 0, n_wr_miss = 0, n_zero_read = 0;
  int n_copy_read = 0, n_restore = 0, n_writeback = 0, n_zero_write = 0, n_dup_write = 0;
  int n_stall = 0;
  bit restoring = 0;
  int lat_zero = -1, lat_sensed = -1;
  shield_pkg::line_t golden [NADDR];
  logic [AW-1:0] addr_of [NADDR];

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask


  // One request: wait until the cache is ready, hold valid over the accepting edge; for a
  // read, wait for the response, compare it and return its latency in cycles.
  task automatic issue(bit w, int i, shield_pkg::line_t d, output int lat);
    req_valid = 1;
    req_write = w;
    req_addr  = addr_of[i];
    req_wdata = d;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    lat = 1;
    if (w) golden[i] = d;
    else begin
      while (!resp_valid) begin @(negedge clk); lat++; end
      check(resp_rdata == golden[i], $sformatf("read of line %0d returned wrong data", i));
      @(negedge clk);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    n_rd_hit     += int'(ev.rd_hit);
    n_wr_hit     += int'(ev.wr_hit);
    n_rd_miss    += int'(ev.rd_miss);
    n_wr_miss    += int'(ev.wr_miss);
    n_zero_read  += int'(ev.zero_read);
    n_copy_read  += int'(ev.copy_read);
    n_restore    += int'(ev.restore);
    n_writeback  += int'(ev.writeback);
    n_zero_write += int'(ev.zero_write);
    n_dup_write  += int'(ev.dup_write);
    // a request waiting while the array restores a block
    if (ev.restore) restoring = 1;
    else if (req_ready) restoring = 0;
    if (req_valid && !req_ready && restoring) n_stall++;
  end

  initial begin
    for (int i = 0; i < NADDR; i++) begin
      // spread lines over the sets, with tags far apart
      addr_of[i] = AW'((longint'(i) * 64 * 37 + longint'(i / SETS) * 64 * 4096 * 5));
      golden[i]  = gen_line(i % 9);
      u_mem.preload(addr_of[i], golden[i]);
    end
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (init_done);
    @(posedge clk);
    // All driving and sampling happens at the falling edge, half a cycle away from the
    // edge on which the cache samples and updates.
    @(negedge clk);
    for (int k = 0; k < NOPS; k++) begin
      int i, kind, zr, cr, lat;
      bit w;
      i = (k < NADDR) ? k : $urandom_range(NADDR - 1);
      if (k >= NADDR && $urandom_range(7) == 0) i = $urandom_range(7);   // hot lines
      w = (k >= NADDR) && ($urandom_range(2) == 0);
      kind = $urandom_range(8);
      zr = n_zero_read; cr = n_copy_read;
      issue(w, i, w ? gen_line(kind) : '0, lat);
      if (!w) begin
        // latencies of read hits (accepting edge to response)
        if (n_zero_read != zr) begin
          if (lat_zero < 0) lat_zero = lat;
          check(lat == lat_zero, "zero-read latency varies");
        end else if (n_copy_read != cr) begin
          if (lat_sensed < 0) lat_sensed = lat;
          check(lat == lat_sensed, "sensed-read latency varies");
        end
      end
      repeat ($urandom_range(2)) @(negedge clk);   // random idle gaps
    end
    // final sweep: read every line once more
    for (int i = 0; i < NADDR; i++) begin
      int lat;
      issue(0, i, '0, lat);
    end
    repeat (30) @(posedge clk);

    $display("reads: hit %0d miss %0d | writes: hit %0d miss %0d", n_rd_hit, n_rd_miss,
             n_wr_hit, n_wr_miss);
    $display("read hits: zero %0d, two-copy %0d, restored %0d (restores avoided %0d%%)",
             n_zero_read, n_copy_read, n_restore,
             (n_zero_read + n_copy_read) * 100 / (n_rd_hit > 0 ? n_rd_hit : 1));
    $display("write-backs %0d, zero writes %0d, two-copy writes %0d, stall cycles %0d",
             n_writeback, n_zero_write, n_dup_write, n_stall);
    $display("bytes sensed %0d, bytes written %0d; latency zero %0d sensed %0d",
             nsensed, nwritten, lat_zero, lat_sensed);
    check(n_rd_hit > 0, "no read hit");
    check(n_wr_hit > 0, "no write hit");
    check(n_rd_miss > 0, "no read miss");
    check(n_wr_miss > 0, "no write miss");
    check(n_zero_read > 0, "no zero read");
    check(n_copy_read > 0, "no two-copy read");
    check(n_restore > 0, "no restore");
    check(n_writeback > 0, "no write-back");
    check(n_zero_write > 0, "no zero write");
    check(n_dup_write > 0, "no duplicated write");
    check(n_stall > 0, "no request stalled behind a restore");
    check(n_zero_read + n_copy_read + n_restore == n_rd_hit, "read-hit accounting");
    // sensing (READ_LAT), capturing the sensed bytes (1) and realigning the copy (1)
    check(lat_sensed - lat_zero == RL + 2, "sensed read is not READ_LAT+2 slower");
    check(lat_zero == 5, "zero read is not 5 cycles");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
