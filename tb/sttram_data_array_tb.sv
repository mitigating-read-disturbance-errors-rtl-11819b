// sttram_data_array_tb: byte-masked writes and reads of the STT-RAM model, the read and
// write latencies, the read-disturbance model (a sensed byte is left ANDed with the mask,
// an unsensed byte is untouched, the sensed value itself is correct) and the byte counters.
module sttram_data_array_tb;
  import shield_pkg::*;
  localparam int LINES = 256, RL = 5, WL = 10;
  localparam logic [7:0] MASK = 8'h5A;

  logic clk = 0, rst_n = 0;
  logic req = 0, wr = 0, ready, rd_valid;
  logic [7:0] idx = '0;
  byte_en_t be = '0;
  shield_pkg::line_t wdata = '0, rdata;
  logic [31:0] nsensed, nwritten;
  shield_pkg::line_t ref_mem [LINES];
  logic [255:0] known = '0;
  int checks = 0, failures = 0;
  int exp_s = 0, exp_w = 0;

  sttram_data_array #(.LINES(LINES), .READ_LAT(RL), .WRITE_LAT(WL), .RDE_AND_MASK(MASK)) dut (
    .clk, .rst_n, .req_valid_i(req), .ready_o(ready), .req_write_i(wr), .req_idx_i(idx),
    .req_be_i(be), .req_wdata_i(wdata), .rd_valid_o(rd_valid), .rd_data_o(rdata),
    .bytes_sensed_o(nsensed), .bytes_written_o(nwritten));

  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  task automatic access(bit w, int i, byte_en_t m, shield_pkg::line_t d);
    int n;
    while (!ready) @(posedge clk);
    req <= 1; wr <= w; idx <= 8'(i); be <= m; wdata <= d;
    @(posedge clk);
    #1 req <= 0;
    n = 0;
    if (w) begin
      for (int b = 0; b < 64; b++) if (m[b]) ref_mem[i][b*8 +: 8] = d[b*8 +: 8];
      exp_w += $countones(m);
      while (!ready) begin @(posedge clk); #1 n++; end
      check(n == WL, $sformatf("write busy %0d cycles", n));
    end else begin
      shield_pkg::line_t expd;
      for (int b = 0; b < 64; b++) expd[b*8 +: 8] = m[b] ? ref_mem[i][b*8 +: 8] : 8'h00;
      for (int b = 0; b < 64; b++) if (m[b]) ref_mem[i][b*8 +: 8] &= MASK;
      exp_s += $countones(m);
      do begin @(posedge clk); #1 n++; end while (!rd_valid);
      check(n == RL, $sformatf("read latency %0d", n));
      check(rdata == expd, "sensed data");
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n <= 1;
    for (int i = 0; i < LINES; i++) begin
      shield_pkg::line_t d;
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
      access(1, i, '1, d);
    end
    for (int k = 0; k < 600; k++) begin
      byte_en_t m;
      shield_pkg::line_t d;
      int i;
      i = $urandom_range(LINES - 1);
      m = {$urandom, $urandom};
      for (int w = 0; w < 16; w++) d[w*32 +: 32] = $urandom;
      access($urandom_range(2) == 0, i, m, d);
    end
    // full read-back: every byte, disturbed or not, must match the reference
    for (int i = 0; i < LINES; i++) begin
      @(posedge clk);
      #1 check(dut.mem[i] == ref_mem[i], $sformatf("line %0d contents", i));
    end
    check(nsensed == 32'(exp_s), "sensed byte counter");
    check(nwritten == 32'(exp_w), "written byte counter");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
