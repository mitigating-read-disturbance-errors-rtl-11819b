// shield_l2_cache_full_tb: the L2 at its default size (4 MB, 4096 sets x 16 ways) taken
// through the reset sweep and a short sequence covering each kind of operation once:
// a read miss, a read hit with restore, a two-copy write and its two reads (the first
// consumes a copy, the second restores), an all-zero write and its read (nothing sensed),
// and a write of an incompressible line followed by its read. Every read is checked
// against the data written, with worst-case read disturbance in the array.
module shield_l2_cache_full_tb;
  import shield_pkg::*;
  import bdi_ref_pkg::gen_line;

  localparam int AW = 48;

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
  int checks = 0, failures = 0;
  int n_zero_read = 0, n_copy_read = 0, n_restore = 0;

  shield_l2_cache dut (
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

  always @(posedge clk) if (rst_n) begin
    n_zero_read += int'(ev.zero_read);
    n_copy_read += int'(ev.copy_read);
    n_restore   += int'(ev.restore);
  end

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      $display("FAIL: %s", msg);
    end
  endtask

  task automatic write_line(logic [AW-1:0] a, shield_pkg::line_t d);
    req_valid = 1; req_write = 1; req_addr = a; req_wdata = d;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
  endtask

  task automatic read_line(logic [AW-1:0] a, shield_pkg::line_t expd, string what);
    req_valid = 1; req_write = 0; req_addr = a;
    while (!req_ready) @(negedge clk);
    @(negedge clk);
    req_valid = 0;
    while (!resp_valid) @(negedge clk);
    check(resp_rdata == expd, what);
    @(negedge clk);
  endtask

  initial begin
    shield_pkg::line_t a, b, z, u;
    a = gen_line(7);                      // B8D4 class: one copy
    b = gen_line(2);                      // B8D1 class: two copies
    z = '0;
    u = gen_line(8);                      // incompressible
    u_mem.preload(48'h0000_1234_0000, a);
    repeat (3) @(posedge clk);
    rst_n <= 1;
    wait (init_done);
    @(negedge clk);
    read_line(48'h0000_1234_0000, a, "read miss");
    read_line(48'h0000_1234_0000, a, "read hit with restore");
    read_line(48'h0000_1234_0000, a, "read hit after restore");
    write_line(48'h0000_5678_0040, b);
    read_line(48'h0000_5678_0040, b, "first read of a two-copy line");
    read_line(48'h0000_5678_0040, b, "second read of a two-copy line");
    read_line(48'h0000_5678_0040, b, "third read of a two-copy line");
    write_line(48'h0000_9abc_0080, z);
    read_line(48'h0000_9abc_0080, z, "read of an all-zero line");
    write_line(48'h0000_def0_00c0, u);
    read_line(48'h0000_def0_00c0, u, "read of an incompressible line");
    read_line(48'h0000_def0_00c0, u, "second read of an incompressible line");
    check(n_copy_read == 1, "one two-copy read expected");
    check(n_zero_read == 1, "one zero read expected");
    check(n_restore == 6, $sformatf("six restores expected, saw %0d", n_restore));
    $display("bytes sensed %0d, bytes written %0d", nsensed, nwritten);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
