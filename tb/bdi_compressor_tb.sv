// bdi_compressor_tb: checks the BDI compressor against the reference model in bdi_ref_pkg.
//
// Feeds one line per cycle (all kinds: zero, repeat, each base-delta family, random),
// compares state, payload size, image size and the image itself with the reference, and
// checks that each result appears exactly two cycles after its input.
module bdi_compressor_tb;
  import shield_pkg::*;
  import bdi_ref_pkg::gen_line;
  import bdi_ref_pkg::compress;
  import bdi_ref_pkg::img_len;
  import bdi_ref_pkg::PAYLOAD;

  localparam int NLINES = 3000;

  logic       clk = 0, rst_n = 0;
  logic       in_valid = 0;
  shield_pkg::line_t line_in = '0;
  logic       out_valid;
  bdi_state_e st;
  shield_pkg::line_t image;
  logic [6:0] cw, ilen;
  int checks = 0, failures = 0;
  int seen [9];

  bdi_compressor dut (.clk, .rst_n, .in_valid_i(in_valid), .line_i(line_in),
                      .out_valid_o(out_valid), .state_o(st), .image_o(image),
                      .cw_o(cw), .img_len_o(ilen));

  always #5 clk = ~clk;

  shield_pkg::line_t q_line [$];
  int                q_cyc  [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    int rs;
    shield_pkg::line_t ri, l;
    l = q_line.pop_front();
    begin int lat; lat = cyc - q_cyc.pop_front(); check(lat == 2, $sformatf("latency %0d, not 2 cycles", lat)); end
    compress(l, rs, ri);
    seen[rs]++;
    check(int'(st) == rs, $sformatf("state %0d expected %0d", st, rs));
    check(int'(cw) == PAYLOAD[rs], "payload size");
    check(int'(ilen) == img_len(rs), "image size");
    check(image == ri, "image differs");
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NLINES; i++) begin
      shield_pkg::line_t l;
      l = gen_line(i % 9);
      in_valid <= 1;
      line_in  <= l;
      q_line.push_back(l);
      q_cyc.push_back(cyc + 1);  // cycle in which the input is presented
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (5) @(posedge clk);
    check(q_line.size() == 0, "results missing");
    for (int s = 0; s < 9; s++) check(seen[s] > 0, $sformatf("state %0d never produced", s));
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
