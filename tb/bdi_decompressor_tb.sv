// bdi_decompressor_tb: images built by the reference model in bdi_ref_pkg are fed to the
// decompressor, which must give back the original line one cycle later.
module bdi_decompressor_tb;
  import shield_pkg::*;
  import bdi_ref_pkg::gen_line;
  import bdi_ref_pkg::compress;

  localparam int NLINES = 3000;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  bdi_state_e st_in = ST_ZERO;
  shield_pkg::line_t image_in = '0;
  logic out_valid;
  shield_pkg::line_t line_out;
  int checks = 0, failures = 0;
  int cyc = 0;

  bdi_decompressor dut (.clk, .rst_n, .in_valid_i(in_valid), .state_i(st_in),
                        .image_i(image_in), .out_valid_o(out_valid), .line_o(line_out));

  always #5 clk = ~clk;
  always @(posedge clk) cyc <= cyc + 1;

  shield_pkg::line_t q_line [$];
  int                q_cyc  [$];

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  always @(posedge clk) if (rst_n && out_valid) begin
    int lat;
    lat = cyc - q_cyc.pop_front();
    check(lat == 1, $sformatf("latency %0d, not 1 cycle", lat));
    check(line_out == q_line.pop_front(), "line differs");
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n <= 1;
    @(posedge clk);
    for (int i = 0; i < NLINES; i++) begin
      shield_pkg::line_t l, im;
      int s;
      l = gen_line(i % 9);
      compress(l, s, im);
      // bytes past the image are don't-care for the decompressor
      for (int b = bdi_ref_pkg::img_len(s); b < 64; b++) im[b*8 +: 8] = 8'($urandom);
      in_valid <= 1;
      st_in    <= bdi_state_e'(s);
      image_in <= im;
      q_line.push_back(l);
      q_cyc.push_back(cyc + 1);
      @(posedge clk);
    end
    in_valid <= 0;
    repeat (4) @(posedge clk);
    check(q_line.size() == 0, "results missing");
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
