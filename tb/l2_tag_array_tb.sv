// l2_tag_array_tb: rows of random {valid, dirty, tag} entries are written and read back;
// the hit, hit way and lowest invalid way are checked against values computed here.
module l2_tag_array_tb;
  localparam int SETS = 32, WAYS = 16, TW = 12;

  logic clk = 0;
  logic rd_en = 0, wr_en = 0;
  logic [4:0] rd_set = '0, wr_set = '0;
  logic [WAYS-1:0][TW+1:0] rd_row, wr_row = '0;
  logic [TW-1:0] ltag = '0;
  logic hit, inv_found;
  logic [3:0] hit_way, inv_way;
  logic [WAYS-1:0][TW+1:0] ref_mem [SETS];
  int checks = 0, failures = 0;
  int nhit = 0;

  l2_tag_array #(.SETS(SETS), .WAYS(WAYS), .TAG_W(TW)) dut (.clk, .rd_en_i(rd_en),
    .rd_set_i(rd_set), .rd_row_o(rd_row), .wr_en_i(wr_en), .wr_set_i(wr_set),
    .wr_row_i(wr_row), .lookup_tag_i(ltag), .hit_o(hit), .hit_way_o(hit_way),
    .inv_found_o(inv_found), .inv_way_o(inv_way));

  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    for (int s = 0; s < SETS; s++) begin
      logic [WAYS-1:0][TW+1:0] r;
      for (int w = 0; w < WAYS; w++)
        r[w] = {1'($urandom_range(3) != 0), 1'($urandom), TW'(s * WAYS + w)};
      wr_en <= 1; wr_set <= 5'(s); wr_row <= r;
      @(posedge clk);
      ref_mem[s] = r;
    end
    wr_en <= 0;
    for (int k = 0; k < 2000; k++) begin
      int s, ew, iw;
      logic [TW-1:0] t;
      bit eh, ei;
      s = $urandom_range(SETS - 1);
      t = ($urandom_range(1) == 1) ? TW'(s * WAYS + $urandom_range(WAYS - 1)) : TW'($urandom);
      rd_en <= 1; rd_set <= 5'(s); ltag <= t;
      @(posedge clk);
      rd_en <= 0;
      #1;
      eh = 0; ew = 0; ei = 0; iw = 0;
      for (int w = WAYS - 1; w >= 0; w--) begin
        if (ref_mem[s][w][TW+1] && ref_mem[s][w][TW-1:0] == t) begin eh = 1; ew = w; end
        if (!ref_mem[s][w][TW+1]) begin ei = 1; iw = w; end
      end
      nhit += eh;
      check(rd_row == ref_mem[s], "row read back");
      check(hit == eh, "hit");
      if (eh) check(int'(hit_way) == ew, "hit way");
      check(inv_found == ei, "invalid found");
      if (ei) check(int'(inv_way) == iw, "invalid way");
    end
    check(nhit > 100, "too few hits exercised");
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
