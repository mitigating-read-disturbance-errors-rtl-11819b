// lru_policy_tb: random touches against a reference recency list per set (a queue ordered
// from most to least recent); the victim must always be the tail of that list.
module lru_policy_tb;
  localparam int SETS = 8, WAYS = 16;

  logic clk = 0;
  logic rd_en = 0, touch = 0, init = 0;
  logic [2:0] rd_set = '0, touch_set = '0, init_set = '0;
  logic [3:0] touch_way = '0, victim;
  int order [SETS][$];
  int checks = 0, failures = 0;

  lru_policy #(.SETS(SETS), .WAYS(WAYS)) dut (.clk, .rd_en_i(rd_en), .rd_set_i(rd_set),
    .victim_o(victim), .touch_i(touch), .touch_set_i(touch_set), .touch_way_i(touch_way),
    .init_i(init), .init_set_i(init_set));

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
      init <= 1; init_set <= 3'(s);
      @(posedge clk);
      order[s].delete();
      for (int w = 0; w < WAYS; w++) order[s].push_back(w);
    end
    init <= 0;
    for (int k = 0; k < 3000; k++) begin
      int s, w;
      s = $urandom_range(SETS - 1);
      // favour the victim now and then so that it really changes
      rd_en <= 1; rd_set <= 3'(s);
      @(posedge clk);
      rd_en <= 0;
      #1 check(int'(victim) == order[s][WAYS-1], $sformatf("victim %0d expected %0d",
                                                          victim, order[s][WAYS-1]));
      w = ($urandom_range(3) == 0) ? int'(victim) : $urandom_range(WAYS - 1);
      touch <= 1; touch_set <= 3'(s); touch_way <= 4'(w);
      @(posedge clk);
      touch <= 0;
      for (int i = 0; i < order[s].size(); i++)
        if (order[s][i] == w) begin order[s].delete(i); break; end
      order[s].push_front(w);
      #1 check(int'(victim) == order[s][WAYS-1], "victim after touch");
    end
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
