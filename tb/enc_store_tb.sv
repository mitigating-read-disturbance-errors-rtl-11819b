// enc_store_tb: random writes and reads of the encoding memory against a reference array,
// with the one-cycle read latency and old-data-on-collision behaviour.
module enc_store_tb;
  localparam int SETS = 64, WAYS = 16, N = SETS * WAYS;

  logic clk = 0;
  logic rd_en = 0, wr_en = 0;
  logic [9:0] rd_idx = '0, wr_idx = '0;
  logic [3:0] rd_enc, wr_enc = '0;
  logic [3:0] ref_mem [N];
  int checks = 0, failures = 0;

  enc_store #(.SETS(SETS), .WAYS(WAYS)) dut (.clk, .rd_en_i(rd_en), .rd_idx_i(rd_idx),
    .rd_enc_o(rd_enc), .wr_en_i(wr_en), .wr_idx_i(wr_idx), .wr_enc_i(wr_enc));

  always #5 clk = ~clk;

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    // fill every entry
    for (int i = 0; i < N; i++) begin
      wr_en <= 1; wr_idx <= 10'(i); wr_enc <= 4'($urandom); 
      @(posedge clk);
      ref_mem[i] = wr_enc;
    end
    wr_en <= 0;
    // random mix of reads and writes
    for (int k = 0; k < 4000; k++) begin
      logic [3:0] expv;
      int r, w;
      r = $urandom_range(N - 1);
      w = ($urandom_range(3) == 0) ? r : $urandom_range(N - 1);
      rd_en <= 1; rd_idx <= 10'(r);
      wr_en <= $urandom_range(1); wr_idx <= 10'(w); wr_enc <= 4'($urandom);
      expv = ref_mem[r];
      @(posedge clk);
      if (wr_en) ref_mem[w] = wr_enc;
      rd_en <= 0; wr_en <= 0;
      #1 check(rd_enc == expv, $sformatf("read %0d got %h expected %h", r, rd_enc, expv));
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
