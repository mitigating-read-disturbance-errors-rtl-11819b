// shield_write_policy_tb: every BDI state against the published encoding table (encoding,
// number of copies, payload size) and the layout of the written data.
module shield_write_policy_tb;
  import shield_pkg::*;

  // Expected per state, copied from the encoding table: encoding, copies, payload bytes.
  localparam logic [3:0] EXP_ENC [9] = '{4'b0000, 4'b0011, 4'b0110, 4'b1101, 4'b0111,
                                         4'b1110, 4'b0100, 4'b1000, 4'b1111};
  localparam int EXP_COPIES [9] = '{1, 2, 2, 2, 2, 1, 1, 1, 1};
  localparam int EXP_SIZE   [9] = '{0, 8, 15, 19, 22, 33, 34, 36, 64};
  // Mask bytes carried by a base-delta image (one bit per element).
  localparam int MASK_B     [9] = '{0, 0, 1, 2, 1, 4, 2, 1, 0};

  bdi_state_e st;
  shield_pkg::line_t image, wdata;
  enc_e enc;
  byte_en_t be;
  logic [6:0] nbytes;
  int checks = 0, failures = 0;

  shield_write_policy dut (.state_i(st), .image_i(image), .enc_o(enc), .wdata_o(wdata),
                           .wbe_o(be), .wr_bytes_o(nbytes));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  initial begin
    for (int rep = 0; rep < 20; rep++)
      for (int s = 0; s < 9; s++) begin
        int len, total;
        len   = EXP_SIZE[s] + MASK_B[s];
        total = len * EXP_COPIES[s];
        st    = bdi_state_e'(s);
        image = '0;
        for (int b = 0; b < len; b++) image[b*8 +: 8] = 8'($urandom);
        #1;
        check(enc == EXP_ENC[s], $sformatf("state %0d encoding %b", s, enc));
        check(int'(nbytes) == total, $sformatf("state %0d writes %0d bytes", s, nbytes));
        for (int b = 0; b < 64; b++) begin
          check(be[b] == (b < total), $sformatf("state %0d byte enable %0d", s, b));
          if (b < total)
            check(wdata[b*8 +: 8] == image[(b % len)*8 +: 8],
                  $sformatf("state %0d data byte %0d", s, b));
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
