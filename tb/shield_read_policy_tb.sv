// shield_read_policy_tb: all sixteen encodings against the read rules: 0000 senses nothing;
// 0011/0110/1101/0111 sense one copy, skip the restore and become 0001/0010/1100/0101;
// the other defined encodings sense the one copy, restore and keep their encoding. Also
// checks which bytes are sensed and that the sensed copy arrives at byte 0.
module shield_read_policy_tb;
  import shield_pkg::*;

  logic [3:0] enc, new_enc;
  shield_pkg::line_t raw, image;
  logic access, restore;
  byte_en_t be;
  bdi_state_e st;
  logic [6:0] nbytes;
  int checks = 0, failures = 0;

  shield_read_policy dut (.enc_i(enc), .raw_i(raw), .access_o(access), .sense_be_o(be),
                          .restore_o(restore), .new_enc_o(new_enc), .state_o(st),
                          .image_o(image), .rd_bytes_o(nbytes));

  task automatic check(bit c, string msg);
    checks++;
    if (!c) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", msg);
    end
  endtask

  // Expected image length (payload + mask bytes) and next encoding, from the table.
  function automatic int exp_len(logic [3:0] e);
    case (e)
      4'b0000: return 0;
      4'b0001, 4'b0011: return 8;
      4'b0010, 4'b0110: return 16;
      4'b1100, 4'b1101: return 21;
      4'b0101, 4'b0111: return 23;
      4'b0100: return 36;
      4'b1110: return 37;
      4'b1000: return 37;
      default: return 64;
    endcase
  endfunction

  initial begin
    for (int rep = 0; rep < 10; rep++)
      for (int e = 0; e < 16; e++) begin
        bit two;
        int len, off;
        logic [3:0] nxt;
        enc = 4'(e);
        raw = '0;
        for (int w = 0; w < 16; w++) raw[w*32 +: 32] = $urandom;
        #1;
        two = (e == 4'b0011 || e == 4'b0110 || e == 4'b1101 || e == 4'b0111);
        case (e)
          4'b0011: nxt = 4'b0001;
          4'b0110: nxt = 4'b0010;
          4'b1101: nxt = 4'b1100;
          4'b0111: nxt = 4'b0101;
          default: nxt = 4'(e);
        endcase
        len = exp_len(4'(e));
        off = two ? len : 0;
        check(access == (e != 0), $sformatf("enc %b access", e));
        check(restore == (e != 0 && !two), $sformatf("enc %b restore", e));
        check(new_enc == nxt, $sformatf("enc %b next %b", e, new_enc));
        check(int'(nbytes) == len, $sformatf("enc %b sensed %0d bytes", e, nbytes));
        for (int b = 0; b < 64; b++) begin
          check(be[b] == (b >= off && b < off + len), $sformatf("enc %b be %0d", e, b));
          check(image[b*8 +: 8] == (b < len ? raw[(b + off)*8 +: 8] : 8'h00),
                $sformatf("enc %b image byte %0d", e, b));
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
