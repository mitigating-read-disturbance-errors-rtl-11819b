// sttram_data_array: behavioural model of the STT-RAM data array of the L2, with
// read-disturbance errors (RDE).
//
// This is a model of a process-specific memory macro, not logic to synthesize as is. It
// holds LINES blocks of 64 bytes and accepts one access at a time when ready_o is high:
//   * write (req_write_i=1): the bytes selected by req_be_i are written; the array is busy
//     for WRITE_LAT cycles;
//   * read: the bytes selected by req_be_i are sensed. After READ_LAT cycles rd_valid_o
//     pulses with the sensed bytes in rd_data_o (other bytes zero). The sense amplifiers
//     hold the correct value, but the cells just read are disturbed: a read current disturbs
//     only cells holding '1', so every sensed byte is ANDed with RDE_AND_MASK in the array
//     (the default 8'h00 is the worst case in which every disturbed cell flips).
// Bytes not sensed are not disturbed, which is what lets SHIELD keep a second, intact copy.
// Latencies assume a 2 GHz clock (not given with the array figures): a 4.970 ns write is
// 10 cycles, the data part of a 3.737 ns hit (3.737 - 1.567 ns tag-only miss) is 5 cycles.
// Counters of bytes sensed and written support energy accounting in a testbench.
module sttram_data_array
  import shield_pkg::*;
#(
  parameter int unsigned LINES        = 65536,
  parameter int unsigned READ_LAT     = 5,
  parameter int unsigned WRITE_LAT    = 10,
  parameter logic [7:0]  RDE_AND_MASK = 8'h00,
  localparam int unsigned IDX_W = $clog2(LINES)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             req_valid_i,
  output logic             ready_o,
  input  logic             req_write_i,
  input  logic [IDX_W-1:0] req_idx_i,
  input  byte_en_t         req_be_i,
  input  line_t            req_wdata_i,
  output logic             rd_valid_o,
  output line_t            rd_data_o,
  output logic [31:0]      bytes_sensed_o,
  output logic [31:0]      bytes_written_o
);
  line_t       mem [LINES];
  logic [4:0]  busy_cnt;
  logic        rd_pend;
  line_t       sensed;

  assign ready_o = (busy_cnt == 0);

  function automatic logic [6:0] popcount(byte_en_t be);
    logic [6:0] n = '0;
    for (int unsigned i = 0; i < LINE_BYTES; i++) n += 7'(be[i]);
    return n;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_cnt        <= '0;
      rd_pend         <= 1'b0;
      rd_valid_o      <= 1'b0;
      bytes_sensed_o  <= '0;
      bytes_written_o <= '0;
    end else begin
      rd_valid_o <= 1'b0;
      if (busy_cnt != 0) begin
        busy_cnt <= busy_cnt - 5'd1;
        if (busy_cnt == 5'd1 && rd_pend) begin
          rd_valid_o <= 1'b1;
          rd_pend    <= 1'b0;
        end
      end else if (req_valid_i) begin
        if (req_write_i) begin
          busy_cnt        <= 5'(WRITE_LAT);
          bytes_written_o <= bytes_written_o + 32'(popcount(req_be_i));
        end else begin
          busy_cnt       <= 5'(READ_LAT);
          rd_pend        <= 1'b1;
          bytes_sensed_o <= bytes_sensed_o + 32'(popcount(req_be_i));
        end
      end
    end
  end

  // Array contents: writes, and the disturbance left behind by a read.
  always_ff @(posedge clk) begin
    if (ready_o && req_valid_i) begin
      for (int unsigned b = 0; b < LINE_BYTES; b++) begin
        if (req_be_i[b]) begin
          if (req_write_i) mem[req_idx_i][b*8 +: 8] <= req_wdata_i[b*8 +: 8];
          else             mem[req_idx_i][b*8 +: 8] <= mem[req_idx_i][b*8 +: 8] & RDE_AND_MASK;
        end
      end
      if (!req_write_i)
        for (int unsigned b = 0; b < LINE_BYTES; b++)
          sensed[b*8 +: 8] <= req_be_i[b] ? mem[req_idx_i][b*8 +: 8] : 8'h00;
    end
  end

  assign rd_data_o = sensed;
endmodule
