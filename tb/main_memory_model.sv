// main_memory_model: behavioural model of the off-chip memory behind the L2, for
// testbenches. Accepts one request at a time (req_ready_o high when idle). A write stores
// the line at once; a read answers with one resp_valid_o pulse LAT cycles after it was
// accepted. Lines never written read as zero unless preloaded through preload().
module main_memory_model #(
  parameter int unsigned ADDR_W = 48,
  parameter int unsigned LAT    = 20
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid_i,
  output logic              req_ready_o,
  input  logic              req_write_i,
  input  logic [ADDR_W-1:0] req_addr_i,
  input  logic [511:0]      req_wdata_i,
  output logic              resp_valid_o,
  output logic [511:0]      resp_rdata_o
);
  logic [511:0] mem [logic [ADDR_W-1:0]];
  int           cnt;
  logic [ADDR_W-1:0] pend_addr;
  int           nreads = 0, nwrites = 0;

  function automatic void preload(logic [ADDR_W-1:0] a, logic [511:0] d);
    mem[a] = d;
  endfunction

  function automatic logic [511:0] peek(logic [ADDR_W-1:0] a);
    return mem.exists(a) ? mem[a] : '0;
  endfunction

  assign req_ready_o = (cnt == 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt          <= 0;
      resp_valid_o <= 1'b0;
    end else begin
      resp_valid_o <= 1'b0;
      if (cnt > 1) cnt <= cnt - 1;
      else if (cnt == 1) begin
        cnt          <= 0;
        resp_valid_o <= 1'b1;
        resp_rdata_o <= peek(pend_addr);
      end else if (req_valid_i) begin
        if (!req_write_i) begin
          cnt       <= LAT;
          pend_addr <= req_addr_i;
          nreads++;
        end
      end
    end
  end

  // the store itself (an associative array takes blocking writes only)
  always @(posedge clk)
    if (rst_n && cnt == 0 && req_valid_i && req_write_i) begin
      mem[req_addr_i] = req_wdata_i;
      nwrites++;
    end
endmodule
