// encoding_unit: time-to-first-spike (TTFS) encoder with its input buffer.
//
// After start, the unit walks the input memory from address 0 to n-1. Each
// pixel read (one-cycle memory latency) is captured in the input buffer
// register and then written to spike memory 1 as its bitwise inverse, so a
// bright pixel (255) spikes at time 0 and a black pixel (0) gets the code
// 255, which the rest of the core treats as "no spike". The NOT mapping is
// the paper's; the sequential one-pixel-per-cycle walk and the two-stage
// read/buffer pipeline are this design's choices. Throughput: one pixel per
// cycle; done is high n+3 clock edges after the edge that sees start.
module encoding_unit
  import snn_pkg::*;
#(
  parameter int unsigned N_MAX = 784,
  parameter int unsigned AW    = $clog2(N_MAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   n,          // number of pixels to encode
  output logic          busy,
  output logic          done,       // one-cycle pulse
  // input memory read port (one-cycle latency)
  output logic          in_rd_en,
  output logic [AW-1:0] in_rd_addr,
  input  logic [7:0]    in_rd_data,
  // spike memory 1 write port
  output logic          sp_wr_en,
  output logic [AW-1:0] sp_wr_addr,
  output stime_t        sp_wr_data
);
  logic [AW:0]   cnt;
  logic          rd_v, buf_v;
  logic [AW-1:0] rd_a, buf_a;
  logic [7:0]    buf_pix;           // input buffer

  assign in_rd_en   = busy && (cnt < n);
  assign in_rd_addr = cnt[AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; cnt <= '0;
      rd_v <= 1'b0; buf_v <= 1'b0; rd_a <= '0; buf_a <= '0; buf_pix <= '0;
    end else begin
      done  <= 1'b0;
      rd_v  <= in_rd_en;
      rd_a  <= in_rd_addr;
      buf_v <= rd_v;
      buf_a <= rd_a;
      if (rd_v) buf_pix <= in_rd_data;
      if (start && !busy) begin
        busy <= 1'b1;
        cnt  <= '0;
      end else if (busy) begin
        if (cnt < n) cnt <= cnt + 1'b1;
        else if (!rd_v && !buf_v) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
    end
  end

  // TTFS: higher intensity -> earlier spike, realised as a bitwise NOT
  assign sp_wr_en   = buf_v;
  assign sp_wr_addr = buf_a;
  assign sp_wr_data = ~buf_pix;
endmodule
