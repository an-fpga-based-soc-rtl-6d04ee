// spike_sorter: orders the active spikes of one layer by spike time.
//
// The sorter reads n 8-bit spike times from a spike memory and writes the
// active ones (time != 255) into its event buffer as {index, time} pairs in
// ascending time order; inputs that never spike are dropped here, so the
// later stages see only informative events. Equal times keep index order.
// It is a counting sort over the 256 possible times:
//   CLEAR   256 cycles   zero the histogram
//   COUNT   n+1 cycles   histogram of the active times
//   PREFIX  256 cycles   histogram -> start position of each time
//   SCATTER n+1 cycles   write each event at its bin's next position
// so done comes 2n+518 cycles after start whatever the data. The paper gives only the
// function (sort active spikes by time, feed index and time onwards); the
// counting-sort structure is this design's choice. After done, count holds
// the number of active events and the buffer is read through ev_rd_* with
// one cycle of latency.
module spike_sorter
  import snn_pkg::*;
#(
  parameter int unsigned N_MAX = 784,
  parameter int unsigned AW    = $clog2(N_MAX)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW:0]   n,
  output logic          busy,
  output logic          done,          // one-cycle pulse
  output logic [AW:0]   count,         // active events found
  // spike memory read port (one-cycle latency)
  output logic          sp_rd_en,
  output logic [AW-1:0] sp_rd_addr,
  input  stime_t        sp_rd_data,
  // sorted event read port (one-cycle latency)
  input  logic          ev_rd_en,
  input  logic [AW-1:0] ev_rd_addr,
  output logic [AW-1:0] ev_idx,
  output stime_t        ev_time
);
  typedef enum logic [2:0] {S_IDLE, S_CLEAR, S_COUNT, S_PREFIX, S_SCATTER, S_DONE} state_e;
  typedef struct packed {
    logic [AW-1:0] idx;
    stime_t        t;
  } event_t;

  state_e        state;
  logic [AW:0]   hist [256];
  event_t        evbuf [N_MAX];
  logic [8:0]    bin;
  logic [AW:0]   rd_cnt, sum;
  logic          rd_v;
  logic [AW-1:0] rd_a;
  logic          scan;

  assign scan       = (state == S_COUNT || state == S_SCATTER) && rd_cnt < n;
  assign sp_rd_en   = scan;
  assign sp_rd_addr = rd_cnt[AW-1:0];
  assign busy       = state != S_IDLE;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE; done <= 1'b0; count <= '0; bin <= '0;
      rd_cnt <= '0; sum <= '0; rd_v <= 1'b0; rd_a <= '0;
    end else begin
      done <= 1'b0;
      rd_v <= scan;
      rd_a <= sp_rd_addr;
      unique case (state)
        S_IDLE: if (start) begin
          state <= S_CLEAR;
          bin   <= '0;
        end
        S_CLEAR: begin
          hist[bin[7:0]] <= '0;
          bin <= bin + 1'b1;
          if (bin == 9'd255) begin
            state  <= S_COUNT;
            rd_cnt <= '0;
          end
        end
        S_COUNT: begin
          if (rd_cnt < n) rd_cnt <= rd_cnt + 1'b1;
          if (rd_v && sp_rd_data != T_NONE)
            hist[sp_rd_data] <= hist[sp_rd_data] + 1'b1;
          if (rd_cnt >= n && !rd_v) begin
            state <= S_PREFIX;
            bin   <= '0;
            sum   <= '0;
          end
        end
        S_PREFIX: begin
          hist[bin[7:0]] <= sum;
          sum <= sum + hist[bin[7:0]];
          bin <= bin + 1'b1;
          if (bin == 9'd255) begin
            state  <= S_SCATTER;
            count  <= sum + hist[bin[7:0]];
            rd_cnt <= '0;
          end
        end
        S_SCATTER: begin
          if (rd_cnt < n) rd_cnt <= rd_cnt + 1'b1;
          if (rd_v && sp_rd_data != T_NONE) begin
            evbuf[hist[sp_rd_data][AW-1:0]] <= '{idx: rd_a, t: sp_rd_data};
            hist[sp_rd_data] <= hist[sp_rd_data] + 1'b1;
          end
          if (rd_cnt >= n && !rd_v) state <= S_DONE;
        end
        default: begin
          state <= S_IDLE;
          done  <= 1'b1;
        end
      endcase
    end
  end

  always_ff @(posedge clk) begin
    if (ev_rd_en) begin
      ev_idx  <= evbuf[ev_rd_addr].idx;
      ev_time <= evbuf[ev_rd_addr].t;
    end
  end
endmodule
