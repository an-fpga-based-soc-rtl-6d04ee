// decoding_unit: picks the predicted class from the output layer.
//
// Holds, for each of the N_OUT output neurons, its spike time (255 = silent)
// and its last reported membrane potential, both written through the ILU.
// After start it scans the neurons one per cycle: the class is the neuron
// with the earliest spike; if no output neuron spiked, the class is the
// neuron with the largest potential. Ties go to the lower index. done
// pulses N_OUT+2 cycles after start, with label and by_spike (1 if the
// class came from a spike) valid from then until the next start. The two
// decision rules are the paper's; the sequential scan and the tie rule are
// this design's choices.
module decoding_unit
  import snn_pkg::*;
#(
  parameter int unsigned N_OUT = 10,
  parameter int unsigned OW    = $clog2(N_OUT)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          t_we,
  input  logic          v_we,
  input  logic [OW-1:0] wr_idx,
  input  stime_t        wr_time,
  input  vmem_t         wr_v,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [OW-1:0] label,
  output logic          by_spike
);
  stime_t        tq [N_OUT];
  vmem_t         vq [N_OUT];
  logic [OW:0]   k;
  stime_t        best_t;
  vmem_t         best_v;
  logic [OW-1:0] best_ti, best_vi;

  always_ff @(posedge clk) begin
    if (t_we && 32'(wr_idx) < N_OUT) tq[wr_idx] <= wr_time;
    if (v_we && 32'(wr_idx) < N_OUT) vq[wr_idx] <= wr_v;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0; done <= 1'b0; k <= '0; best_t <= T_NONE; best_v <= '0;
      best_ti <= '0; best_vi <= '0; label <= '0; by_spike <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy <= 1'b1;
        k    <= '0;
      end else if (busy) begin
        if (k < (OW+1)'(N_OUT)) begin
          if (k == '0 || tq[k[OW-1:0]] < best_t) begin
            best_t  <= tq[k[OW-1:0]];
            best_ti <= k[OW-1:0];
          end
          if (k == '0 || vq[k[OW-1:0]] > best_v) begin
            best_v  <= vq[k[OW-1:0]];
            best_vi <= k[OW-1:0];
          end
          k <= k + 1'b1;
        end else begin
          busy     <= 1'b0;
          done     <= 1'b1;
          by_spike <= best_t != T_NONE;
          label    <= (best_t != T_NONE) ? best_ti : best_vi;
        end
      end
    end
  end
endmodule
