// ilu: inter-layer unit, the router behind the time-multiplexed neuron.
//
// While the hidden layer runs (layer = 0) a neuron's new spike time is
// written into spike memory 2 at the neuron's index, where the sorter picks
// it up for the next layer. While the output layer runs (layer = 1) spike
// times and membrane potentials go to the decoding unit instead. The paper
// shows the ILU as a two-way selector with exactly these two outputs ("8-bit
// new spike times" to spike memory 2, "spike times + voltages" to the
// decoder); the select by layer number is this design's choice.
// Combinational.
module ilu
  import snn_pkg::*;
#(
  parameter int unsigned JW = 10,
  parameter int unsigned OW = 4
) (
  input  logic          layer,
  input  logic          in_t_we,
  input  logic          in_v_we,
  input  logic [JW-1:0] in_idx,
  input  stime_t        in_time,
  input  vmem_t         in_v,
  // to spike memory 2
  output logic          sp_wr_en,
  output logic [JW-1:0] sp_wr_addr,
  output stime_t        sp_wr_data,
  // to the decoding unit
  output logic          dec_t_we,
  output logic          dec_v_we,
  output logic [OW-1:0] dec_idx,
  output stime_t        dec_time,
  output vmem_t         dec_v
);
  always_comb begin
    sp_wr_en   = !layer && in_t_we;
    sp_wr_addr = in_idx;
    sp_wr_data = in_time;
    dec_t_we   = layer && in_t_we;
    dec_v_we   = layer && in_v_we;
    dec_idx    = OW'(in_idx);
    dec_time   = in_time;
    dec_v      = in_v;
  end
endmodule
