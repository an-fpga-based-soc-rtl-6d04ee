// scc: synaptic current calculator and accumulator.
//
// Implements one term of I(t) = alpha * sum_i B_ji * S_i(t) and adds it to
// the membrane potential of the neuron being updated. In the binarized mode
// (W1) the weight is one bit and the current is +alpha or -alpha, so the
// multiplication becomes a choice between alpha and its two's complement:
// no multiplier is used. In a multi-bit mode the weight field is taken as a
// signed fixed-point number of 2^m bits and added directly (alpha is not
// applied), which is how a real-valued model such as S4NN is run. Purely
// combinational; the neuron array registers the result. The +/-alpha form
// comes from the paper; the handling of multi-bit weights is this design's
// reading of the paper's "multi-bit arithmetic" mode.
module scc
  import snn_pkg::*;
(
  input  wmode_e            wmode,
  input  logic [WWORD-1:0]  field,      // weight field from weight memory
  input  logic [15:0]       alpha,      // layer scale factor (unsigned)
  input  vmem_t             v_old,
  output vmem_t             current,
  output vmem_t             v_new
);
  always_comb begin
    unique case (wmode)
      W1:      current = field[0] ? vmem_t'({1'b0, alpha}) : -vmem_t'({1'b0, alpha});
      W2:      current = vmem_t'(signed'(field[1:0]));
      W4:      current = vmem_t'(signed'(field[3:0]));
      W8:      current = vmem_t'(signed'(field[7:0]));
      default: current = vmem_t'(signed'(field));
    endcase
    v_new = v_old + current;
  end
endmodule
