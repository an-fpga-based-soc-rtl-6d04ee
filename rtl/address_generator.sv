// address_generator: weight-memory address of one synapse.
//
// For the event of presynaptic neuron i (the spike index from the sorter)
// and postsynaptic neuron j, the weight is bit k = i*n_post + j of the
// layer's weight array, stored row by row (all weights leaving input i are
// consecutive). With 2^(4-m) weights per 16-bit word in weight mode m, the
// word address is k >> (4-m) and the slot inside the word is the low 4-m
// bits of k. One request per cycle; the result is registered, so it
// appears one cycle after req. The row-major layout is this design's
// choice; the paper only names the block and shows that it turns spike
// time indexes into weight-memory addresses.
module address_generator
  import snn_pkg::*;
#(
  parameter int unsigned IW = 10,   // presynaptic index width
  parameter int unsigned JW = 10,   // postsynaptic index width
  parameter int unsigned AW = 15    // weight-memory address width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req,
  input  logic [IW-1:0] pre_idx,
  input  logic [JW-1:0] post_idx,
  input  logic [JW:0]   n_post,
  input  wmode_e        wmode,
  output logic          vld,
  output logic [AW-1:0] word_addr,
  output logic [3:0]    slot
);
  localparam int unsigned KW = IW + JW + 2;
  logic [KW-1:0] k;
  logic [2:0]    shamt;

  assign k     = KW'(pre_idx) * KW'(n_post) + KW'(post_idx);
  assign shamt = 3'd4 - ((wmode > W16) ? 3'd4 : 3'(wmode));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      vld <= 1'b0; word_addr <= '0; slot <= '0;
    end else begin
      vld <= req;
      if (req) begin
        word_addr <= AW'(k >> shamt);
        slot      <= 4'(k) & 4'((5'd1 << shamt) - 5'd1);
      end
    end
  end
endmodule
