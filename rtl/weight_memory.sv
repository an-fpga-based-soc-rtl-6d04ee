// weight_memory: packed synaptic weight store with per-weight read-out.
//
// Weights are packed into 16-bit words: in the binarized mode (W1) a word
// holds 16 weights of one bit each (bit = 1 means +1, 0 means -1), which is
// the packing the paper describes. The weight mode selects 2^m-bit fields
// instead, for multi-bit fixed-point models; a word then holds 2^(4-m)
// weights, slot s occupying bits [s*2^m +: 2^m]. The controller writes whole
// words; the datapath reads one word per cycle (synchronous, one cycle of
// latency) and gets the addressed field, zero-extended, on rd_field. The
// field packing for modes other than W1 is this design's choice.
module weight_memory
  import snn_pkg::*;
#(
  parameter int unsigned DEPTH = 29400,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             wr_en,
  input  logic [AW-1:0]    wr_addr,
  input  logic [WWORD-1:0] wr_data,
  input  logic             rd_en,
  input  logic [AW-1:0]    rd_addr,
  input  logic [3:0]       rd_slot,
  input  wmode_e           wmode,
  output logic [WWORD-1:0] rd_field
);
  logic [WWORD-1:0] mem [DEPTH];
  logic [WWORD-1:0] word_q;
  logic [3:0]       slot_q;

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    if (rd_en) begin
      word_q <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : '0;
      slot_q <= rd_slot;
    end
  end

  always_comb begin
    unique case (wmode)
      W1:      rd_field = {15'd0, word_q[slot_q]};
      W2:      rd_field = {14'd0, word_q[{slot_q[2:0], 1'b0} +: 2]};
      W4:      rd_field = {12'd0, word_q[{slot_q[1:0], 2'b0} +: 4]};
      W8:      rd_field = {8'd0,  word_q[{slot_q[0],   3'b0} +: 8]};
      default: rd_field = word_q;
    endcase
  end
endmodule
