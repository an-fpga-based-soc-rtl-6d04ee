// byte_memory: simple dual-port RAM of 8-bit entries.
//
// Used three times in the accelerator: as the input memory (pixel
// intensities written by the controller), as spike memory 1 (input spike
// times written by the encoding unit) and as spike memory 2 (hidden-layer
// spike times written through the ILU). One write port and one read port,
// both synchronous to clk; read data appears one cycle after rd_en. The
// paper gives the contents and the 8-bit width; the one-cycle synchronous
// read (block-RAM style) is this design's choice.
module byte_memory #(
  parameter int unsigned DEPTH = 784,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          wr_en,
  input  logic [AW-1:0] wr_addr,
  input  logic [7:0]    wr_data,
  input  logic          rd_en,
  input  logic [AW-1:0] rd_addr,
  output logic [7:0]    rd_data
);
  logic [7:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wr_en && 32'(wr_addr) < DEPTH) mem[wr_addr] <= wr_data;
    if (rd_en) rd_data <= (32'(rd_addr) < DEPTH) ? mem[rd_addr] : 8'hFF;
  end
endmodule
