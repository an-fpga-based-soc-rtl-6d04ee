// wb_uart_tx: UART transmitter on the Wishbone bus, used by the controller
// to send each inference result.
//
// Registers (word offsets): 0 DATA - write sends dat[7:0]; 1 STATUS - b0
// busy; 2 DIV - clock cycles per bit (reset CLKS_PER_BIT, minimum 1).
// Frame: 8N1, one start bit (0), eight data bits LSB first, one stop bit
// (1); the line idles high. A byte takes 10*DIV cycles; a DATA write while
// busy is ignored, so software polls STATUS. The default divider gives
// 115200 baud from the 163 MHz clock. The paper names the block and its
// role only; frame format, divider and register map are this design's
// choices. Single-cycle Wishbone ack.
module wb_uart_tx
  import snn_pkg::*;
#(
  parameter int unsigned CLKS_PER_BIT = 1415
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  output logic    uart_tx
);
  logic        ack_q, sel, busy;
  logic [15:0] div, cnt;
  logic [9:0]  frame;
  logic [3:0]  nbit;
  logic [31:0] rdata;

  assign sel = wb_i.cyc && wb_i.stb && !ack_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ack_q <= 1'b0; rdata <= '0; busy <= 1'b0; div <= 16'(CLKS_PER_BIT);
      cnt <= '0; frame <= '1; nbit <= '0;
    end else begin
      ack_q <= sel;
      if (sel && wb_i.we) begin
        if (wb_i.adr[3:2] == 2'd0 && !busy) begin
          busy  <= 1'b1;
          frame <= {1'b1, wb_i.dat[7:0], 1'b0};
          nbit  <= '0;
          cnt   <= '0;
        end
        if (wb_i.adr[3:2] == 2'd2) div <= (wb_i.dat[15:0] == 0) ? 16'd1 : wb_i.dat[15:0];
      end
      if (sel && !wb_i.we)
        rdata <= (wb_i.adr[3:2] == 2'd1) ? {31'd0, busy} :
                 (wb_i.adr[3:2] == 2'd2) ? {16'd0, div} : 32'd0;
      if (busy) begin
        if (cnt + 1'b1 >= div) begin
          cnt   <= '0;
          frame <= {1'b1, frame[9:1]};
          nbit  <= nbit + 1'b1;
          if (nbit == 4'd9) busy <= 1'b0;
        end else cnt <= cnt + 1'b1;
      end
    end
  end

  assign uart_tx  = busy ? frame[0] : 1'b1;
  assign wb_o.ack = ack_q;
  assign wb_o.dat = rdata;
endmodule
