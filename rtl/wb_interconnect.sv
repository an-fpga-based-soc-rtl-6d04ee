// wb_interconnect: shared Wishbone bus of the SoC, one master, three slaves.
//
// The RISC-V controller is the only master. The slave is chosen by address
// bits [31:28]: 1 = SPI master, 2 = UART transmitter, 3 = SNN accelerator.
// cyc/stb reach only the selected slave; its data and ack return to the
// master. An access to any other address is answered by a built-in default
// slave one cycle later with data 0, so a stray access never hangs the
// controller. The paper names the bus and shows which blocks sit on it; the
// address map and the default slave are this design's choices. The routing
// is combinational; only the default slave's ack is registered.
module wb_interconnect
  import snn_pkg::*;
(
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t m_i,
  output wb_s2m_t m_o,
  output wb_m2s_t spi_o,
  input  wb_s2m_t spi_i,
  output wb_m2s_t uart_o,
  input  wb_s2m_t uart_i,
  output wb_m2s_t acc_o,
  input  wb_s2m_t acc_i
);
  logic [3:0] sel;
  logic       def_ack;

  assign sel = m_i.adr[31:28];

  always_comb begin
    spi_o  = m_i;
    uart_o = m_i;
    acc_o  = m_i;
    spi_o.cyc  = m_i.cyc && sel == SLV_SPI;
    spi_o.stb  = m_i.stb && sel == SLV_SPI;
    uart_o.cyc = m_i.cyc && sel == SLV_UART;
    uart_o.stb = m_i.stb && sel == SLV_UART;
    acc_o.cyc  = m_i.cyc && sel == SLV_ACC;
    acc_o.stb  = m_i.stb && sel == SLV_ACC;
    unique case (sel)
      SLV_SPI:  m_o = spi_i;
      SLV_UART: m_o = uart_i;
      SLV_ACC:  m_o = acc_i;
      default:  m_o = '{dat: 32'd0, ack: def_ack};
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) def_ack <= 1'b0;
    else def_ack <= m_i.cyc && m_i.stb && !def_ack &&
                    !(sel inside {SLV_SPI, SLV_UART, SLV_ACC});
  end
endmodule
