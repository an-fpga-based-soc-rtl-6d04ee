// snn_soc: the complete SoC around the temporal-coding SNN accelerator.
//
// A Wishbone bus connects the controller (an RV32I processor, outside this
// RTL: its bus master port is cpu_wb_i/cpu_wb_o) to an SPI master for the
// external Flash that holds pixels and trained weights, a UART transmitter
// that reports the predicted classes, and the SNN accelerator. The
// controller copies one image and, once, the weights into the accelerator,
// writes the start bit, waits for the accelerator's interrupt (acc_irq),
// reads the label and sends it over the UART. Address map: 0x1xxx_xxxx SPI,
// 0x2xxx_xxxx UART, 0x3xxx_xxxx accelerator. The block structure follows
// the paper; the address map is this design's choice. Parameters default to
// the paper's MNIST network, 784-600-10, with weight memories sized for
// binarized weights (WM1_DEPTH/WM2_DEPTH words of 16 bits); a multi-bit
// model needs them enlarged, as the paper notes for its S4NN runs.
module snn_soc
  import snn_pkg::*;
#(
  parameter int unsigned N_IN         = 784,
  parameter int unsigned N_HID        = 600,
  parameter int unsigned N_OUT        = 10,
  parameter int unsigned WM1_DEPTH    = (N_IN * N_HID + 15) / 16,
  parameter int unsigned WM2_DEPTH    = (N_HID * N_OUT + 15) / 16,
  parameter int unsigned CLKS_PER_BIT = 1415,
  parameter int unsigned SPI_DIV      = 4
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t cpu_wb_i,
  output wb_s2m_t cpu_wb_o,
  output logic    acc_irq,
  output logic    spi_sclk,
  output logic    spi_mosi,
  input  logic    spi_miso,
  output logic    spi_cs_n,
  output logic    uart_tx
);
  wb_m2s_t spi_m, uart_m, acc_m;
  wb_s2m_t spi_s, uart_s, acc_s;

  wb_interconnect u_bus (
    .clk, .rst_n, .m_i(cpu_wb_i), .m_o(cpu_wb_o),
    .spi_o(spi_m), .spi_i(spi_s), .uart_o(uart_m), .uart_i(uart_s),
    .acc_o(acc_m), .acc_i(acc_s)
  );

  wb_spi_master #(.DIV_RESET(SPI_DIV)) u_spi (
    .clk, .rst_n, .wb_i(spi_m), .wb_o(spi_s),
    .spi_sclk, .spi_mosi, .spi_miso, .spi_cs_n
  );

  wb_uart_tx #(.CLKS_PER_BIT(CLKS_PER_BIT)) u_uart (
    .clk, .rst_n, .wb_i(uart_m), .wb_o(uart_s), .uart_tx
  );

  snn_accelerator #(
    .N_IN(N_IN), .N_HID(N_HID), .N_OUT(N_OUT), .WM1_DEPTH(WM1_DEPTH), .WM2_DEPTH(WM2_DEPTH)
  ) u_acc (
    .clk, .rst_n, .wb_i(acc_m), .wb_o(acc_s), .irq(acc_irq)
  );
endmodule
