// tb_snn_soc_full: the SoC at its default size, the 784-600-10 network of
// the MNIST configuration. The scripted controller streams one image and
// all 29,400 binary weight words of layer 1 and 375 of layer 2 out of the
// SPI Flash model, runs two inferences (the second reuses the weights) and
// checks both labels against the reference model and their UART bytes.
module tb_snn_soc_full;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 784, NH = 600, NO = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t cpu_wb_i;
  wb_s2m_t cpu_wb_o;
  logic acc_irq, spi_sclk, spi_mosi, spi_miso, spi_cs_n, uart_tx;

  snn_soc dut (.*);
  spi_flash_model #(.SIZE(65536)) flash (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n),
                                         .miso(spi_miso));

  `include "soc_tb_body.svh"

  initial begin
    repeat (20000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w1[], w2[];
    setup();
    infer(0, NH, 1, 1, 10, 6, 1, 20, 1, w1, w2);
    infer(0, NH, 1, 1, 10, 6, 1, 20, 0, w1, w2);
    report_mechanisms(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
