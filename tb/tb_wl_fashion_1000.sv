// tb_wl_fashion_1000: the Fashion-MNIST configuration, a 784-1000-10
// binary network, on an SoC built with N_HID = 1000 (the weight memories
// follow: 49,000 and 625 words). The controller streams all weights from
// the Flash model, runs two inferences on random images with random
// weights, and the labels are checked against the reference model.
module tb_wl_fashion_1000;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 784, NH = 1000, NO = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t cpu_wb_i;
  wb_s2m_t cpu_wb_o;
  logic acc_irq, spi_sclk, spi_mosi, spi_miso, spi_cs_n, uart_tx;

  snn_soc #(.N_HID(NH)) dut (.*);
  spi_flash_model #(.SIZE(131072)) flash (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n),
                                          .miso(spi_miso));

  `include "soc_tb_body.svh"

  initial begin
    repeat (30000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w1[], w2[];
    setup();
    infer(0, NH, 1, 1, 10, 8, 1, 20, 1, w1, w2);
    infer(0, NH, 1, 1, 10, 8, 1, 25, 0, w1, w2);
    report_mechanisms(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
