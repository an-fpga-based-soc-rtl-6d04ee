// tb_snn_soc: end-to-end test of the SoC on a reduced 64-24-10 network. A
// scripted controller on the Wishbone master port loads images and weights
// from the SPI Flash model, runs inferences and sends the labels over the
// UART. The runs cover binary weights with and without early exit, a
// silent output layer (decision by potential), a hidden layer shrunk by
// register, and 4-bit weights, and every one of these mechanisms must occur.
module tb_snn_soc;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 64, NH = 24, NO = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t cpu_wb_i;
  wb_s2m_t cpu_wb_o;
  logic acc_irq, spi_sclk, spi_mosi, spi_miso, spi_cs_n, uart_tx;

  snn_soc #(.N_IN(NI), .N_HID(NH), .N_OUT(NO), .WM1_DEPTH(NI * NH / 4), .WM2_DEPTH(NH * NO / 4),
            .CLKS_PER_BIT(100)) dut (.*);
  spi_flash_model #(.SIZE(16384)) flash (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n),
                                         .miso(spi_miso));

  `include "soc_tb_body.svh"

  initial begin
    repeat (5000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w1[], w2[];
    setup();
    infer(0, NH, 2, 3, 6, 4, 1, 40, 1, w1, w2);
    infer(0, NH, 2, 3, 6, 4, 1, 40, 0, w1, w2);
    infer(0, NH, 2, 3, 6, 4, 0, 40, 0, w1, w2);
    infer(0, NH, 2, 3, 6, 100000, 1, 40, 0, w1, w2);
    infer(0, 16, 1, 1, 3, 2, 1, 60, 1, w1, w2);
    infer(2, NH, 1, 1, 10, 8, 1, 40, 1, w1, w2);
    report_mechanisms(1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
