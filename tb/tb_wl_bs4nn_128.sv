// tb_wl_bs4nn_128: the 784-128-10 binary network of the binary/multi-bit
// comparison, run on the unmodified default SoC (built for 600 hidden
// neurons) by setting the hidden-size register to 128. Weights are packed
// with row length 128 and streamed from the Flash model; three inferences
// on random images are checked against the reference model.
module tb_wl_bs4nn_128;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 784, NH = 128, NO = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t cpu_wb_i;
  wb_s2m_t cpu_wb_o;
  logic acc_irq, spi_sclk, spi_mosi, spi_miso, spi_cs_n, uart_tx;

  snn_soc dut (.*);
  spi_flash_model #(.SIZE(32768)) flash (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n),
                                         .miso(spi_miso));

  `include "soc_tb_body.svh"

  initial begin
    repeat (10000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w1[], w2[];
    setup();
    infer(0, NH, 1, 1, 8, 5, 1, 20, 1, w1, w2);
    infer(0, NH, 1, 1, 8, 5, 1, 30, 0, w1, w2);
    infer(0, NH, 1, 1, 8, 5, 0, 15, 0, w1, w2);
    report_mechanisms(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
