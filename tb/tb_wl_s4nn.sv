// tb_wl_s4nn: the real-valued S4NN configurations with 16-bit weights, on
// an SoC built for 400 hidden neurons with weight memories enlarged to one
// 16-bit weight per word (313,600 and 4,000 words). It runs the 784-400-10
// network and then, by the hidden-size register, the 784-128-10 network of
// the binary/multi-bit comparison. All weights are streamed from the Flash
// model; labels are checked against the reference model.
module tb_wl_s4nn;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 784, NH = 400, NO = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t cpu_wb_i;
  wb_s2m_t cpu_wb_o;
  logic acc_irq, spi_sclk, spi_mosi, spi_miso, spi_cs_n, uart_tx;

  snn_soc #(.N_HID(NH), .WM1_DEPTH(NI * NH), .WM2_DEPTH(NH * NO)) dut (.*);
  spi_flash_model #(.SIZE(1048576)) flash (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n),
                                           .miso(spi_miso));

  `include "soc_tb_body.svh"

  initial begin
    repeat (80000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int w1[], w2[];
    setup();
    infer(4, NH, 1, 1, 200000, 150000, 1, 20, 1, w1, w2);
    infer(4, 128, 1, 1, 150000, 100000, 1, 20, 1, w1, w2);
    report_mechanisms(0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
