// tb_wb_spi_master: the SPI master reads a run of bytes from the Flash
// model with the READ command, exactly as the controller loads pixels and
// weights; every byte received must match the model's contents, the bus
// must report busy during a transfer, and a byte must take 16*DIV cycles.
module tb_wb_spi_master;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t wb_i;
  wb_s2m_t wb_o;
  logic spi_sclk, spi_mosi, spi_miso, spi_cs_n;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  wb_spi_master #(.DIV_RESET(3)) dut (.*);
  spi_flash_model flash (.sclk(spi_sclk), .mosi(spi_mosi), .cs_n(spi_cs_n), .miso(spi_miso));

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wbw(logic [31:0] adr, logic [31:0] d);
    @(negedge clk); wb_i = '{adr: adr, dat: d, sel: 4'hF, we: 1'b1, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!wb_o.ack);
    @(negedge clk); wb_i.cyc = 0; wb_i.stb = 0;
  endtask

  task automatic wbr(logic [31:0] adr, output logic [31:0] d);
    @(negedge clk); wb_i = '{adr: adr, dat: 32'd0, sel: 4'hF, we: 1'b0, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!wb_o.ack);
    d = wb_o.dat;
    @(negedge clk); wb_i.cyc = 0; wb_i.stb = 0;
  endtask

  task automatic xfer(logic [7:0] tx, output logic [7:0] rx);
    logic [31:0] s;
    int t0;
    wbw(32'h0, {24'd0, tx});
    t0 = cyc;
    wbr(32'h4, s);
    chk(s[0], "busy during transfer");
    do wbr(32'h4, s); while (s[0]);
    wbr(32'h0, s);
    rx = s[7:0];
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [7:0] b;
    logic [31:0] s;
    int t0;
    wb_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(spi_cs_n && !spi_sclk, "idle levels");
    for (int run = 0; run < 3; run++) begin
      automatic int base = $urandom_range(4000);
      wbw(32'hC, 32'(run + 1));           // divider
      wbw(32'h8, 32'd0);                  // select the flash
      xfer(8'h03, b);
      xfer(8'(base >> 16), b);
      xfer(8'(base >> 8), b);
      xfer(8'(base), b);
      for (int k = 0; k < 20; k++) begin
        xfer(8'hFF, b);
        chk(b == 8'(((base + k) % 4096 * 7 + 3) % 256),
            $sformatf("byte %0d from %0d: got %h", k, base, b));
      end
      wbw(32'h8, 32'd1);
      chk(spi_cs_n, "deselect");
      // timing of one byte
      wbw(32'h0, 32'h00);
      t0 = cyc;
      do @(posedge clk); while (!dut.busy ? 0 : 1);
      chk(cyc - t0 == 16 * (run + 1) - 1, $sformatf("byte took %0d cycles at div %0d", cyc - t0, run + 1));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
