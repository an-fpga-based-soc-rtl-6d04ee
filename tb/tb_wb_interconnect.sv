// tb_wb_interconnect: three testbench slaves that ack after a random delay
// and return their own signature; random reads and writes to all four
// address regions check that only the addressed slave sees cyc/stb, that
// data and ack come back from it, and that unmapped addresses get a zero
// from the default slave.
module tb_wb_interconnect;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t m_i, spi_o, uart_o, acc_o;
  wb_s2m_t m_o, spi_i, uart_i, acc_i;
  int checks = 0, failures = 0;
  int hits [3];
  logic [31:0] lastw [3];

  wb_interconnect dut (.*);

  // slave models: ack one cycle after the strobe, data = signature | offset
  always_ff @(posedge clk) begin
    spi_i.ack  <= spi_o.cyc && spi_o.stb && !spi_i.ack;
    uart_i.ack <= uart_o.cyc && uart_o.stb && !uart_i.ack;
    acc_i.ack  <= acc_o.cyc && acc_o.stb && !acc_i.ack;
    spi_i.dat  <= 32'hA000_0000 | spi_o.adr[15:0];
    uart_i.dat <= 32'hB000_0000 | uart_o.adr[15:0];
    acc_i.dat  <= 32'hC000_0000 | acc_o.adr[15:0];
    if (spi_o.cyc && spi_o.stb && !spi_i.ack) begin hits[0]++; if (spi_o.we) lastw[0] <= spi_o.dat; end
    if (uart_o.cyc && uart_o.stb && !uart_i.ack) begin hits[1]++; if (uart_o.we) lastw[1] <= uart_o.dat; end
    if (acc_o.cyc && acc_o.stb && !acc_i.ack) begin hits[2]++; if (acc_o.we) lastw[2] <= acc_o.dat; end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic access(logic [31:0] adr, bit we, logic [31:0] wdat, output logic [31:0] rdat);
    @(negedge clk);
    m_i = '{adr: adr, dat: wdat, sel: 4'hF, we: we, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!m_o.ack);
    rdat = m_o.dat;
    @(negedge clk);
    m_i.cyc = 0; m_i.stb = 0;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [31:0] r;
    m_i = '0;
    spi_i = '0; uart_i = '0; acc_i = '0;
    hits = '{0, 0, 0};
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic int s = $urandom_range(5);
      automatic logic [31:0] adr = {4'(s), 12'd0, 16'($urandom) & 16'hFFFC};
      automatic logic [31:0] w = $urandom;
      automatic bit we = 1'($urandom);
      automatic int prev[3] = hits;
      access(adr, we, w, r);
      if (s >= 1 && s <= 3) begin
        chk(hits[s-1] == prev[s-1] + 1, $sformatf("slave %0d not strobed", s));
        for (int o = 0; o < 3; o++) if (o != s - 1) chk(hits[o] == prev[o], "other slave strobed");
        if (!we) chk(r == ((32'hA000_0000 + 32'(s - 1) * 32'h1000_0000) | {16'd0, adr[15:0]}),
                     $sformatf("read data %h from slave %0d", r, s));
        else begin
          @(posedge clk);
          chk(lastw[s-1] == w, "write data");
        end
      end else begin
        chk(hits == prev, "unmapped access strobed a slave");
        if (!we) chk(r == 0, "default slave data");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
