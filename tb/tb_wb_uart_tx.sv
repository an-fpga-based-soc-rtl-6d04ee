// tb_wb_uart_tx: sends random bytes at two dividers; a testbench receiver
// samples the line in the middle of each bit and checks start bit, data
// (LSB first), stop bit and the 10*DIV frame length. A byte written while
// the transmitter is busy must be dropped.
module tb_wb_uart_tx;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t wb_i;
  wb_s2m_t wb_o;
  logic uart_tx;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  wb_uart_tx #(.CLKS_PER_BIT(8)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wbw(logic [31:0] adr, logic [31:0] d);
    @(negedge clk); wb_i = '{adr: adr, dat: d, sel: 4'hF, we: 1'b1, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!wb_o.ack);
    @(negedge clk); wb_i.cyc = 0; wb_i.stb = 0;
  endtask

  // receive one frame, return byte and the cycle of its falling start edge
  task automatic rx(int div, output logic [7:0] d, output bit framing_ok, output int t_start);
    while (uart_tx) @(posedge clk);
    t_start = cyc;
    repeat (div / 2) @(posedge clk);
    framing_ok = !uart_tx;
    for (int k = 0; k < 8; k++) begin
      repeat (div) @(posedge clk);
      d[k] = uart_tx;
    end
    repeat (div) @(posedge clk);
    framing_ok &= uart_tx;
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wb_i = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    chk(uart_tx, "line idles high");
    for (int run = 0; run < 2; run++) begin
      automatic int div = run ? 13 : 8;
      if (run) wbw(32'h8, 32'(div));
      for (int n = 0; n < 12; n++) begin
        automatic logic [7:0] tx = 8'($urandom);
        logic [7:0] got;
        bit ok;
        int ts, te;
        fork
          rx(div, got, ok, ts);
          begin
            wbw(32'h0, {24'd0, tx});
            wbw(32'h0, {24'd0, ~tx});      // dropped: transmitter busy
          end
        join
        while (dut.busy) @(posedge clk);
        te = cyc;
        chk(ok && got == tx, $sformatf("sent %h received %h framing %0b", tx, got, ok));
        chk(te - ts >= 10 * div - 1 && te - ts <= 10 * div + 1, $sformatf("frame %0d cycles", te - ts));
        repeat (3) @(posedge clk);
        chk(uart_tx, "idle after frame (second byte dropped)");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
