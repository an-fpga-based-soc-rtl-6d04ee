// tb_encoding_unit: runs the TTFS encoder over 50 random pixels (with some
// zeros and some 255s) held in a testbench memory, checks that each address
// is written exactly once with 255 - pixel, and that done comes n+3 cycles
// after start.
module tb_encoding_unit;
  import snn_pkg::*;
  localparam int unsigned N = 50;
  localparam int unsigned AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, in_rd_en, sp_wr_en;
  logic [AW:0] n = (AW+1)'(N);
  logic [AW-1:0] in_rd_addr, sp_wr_addr;
  logic [7:0] in_rd_data;
  stime_t sp_wr_data;
  byte unsigned pix [N];
  int unsigned written [N];
  byte unsigned got [N];
  int checks = 0, failures = 0;
  int t0, t1, cyc = 0;

  encoding_unit #(.N_MAX(N)) dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (in_rd_en) in_rd_data <= pix[in_rd_addr];
    if (sp_wr_en && rst_n) begin written[sp_wr_addr]++; got[sp_wr_addr] = sp_wr_data; end
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    foreach (pix[i]) begin
      pix[i] = (i % 7 == 0) ? 8'd0 : (i % 11 == 0) ? 8'd255 : 8'($urandom);
      written[i] = 0;
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    t1 = cyc;
    @(negedge clk);
    // t0 is taken half a cycle before the clock edge that sees start
    chk(t1 - t0 == N + 4, $sformatf("latency %0d, expected %0d", t1 - t0, N + 4));
    foreach (pix[i]) begin
      chk(written[i] == 1, $sformatf("address %0d written %0d times", i, written[i]));
      chk(got[i] == 8'(255 - pix[i]), $sformatf("pixel %0d=%0d gave time %0d", i, pix[i], got[i]));
    end
    chk(!busy, "busy after done");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
