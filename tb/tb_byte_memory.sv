// tb_byte_memory: writes random bytes to every entry of a 100-entry RAM,
// reads them back in random order and checks data and the one-cycle read
// latency; an out-of-range read must return 255 ("no spike").
module tb_byte_memory;
  localparam int unsigned DEPTH = 100;
  localparam int unsigned AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [7:0] wr_data = '0, rd_data;
  byte unsigned model [DEPTH];
  int checks = 0, failures = 0;

  byte_memory #(.DEPTH(DEPTH)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = AW'(i); wr_data = 8'($urandom); model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom_range(DEPTH - 1);
      @(negedge clk); rd_en = 1; rd_addr = AW'(a);
      @(negedge clk); rd_en = 0;
      chk(rd_data == model[a], $sformatf("read %0d got %h want %h", a, rd_data, model[a]));
    end
    // write and read in the same cycle to different addresses
    @(negedge clk); wr_en = 1; wr_addr = 7'd3; wr_data = 8'h5A; rd_en = 1; rd_addr = 7'd4;
    @(negedge clk); wr_en = 0; rd_en = 0;
    chk(rd_data == model[4], "simultaneous read");
    @(negedge clk); rd_en = 1; rd_addr = 7'd3;
    @(negedge clk); rd_en = 0;
    chk(rd_data == 8'h5A, "write then read");
    @(negedge clk); rd_en = 1; rd_addr = 7'd120;
    @(negedge clk); rd_en = 0;
    chk(rd_data == 8'hFF, "out of range read");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
