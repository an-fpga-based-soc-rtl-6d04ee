// tb_weight_memory: fills a 64-word weight memory with random words and
// reads random (address, slot) pairs in every weight mode, comparing the
// returned field with the field cut out of the stored word by the testbench.
module tb_weight_memory;
  import snn_pkg::*;
  localparam int unsigned DEPTH = 64;
  localparam int unsigned AW = $clog2(DEPTH);
  logic clk = 0;
  always #5 clk = ~clk;
  logic wr_en = 0, rd_en = 0;
  logic [AW-1:0] wr_addr = '0, rd_addr = '0;
  logic [15:0] wr_data = '0, rd_field;
  logic [3:0] rd_slot = '0;
  wmode_e wmode = W1;
  logic [15:0] model [DEPTH];
  int checks = 0, failures = 0;

  weight_memory #(.DEPTH(DEPTH)) dut (.*);

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
      wr_en = 1; wr_addr = AW'(i); wr_data = 16'($urandom); model[i] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    for (int m = 0; m <= 4; m++) begin
      for (int n = 0; n < 100; n++) begin
        automatic int a = $urandom_range(DEPTH - 1);
        automatic int w = 1 << m;
        automatic int s = $urandom_range((16 / w) - 1);
        automatic int exp = (int'(model[a]) >> (s * w)) & ((1 << w) - 1);
        @(negedge clk); rd_en = 1; rd_addr = AW'(a); rd_slot = 4'(s); wmode = wmode_e'(m);
        @(negedge clk); rd_en = 0;
        chk(int'(rd_field) == exp, $sformatf("mode %0d word %0d slot %0d: got %h want %h",
                                             m, a, s, rd_field, exp));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
