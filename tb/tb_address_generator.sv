// tb_address_generator: random presynaptic/postsynaptic indices, layer
// widths and weight modes; the testbench computes k = i*n_post + j, the
// word k / (16 >> m) and slot k mod (16 >> m) and compares them with the
// registered outputs one cycle later.
module tb_address_generator;
  import snn_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic req = 0, vld;
  logic [9:0] pre_idx = '0, post_idx = '0;
  logic [10:0] n_post = '0;
  wmode_e wmode = W1;
  logic [19:0] word_addr;
  logic [3:0] slot;
  int checks = 0, failures = 0;

  address_generator #(.IW(10), .JW(10), .AW(20)) dut (.*);

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
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      automatic int np = $urandom_range(1000, 1);
      automatic int i = $urandom_range(783);
      automatic int j = $urandom_range(np - 1);
      automatic int m = $urandom_range(4);
      automatic int per = 16 >> m;
      automatic int k = i * np + j;
      @(negedge clk);
      req = 1; pre_idx = 10'(i); post_idx = 10'(j); n_post = 11'(np); wmode = wmode_e'(m);
      @(negedge clk); req = 0;
      chk(vld, "valid one cycle after request");
      chk(int'(word_addr) == k / per && int'(slot) == k % per,
          $sformatf("i=%0d j=%0d n=%0d m=%0d: got %0d/%0d want %0d/%0d",
                    i, j, np, m, word_addr, slot, k / per, k % per));
    end
    @(negedge clk);
    chk(!vld, "valid drops without request");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
