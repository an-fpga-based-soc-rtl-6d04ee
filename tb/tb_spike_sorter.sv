// tb_spike_sorter: sorts several random sets of spike times (dense, sparse,
// all silent) held in a testbench spike memory. The expected event list is
// built by the testbench by scanning time values 0..254 in order and, for
// each, the indices in ascending order; the sorter's count, every
// {index, time} entry and the cycle count 2n+518 are compared.
module tb_spike_sorter;
  import snn_pkg::*;
  localparam int unsigned N = 64;
  localparam int unsigned AW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic start = 0, busy, done, sp_rd_en, ev_rd_en = 0;
  logic [AW:0] n, count;
  logic [AW-1:0] sp_rd_addr, ev_rd_addr = '0, ev_idx;
  stime_t sp_rd_data, ev_time;
  byte unsigned times [N];
  int checks = 0, failures = 0;
  int cyc = 0;

  spike_sorter #(.N_MAX(N)) dut (.*);

  always @(posedge clk) begin
    cyc++;
    if (sp_rd_en) sp_rd_data <= times[sp_rd_addr];
  end

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic run(int nn, int density);
    int exp_idx[$], exp_t[$];
    int t0;
    foreach (times[i]) times[i] = ($urandom_range(99) < density) ? 8'($urandom_range(254)) : 8'd255;
    // a few repeated times to exercise ties
    if (nn > 4) begin times[1] = 8'd7; times[3] = 8'd7; end
    for (int t = 0; t < 255; t++)
      for (int i = 0; i < nn; i++)
        if (times[i] == t) begin exp_idx.push_back(i); exp_t.push_back(t); end
    n = (AW+1)'(nn);
    @(negedge clk); start = 1; t0 = cyc;
    @(negedge clk); start = 0;
    while (!done) @(posedge clk);
    chk(cyc - t0 == 2 * nn + 518, $sformatf("sort took %0d cycles, expected %0d", cyc - t0, 2 * nn + 518));
    @(negedge clk);
    chk(int'(count) == exp_idx.size(), $sformatf("count %0d want %0d", count, exp_idx.size()));
    for (int k = 0; k < exp_idx.size(); k++) begin
      @(negedge clk); ev_rd_en = 1; ev_rd_addr = AW'(k);
      @(negedge clk); ev_rd_en = 0;
      chk(int'(ev_idx) == exp_idx[k] && int'(ev_time) == exp_t[k],
          $sformatf("entry %0d: got (%0d,%0d) want (%0d,%0d)", k, ev_idx, ev_time, exp_idx[k], exp_t[k]));
    end
  endtask

  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1;
    run(N, 90);
    run(N, 30);
    run(40, 50);
    run(N, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
