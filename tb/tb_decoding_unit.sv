// tb_decoding_unit: loads random spike times (often all silent, with forced
// ties) and potentials into the 10-entry decoder, starts it and compares the
// label with the testbench's choice: earliest spike, lowest index on a tie;
// if all are silent, largest potential, lowest index on a tie. Also checks
// the N_OUT+1 cycle decision time.
module tb_decoding_unit;
  import snn_pkg::*;
  localparam int unsigned NO = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic t_we = 0, v_we = 0, start = 0, busy, done, by_spike;
  logic [3:0] wr_idx = '0, label;
  stime_t wr_time = '0;
  vmem_t wr_v = '0;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  decoding_unit #(.N_OUT(NO)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (50000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 200; n++) begin
      automatic int tt[NO], vv[NO];
      automatic int bt = 255, bi = 0, bv = 0, bvi = 0, t0 = 0;
      automatic bit silent = (n % 3 == 0);
      for (int k = 0; k < NO; k++) begin
        tt[k] = silent ? 255 : (($urandom_range(2) == 0) ? 255 : $urandom_range(40));
        vv[k] = $urandom_range(60) - 30;
      end
      if (n % 5 == 1) begin tt[8] = 3; tt[2] = 3; vv[4] = 99; vv[6] = 99; end
      for (int k = 0; k < NO; k++) begin
        if (tt[k] < bt) begin bt = tt[k]; bi = k; end
        if (k == 0 || vv[k] > bv) begin bv = vv[k]; bvi = k; end
        @(negedge clk); t_we = 1; v_we = 1; wr_idx = 4'(k); wr_time = 8'(tt[k]); wr_v = vv[k];
      end
      @(negedge clk); t_we = 0; v_we = 0; start = 1; t0 = cyc;
      @(negedge clk); start = 0;
      while (!done) @(posedge clk);
      chk(cyc - t0 == NO + 2, $sformatf("decode took %0d cycles", cyc - t0));
      @(negedge clk);
      chk(by_spike == (bt != 255), "by_spike flag");
      chk(int'(label) == ((bt != 255) ? bi : bvi),
          $sformatf("label %0d want %0d (spike %0d)", label, (bt != 255) ? bi : bvi, bt != 255));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
