// tb_scc: random weights, alphas and potentials in every weight mode. The
// expected current is +alpha/-alpha for a 1/0 binary weight and the
// two's-complement value of the 2^m-bit field otherwise.
module tb_scc;
  import snn_pkg::*;
  wmode_e wmode;
  logic [15:0] field, alpha;
  vmem_t v_old, current, v_new;
  int checks = 0, failures = 0;

  scc dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000;
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int n = 0; n < 1000; n++) begin
      automatic int m = $urandom_range(4);
      automatic int w = 1 << m;
      automatic int raw = $urandom_range((1 << w) - 1);
      automatic int exp;
      wmode = wmode_e'(m);
      field = 16'(raw);
      alpha = 16'($urandom);
      v_old = vmem_t'($urandom_range(2000000)) - 1000000;
      if (m == 0) exp = raw ? int'(alpha) : -int'(alpha);
      else exp = (raw >= (1 << (w - 1))) ? raw - (1 << w) : raw;
      #1;
      chk(current == exp && v_new == v_old + exp,
          $sformatf("m=%0d raw=%0d alpha=%0d: current %0d want %0d", m, raw, alpha, current, exp));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
