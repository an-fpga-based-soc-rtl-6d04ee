// tb_if_neuron_array: drives the time-multiplexed neuron array (8 neurons)
// with the command stream the accelerator produces: a clear pass, random
// events grouped in time steps (every event visits all neurons, the first
// event of a new step carries the threshold test) and a final pass. A
// testbench model keeps potentials and fired flags; every reported spike
// time, potential, any_fired and the fire count are compared, in binary
// mode with alpha and in 4-bit mode.
module tb_if_neuron_array;
  import snn_pkg::*;
  localparam int unsigned N = 8;
  localparam int unsigned JW = $clog2(N);
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  vmem_t thr;
  logic [15:0] alpha;
  wmode_e wmode;
  logic clr_en = 0, clr_all_flag = 0, upd_en = 0, upd_check = 0, fin_en = 0, fin_check = 0;
  logic [JW-1:0] clr_idx = '0, upd_idx = '0, fin_idx = '0;
  stime_t check_time = '0;
  logic [15:0] upd_field = '0;
  logic out_t_we, out_v_we, any_fired;
  logic [JW-1:0] out_idx;
  stime_t out_time;
  vmem_t out_v;
  logic [JW:0] fire_count;
  int checks = 0, failures = 0;
  longint mv [N];
  bit mf [N];
  int spikes [N];
  int nfire;

  if_neuron_array #(.N_MAX(N)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // one command per cycle; the expected output is checked on the next cycle
  task automatic expect_out(bit t_we, bit v_we, int idx, int t, longint v);
    @(negedge clk);
    clr_en = 0; upd_en = 0; fin_en = 0; clr_all_flag = 0;
    chk(out_t_we == t_we && out_v_we == v_we, $sformatf("neuron %0d: we %0b%0b want %0b%0b",
        idx, out_t_we, out_v_we, t_we, v_we));
    if (t_we) chk(int'(out_idx) == idx && int'(out_time) == t,
                  $sformatf("spike of %0d at %0d, want %0d at %0d", out_idx, out_time, idx, t));
    if (v_we) chk(int'(out_idx) == idx && longint'(out_v) == v,
                  $sformatf("potential of %0d = %0d, want %0d", out_idx, out_v, v));
  endtask

  task automatic run(int m, int a, int th, int ngroups);
    int t = 0, prev_t = 0;
    bit have_prev = 0;
    wmode = wmode_e'(m); alpha = 16'(a); thr = th; nfire = 0;
    for (int j = 0; j < N; j++) begin
      @(negedge clk); clr_en = 1; clr_idx = JW'(j); clr_all_flag = (j == 0);
      mv[j] = 0; mf[j] = 0;
      expect_out(1, 1, j, 255, 0);
    end
    chk(!any_fired && fire_count == 0, "flags cleared");
    for (int g = 0; g < ngroups; g++) begin
      int nev = $urandom_range(3, 1);
      t += $urandom_range(20, 1);
      for (int e = 0; e < nev; e++) begin
        bit chkflag = have_prev && e == 0;
        for (int j = 0; j < N; j++) begin
          int raw = $urandom_range((1 << (1 << m)) - 1);
          longint cur;
          bit fire;
          if (m == 0) cur = raw ? a : -a;
          else cur = (raw >= (1 << ((1 << m) - 1))) ? raw - (1 << (1 << m)) : raw;
          fire = chkflag && !mf[j] && mv[j] > th;
          @(negedge clk);
          upd_en = 1; upd_idx = JW'(j); upd_check = chkflag; check_time = 8'(prev_t);
          upd_field = 16'(raw);
          if (fire) begin mf[j] = 1; nfire++; end
          expect_out(fire, 0, j, prev_t, 0);
          mv[j] += cur;
        end
      end
      prev_t = t; have_prev = 1;
    end
    for (int j = 0; j < N; j++) begin
      bit fire = !mf[j] && mv[j] > th;
      @(negedge clk);
      fin_en = 1; fin_idx = JW'(j); fin_check = 1; check_time = 8'(prev_t);
      if (fire) begin mf[j] = 1; nfire++; end
      expect_out(fire, 1, j, prev_t, mv[j]);
    end
    chk(int'(fire_count) == nfire && any_fired == (nfire > 0),
        $sformatf("fire count %0d want %0d", fire_count, nfire));
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    run(0, 3, 4, 8);
    run(0, 5, 9, 10);
    run(2, 1, 6, 8);
    run(0, 2, 1000, 5);    // nobody fires
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
