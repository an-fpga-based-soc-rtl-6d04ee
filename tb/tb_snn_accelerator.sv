// tb_snn_accelerator: end-to-end test of the SNN core on a 64-24-10
// network over its Wishbone port. For each of several random images and
// weight sets it loads the input and weight memories, sets thresholds and
// scales, starts an inference, waits for the interrupt and compares the
// label, the decision kind and the number of active events of each layer
// with the reference model. Runs cover the binary mode with and without
// early exit, a silent output layer (label from the largest potential), a
// smaller hidden layer set by register, and the 4-bit weight mode.
module tb_snn_accelerator;
  import snn_pkg::*;
  import snn_ref_pkg::*;
  localparam int NI = 64, NH = 24, NO = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  wb_m2s_t wb_i;
  wb_s2m_t wb_o;
  logic irq;
  int checks = 0, failures = 0;

  snn_accelerator #(.N_IN(NI), .N_HID(NH), .N_OUT(NO),
                    .WM1_DEPTH((NI * NH * 4 + 15) / 16),
                    .WM2_DEPTH((NH * NO * 4 + 15) / 16)) dut (.*);

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wbw(logic [31:0] adr, logic [31:0] d);
    @(negedge clk); wb_i = '{adr: adr, dat: d, sel: 4'hF, we: 1'b1, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!wb_o.ack);
    @(negedge clk); wb_i.cyc = 0; wb_i.stb = 0;
  endtask

  task automatic wbr(logic [31:0] adr, output logic [31:0] d);
    @(negedge clk); wb_i = '{adr: adr, dat: 32'd0, sel: 4'hF, we: 1'b0, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!wb_o.ack);
    d = wb_o.dat;
    @(negedge clk); wb_i.cyc = 0; wb_i.stb = 0;
  endtask

  function automatic logic [31:0] reg_a(logic [5:0] r);
    return acc_addr(ACC_REGS, 32'(r));
  endfunction

  int n_spike_dec, n_volt_dec, n_early;

  task automatic run(int mode, int nh, int a1, int a2, longint th1, longint th2, bit early,
                     int density);
    int pix[], tin[], w1[], w2[], wd1[], wd2[], th[], to[];
    longint vh[], vo[];
    int lbl, act1, act2;
    bit bys;
    logic [31:0] r;
    int wmax = (1 << (1 << mode)) - 1;
    pix = new[NI]; tin = new[NI]; w1 = new[NI * nh]; w2 = new[nh * NO];
    foreach (pix[i]) begin
      pix[i] = ($urandom_range(99) < density) ? $urandom_range(255, 1) : 0;
      tin[i] = 255 - pix[i];
    end
    foreach (w1[k]) w1[k] = $urandom_range(wmax);
    foreach (w2[k]) w2[k] = $urandom_range(wmax);
    layer(NI, nh, mode, a1, th1, tin, w1, th, vh);
    layer(nh, NO, mode, a2, th2, th, w2, to, vo);
    lbl = decode(to, vo, bys);
    act1 = 0; foreach (tin[i]) act1 += (tin[i] != 255);
    act2 = 0; foreach (th[j]) act2 += (th[j] != 255);
    pack(mode, w1, wd1);
    pack(mode, w2, wd2);
    foreach (pix[i]) wbw(acc_addr(ACC_IMEM, i), 32'(pix[i]));
    foreach (wd1[a]) wbw(acc_addr(ACC_WM1, a), 32'(wd1[a]));
    foreach (wd2[a]) wbw(acc_addr(ACC_WM2, a), 32'(wd2[a]));
    wbw(reg_a(R_CFG), {23'd0, early, 5'd0, 3'(mode)});
    wbw(reg_a(R_NHID), 32'(nh));
    wbw(reg_a(R_ALPHA1), 32'(a1));
    wbw(reg_a(R_ALPHA2), 32'(a2));
    wbw(reg_a(R_THR1), 32'(th1));
    wbw(reg_a(R_THR2), 32'(th2));
    wbw(reg_a(R_CTRL), 32'd1);
    wbr(reg_a(R_CTRL), r);
    chk(r[0] && !r[1], "busy after start");
    while (!irq) @(posedge clk);
    wbr(reg_a(R_RESULT), r);
    chk(int'(r[3:0]) == lbl && r[8] == bys,
        $sformatf("label %0d/%0b want %0d/%0b (mode %0d)", r[3:0], r[8], lbl, bys, mode));
    if (r[8]) n_spike_dec++; else n_volt_dec++;
    if (r[9]) n_early++;
    chk(!r[9] || (early && bys), "early exit only when enabled and a spike decided");
    wbr(reg_a(R_EV1), r);
    chk(int'(r) == act1, $sformatf("layer-1 events %0d want %0d", r, act1));
    wbr(reg_a(R_EV2), r);
    chk(int'(r) == act2, $sformatf("layer-2 events %0d want %0d", r, act2));
    wbr(reg_a(R_CYCLES), r);
    chk(r > 0, "cycle counter");
    wbw(reg_a(R_CTRL), 32'd2);
    chk(!irq, "interrupt cleared");
  endtask

  initial begin
    repeat (2000000) @(posedge clk);
    failures++; $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wb_i = '0;
    n_spike_dec = 0; n_volt_dec = 0; n_early = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 4; n++) run(0, NH, 2, 3, 6, 4, 1, 40);
    for (int n = 0; n < 3; n++) run(0, NH, 2, 3, 6, 4, 0, 40);
    run(0, NH, 2, 3, 6, 100000, 1, 40);          // silent output layer
    run(0, 16, 1, 1, 3, 2, 1, 60);               // 16 hidden neurons by register
    run(2, NH, 1, 1, 10, 8, 1, 40);              // 4-bit weights
    run(2, NH, 1, 1, 10, 8, 0, 40);
    chk(n_spike_dec > 0, "a label decided by a spike");
    chk(n_volt_dec > 0, "a label decided by potential");
    chk(n_early > 0, "an early exit");
    $display("decisions: spike %0d potential %0d early exits %0d", n_spike_dec, n_volt_dec, n_early);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
