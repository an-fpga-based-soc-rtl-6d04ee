// soc_tb_body.svh: the controller side of the SoC testbenches.
//
// Included by tb_snn_soc and tb_snn_soc_full, which declare NI/NH/NO, the
// clock, reset and the snn_soc instance "dut" with its ports. The tasks
// play the RV32I controller's program: stream an image and the weights out
// of the SPI Flash model through the SPI master, store them in the
// accelerator, configure it, start it, wait for its interrupt, read the
// label and send it as an ASCII digit over the UART, where a testbench
// receiver decodes it. Every label is compared with snn_ref_pkg, and each
// mechanism of the design is counted.

  int checks = 0, failures = 0;
  int m_spi_bytes = 0, m_uart_bytes = 0, m_early = 0, m_by_spike = 0, m_by_volt = 0;
  int m_skip_in = 0, m_skip_hid = 0, m_multibit = 0, m_default_slave = 0, m_irq = 0;
  int uart_rx_q [$];
  localparam int UART_DIV = 6;
  localparam logic [31:0] SPI_BASE = 32'h1000_0000, UART_BASE = 32'h2000_0000;
  localparam logic [31:0] ACC_BASE = 32'h3000_0000;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic wbw(logic [31:0] adr, logic [31:0] d);
    @(negedge clk); cpu_wb_i = '{adr: adr, dat: d, sel: 4'hF, we: 1'b1, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!cpu_wb_o.ack);
    @(negedge clk); cpu_wb_i.cyc = 0; cpu_wb_i.stb = 0;
  endtask

  task automatic wbr(logic [31:0] adr, output logic [31:0] d);
    @(negedge clk); cpu_wb_i = '{adr: adr, dat: 32'd0, sel: 4'hF, we: 1'b0, cyc: 1'b1, stb: 1'b1};
    do @(posedge clk); while (!cpu_wb_o.ack);
    d = cpu_wb_o.dat;
    @(negedge clk); cpu_wb_i.cyc = 0; cpu_wb_i.stb = 0;
  endtask

  function automatic logic [31:0] acc_reg(logic [5:0] r);
    return ACC_BASE | acc_addr(ACC_REGS, 32'(r));
  endfunction

  task automatic spi_byte(logic [7:0] tx, output logic [7:0] rx);
    logic [31:0] s;
    wbw(SPI_BASE, {24'd0, tx});
    do wbr(SPI_BASE + 4, s); while (s[0]);
    wbr(SPI_BASE, s);
    rx = s[7:0];
    m_spi_bytes++;
  endtask

  task automatic spi_open(int addr);
    logic [7:0] d;
    wbw(SPI_BASE + 8, 32'd0);
    spi_byte(8'h03, d);
    spi_byte(8'(addr >> 16), d);
    spi_byte(8'(addr >> 8), d);
    spi_byte(8'(addr), d);
  endtask

  // copy n bytes (bpw = 1) or 16-bit little-endian words (bpw = 2) from the
  // flash to the accelerator region `region`
  task automatic flash_to_acc(int faddr, int n, int bpw, logic [1:0] region);
    logic [7:0] lo, hi;
    spi_open(faddr);
    for (int k = 0; k < n; k++) begin
      spi_byte(8'hFF, lo);
      hi = 8'h00;
      if (bpw == 2) spi_byte(8'hFF, hi);
      wbw(ACC_BASE | acc_addr(region, k), {16'd0, hi, lo});
    end
    wbw(SPI_BASE + 8, 32'd1);
  endtask

  // UART receiver: sample mid-bit
  initial begin
    logic [7:0] d;
    forever begin
      @(negedge uart_tx);
      repeat (UART_DIV / 2) @(posedge clk);
      if (!uart_tx) begin
        for (int k = 0; k < 8; k++) begin
          repeat (UART_DIV) @(posedge clk);
          d[k] = uart_tx;
        end
        repeat (UART_DIV) @(posedge clk);
        if (uart_tx) uart_rx_q.push_back(int'(d));
      end
    end
  end

  // one inference: weights are (re)loaded when load_w is set
  task automatic infer(int mode, int nh, int a1, int a2, longint th1, longint th2, bit early,
                       int density, bit load_w, ref int w1[], ref int w2[]);
    int pix[], tin[], wd1[], wd2[], th[], to[];
    longint vh[], vo[];
    int lbl, act1, act2, wb2;
    bit bys;
    logic [31:0] r;
    int wmax = (1 << (1 << mode)) - 1;
    pix = new[NI]; tin = new[NI];
    foreach (pix[i]) begin
      pix[i] = ($urandom_range(99) < density) ? $urandom_range(255, 1) : 0;
      tin[i] = 255 - pix[i];
      flash.mem[i] = 8'(pix[i]);
    end
    if (load_w) begin
      w1 = new[NI * nh]; w2 = new[nh * NO];
      foreach (w1[k]) w1[k] = $urandom_range(wmax);
      foreach (w2[k]) w2[k] = $urandom_range(wmax);
    end
    layer(NI, nh, mode, a1, th1, tin, w1, th, vh);
    layer(nh, NO, mode, a2, th2, th, w2, to, vo);
    lbl = decode(to, vo, bys);
    act1 = 0; foreach (tin[i]) act1 += (tin[i] != 255);
    act2 = 0; foreach (th[j]) act2 += (th[j] != 255);
    // the controller's program
    flash_to_acc(0, NI, 1, ACC_IMEM);
    if (load_w) begin
      pack(mode, w1, wd1);
      pack(mode, w2, wd2);
      wb2 = 4096 + 2 * wd1.size();
      foreach (wd1[a]) begin
        flash.mem[4096 + 2 * a] = 8'(wd1[a]); flash.mem[4096 + 2 * a + 1] = 8'(wd1[a] >> 8);
      end
      foreach (wd2[a]) begin
        flash.mem[wb2 + 2 * a] = 8'(wd2[a]); flash.mem[wb2 + 2 * a + 1] = 8'(wd2[a] >> 8);
      end
      flash_to_acc(4096, wd1.size(), 2, ACC_WM1);
      flash_to_acc(wb2, wd2.size(), 2, ACC_WM2);
    end
    wbw(acc_reg(R_CFG), {23'd0, early, 5'd0, 3'(mode)});
    wbw(acc_reg(R_NHID), 32'(nh));
    wbw(acc_reg(R_ALPHA1), 32'(a1));
    wbw(acc_reg(R_ALPHA2), 32'(a2));
    wbw(acc_reg(R_THR1), 32'(th1));
    wbw(acc_reg(R_THR2), 32'(th2));
    wbw(acc_reg(R_CTRL), 32'd1);
    while (!acc_irq) @(posedge clk);
    m_irq++;
    wbr(acc_reg(R_RESULT), r);
    wbw(acc_reg(R_CTRL), 32'd2);
    wbw(UART_BASE, 32'(8'h30 + r[3:0]));
    m_uart_bytes++;
    chk(int'(r[3:0]) == lbl && r[8] == bys,
        $sformatf("label %0d/%0b want %0d/%0b", r[3:0], r[8], lbl, bys));
    if (r[8]) m_by_spike++; else m_by_volt++;
    if (r[9]) m_early++;
    if (mode != 0) m_multibit++;
    wbr(acc_reg(R_EV1), r);
    chk(int'(r) == act1, "layer-1 event count");
    if (act1 < NI) m_skip_in++;
    wbr(acc_reg(R_EV2), r);
    chk(int'(r) == act2, "layer-2 event count");
    if (act2 < nh) m_skip_hid++;
    wbr(acc_reg(R_CYCLES), r);
    $display("inference: label %0d (%s), %0d input and %0d hidden spikes, %0d cycles",
             lbl, bys ? "spike" : "potential", act1, act2, r);
    // the UART must deliver the digit
    begin
      int tmo = 0;
      while (uart_rx_q.size() == 0 && tmo < 20 * UART_DIV) begin @(posedge clk); tmo++; end
      chk(uart_rx_q.size() == 1 && uart_rx_q[0] == 8'h30 + lbl, "UART result byte");
      uart_rx_q.delete();
    end
  endtask

  task automatic setup();
    logic [31:0] r;
    cpu_wb_i = '0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    wbw(UART_BASE + 8, 32'(UART_DIV));
    wbw(SPI_BASE + 12, 32'd1);
    wbr(32'h7000_0000, r);             // unmapped: answered by the default slave
    chk(r == 0, "default slave");
    m_default_slave++;
  endtask

  task automatic report_mechanisms(bit all);
    $display("mechanisms: spi bytes %0d, uart bytes %0d, irq %0d, skipped inputs %0d, skipped hidden %0d, early exits %0d, spike decisions %0d, potential decisions %0d, multi-bit runs %0d, default slave %0d",
             m_spi_bytes, m_uart_bytes, m_irq, m_skip_in, m_skip_hid, m_early, m_by_spike,
             m_by_volt, m_multibit, m_default_slave);
    chk(m_spi_bytes > 0 && m_uart_bytes > 0 && m_irq > 0, "bus, SPI, UART and interrupt used");
    chk(m_skip_in > 0, "silent inputs skipped");
    chk(m_by_spike > 0, "a decision by earliest spike");
    if (all) begin
      chk(m_skip_hid > 0, "silent hidden neurons skipped");
      chk(m_early > 0, "early exit in the output layer");
      chk(m_by_volt > 0, "a decision by largest potential");
      chk(m_multibit > 0, "multi-bit weight mode");
      chk(m_default_slave > 0, "default slave");
    end
  endtask
