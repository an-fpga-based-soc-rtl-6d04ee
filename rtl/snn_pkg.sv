// snn_pkg: types and constants shared by the temporal-coding SNN SoC.
//
// Spike times are 8-bit codes inside a 0..255 time window; the code 255
// marks an input or neuron that never spikes (a zero pixel after the TTFS
// inversion, or a silent neuron) and is skipped by the sorter. Membrane
// potentials are 32-bit signed, wide enough that 784 inputs of 16-bit
// weights cannot overflow. Weights are stored in 16-bit words, 2^(4-m)
// weights of 2^m bits each per word, where m is the weight mode (m = 0 is
// the binarized +/-1 configuration). The Wishbone bus is the classic
// single-cycle variant, carried in two packed structs.
package snn_pkg;

  localparam int unsigned TW     = 8;            // spike time width
  localparam int unsigned VW     = 32;           // membrane potential width
  localparam int unsigned WWORD  = 16;           // weight memory word width
  localparam logic [TW-1:0] T_NONE = '1;         // "no spike" time code

  typedef logic [TW-1:0]        stime_t;
  typedef logic signed [VW-1:0] vmem_t;

  // log2 of the weight width; W1 is the binarized (BS4NN) mode
  typedef enum logic [2:0] {
    W1  = 3'd0,
    W2  = 3'd1,
    W4  = 3'd2,
    W8  = 3'd3,
    W16 = 3'd4
  } wmode_e;

  // Wishbone classic, 32-bit data, byte addresses
  typedef struct packed {
    logic [31:0] adr;
    logic [31:0] dat;
    logic [3:0]  sel;
    logic        we;
    logic        cyc;
    logic        stb;
  } wb_m2s_t;

  typedef struct packed {
    logic [31:0] dat;
    logic        ack;
  } wb_s2m_t;

  // SoC address map: slave chosen by adr[31:28]
  localparam logic [3:0] SLV_SPI  = 4'h1;
  localparam logic [3:0] SLV_UART = 4'h2;
  localparam logic [3:0] SLV_ACC  = 4'h3;

  // accelerator address map: region in adr[27:26], word index in adr[25:2]
  localparam logic [1:0] ACC_REGS = 2'd0;
  localparam logic [1:0] ACC_IMEM = 2'd1;
  localparam logic [1:0] ACC_WM1  = 2'd2;
  localparam logic [1:0] ACC_WM2  = 2'd3;

  // byte address, within the accelerator, of word `word` of region `region`
  function automatic logic [31:0] acc_addr(logic [1:0] region, int unsigned word);
    return {4'h0, region, 24'(word), 2'b00};
  endfunction

  // accelerator register word offsets (adr[7:2])
  localparam logic [5:0] R_CTRL   = 6'h00;  // W: b0 start, b1 clear irq. R: b0 busy, b1 done
  localparam logic [5:0] R_CFG    = 6'h01;  // b2:0 weight mode, b8 early exit enable
  localparam logic [5:0] R_NHID   = 6'h02;  // hidden neurons in use
  localparam logic [5:0] R_ALPHA1 = 6'h03;  // layer-1 scale alpha (16 bit)
  localparam logic [5:0] R_ALPHA2 = 6'h04;  // layer-2 scale alpha
  localparam logic [5:0] R_THR1   = 6'h05;  // layer-1 threshold (32 bit signed)
  localparam logic [5:0] R_THR2   = 6'h06;  // layer-2 threshold
  localparam logic [5:0] R_RESULT = 6'h07;  // b3:0 label, b8 decided by a spike, b9 early exit taken
  localparam logic [5:0] R_CYCLES = 6'h08;  // clock cycles of the last inference
  localparam logic [5:0] R_EV1    = 6'h09;  // active input spikes of layer 1
  localparam logic [5:0] R_EV2    = 6'h0A;  // active hidden spikes of layer 2

endpackage
