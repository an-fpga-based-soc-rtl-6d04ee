// snn_accelerator: the event-driven SNN core of the SoC (a 784-H-10
// temporal-coding network with one hidden layer).
//
// Blocks: input memory -> encoding unit -> spike memory 1 -> sorter ->
// address generator -> weight memory 1/2 -> synaptic current calculator ->
// time-multiplexed IF neuron -> ILU -> spike memory 2 (hidden layer) or
// decoding unit (output layer). The hidden layer reuses the sorter, address
// generator, calculator and neuron of the first layer; only the spike and
// weight memories are per layer.
//
// Sequence after a start command:
//   ENC     encode n_in pixels into spike memory 1 (n_in+2 cycles)
//   SORT    sort the layer's spike memory; meanwhile clear the layer's
//           neurons (2*n_pre+516 cycles)
//   CALC    for every sorted event: fetch it (2 cycles), visit all n_post
//           neurons one per cycle, drain the pipeline (3 cycles)
//   FINAL   last threshold test of all n_post neurons
//   (SORT/CALC/FINAL for layer 1, then for layer 2)
//   DECODE  earliest spike, else largest potential (N_OUT+1 cycles)
// then done and the interrupt line go high. In the output layer the
// optional early exit stops CALC at the end of the first event after which
// some output neuron has fired: later events cannot make an earlier spike,
// so the decided class is unchanged; the FINAL pass is then skipped.
//
// Wishbone slave (single-cycle ack), byte address bits [27:26] choose:
//   0 registers (see snn_pkg R_*), 1 input memory (one pixel per word),
//   2 weight memory 1, 3 weight memory 2 (one 16-bit word per bus word),
// word index in bits [25:2];
// memories are write-only from the bus. Layer sizes: N_IN and N_OUT are
// fixed, the hidden size is a register up to N_HID. The block list,
// binarized weights packed 16 per word, 8-bit spike times, the NOT encoder,
// the +/-alpha calculator, the non-leaky IF neuron and the decoding rule
// follow the paper; the register map, the bus protocol, the schedule above
// and the early exit are this design's choices.
module snn_accelerator
  import snn_pkg::*;
#(
  parameter int unsigned N_IN      = 784,
  parameter int unsigned N_HID     = 600,
  parameter int unsigned N_OUT     = 10,
  parameter int unsigned WM1_DEPTH = (N_IN * N_HID + 15) / 16,
  parameter int unsigned WM2_DEPTH = (N_HID * N_OUT + 15) / 16
) (
  input  logic    clk,
  input  logic    rst_n,
  input  wb_m2s_t wb_i,
  output wb_s2m_t wb_o,
  output logic    irq
);
  localparam int unsigned NPRE  = (N_IN > N_HID) ? N_IN : N_HID;
  localparam int unsigned NPOST = (N_HID > N_OUT) ? N_HID : N_OUT;
  localparam int unsigned IAW   = $clog2(N_IN);
  localparam int unsigned HAW   = $clog2(N_HID);
  localparam int unsigned SAW   = $clog2(NPRE);
  localparam int unsigned JW    = $clog2(NPOST);
  localparam int unsigned OW    = $clog2(N_OUT);
  localparam int unsigned W1AW  = (WM1_DEPTH > 1) ? $clog2(WM1_DEPTH) : 1;
  localparam int unsigned W2AW  = (WM2_DEPTH > 1) ? $clog2(WM2_DEPTH) : 1;
  localparam int unsigned MAW   = (W1AW > W2AW) ? W1AW : W2AW;

  // ---------------------------------------------------------------- bus
  logic        bus_sel, bus_we, ack_q;
  logic [1:0]  region;
  logic [23:0] widx;
  logic [31:0] rdata;

  assign bus_sel = wb_i.cyc && wb_i.stb && !ack_q;
  assign bus_we  = bus_sel && wb_i.we;
  assign region  = wb_i.adr[27:26];
  assign widx    = wb_i.adr[25:2];

  // ---------------------------------------------------------- registers
  wmode_e        wmode;
  logic          early_en;
  logic [JW:0]   nhid;
  logic [15:0]   alpha1, alpha2;
  vmem_t         thr1, thr2;
  logic          busy, done_flag, early_taken;
  logic [OW-1:0] res_label;
  logic          res_by_spike;
  logic [31:0]   cycles;
  logic [SAW:0]  ev1, ev2;

  // ------------------------------------------------------------ datapath
  typedef enum logic [3:0] {
    Q_IDLE, Q_ENC, Q_SORT_GO, Q_SORT, Q_FETCH, Q_WAIT, Q_RUN, Q_DRAIN,
    Q_FINAL, Q_FIN_DRAIN, Q_DEC_GO, Q_DEC
  } seq_e;
  seq_e          q;
  logic          layer;
  logic          start_cmd;
  logic [SAW:0]  n_pre;
  logic [JW:0]   n_post;
  logic [15:0]   alpha;
  vmem_t         thr;

  // encoder / memories
  logic          enc_start, enc_busy, enc_done;
  logic          im_rd_en;
  logic [IAW-1:0] im_rd_addr;
  logic [7:0]    im_rd_data;
  logic          s1_wr_en;
  logic [IAW-1:0] s1_wr_addr;
  stime_t        s1_wr_data, s1_rd_data, s2_rd_data, s2_wr_data;
  logic          s2_wr_en;
  logic [JW-1:0] s2_wr_addr;

  // sorter
  logic          srt_start, srt_busy, srt_done, srt_done_seen;
  logic [SAW:0]  srt_count;
  logic          sp_rd_en;
  logic [SAW-1:0] sp_rd_addr;
  logic          ev_rd_en;
  logic [SAW-1:0] ev_rd_addr, ev_idx;
  stime_t        ev_time;

  // calculation pipeline
  logic [SAW:0]  ek;
  logic [JW:0]   cj, j;
  logic [SAW-1:0] cur_idx;
  logic          cur_check, have_prev;
  stime_t        prev_time, chk_time;
  logic          ag_req, ag_vld;
  logic [MAW-1:0] ag_addr;
  logic [3:0]    ag_slot;
  logic [JW-1:0] j_p1, j_p2;
  logic          p2_v;
  logic [1:0]    drain;
  logic [WWORD-1:0] f1, f2;

  // neuron / ILU / decoder
  logic          clr_en, clr_all;
  logic          fin_en;
  logic          n_t_we, n_v_we, any_fired;
  logic [JW-1:0] n_idx;
  stime_t        n_time;
  vmem_t         n_v;
  logic [JW:0]   fire_count;
  logic          d_t_we, d_v_we;
  logic [OW-1:0] d_idx;
  stime_t        d_time;
  vmem_t         d_v;
  logic          dec_start, dec_busy, dec_done, dec_by_spike;
  logic [OW-1:0] dec_label;

  assign n_pre  = layer ? (SAW+1)'(nhid) : (SAW+1)'(N_IN);
  assign n_post = layer ? (JW+1)'(N_OUT) : nhid;
  assign alpha  = layer ? alpha2 : alpha1;
  assign thr    = layer ? thr2 : thr1;
  assign start_cmd = bus_we && region == ACC_REGS && widx[5:0] == R_CTRL && wb_i.dat[0];

  // ------------------------------------------------------------ memories
  byte_memory #(.DEPTH(N_IN)) u_input_mem (
    .clk, .wr_en(bus_we && region == ACC_IMEM), .wr_addr(IAW'(widx)),
    .wr_data(wb_i.dat[7:0]), .rd_en(im_rd_en), .rd_addr(im_rd_addr), .rd_data(im_rd_data)
  );

  encoding_unit #(.N_MAX(N_IN)) u_enc (
    .clk, .rst_n, .start(enc_start), .n((IAW+1)'(N_IN)), .busy(enc_busy), .done(enc_done),
    .in_rd_en(im_rd_en), .in_rd_addr(im_rd_addr), .in_rd_data(im_rd_data),
    .sp_wr_en(s1_wr_en), .sp_wr_addr(s1_wr_addr), .sp_wr_data(s1_wr_data)
  );

  byte_memory #(.DEPTH(N_IN)) u_spike_mem1 (
    .clk, .wr_en(s1_wr_en), .wr_addr(s1_wr_addr), .wr_data(s1_wr_data),
    .rd_en(sp_rd_en && !layer), .rd_addr(IAW'(sp_rd_addr)), .rd_data(s1_rd_data)
  );

  byte_memory #(.DEPTH(N_HID)) u_spike_mem2 (
    .clk, .wr_en(s2_wr_en), .wr_addr(HAW'(s2_wr_addr)), .wr_data(s2_wr_data),
    .rd_en(sp_rd_en && layer), .rd_addr(HAW'(sp_rd_addr)), .rd_data(s2_rd_data)
  );

  spike_sorter #(.N_MAX(NPRE)) u_sorter (
    .clk, .rst_n, .start(srt_start), .n(n_pre), .busy(srt_busy), .done(srt_done),
    .count(srt_count), .sp_rd_en(sp_rd_en), .sp_rd_addr(sp_rd_addr),
    .sp_rd_data(layer ? s2_rd_data : s1_rd_data),
    .ev_rd_en(ev_rd_en), .ev_rd_addr(ev_rd_addr), .ev_idx(ev_idx), .ev_time(ev_time)
  );

  address_generator #(.IW(SAW), .JW(JW), .AW(MAW)) u_agen (
    .clk, .rst_n, .req(ag_req), .pre_idx(cur_idx), .post_idx(j[JW-1:0]), .n_post(n_post),
    .wmode(wmode), .vld(ag_vld), .word_addr(ag_addr), .slot(ag_slot)
  );

  weight_memory #(.DEPTH(WM1_DEPTH)) u_wmem1 (
    .clk, .wr_en(bus_we && region == ACC_WM1), .wr_addr(W1AW'(widx)), .wr_data(wb_i.dat[15:0]),
    .rd_en(ag_vld && !layer), .rd_addr(W1AW'(ag_addr)), .rd_slot(ag_slot), .wmode(wmode),
    .rd_field(f1)
  );

  weight_memory #(.DEPTH(WM2_DEPTH)) u_wmem2 (
    .clk, .wr_en(bus_we && region == ACC_WM2), .wr_addr(W2AW'(widx)), .wr_data(wb_i.dat[15:0]),
    .rd_en(ag_vld && layer), .rd_addr(W2AW'(ag_addr)), .rd_slot(ag_slot), .wmode(wmode),
    .rd_field(f2)
  );

  if_neuron_array #(.N_MAX(NPOST)) u_neuron (
    .clk, .rst_n, .thr(thr), .alpha(alpha), .wmode(wmode),
    .clr_en(clr_en), .clr_all_flag(clr_all), .clr_idx(cj[JW-1:0]),
    .upd_en(p2_v), .upd_idx(j_p2), .upd_check(cur_check),
    .check_time((q == Q_FINAL) ? prev_time : chk_time),
    .upd_field(layer ? f2 : f1),
    .fin_en(fin_en), .fin_idx(j[JW-1:0]), .fin_check(have_prev),
    .out_t_we(n_t_we), .out_v_we(n_v_we), .out_idx(n_idx), .out_time(n_time), .out_v(n_v),
    .any_fired(any_fired), .fire_count(fire_count)
  );

  ilu #(.JW(JW), .OW(OW)) u_ilu (
    .layer(layer), .in_t_we(n_t_we), .in_v_we(n_v_we), .in_idx(n_idx), .in_time(n_time),
    .in_v(n_v), .sp_wr_en(s2_wr_en), .sp_wr_addr(s2_wr_addr), .sp_wr_data(s2_wr_data),
    .dec_t_we(d_t_we), .dec_v_we(d_v_we), .dec_idx(d_idx), .dec_time(d_time), .dec_v(d_v)
  );

  decoding_unit #(.N_OUT(N_OUT)) u_dec (
    .clk, .rst_n, .t_we(d_t_we), .v_we(d_v_we), .wr_idx(d_idx), .wr_time(d_time), .wr_v(d_v),
    .start(dec_start), .busy(dec_busy), .done(dec_done), .label(dec_label),
    .by_spike(dec_by_spike)
  );

  // ----------------------------------------------------------- sequencer
  assign enc_start  = (q == Q_IDLE) && start_cmd;
  assign srt_start  = (q == Q_SORT_GO);
  assign clr_all    = (q == Q_SORT_GO);
  assign clr_en     = (q == Q_SORT) && (cj < n_post);
  assign ev_rd_en   = (q == Q_FETCH) && (ek < srt_count);
  assign ev_rd_addr = ek[SAW-1:0];
  assign ag_req     = (q == Q_RUN);
  assign fin_en     = (q == Q_FINAL);
  assign dec_start  = (q == Q_DEC_GO);
  assign busy       = (q != Q_IDLE);
  assign irq        = done_flag;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q <= Q_IDLE; layer <= 1'b0; cj <= '0; j <= '0; ek <= '0;
      srt_done_seen <= 1'b0; cur_idx <= '0; cur_check <= 1'b0; have_prev <= 1'b0;
      prev_time <= '0; chk_time <= '0; j_p1 <= '0; j_p2 <= '0; p2_v <= 1'b0; drain <= '0;
      done_flag <= 1'b0; early_taken <= 1'b0; res_label <= '0; res_by_spike <= 1'b0;
      cycles <= '0; ev1 <= '0; ev2 <= '0;
    end else begin
      j_p1 <= j[JW-1:0];
      j_p2 <= j_p1;
      p2_v <= ag_vld;
      if (busy) cycles <= cycles + 1'b1;
      if (bus_we && region == ACC_REGS && widx[5:0] == R_CTRL && wb_i.dat[1]) done_flag <= 1'b0;
      if (srt_done) srt_done_seen <= 1'b1;

      unique case (q)
        Q_IDLE: if (start_cmd) begin
          q           <= Q_ENC;
          layer       <= 1'b0;
          done_flag   <= 1'b0;
          early_taken <= 1'b0;
          cycles      <= '0;
        end
        Q_ENC: if (enc_done) q <= Q_SORT_GO;
        Q_SORT_GO: begin
          q             <= Q_SORT;
          cj            <= '0;
          srt_done_seen <= 1'b0;
        end
        Q_SORT: begin
          if (cj < n_post) cj <= cj + 1'b1;
          if (cj >= n_post && (srt_done_seen || srt_done)) begin
            q         <= Q_FETCH;
            ek        <= '0;
            have_prev <= 1'b0;
            if (layer) ev2 <= srt_count;
            else       ev1 <= srt_count;
          end
        end
        Q_FETCH: begin
          if (ek < srt_count) q <= Q_WAIT;
          else begin
            q <= Q_FINAL;
            j <= '0;
          end
        end
        Q_WAIT: begin
          cur_idx   <= ev_idx;
          cur_check <= have_prev && (ev_time != prev_time);
          chk_time  <= prev_time;
          prev_time <= ev_time;
          have_prev <= 1'b1;
          j         <= '0;
          q         <= Q_RUN;
        end
        Q_RUN: begin
          j <= j + 1'b1;
          if (j + 1'b1 >= n_post) begin
            q     <= Q_DRAIN;
            drain <= 2'd3;
          end
        end
        Q_DRAIN: begin
          if (drain != 0) drain <= drain - 1'b1;
          else begin
            ek <= ek + 1'b1;
            if (layer && early_en && any_fired) begin
              early_taken <= 1'b1;
              q           <= Q_FIN_DRAIN;
              drain       <= 2'd2;
            end else q <= Q_FETCH;
          end
        end
        Q_FINAL: begin
          j <= j + 1'b1;
          if (j + 1'b1 >= n_post) begin
            q     <= Q_FIN_DRAIN;
            drain <= 2'd2;
          end
        end
        Q_FIN_DRAIN: begin
          if (drain != 0) drain <= drain - 1'b1;
          else if (!layer) begin
            layer <= 1'b1;
            q     <= Q_SORT_GO;
          end else q <= Q_DEC_GO;
        end
        Q_DEC_GO: q <= Q_DEC;
        default: if (dec_done) begin   // Q_DEC
          q            <= Q_IDLE;
          done_flag    <= 1'b1;
          res_label    <= dec_label;
          res_by_spike <= dec_by_spike;
        end
      endcase
    end
  end

  // ------------------------------------------------- register file / bus
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wmode <= W1; early_en <= 1'b1; nhid <= (JW+1)'(N_HID);
      alpha1 <= 16'd1; alpha2 <= 16'd1; thr1 <= '0; thr2 <= '0;
      ack_q <= 1'b0; rdata <= '0;
    end else begin
      ack_q <= bus_sel;
      if (bus_we && region == ACC_REGS) begin
        unique case (widx[5:0])
          R_CFG: begin
            wmode    <= (wb_i.dat[2:0] > 3'd4) ? W16 : wmode_e'(wb_i.dat[2:0]);
            early_en <= wb_i.dat[8];
          end
          R_NHID:   nhid <= (wb_i.dat > 32'(N_HID) || wb_i.dat == 0) ? (JW+1)'(N_HID)
                                                                    : (JW+1)'(wb_i.dat);
          R_ALPHA1: alpha1 <= wb_i.dat[15:0];
          R_ALPHA2: alpha2 <= wb_i.dat[15:0];
          R_THR1:   thr1   <= vmem_t'(wb_i.dat);
          R_THR2:   thr2   <= vmem_t'(wb_i.dat);
          default: ;
        endcase
      end
      if (bus_sel && !wb_i.we) begin
        rdata <= '0;
        if (region == ACC_REGS) begin
          unique case (widx[5:0])
            R_CTRL:   rdata <= {30'd0, done_flag, busy};
            R_CFG:    rdata <= {23'd0, early_en, 5'd0, 3'(wmode)};
            R_NHID:   rdata <= 32'(nhid);
            R_ALPHA1: rdata <= {16'd0, alpha1};
            R_ALPHA2: rdata <= {16'd0, alpha2};
            R_THR1:   rdata <= thr1;
            R_THR2:   rdata <= thr2;
            R_RESULT: rdata <= {22'd0, early_taken, res_by_spike, 4'd0, 4'(res_label)};
            R_CYCLES: rdata <= cycles;
            R_EV1:    rdata <= 32'(ev1);
            R_EV2:    rdata <= 32'(ev2);
            default:  rdata <= '0;
          endcase
        end
      end
    end
  end

  assign wb_o.ack = ack_q;
  assign wb_o.dat = rdata;

  // a Wishbone slave answers only inside a cycle it was strobed in
  a_ack_in_cycle: assert property (@(posedge clk) disable iff (!rst_n) ack_q |-> wb_i.cyc);
endmodule
