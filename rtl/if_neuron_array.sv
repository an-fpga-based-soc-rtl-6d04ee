// if_neuron_array: time-multiplexed non-leaky integrate-and-fire neurons.
//
// One physical neuron serves all neurons of a layer in turn: their membrane
// potentials and "has fired" flags live in a state memory, and every cycle
// at most one neuron is read, updated by the synaptic current calculator
// and written back. The threshold test is done at time-step boundaries:
// because the sorter delivers events in time order and every event visits
// every neuron, the first visit of neuron j by an event of a new time step
// sees exactly the potential at the end of the previous step. That visit
// (upd_check = 1) fires the neuron at check_time if it has not fired and
// its potential exceeds the threshold; the current is then added. After the
// last event a final pass (fin_*) performs the last threshold test and
// reports every potential. A neuron fires at most once. Commands:
//   clr_*  zero potential and flag, report "no spike" (time 255)
//   upd_*  optional threshold test, then v += current (field from memory)
//   fin_*  optional threshold test, report the potential
// Outputs are registered: out_t_we/out_v_we report a spike time or a
// potential of neuron out_idx one cycle after the command. any_fired is set
// by a spike since the last clear. The threshold test on "surpasses"
// (v > thr) follows the paper; the boundary-folded test is this design's
// choice.
module if_neuron_array
  import snn_pkg::*;
#(
  parameter int unsigned N_MAX = 600,
  parameter int unsigned JW    = $clog2(N_MAX)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  vmem_t            thr,
  input  logic [15:0]      alpha,
  input  wmode_e           wmode,
  input  logic             clr_en,
  input  logic             clr_all_flag,   // reset any_fired
  input  logic [JW-1:0]    clr_idx,
  input  logic             upd_en,
  input  logic [JW-1:0]    upd_idx,
  input  logic             upd_check,
  input  stime_t           check_time,
  input  logic [WWORD-1:0] upd_field,
  input  logic             fin_en,
  input  logic [JW-1:0]    fin_idx,
  input  logic             fin_check,
  output logic             out_t_we,
  output logic             out_v_we,
  output logic [JW-1:0]    out_idx,
  output stime_t           out_time,
  output vmem_t            out_v,
  output logic             any_fired,
  output logic [JW:0]      fire_count
);
  vmem_t       vmem  [N_MAX];
  logic        fired [N_MAX];
  logic [JW-1:0] ridx;
  vmem_t       v_old, current, v_new;
  logic        fl_old, fire;

  always_comb begin
    ridx = upd_en ? upd_idx : fin_idx;
    v_old  = (32'(ridx) < N_MAX) ? vmem[ridx]  : '0;
    fl_old = (32'(ridx) < N_MAX) ? fired[ridx] : 1'b1;
    fire   = ((upd_en && upd_check) || (fin_en && fin_check)) && !fl_old && (v_old > thr);
  end

  scc u_scc (
    .wmode  (wmode),
    .field  (upd_field),
    .alpha  (alpha),
    .v_old  (v_old),
    .current(current),
    .v_new  (v_new)
  );

  // state memory
  always_ff @(posedge clk) begin
    if (clr_en && 32'(clr_idx) < N_MAX) begin
      vmem[clr_idx]  <= '0;
      fired[clr_idx] <= 1'b0;
    end else if (upd_en && 32'(upd_idx) < N_MAX) begin
      vmem[upd_idx] <= v_new;
      if (fire) fired[upd_idx] <= 1'b1;
    end else if (fin_en && fire) begin
      fired[fin_idx] <= 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_t_we <= 1'b0; out_v_we <= 1'b0; out_idx <= '0; out_time <= T_NONE;
      out_v <= '0; any_fired <= 1'b0; fire_count <= '0;
    end else begin
      out_t_we <= 1'b0;
      out_v_we <= 1'b0;
      if (clr_all_flag) begin
        any_fired  <= 1'b0;
        fire_count <= '0;
      end
      if (clr_en) begin
        out_t_we <= 1'b1;
        out_v_we <= 1'b1;
        out_idx  <= clr_idx;
        out_time <= T_NONE;
        out_v    <= '0;
      end else if (upd_en || fin_en) begin
        out_idx  <= ridx;
        out_time <= check_time;
        out_v    <= v_old;
        out_t_we <= fire;
        out_v_we <= fin_en;
        if (fire) begin
          any_fired  <= 1'b1;
          fire_count <= fire_count + 1'b1;
        end
      end
    end
  end
endmodule
