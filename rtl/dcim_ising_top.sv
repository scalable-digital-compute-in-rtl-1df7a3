// dcim_ising_top -- SRAM digital compute-in-memory Ising (QUBO) annealer.
//
// The chip minimises H(q) = q^T Q q over binary q by single-site sequential
// updates. The host embeds Q into an N x N matrix Qt with a zero diagonal and
// one extra pinned-one variable (Qt[i][PIN] = Q_ii/2), quantises it to BITS-bit
// two's complement, and streams it into the SRAM array. For each index i the
// array and the signed adder tree form s_i = sum_j Qt[i][j] q_j in BITS clocks
// (one bit-slice per clock); the spin register flips q_i when
// dE_i = 2(1 - 2 q_i) s_i < 0. Randomness is not generated digitally: pseudo-
// reads at a reduced memory supply VDDM flip stored magnitude bits, and the
// VDDM schedule raises the supply over the run so that the noise fades out.
// The weights are rewritten from the host at a programmable cadence to clear
// the accumulated drift. The result is the terminal spin state.
//
// Blocks: anneal_ctrl (flow), weight_loader (load and refresh), dcim_array
// (behavioural SRAM macro with per-cell NOR/MUX compute and pseudo-read),
// signed_adder_tree, spin_update, vddm_sched.
//
// Interface:
//   start/cfg/init_q  begin a run with the given configuration and initial state
//   w_*               host row stream; w_refresh tells a refresh from the first load
//   vddm_code         requested memory supply, for the external regulator; the
//                     behavioural array model reads the same code as its supply
//   q, done           terminal spin state, valid while done is high
//
// Timing: N row transfers to load; BITS clocks per update plus one clock per
// pseudo-read; a sweep updates the N-1 free variables.
module dcim_ising_top
  import dcim_pkg::*;
#(
  parameter int unsigned N    = N_DEFAULT,
  parameter int unsigned BITS = BITS_DEFAULT,
  parameter int unsigned PIN  = N - 1,
  localparam int unsigned IW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW  = (BITS > 1) ? $clog2(BITS) : 1,
  localparam int unsigned CW  = $clog2(N + 1),
  localparam int unsigned AW  = CW + BITS
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // run control
  input  logic                   start,
  input  anneal_cfg_t            cfg,
  input  logic [N-1:0]           init_q,
  output logic                   busy,
  output logic                   done,
  output ctrl_state_t            state,
  output logic [15:0]            sweep,
  // host weight stream
  output logic                   w_req,
  output logic                   w_refresh,
  output logic [IW-1:0]          w_row,
  input  logic                   w_valid,
  output logic                   w_ready,
  input  logic [N-1:0][BITS-1:0] w_data,
  // memory supply request
  output vddm_code_t             vddm_code,
  // result
  output logic [N-1:0]           q,
  output logic                   flip
);

  anneal_cfg_t                cfg_active;
  logic                       ld_start, ld_refresh, ld_done, ld_busy;
  logic                       init_en, commit, pr_en;
  logic                       slice_valid, slice_first;
  logic [IW-1:0]              idx;
  logic [SW-1:0]              slice;
  logic                       sched_start, sweep_done, vddm_step;
  logic                       wr_en;
  logic [IW-1:0]              wr_row;
  logic [N-1:0][BITS-1:0]     wr_data;
  logic [N-1:0]               prod;
  logic [CW-1:0]              cnt;
  logic signed [AW-1:0]       s_next, acc;
  logic                       de_neg;

  anneal_ctrl #(.N(N), .BITS(BITS), .PIN(PIN)) u_ctrl (
    .clk, .rst_n, .start, .cfg, .cfg_active, .state, .busy, .done, .sweep,
    .ld_start, .ld_refresh, .ld_done,
    .init_en, .commit, .idx,
    .pr_en, .slice, .slice_valid, .slice_first,
    .sched_start, .sweep_done
  );

  weight_loader #(.N(N), .BITS(BITS)) u_loader (
    .clk, .rst_n, .start(ld_start), .busy(ld_busy), .done(ld_done),
    .req(w_req), .row(w_row), .w_valid, .w_ready, .w_data,
    .wr_en, .wr_row, .wr_data
  );

  assign w_refresh = ld_refresh;

  dcim_array #(.N(N), .BITS(BITS)) u_array (
    .clk, .wr_en, .wr_row, .wr_data,
    .pr_en, .vddm_code,
    .col_sel(idx), .slice_sel(slice), .wl_q(q), .prod
  );

  signed_adder_tree #(.N(N), .BITS(BITS)) u_tree (
    .clk, .rst_n, .prod, .slice_valid, .slice_first, .cnt, .s_next, .acc
  );

  spin_update #(.N(N), .AW(AW), .PIN(PIN)) u_spins (
    .clk, .rst_n, .init_en, .init_q, .commit, .idx, .s(s_next),
    .de_neg, .q, .flip
  );

  vddm_sched u_vddm (
    .clk, .rst_n, .start(sched_start), .sweep_done,
    .vddm_start(cfg_active.vddm_start), .vddm_end(cfg_active.vddm_end),
    .vddm_hold(cfg_active.vddm_hold), .code(vddm_code), .step(vddm_step)
  );

  // The array is never written and pseudo-read in the same cycle.
  a_no_wr_pr: assert property (@(posedge clk) disable iff (!rst_n) !(wr_en && pr_en));

endmodule
