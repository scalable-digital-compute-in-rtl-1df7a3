// anneal_ctrl -- control flow of the DCIM annealer.
//
// Sequence (the paper's flow chart): weights load -> { pseudo-read ->
// Hamiltonian update -> spin update } repeated over the scan -> after each
// sweep, test the iteration count and, at the programmed cadence, restore the
// nominal weights -> spins output.
//
// One update visits index i: the cell MUX selects column i and the bit-slices
// are presented one per clock, sign slice first (BITS clocks); on the last
// slice the sign check commits the new q_i, so the next index already sees
// it. Indices are scanned in the fixed order 0, 1, ..., N-1, skipping the
// pinned-one variable PIN; one such scan is one iteration (sweep). There is
// no random index generator: exploration comes only from the pseudo-read
// noise in the weights.
//
// Configuration (anneal_cfg_t, latched at start):
//   n_sweeps       number of iterations; the run ends after the last one
//   pr_interval    a pseudo-read precedes every pr_interval-th update (1 =
//                  before every update, as in the per-step description);
//                  0 disables pseudo-reads
//   refresh_sweeps the weights are reloaded after every refresh_sweeps-th
//                  sweep (not after the last); 0 disables refresh
//   vddm_*         passed to the VDDM schedule, which steps once per sweep
//
// cfg_active is the latched configuration, for the VDDM schedule.
//
// Timing: an update costs BITS clocks, a pseudo-read one clock, a load or
// refresh N row transfers (plus host wait states). Everything happens at the
// rising edge; start is sampled in IDLE and DONE. done stays high in DONE.
// The scan order and the per-update pseudo-read follow the paper; the
// counters, the cadence encodings and the handshakes are this design's own.
module anneal_ctrl
  import dcim_pkg::*;
#(
  parameter int unsigned N    = 1067,
  parameter int unsigned BITS = 8,
  parameter int unsigned PIN  = N - 1,
  localparam int unsigned IW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW  = (BITS > 1) ? $clog2(BITS) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  anneal_cfg_t   cfg,
  output anneal_cfg_t   cfg_active,
  output ctrl_state_t   state,
  output logic          busy,
  output logic          done,
  output logic [15:0]   sweep,
  // weight loader
  output logic          ld_start,
  output logic          ld_refresh,
  input  logic          ld_done,
  // spin register
  output logic          init_en,
  output logic          commit,
  output logic [IW-1:0] idx,
  // array and adder tree
  output logic          pr_en,
  output logic [SW-1:0] slice,
  output logic          slice_valid,
  output logic          slice_first,
  // VDDM schedule
  output logic          sched_start,
  output logic          sweep_done
);

  anneal_cfg_t   cfg_q;
  logic [15:0]   pr_cnt;
  logic [15:0]   ref_cnt;
  logic          last_idx;
  logic          last_slice;
  logic [IW-1:0] first_idx;
  logic [IW-1:0] nxt_idx;

  localparam logic [IW-1:0] PIN_I = IW'(PIN);

  assign first_idx  = (PIN == 0) ? IW'(1) : '0;
  assign nxt_idx    = ((idx + 1'b1) == PIN_I) ? idx + IW'(2) : idx + 1'b1;
  assign last_idx   = (PIN == N - 1) ? (32'(idx) == N - 2) : (32'(idx) == N - 1);
  assign last_slice = (slice == '0);

  assign cfg_active  = cfg_q;
  assign busy        = (state != ST_IDLE) && (state != ST_DONE);
  assign done        = (state == ST_DONE);
  assign pr_en       = (state == ST_PREAD);
  assign slice_valid = (state == ST_UPDATE);
  assign slice_first = (state == ST_UPDATE) && (32'(slice) == BITS - 1);
  assign commit      = (state == ST_UPDATE) && last_slice;

  // Next state at the start of an update: pseudo-read first if it is due.
  function automatic ctrl_state_t step_entry(logic [15:0] cnt, logic [15:0] interval);
    return (interval != 0 && cnt == 0) ? ST_PREAD : ST_UPDATE;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= ST_IDLE;
      cfg_q       <= '0;
      sweep       <= '0;
      pr_cnt      <= '0;
      ref_cnt     <= '0;
      idx         <= '0;
      slice       <= '0;
      ld_start    <= 1'b0;
      ld_refresh  <= 1'b0;
      init_en     <= 1'b0;
      sched_start <= 1'b0;
      sweep_done  <= 1'b0;
    end else begin
      ld_start    <= 1'b0;
      init_en     <= 1'b0;
      sched_start <= 1'b0;
      sweep_done  <= 1'b0;
      unique case (state)
        ST_IDLE, ST_DONE: begin
          if (start) begin
            cfg_q       <= cfg;
            sweep       <= '0;
            pr_cnt      <= '0;
            ref_cnt     <= '0;
            idx         <= first_idx;
            slice       <= SW'(BITS - 1);
            init_en     <= 1'b1;
            sched_start <= 1'b1;
            ld_start    <= 1'b1;
            ld_refresh  <= 1'b0;
            state       <= ST_LOAD;
          end
        end
        ST_LOAD, ST_REFRESH: begin
          if (ld_done) begin
            if (cfg_q.n_sweeps == 0) state <= ST_DONE;
            else                     state <= step_entry(pr_cnt, cfg_q.pr_interval);
          end
        end
        ST_PREAD: begin
          state <= ST_UPDATE;
        end
        ST_UPDATE: begin
          if (!last_slice) begin
            slice <= slice - 1'b1;
          end else begin
            // spin committed this cycle; move on
            automatic logic [15:0] pr_n = (pr_cnt + 16'd1 >= cfg_q.pr_interval) ? 16'd0 : pr_cnt + 16'd1;
            pr_cnt <= pr_n;
            slice  <= SW'(BITS - 1);
            if (!last_idx) begin
              idx   <= nxt_idx;
              state <= step_entry(pr_n, cfg_q.pr_interval);
            end else begin
              idx        <= first_idx;
              sweep      <= sweep + 16'd1;
              sweep_done <= 1'b1;
              if (sweep + 16'd1 >= cfg_q.n_sweeps) begin
                state <= ST_DONE;
              end else if (cfg_q.refresh_sweeps != 0 &&
                           ref_cnt + 16'd1 >= cfg_q.refresh_sweeps) begin
                ref_cnt    <= '0;
                ld_start   <= 1'b1;
                ld_refresh <= 1'b1;
                state      <= ST_REFRESH;
              end else begin
                ref_cnt <= ref_cnt + 16'd1;
                state   <= step_entry(pr_n, cfg_q.pr_interval);
              end
            end
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  a_commit_not_pin: assert property (@(posedge clk) disable iff (!rst_n)
                                     commit |-> idx != PIN_I);
  a_pr_then_update: assert property (@(posedge clk) disable iff (!rst_n)
                                     pr_en |=> state == ST_UPDATE);

endmodule
