// vddm_sched -- annealing schedule: steps the memory supply VDDM of the
// weight array from a low operating point to a high one.
//
// The pseudo-read error rate of the bitcells falls as VDDM rises, so a low
// VDDM early in the run injects strong randomness (exploration) and a high
// VDDM late in the run makes the array almost exact (convergence). The
// schedule therefore replaces the temperature schedule of simulated
// annealing. This block produces the VDDM code (0.30 V + 50 mV per step) that
// an external supply regulator turns into the actual voltage.
//
// Interface and timing: start loads code = vddm_start. Each sweep_done pulse
// counts one finished sweep; after vddm_hold sweeps at one code the code
// rises by one, until it reaches vddm_end, where it stays. vddm_hold = 0
// keeps the start code for the whole run. step pulses in the cycle after
// each increment. The paper gives the direction of the sweep (low to high);
// the linear staircase with a fixed hold is this design's choice.
module vddm_sched
  import dcim_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        start,
  input  logic        sweep_done,
  input  vddm_code_t  vddm_start,
  input  vddm_code_t  vddm_end,
  input  logic [15:0] vddm_hold,
  output vddm_code_t  code,
  output logic        step
);

  logic [15:0] held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      code <= vddm_code_t'(VDDM_CODES - 1);
      held <= '0;
      step <= 1'b0;
    end else begin
      step <= 1'b0;
      if (start) begin
        code <= vddm_start;
        held <= '0;
      end else if (sweep_done && vddm_hold != 0) begin
        if (held + 16'd1 >= vddm_hold) begin
          held <= '0;
          if (code < vddm_end) begin
            code <= code + 1'b1;
            step <= 1'b1;
          end
        end else begin
          held <= held + 16'd1;
        end
      end
    end
  end

endmodule
