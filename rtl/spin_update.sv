// spin_update -- spin state register and single-site flip decision.
//
// Holds the binary state q[0..N-1] that drives the array's row inputs. Entry
// PIN is the pinned-one variable of the embedding: it reads 1 at all times
// and is never updated, so the couplings Qt[i][PIN] = Q_ii/2 supply the
// diagonal of the original QUBO inside the array sum.
//
// Flip rule (sequential, single site): with s = sum_j Qt[i][j] q_j from the
// adder tree, the energy change of flipping q_i is dE = 2(1 - 2 q_i) s. The
// sign check needs no multiplier: dE < 0 exactly when (q_i = 0 and s < 0) or
// (q_i = 1 and s > 0). When dE < 0 the bit is inverted, otherwise it is left
// unchanged (dE = 0 keeps the state).
//
// Interface and timing: init_en loads init_q (entry PIN forced to 1). commit
// applies the rule to entry idx with field s at the rising edge, so the next
// index is already evaluated with the new state. flip reports, in the cycle
// after a commit, whether it changed the bit. Everything here follows the
// paper's update rule; the tie rule for dE = 0 is the paper's "otherwise".
module spin_update #(
  parameter int unsigned N   = 1067,
  parameter int unsigned AW  = 19,
  parameter int unsigned PIN = N - 1,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 init_en,
  input  logic [N-1:0]         init_q,
  input  logic                 commit,
  input  logic [IW-1:0]        idx,
  input  logic signed [AW-1:0] s,
  output logic                 de_neg,
  output logic [N-1:0]         q,
  output logic                 flip
);

  logic q_i;

  assign q_i    = q[idx];
  assign de_neg = q_i ? (s > 0) : (s < 0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q    <= '0;
      flip <= 1'b0;
    end else begin
      flip <= 1'b0;
      if (init_en) begin
        q      <= init_q;
        q[PIN] <= 1'b1;
      end else if (commit && 32'(idx) != PIN) begin
        if (de_neg) begin
          q[idx] <= ~q_i;
          flip   <= 1'b1;
        end
      end
    end
  end

  // The pinned variable is never a scan target.
  a_no_pin_commit: assert property (@(posedge clk) disable iff (!rst_n)
                                    commit |-> 32'(idx) != PIN);

endmodule
