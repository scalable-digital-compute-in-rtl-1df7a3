// signed_adder_tree -- column reduction and bit-slice accumulation that turn
// the array's per-row products into the signed local field s_j.
//
// The array delivers one bit-slice at a time: prod[i] = bit b of Qt[j][i]
// AND q_i. A balanced binary tree of adders counts the ones of prod (all N
// rows in one combinational pass, ceil(log2 N) adder levels). The slices come
// most significant first; the count of the sign slice enters with weight
// -2^(BITS-1) and every later slice is added after doubling the running sum,
// which is the two's-complement weighting of the stored words:
//   first slice : acc' = -cnt
//   other slices: acc' = 2*acc + cnt
// After BITS slices acc' = s_j = sum_i Qt[j][i] q_i exactly.
//
// Interface and timing: assert slice_valid for one cycle per slice, with
// slice_first on the sign slice. s_next is the combinational result including
// the current slice, so on the last slice the sum can be used in the same
// cycle; acc holds it from the next cycle on. One slice per clock, BITS clocks
// per local field.
//
// The paper names a signed adder tree; splitting it into a popcount tree and
// a signed shift-accumulator is this design's own choice, which follows from
// time-multiplexing the bit-slices through the cell MUX.
module signed_adder_tree #(
  parameter int unsigned N    = 1067,
  parameter int unsigned BITS = 8,
  localparam int unsigned CW  = $clog2(N + 1),
  localparam int unsigned AW  = CW + BITS
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic [N-1:0]         prod,
  input  logic                 slice_valid,
  input  logic                 slice_first,
  output logic [CW-1:0]        cnt,
  output logic signed [AW-1:0] s_next,
  output logic signed [AW-1:0] acc
);

  localparam int unsigned L  = (N > 1) ? $clog2(N) : 1;
  localparam int unsigned NP = 1 << L;

  // g_lvl[l].sum[k]: partial count of leaves k*2^l .. (k+1)*2^l-1
  for (genvar l = 0; l <= L; l++) begin : g_lvl
    logic [CW-1:0] sum [NP >> l];
    if (l == 0) begin : g_leaf
      for (genvar k = 0; k < NP; k++) begin : g_k
        if (k < N) begin : g_in
          assign sum[k] = CW'(prod[k]);
        end else begin : g_pad
          assign sum[k] = '0;
        end
      end
    end else begin : g_add
      for (genvar k = 0; k < (NP >> l); k++) begin : g_k
        assign sum[k] = g_lvl[l-1].sum[2*k] + g_lvl[l-1].sum[2*k+1];
      end
    end
  end

  assign cnt = g_lvl[L].sum[0];

  always_comb begin
    if (slice_first) s_next = -AW'($signed({1'b0, cnt}));
    else             s_next = (acc <<< 1) + AW'($signed({1'b0, cnt}));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)           acc <= '0;
    else if (slice_valid) acc <= s_next;
  end

endmodule
