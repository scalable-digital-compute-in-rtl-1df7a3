// dcim_array -- behavioural model of the SRAM digital compute-in-memory
// weight array (not synthesizable: the pseudo-read disturbance is a device
// effect and is modelled with $urandom).
//
// Storage: an N x N array of BITS-bit two's-complement coupling words Qt[i][j]
// (the pinned-one embedded QUBO matrix), held in ordinary 6T bitcells. A row
// is written in one clock through the wordline/bitline write port
// (wr_en, wr_row, wr_data), all N words of the row at once.
//
// Compute path (as in the published cell design): row i carries the spin
// q_i on its compute input. Every bitcell has a NOR gate and a cell MUX. The
// NOR takes the complemented stored bit (QB) and the active-low spin, so its
// output is bit AND q_i; the cell MUX, driven by the column select and the
// bit-slice select, puts that one cell onto the row's shared output line.
// prod[i] therefore equals bit slice_sel of Qt[i][col_sel] AND q_i. Because
// Qt is symmetric, summing prod over the rows and over the slices gives
// s_j = sum_i Qt[j][i] q_i for j = col_sel. The read is combinational.
//
// Pseudo-read: a one-cycle pr_en pulse disturbs every stored magnitude bit
// (bits BITS-2..0) at the supply set by vddm_code. A stored 0 becomes 1 with
// probability P0[code] and a stored 1 becomes 0 with probability P1[code];
// the flips persist until the row is rewritten. The sign bit (MSB) is never
// disturbed. The rates, in tenths of a percent, are approximate readings of
// the measured 28 nm curves at 0.30 V .. 0.90 V in 50 mV steps; from 0.75 V
// upward the array behaves as an ideal memory.
//
// Timing: writes and pseudo-reads act on the rising clock edge; a write has
// priority over a pseudo-read in the same cycle.
module dcim_array
  import dcim_pkg::*;
#(
  parameter int unsigned N    = N_DEFAULT,
  parameter int unsigned BITS = BITS_DEFAULT,
  localparam int unsigned IW  = (N > 1) ? $clog2(N) : 1,
  localparam int unsigned SW  = (BITS > 1) ? $clog2(BITS) : 1
) (
  input  logic                      clk,
  // row write port (weights load and refresh)
  input  logic                      wr_en,
  input  logic [IW-1:0]             wr_row,
  input  logic [N-1:0][BITS-1:0]    wr_data,
  // pseudo-read at the current memory supply
  input  logic                      pr_en,
  input  vddm_code_t                vddm_code,
  // compute port: cell MUX selects and spin inputs
  input  logic [IW-1:0]             col_sel,
  input  logic [SW-1:0]             slice_sel,
  input  logic [N-1:0]              wl_q,
  output logic [N-1:0]              prod
);

  // Error rates in 1/1000, index = VDDM code.
  localparam int unsigned P0 [VDDM_CODES] = '{350, 340, 315, 280, 250, 225, 185, 120, 20, 0, 0, 0, 0};
  localparam int unsigned P1 [VDDM_CODES] = '{585, 575, 555, 535, 510, 495, 460, 385, 110, 0, 0, 0, 0};

  logic [BITS-1:0] mem [N][N];

  always_ff @(posedge clk) begin
    if (wr_en) begin
      for (int j = 0; j < N; j++) mem[wr_row][j] <= wr_data[j];
    end else if (pr_en) begin
      automatic int unsigned p0 = (int'(vddm_code) < VDDM_CODES) ? P0[vddm_code] : 0;
      automatic int unsigned p1 = (int'(vddm_code) < VDDM_CODES) ? P1[vddm_code] : 0;
      if (p0 != 0 || p1 != 0) begin
        for (int i = 0; i < N; i++) begin
          for (int j = 0; j < N; j++) begin
            automatic logic [BITS-1:0] w = mem[i][j];
            for (int b = 0; b < BITS - 1; b++) begin
              if (($urandom % 1000) < (w[b] ? p1 : p0)) w[b] = ~w[b];
            end
            mem[i][j] <= w;
          end
        end
      end
    end
  end

  // Per-cell NOR of QB and the active-low spin, gated by the cell MUX.
  always_comb begin
    for (int i = 0; i < N; i++) begin
      automatic logic qb   = ~mem[i][col_sel][slice_sel];
      automatic logic in_n = ~wl_q[i];
      prod[i] = ~(qb | in_n);
    end
  end

endmodule
