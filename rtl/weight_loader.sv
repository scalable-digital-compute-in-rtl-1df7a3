// weight_loader -- moves the nominal coupling matrix from the host into the
// weight array, row by row, for the initial load and for every refresh.
//
// The annealer's noise comes from pseudo-reads that leave flipped bits behind
// in the array; the remedy is to rewrite the array with its programmed values
// at a set cadence. The chip keeps no second copy of the 9.1 Mb matrix, so a
// refresh is the same operation as the initial load: the host streams the N
// rows again.
//
// Interface: a start pulse begins a pass. While busy the loader holds req
// high and shows the row it wants next on row; the host answers with
// w_valid/w_data and the row is written into the array in the cycle where
// w_valid and w_ready are both high (one row per clock at full rate). After
// row N-1 is written, done pulses for one cycle and busy falls. Rows are
// taken in order 0..N-1. The row-wide write port, the fixed row order and the
// valid/ready handshake are this design's choices; the paper only states
// that the weights are loaded and periodically restored.
module weight_loader #(
  parameter int unsigned N    = 1067,
  parameter int unsigned BITS = 8,
  localparam int unsigned IW  = (N > 1) ? $clog2(N) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  input  logic                   start,
  output logic                   busy,
  output logic                   done,
  // host side
  output logic                   req,
  output logic [IW-1:0]          row,
  input  logic                   w_valid,
  output logic                   w_ready,
  input  logic [N-1:0][BITS-1:0] w_data,
  // array side
  output logic                   wr_en,
  output logic [IW-1:0]          wr_row,
  output logic [N-1:0][BITS-1:0] wr_data
);

  logic last_row;

  assign req      = busy;
  assign w_ready  = busy;
  assign wr_en    = w_valid && w_ready;
  assign wr_row   = row;
  assign wr_data  = w_data;
  assign last_row = (32'(row) == N - 1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy <= 1'b0;
      done <= 1'b0;
      row  <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          row  <= '0;
        end
      end else if (wr_en) begin
        if (last_row) begin
          busy <= 1'b0;
          done <= 1'b1;
          row  <= '0;
        end else begin
          row <= row + 1'b1;
        end
      end
    end
  end

  // A pass writes rows 0..N-1 only, and done is a single-cycle pulse.
  a_row_range: assert property (@(posedge clk) disable iff (!rst_n) wr_en |-> 32'(row) < N);
  a_done_pulse: assert property (@(posedge clk) disable iff (!rst_n) done |=> !done);

endmodule
