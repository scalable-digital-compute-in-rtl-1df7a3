// tb_spin_update -- self-checking test of the spin register and flip rule.
// Loads a random state (checking that the pinned entry reads 1), then
// commits random (index, field) pairs, including field 0, and compares every
// bit of the state after each commit with a reference model of
// "flip q_i iff 2(1-2q_i)s < 0", plus the flip flag and the same-cycle
// visibility of the new state for the next index.
module tb_spin_update;
  localparam int unsigned N   = 45;
  localparam int unsigned AW  = 14;
  localparam int unsigned PIN = N - 1;
  localparam int unsigned IW  = $clog2(N);

  logic                 clk = 0;
  logic                 rst_n = 0;
  logic                 init_en, commit;
  logic [N-1:0]         init_q;
  logic [IW-1:0]        idx;
  logic signed [AW-1:0] s;
  logic                 de_neg;
  logic [N-1:0]         q;
  logic                 flip;

  int checks = 0, failures = 0;
  int flips = 0, holds = 0, ties = 0;
  logic [N-1:0] ref_q;

  spin_update #(.N(N), .AW(AW), .PIN(PIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    init_en = 0; commit = 0; idx = '0; s = '0; init_q = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    init_q = {$urandom, $urandom};
    init_q[PIN] = 1'b0;            // must be forced to 1 anyway
    init_en = 1;
    @(negedge clk);
    init_en = 0;
    ref_q = init_q;
    ref_q[PIN] = 1'b1;
    checks++;
    if (q !== ref_q) begin failures++; $display("init mismatch"); end
    for (int t = 0; t < 2000; t++) begin
      automatic int i = $urandom_range(N - 2);
      automatic int v = (t % 7 == 0) ? 0 : $urandom_range(200) - 100;
      automatic logic exp_flip = ref_q[i] ? (v > 0) : (v < 0);
      idx = IW'(i);
      s = AW'(v);
      commit = 1;
      #1;
      checks++;
      if (de_neg !== exp_flip) begin failures++; $display("de_neg wrong at %0d, s=%0d", i, v); end
      @(negedge clk);
      commit = 0;
      if (exp_flip) begin ref_q[i] = ~ref_q[i]; flips++; end
      else if (v == 0) ties++;
      else holds++;
      checks++;
      if (q !== ref_q || flip !== exp_flip) begin
        failures++;
        $display("t=%0d idx=%0d s=%0d: q/flip mismatch", t, i, v);
      end
    end
    checks++;
    if (flips == 0 || holds == 0 || ties == 0) begin failures++; $display("cases not covered"); end
    $display("flips=%0d holds=%0d ties=%0d", flips, holds, ties);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
