// tb_signed_adder_tree -- self-checking test of the popcount tree and the
// signed bit-slice accumulator at the default size (1067 rows, 8-bit words).
// Each trial draws random signed words w[i] and spins q[i], presents the eight
// slices sign first exactly as the array would (prod[i] = w[i][b] & q[i]),
// and compares the per-slice count and the final field with
// sum_i w[i]*q[i] computed here in plain integer arithmetic. It also checks
// the extreme cases (all words -128 or +127 with all spins set) and that the
// field is available after exactly BITS slice clocks.
module tb_signed_adder_tree;
  localparam int unsigned N    = 1067;
  localparam int unsigned BITS = 8;
  localparam int unsigned CW   = $clog2(N + 1);
  localparam int unsigned AW   = CW + BITS;

  logic                 clk = 0;
  logic                 rst_n = 0;
  logic [N-1:0]         prod;
  logic                 slice_valid, slice_first;
  logic [CW-1:0]        cnt;
  logic signed [AW-1:0] s_next, acc;

  int checks = 0, failures = 0;

  signed_adder_tree dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [BITS-1:0] w [N];
  logic [N-1:0]    qv;

  task automatic run_trial();
    int expected = 0;
    int cycles = 0;
    for (int i = 0; i < N; i++) expected += qv[i] ? int'($signed(w[i])) : 0;
    for (int b = BITS - 1; b >= 0; b--) begin
      int ones = 0;
      for (int i = 0; i < N; i++) begin
        prod[i] = w[i][b] & qv[i];
        ones += int'(prod[i]);
      end
      slice_valid = 1;
      slice_first = (b == BITS - 1);
      #1;
      checks++;
      if (int'(cnt) != ones) begin
        failures++;
        $display("slice %0d: count %0d, expected %0d", b, cnt, ones);
      end
      if (b == 0) begin
        checks++;
        if (int'(s_next) != expected) begin
          failures++;
          $display("field %0d, expected %0d", s_next, expected);
        end
      end
      @(posedge clk);
      cycles++;
      #1;
    end
    slice_valid = 0;
    checks++;
    if (int'(acc) != expected || cycles != BITS) begin
      failures++;
      $display("acc %0d after %0d clocks, expected %0d after %0d", acc, cycles, expected, BITS);
    end
  endtask

  initial begin
    prod = '0; slice_valid = 0; slice_first = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int t = 0; t < 100; t++) begin
      for (int i = 0; i < N; i++) begin
        w[i] = BITS'($urandom);
        qv[i] = 1'($urandom);
      end
      run_trial();
    end
    for (int i = 0; i < N; i++) begin w[i] = 8'h80; qv[i] = 1'b1; end
    run_trial();
    for (int i = 0; i < N; i++) begin w[i] = 8'h7f; qv[i] = 1'b1; end
    run_trial();
    for (int i = 0; i < N; i++) begin w[i] = BITS'($urandom); qv[i] = 1'b0; end
    run_trial();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
