// tb_anneal_ctrl -- self-checking test of the annealing control flow.
// A loader model answers every ld_start with ld_done after a few clocks. A
// monitor turns the controller's outputs into an event trace (load, refresh,
// pseudo-read, commit of index k, end of sweep, done), and the trace is
// compared with one generated here from the flow-chart rules for several
// configurations. The monitor also checks that every update presents the
// BITS slices sign first, one per clock, with the commit on the last one,
// and that the pinned index is never visited.
module tb_anneal_ctrl;
  import dcim_pkg::*;
  localparam int unsigned N    = 7;
  localparam int unsigned BITS = 8;
  localparam int unsigned PIN  = N - 1;
  localparam int unsigned IW   = $clog2(N);
  localparam int unsigned SW   = $clog2(BITS);

  localparam int EV_LOAD = 1, EV_REFRESH = 2, EV_PR = 3, EV_SWEEP = 4, EV_DONE = 5, EV_COMMIT = 100;

  logic          clk = 0;
  logic          rst_n = 0;
  logic          start;
  anneal_cfg_t   cfg, cfg_active;
  ctrl_state_t   state;
  logic          busy, done;
  logic [15:0]   sweep;
  logic          ld_start, ld_refresh, ld_done;
  logic          init_en, commit;
  logic [IW-1:0] idx;
  logic          pr_en;
  logic [SW-1:0] slice;
  logic          slice_valid, slice_first;
  logic          sched_start, sweep_done;

  int checks = 0, failures = 0;
  int trace[$];
  int expected[$];
  int slice_run = 0;
  int ld_wait = -1;
  logic done_d = 0;

  anneal_ctrl #(.N(N), .BITS(BITS), .PIN(PIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // loader model
  always @(posedge clk) begin
    ld_done <= 1'b0;
    if (ld_start) ld_wait <= 3 + $urandom_range(4);
    else if (ld_wait > 0) ld_wait <= ld_wait - 1;
    else if (ld_wait == 0) begin ld_done <= 1'b1; ld_wait <= -1; end
  end

  // monitor
  always @(posedge clk) if (rst_n) begin
    done_d <= done;
    // sweep_done is registered and so shares a clock with the next step's start
    if (sweep_done) trace.push_back(EV_SWEEP);
    if (ld_start) trace.push_back(ld_refresh ? EV_REFRESH : EV_LOAD);
    if (pr_en) trace.push_back(EV_PR);
    if (slice_valid) begin
      checks++;
      if (int'(slice) != BITS - 1 - slice_run || slice_first != (slice_run == 0)) begin
        failures++;
        $display("slice order broken: slice %0d at position %0d", slice, slice_run);
      end
      if (commit != (slice_run == BITS - 1)) begin
        failures++;
        $display("commit at position %0d", slice_run);
      end
      slice_run = (slice_run == BITS - 1) ? 0 : slice_run + 1;
    end
    if (commit) begin
      trace.push_back(EV_COMMIT + int'(idx));
      if (int'(idx) == PIN) begin failures++; $display("pinned index visited"); end
    end
    if (done && !done_d) trace.push_back(EV_DONE);
  end

  task automatic run(int sweeps, int pri, int refr);
    int u = 0;
    trace.delete();
    expected.delete();
    expected.push_back(EV_LOAD);
    for (int s = 0; s < sweeps; s++) begin
      for (int k = 0; k < N; k++) begin
        if (k == PIN) continue;
        if (pri != 0 && (u % pri) == 0) expected.push_back(EV_PR);
        expected.push_back(EV_COMMIT + k);
        u++;
      end
      expected.push_back(EV_SWEEP);
      if (s != sweeps - 1 && refr != 0 && ((s + 1) % refr) == 0) expected.push_back(EV_REFRESH);
    end
    expected.push_back(EV_DONE);
    cfg = '0;
    cfg.n_sweeps = 16'(sweeps);
    cfg.pr_interval = 16'(pri);
    cfg.refresh_sweeps = 16'(refr);
    cfg.vddm_hold = 16'd2;
    cfg.vddm_end = 4'd9;
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (cfg_active != cfg) begin failures++; $display("cfg not latched"); end
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    checks++;
    if (trace != expected) begin
      failures++;
      $display("trace mismatch (sweeps=%0d pr=%0d refresh=%0d): got %0d events, expected %0d",
               sweeps, pri, refr, trace.size(), expected.size());
      foreach (trace[n]) if (n < expected.size() && trace[n] != expected[n]) begin
        $display("  first difference at %0d: %0d vs %0d", n, trace[n], expected[n]);
        break;
      end
    end
    checks++;
    if (int'(sweep) != sweeps) begin failures++; $display("sweep count %0d", sweep); end
  endtask

  initial begin
    start = 0; cfg = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(3, 1, 1);
    run(4, 4, 2);
    run(2, 0, 0);
    run(5, 3, 3);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
