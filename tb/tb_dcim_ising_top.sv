// tb_dcim_ising_top -- end-to-end test of the annealer at a reduced size
// (12 x 12 matrix: 11 free variables and the pinned-one variable).
//
// A host model keeps the nominal embedded matrix Qt (random symmetric 8-bit
// words, zero diagonal, pinned column = half the original diagonal) and
// streams its rows on request, with random wait states. Three runs:
//  A. Noise-free (VDDM code 12 throughout, pseudo-reads enabled but without
//     effect): the terminal state must equal a reference sequential greedy
//     scan computed here in integer arithmetic, the energy must not rise,
//     and consecutive updates must be BITS (+1 for a pseudo-read) clocks apart.
//  B. Annealed: VDDM swept from 0.30 V upward, a pseudo-read before every
//     update, a refresh after every sweep. The sign bits in the array must
//     never change, noise must really have altered weights, and after the
//     last noise-free sweeps the terminal state must be a single-flip local
//     minimum of the nominal matrix.
//  C. Restart from DONE with a new initial state and a matrix in which
//     variable 0 is decoupled (its field is always 0), noise-free, against
//     the reference again.
// Mechanisms counted (each must occur): load, refresh, pseudo-read, pseudo-
// read that changed stored bits, VDDM step, spin flip, host wait state,
// update with dE = 0 (kept), restart.
module tb_dcim_ising_top;
  import dcim_pkg::*;
  localparam int unsigned N    = 12;
  localparam int unsigned BITS = 8;
  localparam int unsigned PIN  = N - 1;
  localparam int unsigned IW   = $clog2(N);

  logic                   clk = 0;
  logic                   rst_n = 0;
  logic                   start;
  anneal_cfg_t            cfg;
  logic [N-1:0]           init_q;
  logic                   busy, done;
  ctrl_state_t            state;
  logic [15:0]            sweep;
  logic                   w_req, w_refresh, w_valid, w_ready;
  logic [IW-1:0]          w_row;
  logic [N-1:0][BITS-1:0] w_data;
  vddm_code_t             vddm_code;
  logic [N-1:0]           q;
  logic                   flip;

  int checks = 0, failures = 0;
  int n_load = 0, n_refresh = 0, n_pr = 0, n_pr_effect = 0, n_vstep = 0;
  int n_flip = 0, n_wait = 0, n_tie = 0, n_restart = 0;
  bit host_waits = 0;

  int qt [N][N];

  dcim_ising_top #(.N(N), .BITS(BITS), .PIN(PIN)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // Host: serves the requested row, sometimes late.
  always @(negedge clk) begin
    w_valid = 0;
    w_data = '0;
    if (w_req) begin
      if (host_waits && $urandom_range(3) == 0) begin
        n_wait++;
      end else begin
        w_valid = 1;
        for (int j = 0; j < N; j++) w_data[j] = BITS'(qt[w_row][j]);
      end
    end
  end

  // Mechanism counters and per-update spacing.
  int last_commit = -1, cyc = 0;
  bit pr_since = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.ld_start && !dut.ld_refresh) n_load++;
    if (dut.ld_start && dut.ld_refresh) n_refresh++;
    if (dut.pr_en) begin n_pr++; pr_since = 1; end
    if (dut.vddm_step) n_vstep++;
    if (flip) n_flip++;
    if (dut.commit) begin
      if (last_commit >= 0 && !dut.ld_start) begin
        checks++;
        if (cyc - last_commit != BITS + int'(pr_since)) begin
          failures++;
          $display("update spacing %0d clocks", cyc - last_commit);
        end
      end
      last_commit = cyc;
      pr_since = 0;
    end
    if (dut.ld_start || dut.w_req) last_commit = -1;
  end

  // Updates whose energy change is zero keep their spin.
  always @(negedge clk) if (rst_n && dut.commit && dut.s_next == 0) n_tie++;

  // Count pseudo-reads that really changed the array; check sign bits.
  always @(negedge clk) if (rst_n && dut.pr_en) begin
    @(posedge clk); #1;
    begin
      automatic bit changed = 0;
      for (int i = 0; i < N; i++)
        for (int j = 0; j < N; j++) begin
          if (dut.u_array.mem[i][j] != BITS'(qt[i][j])) changed = 1;
          if (dut.u_array.mem[i][j][BITS-1] != 1'(BITS'(qt[i][j]) >> (BITS - 1))) begin
            failures++;
            $display("sign bit of [%0d][%0d] disturbed", i, j);
          end
        end
      checks++;
      if (changed) n_pr_effect++;
    end
  end

  function automatic int field(logic [N-1:0] v, int i);
    int s = 0;
    for (int j = 0; j < N; j++) s += v[j] ? qt[i][j] : 0;
    return s;
  endfunction

  function automatic int energy(logic [N-1:0] v);
    int e = 0;
    for (int i = 0; i < N; i++) e += v[i] ? field(v, i) : 0;
    return e;
  endfunction

  function automatic logic [N-1:0] ref_run(logic [N-1:0] v, int sweeps);
    v[PIN] = 1'b1;
    for (int s = 0; s < sweeps; s++)
      for (int i = 0; i < N; i++) begin
        int f;
        if (i == PIN) continue;
        f = field(v, i);
        if (v[i] ? (f > 0) : (f < 0)) v[i] = ~v[i];
      end
    return v;
  endfunction

  task automatic make_matrix();
    for (int i = 0; i < N; i++) qt[i][i] = 0;
    for (int i = 0; i < N; i++)
      for (int j = i + 1; j < N; j++) begin
        // small values make dE = 0 ties reachable
        qt[i][j] = (j == PIN) ? $urandom_range(12) - 6 : $urandom_range(30) - 15;
        qt[j][i] = qt[i][j];
      end
  endtask

  task automatic run(anneal_cfg_t c, logic [N-1:0] q0);
    cfg = c;
    init_q = q0;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    anneal_cfg_t c;
    logic [N-1:0] q0, qr;
    start = 0; cfg = '0; init_q = '0;
    make_matrix();
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);

    // A. noise-free against the reference
    host_waits = 1;
    c = '0;
    c.n_sweeps = 4; c.pr_interval = 1; c.refresh_sweeps = 2;
    c.vddm_hold = 1; c.vddm_start = 12; c.vddm_end = 12;
    q0 = N'({$urandom, $urandom});
    run(c, q0);
    qr = ref_run(q0, 4);
    checks++;
    if (q !== qr) begin failures++; $display("A: q=%b ref=%b", q, qr); end
    checks++;
    if (energy(q) > energy({1'b1, q0[N-2:0]})) begin failures++; $display("A: energy rose"); end
    checks++;
    if (int'(sweep) != 4) begin failures++; $display("A: sweep count %0d", sweep); end

    // B. annealed: 0.30 V up to 0.90 V, one code per sweep
    c = '0;
    c.n_sweeps = 16; c.pr_interval = 1; c.refresh_sweeps = 1;
    c.vddm_hold = 1; c.vddm_start = 0; c.vddm_end = 12;
    q0 = N'({$urandom, $urandom});
    run(c, q0);
    checks++;
    if (!q[PIN]) begin failures++; $display("B: pinned variable lost"); end
    for (int i = 0; i < N; i++) begin
      automatic int f = field(q, i);
      if (i == PIN) continue;
      checks++;
      if (q[i] ? (f > 0) : (f < 0)) begin
        failures++;
        $display("B: variable %0d not at a local minimum (field %0d)", i, f);
      end
    end
    checks++;
    if (vddm_code != 12) begin failures++; $display("B: final VDDM code %0d", vddm_code); end

    // C. restart from DONE, no wait states; variable 0 is decoupled so that
    //    its field is always 0 and the tie rule (keep the spin) is exercised
    for (int j = 0; j < N; j++) begin qt[0][j] = 0; qt[j][0] = 0; end
    host_waits = 0;
    n_restart++;
    c = '0;
    c.n_sweeps = 3; c.pr_interval = 5; c.refresh_sweeps = 0;
    c.vddm_hold = 0; c.vddm_start = 11; c.vddm_end = 11;
    q0 = N'({$urandom, $urandom});
    run(c, q0);
    qr = ref_run(q0, 3);
    checks++;
    if (q !== qr) begin failures++; $display("C: q=%b ref=%b", q, qr); end

    $display("loads=%0d refreshes=%0d pseudo-reads=%0d effective=%0d vddm steps=%0d flips=%0d waits=%0d ties=%0d restarts=%0d",
             n_load, n_refresh, n_pr, n_pr_effect, n_vstep, n_flip, n_wait, n_tie, n_restart);
    checks++;
    if (n_load == 0 || n_refresh == 0 || n_pr == 0 || n_pr_effect == 0 || n_vstep == 0 ||
        n_flip == 0 || n_wait == 0 || n_tie == 0 || n_restart == 0) begin
      failures++;
      $display("a mechanism never occurred");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
