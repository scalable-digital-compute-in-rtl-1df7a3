// tb_workloads -- annealing runs at the three problem sizes of the BNN
// robustness study (183, 319 and 1066 QUBO variables), all on the default
// 1067 x 1067 array.
//
// The QUBO matrices themselves come from BNNs and are not reproduced here;
// each run uses a random symmetric QUBO Q of the same size with even
// diagonal entries. The host-side embedding is done in this testbench:
// Qt[i][j] = Q[i][j] off the diagonal, Qt[i][PIN] = Qt[PIN][i] = Q[i][i]/2,
// Qt[i][i] = 0, and every row/column beyond the problem is zero, so unused
// variables see a zero field and keep their initial 0.
//
// Schedule: 30 sweeps, VDDM from 0.30 V up one 50 mV code per sweep, one
// pseudo-read every 133 updates (8 per sweep), weights refreshed after every
// sweep. From the tenth sweep on the array is exact, so the greedy scan
// settles: once a sweep flips nothing, the terminal state must be a
// single-flip local minimum of the ORIGINAL QUBO, judged with
// dE_i = (1 - 2 q_i)(Q_ii + 2 sum_{j != i} Q_ij q_j); this checks the
// pinned-one embedding end to end. Also checked: the padding stays 0, the
// pinned variable stays 1, and the energy q^T Q q fell from its start value.
module tb_workloads;
  import dcim_pkg::*;
  localparam int unsigned N    = N_DEFAULT;
  localparam int unsigned BITS = BITS_DEFAULT;
  localparam int unsigned PIN  = N - 1;
  localparam int unsigned IW   = $clog2(N);
  localparam int SIZES [3] = '{183, 319, 1066};

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
  int n_flip = 0, cyc = 0;

  byte qo [N][N];   // original QUBO (only [0:n-1][0:n-1] used)
  byte qt [N][N];   // embedded matrix streamed to the array

  dcim_ising_top dut (.*);

  always #5 clk = ~clk;
  // flip and sweep_done are both registered, so the flip of a sweep's last
  // update shows in the same clock as its sweep_done
  int last_sweep_flips = 0, cur_flips = 0;
  always @(posedge clk) begin
    cyc++;
    if (flip) n_flip++;
    if (dut.sweep_done) begin
      last_sweep_flips = cur_flips + int'(flip);
      cur_flips = 0;
    end else if (flip) cur_flips++;
  end

  initial begin
    #2_000_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(negedge clk) begin
    w_valid = w_req;
    if (w_req) for (int j = 0; j < N; j++) w_data[j] = qt[w_row][j];
  end

  function automatic longint energy(logic [N-1:0] v, int n);
    longint e = 0;
    for (int i = 0; i < n; i++)
      if (v[i]) for (int j = 0; j < n; j++) if (v[j]) e += longint'(qo[i][j]);
    return e;
  endfunction

  task automatic build(int n);
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) begin qo[i][j] = 0; qt[i][j] = 0; end
    for (int i = 0; i < n; i++) begin
      qo[i][i] = byte'(2 * ($urandom_range(40) - 20));
      for (int j = i + 1; j < n; j++) begin
        qo[i][j] = byte'($urandom_range(40) - 20);
        qo[j][i] = qo[i][j];
        qt[i][j] = qo[i][j];
        qt[j][i] = qo[i][j];
      end
      qt[i][PIN] = byte'(qo[i][i] / 2);
      qt[PIN][i] = qt[i][PIN];
    end
  endtask

  task automatic run(int n);
    logic [N-1:0] q0;
    longint e0, e1;
    int c0, local_bad = 0, pad_bad = 0;
    build(n);
    q0 = '0;
    for (int i = 0; i < n; i++) q0[i] = 1'($urandom);
    cfg = '0;
    cfg.n_sweeps = 30;
    cfg.pr_interval = 133;
    cfg.refresh_sweeps = 1;
    cfg.vddm_hold = 1;
    cfg.vddm_start = 0;
    cfg.vddm_end = 12;
    init_q = q0;
    n_flip = 0;
    c0 = cyc;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    repeat (2) @(negedge clk);
    for (int i = 0; i < n; i++) begin
      int f = int'(qo[i][i]);
      for (int j = 0; j < n; j++) if (j != i && q[j]) f += 2 * int'(qo[i][j]);
      if ((q[i] ? -f : f) < 0) local_bad++;
    end
    for (int i = n; i < N - 1; i++) if (q[i]) pad_bad++;
    e0 = energy(q0, n);
    e1 = energy(q, n);
    $display("n=%0d: energy %0d -> %0d, %0d flips (%0d in the last sweep), %0d clocks, %0d not at local minimum, %0d padding set",
             n, e0, e1, n_flip, last_sweep_flips, cyc - c0, local_bad, pad_bad);
    checks++;
    if (last_sweep_flips != 0 || local_bad != 0) failures++;
    checks++;
    if (pad_bad != 0 || !q[PIN]) failures++;
    checks++;
    if (e1 >= e0) failures++;
  endtask

  initial begin
    start = 0; cfg = '0; init_q = '0; w_valid = 0; w_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    foreach (SIZES[k]) run(SIZES[k]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
