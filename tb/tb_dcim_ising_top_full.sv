// tb_dcim_ising_top_full -- one complete annealing run of the annealer at its
// default size: a 1067 x 1067 matrix of 8-bit words (1066 free variables and
// the pinned-one variable, 9,112,712 stored bits).
//
// The host model streams a random symmetric zero-diagonal matrix. The run has
// three sweeps: the first at VDDM code 8 (0.70 V, noisy pseudo-read), the
// other two at 0.75 V and 0.80 V, where the array is exact. The weights are
// refreshed after every sweep. Checks: the pinned variable stays 1, no sign
// bit is disturbed by the noisy pseudo-read, the noise did change stored
// bits, consecutive updates are 8 clocks apart (9 with a pseudo-read), and
// the two exact sweeps reproduce a reference sequential greedy scan started
// from the state the hardware reached after the first sweep.
module tb_dcim_ising_top_full;
  import dcim_pkg::*;
  localparam int unsigned N    = N_DEFAULT;
  localparam int unsigned BITS = BITS_DEFAULT;
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
  int n_pr = 0, n_refresh = 0, n_flip = 0, spacing_bad = 0, spacing_ok = 0;
  int flipped_bits = 0;

  byte qt [N][N];
  logic [N-1:0] q_after_first;

  dcim_ising_top dut (.*);

  always #5 clk = ~clk;

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

  int last_commit = -1, cyc = 0;
  bit pr_since = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (dut.pr_en) begin n_pr++; pr_since = 1; end
    if (dut.ld_start && dut.ld_refresh) n_refresh++;
    if (flip) n_flip++;
    if (dut.commit) begin
      if (last_commit >= 0) begin
        if (cyc - last_commit == BITS + int'(pr_since)) spacing_ok++;
        else spacing_bad++;
      end
      last_commit = cyc;
      pr_since = 0;
    end
    if (dut.w_req) last_commit = -1;
    if (dut.sweep_done && sweep == 16'd1) q_after_first = q;
  end

  // After the first (noisy) pseudo-read, compare the array with the nominal.
  initial begin
    wait (rst_n);
    @(posedge clk iff dut.pr_en);
    @(negedge clk);
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        automatic logic [BITS-1:0] w = dut.u_array.mem[i][j];
        if (w != BITS'(qt[i][j])) flipped_bits += $countones(w ^ BITS'(qt[i][j]));
        if (w[BITS-1] != qt[i][j][7]) begin
          checks++;
          failures++;
        end
      end
  end

  function automatic logic [N-1:0] ref_run(logic [N-1:0] v, int sweeps);
    for (int s = 0; s < sweeps; s++)
      for (int i = 0; i < N; i++) begin
        int f = 0;
        if (i == PIN) continue;
        for (int j = 0; j < N; j++) if (v[j]) f += int'(qt[i][j]);
        if (v[i] ? (f > 0) : (f < 0)) v[i] = ~v[i];
      end
    return v;
  endfunction

  initial begin
    logic [N-1:0] qr;
    start = 0; cfg = '0; init_q = '0; w_valid = 0; w_data = '0;
    for (int i = 0; i < N; i++) begin
      qt[i][i] = 0;
      for (int j = i + 1; j < N; j++) begin
        qt[i][j] = byte'($urandom);
        qt[j][i] = qt[i][j];
      end
    end
    for (int i = 0; i < N; i++) init_q[i] = 1'($urandom);
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    cfg.n_sweeps = 3;
    cfg.pr_interval = 16'(N - 1);
    cfg.refresh_sweeps = 1;
    cfg.vddm_hold = 1;
    cfg.vddm_start = 8;
    cfg.vddm_end = 12;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) @(negedge clk);
    repeat (3) @(negedge clk);
    qr = ref_run(q_after_first, 2);
    $display("pseudo-reads=%0d refreshes=%0d flips=%0d noisy bits=%0d spacing ok=%0d bad=%0d",
             n_pr, n_refresh, n_flip, flipped_bits, spacing_ok, spacing_bad);
    checks++;
    if (q !== qr) begin failures++; $display("terminal state differs from the reference"); end
    checks++;
    if (!q[PIN]) begin failures++; $display("pinned variable lost"); end
    checks++;
    if (n_pr != 3 || n_refresh != 2 || flipped_bits == 0) begin failures++; $display("noise/refresh counts wrong"); end
    checks++;
    if (spacing_bad != 0 || spacing_ok < 3 * (N - 2)) begin failures++; $display("update spacing wrong"); end
    checks++;
    if (int'(sweep) != 3 || int'(vddm_code) != 11) begin failures++; $display("sweep %0d code %0d", sweep, vddm_code); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
