// tb_vddm_sched -- self-checking test of the VDDM staircase. Starts a
// schedule from code 0 to code 9 with a hold of 3 sweeps, feeds sweep_done
// pulses and checks the code after every sweep against start + sweeps/hold
// (clamped at the end code), the step pulses, a restart, and hold = 0.
module tb_vddm_sched;
  import dcim_pkg::*;

  logic        clk = 0;
  logic        rst_n = 0;
  logic        start, sweep_done;
  vddm_code_t  vddm_start, vddm_end, code;
  logic [15:0] vddm_hold;
  logic        step;

  int checks = 0, failures = 0, steps = 0;

  vddm_sched dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) if (step) steps++;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(int c0, int c1, int hold, int sweeps);
    vddm_start = vddm_code_t'(c0);
    vddm_end = vddm_code_t'(c1);
    vddm_hold = 16'(hold);
    start = 1;
    @(negedge clk);
    start = 0;
    checks++;
    if (int'(code) != c0) begin failures++; $display("start code %0d", code); end
    steps = 0;
    for (int k = 1; k <= sweeps; k++) begin
      automatic int exp = (hold == 0) ? c0 : ((c0 + k / hold > c1) ? c1 : c0 + k / hold);
      sweep_done = 1;
      @(negedge clk);
      sweep_done = 0;
      repeat ($urandom_range(3)) @(negedge clk);
      checks++;
      if (int'(code) != exp) begin
        failures++;
        $display("after %0d sweeps code %0d, expected %0d", k, code, exp);
      end
    end
    @(negedge clk);
    checks++;
    if (steps != int'(code) - c0) begin failures++; $display("%0d step pulses", steps); end
  endtask

  initial begin
    start = 0; sweep_done = 0; vddm_start = '0; vddm_end = '0; vddm_hold = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    run(0, 9, 3, 40);
    run(2, 12, 1, 15);
    run(4, 12, 0, 5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
