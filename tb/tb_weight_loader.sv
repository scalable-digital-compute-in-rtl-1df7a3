// tb_weight_loader -- self-checking test of the row streamer. A host model
// offers row r only when the loader asks for it, with random wait states;
// a scoreboard records every array write and checks the row order, the data,
// that each of the N rows is written exactly once per pass, the done pulse,
// and that with no wait states a pass takes exactly N clocks.
module tb_weight_loader;
  localparam int unsigned N    = 23;
  localparam int unsigned BITS = 8;
  localparam int unsigned IW   = $clog2(N);

  logic                   clk = 0;
  logic                   rst_n = 0;
  logic                   start, busy, done, req, w_valid, w_ready, wr_en;
  logic [IW-1:0]          row, wr_row;
  logic [N-1:0][BITS-1:0] w_data, wr_data;

  int checks = 0, failures = 0;
  int writes = 0, dones = 0;
  int seed;

  weight_loader #(.N(N), .BITS(BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic logic [N-1:0][BITS-1:0] row_data(int s, int r);
    logic [N-1:0][BITS-1:0] d;
    for (int j = 0; j < N; j++) d[j] = BITS'(s * 31 + r * 7 + j * 13);
    return d;
  endfunction

  always @(posedge clk) begin
    if (wr_en) begin
      checks++;
      if (int'(wr_row) != writes || wr_data !== row_data(seed, writes)) begin
        failures++;
        $display("write %0d: row %0d wrong", writes, wr_row);
      end
      writes++;
    end
    if (done) dones++;
  end

  task automatic pass(int s, bit waits, output int clocks);
    seed = s;
    writes = 0;
    dones = 0;
    clocks = 0;
    start = 1;
    @(negedge clk);
    start = 0;
    while (!done) begin
      w_valid = req && (!waits || $urandom_range(2) != 0);
      w_data  = w_valid ? row_data(s, int'(row)) : '0;
      @(negedge clk);
      clocks++;
    end
    w_valid = 0;
    @(negedge clk);
    checks++;
    if (writes != N || dones != 1 || busy) begin
      failures++;
      $display("pass: %0d writes, %0d done pulses", writes, dones);
    end
  endtask

  initial begin
    int clocks;
    start = 0; w_valid = 0; w_data = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(negedge clk);
    pass(1, 1, clocks);
    pass(2, 0, clocks);
    checks++;
    if (clocks != N) begin failures++; $display("full-rate pass took %0d clocks", clocks); end
    pass(3, 1, clocks);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
