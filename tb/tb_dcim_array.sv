// tb_dcim_array -- self-checking test of the SRAM compute-in-memory model.
//  1. Row writes, then the compute port: for every column and bit-slice, with
//     random spins, prod[i] must equal word[i][col] bit slice AND q[i].
//  2. A pseudo-read at 0.90 V (code 12) must leave the contents unchanged.
//  3. A pseudo-read at 0.30 V (code 0) must never touch a sign bit and must
//     flip stored-0 and stored-1 magnitude bits at roughly the programmed
//     asymmetric rates (35.0 % and 58.5 %); at 0.70 V (code 8) at roughly
//     2 % and 11 %.
//  4. Rewriting the rows restores the nominal contents (refresh).
module tb_dcim_array;
  import dcim_pkg::*;
  localparam int unsigned N    = 24;
  localparam int unsigned BITS = 8;
  localparam int unsigned IW   = $clog2(N);
  localparam int unsigned SW   = $clog2(BITS);

  logic                   clk = 0;
  logic                   wr_en, pr_en;
  logic [IW-1:0]          wr_row, col_sel;
  logic [N-1:0][BITS-1:0] wr_data;
  vddm_code_t             vddm_code;
  logic [SW-1:0]          slice_sel;
  logic [N-1:0]           wl_q, prod;

  int checks = 0, failures = 0;
  logic [BITS-1:0] nom [N][N];
  logic [BITS-1:0] rd  [N][N];

  dcim_array #(.N(N), .BITS(BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic write_all();
    for (int i = 0; i < N; i++) begin
      wr_en = 1;
      wr_row = IW'(i);
      for (int j = 0; j < N; j++) wr_data[j] = nom[i][j];
      @(negedge clk);
    end
    wr_en = 0;
  endtask

  // Read the whole array through the compute port with all spins at 1.
  task automatic read_all();
    wl_q = '1;
    for (int j = 0; j < N; j++) begin
      for (int b = 0; b < BITS; b++) begin
        col_sel = IW'(j);
        slice_sel = SW'(b);
        #1;
        for (int i = 0; i < N; i++) rd[i][j][b] = prod[i];
      end
    end
  endtask

  task automatic pseudo_read(int code);
    vddm_code = vddm_code_t'(code);
    pr_en = 1;
    @(negedge clk);
    pr_en = 0;
  endtask

  task automatic check_rates(int code, int p0_exp, int p1_exp, int tol);
    int z = 0, o = 0, zf = 0, of = 0, sign_changes = 0;
    pseudo_read(code);
    read_all();
    for (int i = 0; i < N; i++)
      for (int j = 0; j < N; j++) begin
        if (rd[i][j][BITS-1] != nom[i][j][BITS-1]) sign_changes++;
        for (int b = 0; b < BITS - 1; b++) begin
          if (nom[i][j][b]) begin o++; if (!rd[i][j][b]) of++; end
          else              begin z++; if ( rd[i][j][b]) zf++; end
        end
      end
    $display("code %0d: 0->1 %0d/%0d, 1->0 %0d/%0d, sign changes %0d", code, zf, z, of, o, sign_changes);
    checks++;
    if (sign_changes != 0) failures++;
    checks++;
    if ((zf * 1000 / z) < p0_exp - tol || (zf * 1000 / z) > p0_exp + tol) failures++;
    checks++;
    if ((of * 1000 / o) < p1_exp - tol || (of * 1000 / o) > p1_exp + tol) failures++;
  endtask

  initial begin
    wr_en = 0; pr_en = 0; wr_row = '0; wr_data = '0; vddm_code = 12;
    col_sel = '0; slice_sel = '0; wl_q = '0;
    for (int i = 0; i < N; i++) for (int j = 0; j < N; j++) nom[i][j] = BITS'($urandom);
    @(negedge clk);
    write_all();
    // 1. compute port
    for (int j = 0; j < N; j++)
      for (int b = 0; b < BITS; b++) begin
        wl_q = N'({$urandom, $urandom});
        col_sel = IW'(j);
        slice_sel = SW'(b);
        #1;
        for (int i = 0; i < N; i++) begin
          checks++;
          if (prod[i] !== (nom[i][j][b] & wl_q[i])) begin
            failures++;
            $display("prod[%0d] col %0d slice %0d wrong", i, j, b);
          end
        end
      end
    // 2. no disturbance at high VDDM
    pseudo_read(12);
    read_all();
    checks++;
    if (rd != nom) begin failures++; $display("contents changed at 0.90 V"); end
    // 3. asymmetric disturbance at low VDDM, sign bits held
    check_rates(0, 350, 585, 60);
    write_all();
    check_rates(8, 20, 110, 35);
    // 4. refresh restores
    write_all();
    read_all();
    checks++;
    if (rd != nom) begin failures++; $display("refresh did not restore"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
