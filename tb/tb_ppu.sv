// tb_ppu -- self-checking testbench of the Photonic Processing Unit.
// For random K, loads a random A tile (L rows of K signed 10-bit mantissas,
// row-major) and B tile (L columns, column-major) with random gaps on the
// input streams, then collects the L x L result tile under random
// backpressure. Each result must equal the exact signed dot product of its
// A row and B column computed directly in the testbench. Also checks the
// photonic pass: the DAC Players play exactly L*L*K samples in one gap-free
// burst per tile pair (four 5-bit products, i.e. one 10-bit product, per
// sample), and that the unit returns to idle.
module tb_ppu;
  import lmhp_pkg::*;

  localparam int L = 2, MANT_W = 10, SLICE_W = 5, K_MAX = 64, DEPTH = 256;
  localparam int ACC_W = acc_width(MANT_W, K_MAX);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic                    start, idle, a_valid, a_ready, a_sign, b_valid, b_ready, b_sign;
  logic [6:0]              cfg_k;
  logic [MANT_W-1:0]       a_mag, b_mag;
  logic                    res_valid, res_ready, res_last, res_row, res_col;
  logic signed [ACC_W-1:0] res_data;

  ppu #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .K_MAX(K_MAX), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A [L][K_MAX], B [K_MAX][L];   // signed mantissas
  int play_cycles, play_bursts;
  logic prev_play;
  always @(posedge clk) begin
    if (dut.dp_valid[0]) play_cycles++;
    if (dut.dp_valid[0] && !prev_play) play_bursts++;
    prev_play <= dut.dp_valid[0];
  end

  task automatic send_a(int k);
    for (int r = 0; r < L; r++) for (int t = 0; t < k; t++) begin
      @(negedge clk); a_valid = 0;
      while ($urandom % 4 == 0) @(negedge clk);
      a_valid = 1; a_sign = (A[r][t] < 0); a_mag = MANT_W'(A[r][t] < 0 ? -A[r][t] : A[r][t]);
      @(posedge clk); while (!a_ready) @(posedge clk);
    end
    @(negedge clk); a_valid = 0;
  endtask
  task automatic send_b(int k);
    for (int c = 0; c < L; c++) for (int t = 0; t < k; t++) begin
      @(negedge clk); b_valid = 0;
      while ($urandom % 4 == 0) @(negedge clk);
      b_valid = 1; b_sign = (B[t][c] < 0); b_mag = MANT_W'(B[t][c] < 0 ? -B[t][c] : B[t][c]);
      @(posedge clk); while (!b_ready) @(posedge clk);
    end
    @(negedge clk); b_valid = 0;
  endtask

  task automatic run(int k);
    int n;
    for (int r = 0; r < L; r++) for (int t = 0; t < K_MAX; t++) A[r][t] = int'($urandom % 2047) - 1023;
    for (int t = 0; t < K_MAX; t++) for (int c = 0; c < L; c++) B[t][c] = int'($urandom % 2047) - 1023;
    play_cycles = 0; play_bursts = 0;
    cfg_k = 7'(k);
    check(idle, "idle before start");
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    fork send_a(k); send_b(k); join
    n = 0;
    while (n < L * L) begin
      @(negedge clk);
      res_ready = ($urandom % 2) == 1;
      #1;
      if (res_valid && res_ready) begin
        longint e = 0;
        int r, c;
        r = n / L; c = n % L;
        for (int t = 0; t < k; t++) e += longint'(A[r][t]) * longint'(B[t][c]);
        check(int'(res_row) == r && int'(res_col) == c, "row-major order");
        check(longint'(res_data) == e, $sformatf("K=%0d C[%0d][%0d] got %0d exp %0d", k, r, c, res_data, e));
        check(res_last == (n == L * L - 1), "last");
        n++;
      end
    end
    @(negedge clk); res_ready = 0;
    @(negedge clk);
    check(idle, "idle after tile");
    check(play_cycles == L * L * k, $sformatf("played %0d samples, exp %0d", play_cycles, L * L * k));
    check(play_bursts == 1, "single trigger per tile pair");
  endtask

  initial begin
    start = 0; cfg_k = 1; a_valid = 0; b_valid = 0; a_sign = 0; b_sign = 0; a_mag = '0; b_mag = '0; res_ready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);
    run(4);
    run(1);
    for (int i = 0; i < 6; i++) run(1 + $urandom % K_MAX);
    run(K_MAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
