// tb_lmhp_lane -- self-checking testbench of one processing lane.
// Assigns random tile pairs (random K, random tile coordinates, mantissa
// width 10 and other run-time widths), streams the L rows of the A tile and
// the L columns of the B tile as FP32 blocks (one-cycle gap between blocks,
// as the scheduler does) and collects the L x L FP32 results. The reference
// is built independently: block exponents and mantissas from tb_ref_pkg, an
// exact integer dot product, scaling by 2^(E_A + E_B) and FP32 rounding.
// Results must match bit for bit and carry the tile coordinates.
module tb_lmhp_lane;
  import lmhp_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 2, MANT_W = 10, EXP_W = 6, K_MAX = 64, DEPTH = 256, TW = 16;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [6:0]    cfg_k;
  logic [3:0]    cfg_mant_bits;
  logic          assign_en, idle, sat;
  logic [TW-1:0] assign_p, assign_r, res_p, res_r;
  logic          a_valid, a_ready, a_last, b_valid, b_ready, b_last;
  fp32_t         a_data, b_data, res_data;
  logic          res_valid, res_ready, res_row, res_col;

  lmhp_lane #(.L(L), .MANT_W(MANT_W), .EXP_W(EXP_W), .K_MAX(K_MAX), .DEPTH(DEPTH), .TW(TW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (300000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [31:0] A [L][K_MAX], B [K_MAX][L];

  task automatic send_block(bit is_b, int j, int k);
    for (int t = 0; t < k; t++) begin
      @(negedge clk);
      if (!is_b) begin
        while (!a_ready) @(negedge clk);
        a_valid = 1; a_data = A[j][t]; a_last = (t == k - 1);
      end else begin
        while (!b_ready) @(negedge clk);
        b_valid = 1; b_data = B[t][j]; b_last = (t == k - 1);
      end
    end
    @(negedge clk); a_valid = 0; b_valid = 0; a_last = 0; b_last = 0;
  endtask

  function automatic logic [31:0] ref_c(int r, int c, int k, int b);
    logic [31:0] row[$], col[$];
    int ea, eb;
    longint p = 0;
    for (int t = 0; t < k; t++) begin row.push_back(A[r][t]); col.push_back(B[t][c]); end
    ea = bfp_shared_exp(row, b, EXP_W);
    eb = bfp_shared_exp(col, b, EXP_W);
    for (int t = 0; t < k; t++) begin
      longint ma, mb;
      ma = bfp_mantissa(A[r][t], ea, b); if (A[r][t][31]) ma = -ma;
      mb = bfp_mantissa(B[t][c], eb, b); if (B[t][c][31]) mb = -mb;
      p += ma * mb;
    end
    return real_to_fp32_rne(real'(p) * pow2(ea + eb));
  endfunction

  task automatic run(int k, int b, int ebase, int espread);
    int n, p, r;
    for (int i = 0; i < L; i++) for (int t = 0; t < K_MAX; t++) begin
      A[i][t] = rand_fp32(ebase, espread, 10);
      B[t][i] = rand_fp32(ebase, espread, 10);
    end
    p = $urandom % 1000; r = $urandom % 1000;
    cfg_k = 7'(k); cfg_mant_bits = 4'(b);
    check(idle, "idle before assign");
    @(negedge clk); assign_en = 1; assign_p = TW'(p); assign_r = TW'(r);
    @(negedge clk); assign_en = 0;
    for (int j = 0; j < L; j++) begin
      fork send_block(0, j, k); send_block(1, j, k); join
    end
    n = 0;
    while (n < L * L) begin
      @(negedge clk);
      res_ready = ($urandom % 3) != 0;
      #1;
      if (res_valid && res_ready) begin
        logic [31:0] e;
        e = ref_c(n / L, n % L, k, b);
        check(int'(res_row) == n / L && int'(res_col) == n % L, "row/col");
        check(int'(res_p) == p && int'(res_r) == r, "tile coordinates");
        check(res_data == e, $sformatf("K=%0d b=%0d C[%0d][%0d] got %h exp %h", k, b, n / L, n % L, res_data, e));
        n++;
      end
    end
    @(negedge clk); res_ready = 0;
    @(negedge clk);
    check(idle, "idle after tile");
  endtask

  initial begin
    cfg_k = 4; cfg_mant_bits = 10; assign_en = 0; assign_p = '0; assign_r = '0;
    a_valid = 0; b_valid = 0; a_last = 0; b_last = 0; a_data = '0; b_data = '0; res_ready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);
    run(4, 10, 127, 6);
    for (int i = 0; i < 8; i++) run(1 + $urandom % K_MAX, 10, 110 + $urandom % 30, $urandom % 10);
    for (int i = 0; i < 6; i++) run(1 + $urandom % K_MAX, 2 + $urandom % 9, 120, 8);
    check(!sat, "no saturation for in-range data");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
