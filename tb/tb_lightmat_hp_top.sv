// tb_lightmat_hp_top -- end-to-end testbench of LightMat-HP (reduced size).
// Three lanes and 64-entry PPU memories (K <= 16) so that many matrix shapes
// run quickly. The testbench holds A, B and C in an external-memory model
// with one cycle of read latency, starts a run, waits for 'done' and compares
// every element of C bit for bit with an independent reference (per-row and
// per-column block exponents, integer mantissa dot product, scaling by
// 2^(E_A + E_B), FP32 round to nearest even). It also checks that no address
// outside C is written, that each element of C is written once, and the
// written/cropped counts.
// Mechanisms counted (each must happen at least once): padded edge tiles
// cropped, several scheduling rounds, FP2BFP back-pressure from the MPU,
// concatenator contention, mantissa width 10 and narrower widths, negative
// products, zero inputs, a clamped shared exponent (sat), restart after done.
module tb_lightmat_hp_top;
  import lmhp_pkg::*;
  import tb_ref_pkg::*;

  localparam int NUM_PPU = 3, L = 2, MANT_W = 10, EXP_W = 6, DEPTH = 64;
  localparam int K_MAX = DEPTH / (L * L);
  localparam int AW = 24, DW = 16;
  localparam int KW = $clog2(K_MAX + 1), BW = $clog2(MANT_W + 1);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          start, done, sat;
  logic [DW-1:0] cfg_m, cfg_n;
  logic [KW-1:0] cfg_k;
  logic [BW-1:0] cfg_mant_bits;
  logic [AW-1:0] base_a, base_b, base_c, mem_a_addr, mem_b_addr, mem_c_addr;
  logic [31:0]   n_written, n_cropped;
  logic          mem_a_en, mem_b_en, mem_c_we;
  fp32_t         mem_a_data, mem_b_data, mem_c_data;

  lightmat_hp_top #(.NUM_PPU(NUM_PPU), .L(L), .MANT_W(MANT_W), .EXP_W(EXP_W), .DEPTH(DEPTH),
                    .AW(AW), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (2000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // external memory model
  logic [31:0] mem [int];
  int          c_writes [int];
  always @(posedge clk) begin
    if (mem_a_en) mem_a_data <= mem.exists(int'(mem_a_addr)) ? mem[int'(mem_a_addr)] : 32'hDEAD_BEEF;
    if (mem_b_en) mem_b_data <= mem.exists(int'(mem_b_addr)) ? mem[int'(mem_b_addr)] : 32'hDEAD_BEEF;
    if (mem_c_we) begin
      mem[int'(mem_c_addr)] = mem_c_data;
      c_writes[int'(mem_c_addr)] = c_writes.exists(int'(mem_c_addr)) ? c_writes[int'(mem_c_addr)] + 1 : 1;
    end
  end

  // mechanism counters
  int n_crop_runs = 0, n_multi_round = 0, n_mpu_stall = 0, n_contention = 0, n_mode10 = 0,
      n_mode_narrow = 0, n_neg = 0, n_zero = 0, n_sat = 0, n_restart = 0, assigns0 = 0;
  always @(posedge clk) if (!rst) begin
    int nv;
    if (dut.g_lane[0].u_lane.u_fp2bfp_a.out_valid && !dut.g_lane[0].u_lane.u_fp2bfp_a.out_ready)
      n_mpu_stall++;
    nv = 0;
    for (int i = 0; i < NUM_PPU; i++) if (dut.u_concat.res_valid[i]) nv++;
    if (nv > 1) n_contention++;
    if (dut.u_sched.lane_assign[0]) assigns0++;
  end

  task automatic run(int m, int n, int k, int b, int ebase, int espread, int zero_1_in);
    int ba = 100, bb = 5000, bc = 20000, cyc = 0, bad = 0;
    logic [31:0] A [][], B [][];
    A = new[m]; B = new[k];
    foreach (A[i]) begin A[i] = new[k]; foreach (A[i][t]) A[i][t] = rand_fp32(ebase, espread, zero_1_in); end
    foreach (B[t]) begin B[t] = new[n]; foreach (B[t][j]) B[t][j] = rand_fp32(ebase, espread, zero_1_in); end
    mem.delete(); c_writes.delete();
    for (int i = 0; i < m; i++) for (int t = 0; t < k; t++) mem[ba + i * k + t] = A[i][t];
    for (int t = 0; t < k; t++) for (int j = 0; j < n; j++) mem[bb + t * n + j] = B[t][j];
    assigns0 = 0;
    @(negedge clk);
    cfg_m = DW'(m); cfg_n = DW'(n); cfg_k = KW'(k); cfg_mant_bits = BW'(b);
    base_a = AW'(ba); base_b = AW'(bb); base_c = AW'(bc);
    if (done) n_restart++;
    start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 400000) begin @(negedge clk); cyc++; end
    check(done, $sformatf("M=%0d N=%0d K=%0d done", m, n, k));
    repeat (2) @(negedge clk);
    // compare C
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
      logic [31:0] row[$], col[$], e, g;
      int ea, eb; longint p = 0;
      for (int t = 0; t < k; t++) begin
        row.push_back(A[i][t]); col.push_back(B[t][j]);
        if (A[i][t][31] != B[t][j][31] && A[i][t][30:23] != 0 && B[t][j][30:23] != 0) n_neg++;
        if (A[i][t][30:23] == 0) n_zero++;
      end
      ea = bfp_shared_exp(row, b, EXP_W);
      eb = bfp_shared_exp(col, b, EXP_W);
      for (int t = 0; t < k; t++) begin
        longint ma, mb;
        ma = bfp_mantissa(A[i][t], ea, b); if (A[i][t][31]) ma = -ma;
        mb = bfp_mantissa(B[t][j], eb, b); if (B[t][j][31]) mb = -mb;
        p += ma * mb;
      end
      e = real_to_fp32_rne(real'(p) * pow2(ea + eb));
      g = mem.exists(bc + i * n + j) ? mem[bc + i * n + j] : 32'hFFFF_FFFF;
      check(g == e, $sformatf("M=%0d N=%0d K=%0d b=%0d C[%0d][%0d] got %h exp %h", m, n, k, b, i, j, g, e));
      check(c_writes.exists(bc + i * n + j) && c_writes[bc + i * n + j] == 1, "C element written once");
    end
    check(c_writes.size() == m * n, "no write outside C");
    check(int'(n_written) == m * n, "n_written");
    check(int'(n_cropped) == ((m + L - 1) / L) * ((n + L - 1) / L) * L * L - m * n, "n_cropped");
    if (n_cropped > 0) n_crop_runs++;
    if (assigns0 > 1) n_multi_round++;
    if (b == MANT_W) n_mode10++; else n_mode_narrow++;
  endtask

  initial begin
    start = 0; cfg_m = 0; cfg_n = 0; cfg_k = 0; cfg_mant_bits = MANT_W; base_a = 0; base_b = 0; base_c = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);
    run(2, 2, 4, 10, 127, 4, 0);          // a single tile
    run(4, 4, 8, 10, 127, 6, 8);          // four tile pairs on three lanes: two rounds
    run(5, 3, 7, 10, 130, 8, 5);          // padded edge tiles
    run(6, 6, 16, 6, 120, 10, 6);         // narrow mantissa, full K
    for (int i = 0; i < 6; i++)
      run(1 + $urandom % 7, 1 + $urandom % 7, 1 + $urandom % K_MAX, 2 + $urandom % 9,
          100 + $urandom % 50, $urandom % 12, 6);
    check(!sat, "no saturation for in-range data");
    run(3, 3, 5, 10, 127 + 45, 3, 0);     // |x| ~ 2^45: shared exponent clamps at 31
    if (sat) n_sat++;
    check(n_crop_runs > 0,   "mechanism: edge tiles cropped");
    check(n_multi_round > 0, "mechanism: several scheduling rounds");
    check(n_mpu_stall > 0,   "mechanism: FP2BFP stalled by the MPU");
    check(n_contention > 0,  "mechanism: concatenator contention");
    check(n_mode10 > 0,      "mechanism: 10-bit mantissas");
    check(n_mode_narrow > 0, "mechanism: narrower mantissas");
    check(n_neg > 0,         "mechanism: negative products");
    check(n_zero > 0,        "mechanism: zero inputs");
    check(n_sat > 0,         "mechanism: shared exponent clamped");
    check(n_restart > 0,     "mechanism: restart after done");
    $display("mechanisms: crop=%0d rounds=%0d mpu_stall=%0d contention=%0d m10=%0d narrow=%0d neg=%0d zero=%0d sat=%0d restart=%0d",
             n_crop_runs, n_multi_round, n_mpu_stall, n_contention, n_mode10, n_mode_narrow, n_neg, n_zero, n_sat, n_restart);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
