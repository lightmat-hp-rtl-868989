// tb_lightmat_hp_full -- LightMat-HP at its default size (100 PPUs, 32 KB PPU
// memories, 10-bit mantissas as two 5-bit slices, 6-bit shared exponents).
// Runs the (16 x 16) x (16 x 16) FP32 product of the smallest evaluated size with
// values drawn uniformly from [1, 100] (64 tile pairs, one round), then a
// (24 x 20) x (20 x 24) product (144 tile pairs: two rounds, all 100 lanes busy in the
// first), and the 64 x 64 and 128 x 128 products of the evaluated sizes
// (1024 and 4096 tile pairs: 11 and 41 rounds). Every element of C is
// compared bit for bit with an independent BFP reference, and with the FP32
// product to report the relative error.
module tb_lightmat_hp_full;
  import lmhp_pkg::*;
  import tb_ref_pkg::*;

  localparam int AW = ADDR_W_DEF, DW = 16;
  localparam int KW = $clog2(K_MAX_DEF + 1), BW = $clog2(MANT_W_DEF + 1);

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

  lightmat_hp_top dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (4000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

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

  function automatic logic [31:0] rand_u1_100();
    return real_to_fp32_rne(1.0 + 99.0 * real'($urandom % 1000000) / 1000000.0);
  endfunction

  task automatic run(int m, int n, int k);
    int ba = 0, bb = 1 << 20, bc = 1 << 21, cyc = 0;
    real max_rel = 0.0;
    logic [31:0] A [][], B [][];
    A = new[m]; B = new[k];
    foreach (A[i]) begin A[i] = new[k]; foreach (A[i][t]) A[i][t] = rand_u1_100(); end
    foreach (B[t]) begin B[t] = new[n]; foreach (B[t][j]) B[t][j] = rand_u1_100(); end
    mem.delete(); c_writes.delete();
    for (int i = 0; i < m; i++) for (int t = 0; t < k; t++) mem[ba + i * k + t] = A[i][t];
    for (int t = 0; t < k; t++) for (int j = 0; j < n; j++) mem[bb + t * n + j] = B[t][j];
    @(negedge clk);
    cfg_m = DW'(m); cfg_n = DW'(n); cfg_k = KW'(k); cfg_mant_bits = BW'(MANT_W_DEF);
    base_a = AW'(ba); base_b = AW'(bb); base_c = AW'(bc);
    start = 1;
    @(negedge clk); start = 0;
    while (!done && cyc < 3000000) begin @(negedge clk); cyc++; end
    check(done, "done");
    repeat (2) @(negedge clk);
    for (int i = 0; i < m; i++) for (int j = 0; j < n; j++) begin
      logic [31:0] row[$], col[$], e, g;
      int ea, eb; longint p = 0; real exact = 0.0, rel;
      for (int t = 0; t < k; t++) begin
        row.push_back(A[i][t]); col.push_back(B[t][j]);
        exact += fp32_to_real(A[i][t]) * fp32_to_real(B[t][j]);
      end
      ea = bfp_shared_exp(row, MANT_W_DEF, EXP_W_DEF);
      eb = bfp_shared_exp(col, MANT_W_DEF, EXP_W_DEF);
      for (int t = 0; t < k; t++)
        p += longint'(bfp_mantissa(A[i][t], ea, MANT_W_DEF)) * longint'(bfp_mantissa(B[t][j], eb, MANT_W_DEF));
      e = real_to_fp32_rne(real'(p) * pow2(ea + eb));
      g = mem.exists(bc + i * n + j) ? mem[bc + i * n + j] : 32'hFFFF_FFFF;
      check(g == e, $sformatf("C[%0d][%0d] got %h exp %h", i, j, g, e));
      rel = (fp32_to_real(g) - exact) / exact; if (rel < 0) rel = -rel;
      if (rel > max_rel) max_rel = rel;
    end
    check(c_writes.size() == m * n, "no write outside C");
    check(int'(n_written) == m * n, "n_written");
    check(max_rel < 0.01, "BFP result within 1% of the FP32 product");
    $display("%0dx%0dx%0d: %0d cycles, max relative error vs FP32 %e", m, k, n, cyc, max_rel);
  endtask

  initial begin
    start = 0; cfg_m = 0; cfg_n = 0; cfg_k = 0; cfg_mant_bits = BW'(MANT_W_DEF);
    base_a = 0; base_b = 0; base_c = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);
    run(16, 16, 16);
    run(24, 24, 20);
    run(64, 64, 64);
    run(128, 128, 128);
    check(!sat, "no saturation");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
