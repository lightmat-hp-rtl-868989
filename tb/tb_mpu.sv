// tb_mpu -- self-checking testbench of the Mantissa Processing Unit.
// Both variants (IS_B = 0 for the A operand, IS_B = 1 for B) receive the L*K
// mantissas of a random tile; every SRAM write is recorded and the resulting
// image is compared with the flattened streams built independently from the
// tile: V1[i] = A[(i mod L*K) / K][i mod K] and V2[i] = B[i mod K][(i / K) / L]
// (high slice with sign tag, low slice). Also checks 'done', that every
// address is written exactly once, and the rate of one mantissa per L cycles.
module tb_mpu;
  import lmhp_pkg::*;

  localparam int L = 2, MANT_W = 10, SLICE_W = 5, K_MAX = 64, DEPTH = 256;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic             start [2];
  logic [6:0]       cfg_k;
  logic             in_valid [2], in_ready [2], in_sign [2];
  logic [MANT_W-1:0] in_mag [2];
  logic             wr_en [2], done [2];
  logic [AW-1:0]    wr_addr [2];
  logic [SLICE_W:0] wr_hi [2], wr_lo [2];

  for (genvar v = 0; v < 2; v++) begin : g_dut
    mpu #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .IS_B(v == 1), .K_MAX(K_MAX), .DEPTH(DEPTH)) dut (
      .clk, .rst, .start(start[v]), .cfg_k, .in_valid(in_valid[v]), .in_ready(in_ready[v]),
      .in_sign(in_sign[v]), .in_mag(in_mag[v]), .wr_en(wr_en[v]), .wr_addr(wr_addr[v]),
      .wr_hi(wr_hi[v]), .wr_lo(wr_lo[v]), .done(done[v]));
  end

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // tile[blk][t] = {sign, mag}; blk = row of A or column of B
  logic [MANT_W:0] tile [2][L][K_MAX];
  logic [SLICE_W:0] img_hi [2][DEPTH], img_lo [2][DEPTH];
  int               nwr [2][DEPTH];

  always @(posedge clk) for (int v = 0; v < 2; v++) if (wr_en[v]) begin
    img_hi[v][wr_addr[v]] <= wr_hi[v];
    img_lo[v][wr_addr[v]] <= wr_lo[v];
    nwr[v][wr_addr[v]]    <= nwr[v][wr_addr[v]] + 1;
  end

  task automatic feed(int v, int k);
    for (int b = 0; b < L; b++) for (int t = 0; t < k; t++) begin
      @(negedge clk);
      in_valid[v] = 1; in_sign[v] = tile[v][b][t][MANT_W]; in_mag[v] = tile[v][b][t][MANT_W-1:0];
      @(posedge clk);
      while (!in_ready[v]) @(posedge clk);
    end
    @(negedge clk); in_valid[v] = 0;
  endtask

  task automatic run(int k);
    int t0, t1;
    for (int v = 0; v < 2; v++) begin
      for (int b = 0; b < L; b++) for (int t = 0; t < K_MAX; t++) tile[v][b][t] = (MANT_W+1)'($urandom);
      for (int i = 0; i < DEPTH; i++) nwr[v][i] = 0;
    end
    cfg_k = 7'(k);
    @(negedge clk); start[0] = 1; start[1] = 1;
    @(negedge clk); start[0] = 0; start[1] = 0;
    t0 = $time;
    fork feed(0, k); feed(1, k); join
    while (!(done[0] && done[1])) @(posedge clk);
    t1 = $time;
    // element rate: L cycles per mantissa, L*L*K cycles for the tile
    check((t1 - t0) / 10 >= L * L * k && (t1 - t0) / 10 <= L * L * k + 3,
          $sformatf("load took %0d cycles for K=%0d", (t1 - t0) / 10, k));
    for (int i = 0; i < L * L * k; i++) begin
      logic [MANT_W:0] ea, eb;
      ea = tile[0][(i % (L * k)) / k][i % k];
      eb = tile[1][(i / k) / L][i % k];
      check(nwr[0][i] == 1 && nwr[1][i] == 1, $sformatf("addr %0d written %0d/%0d times", i, nwr[0][i], nwr[1][i]));
      check(img_hi[0][i] == {ea[MANT_W], ea[MANT_W-1 -: SLICE_W]} && img_lo[0][i] == {1'b0, ea[SLICE_W-1:0]},
            $sformatf("V1[%0d] K=%0d", i, k));
      check(img_hi[1][i] == {eb[MANT_W], eb[MANT_W-1 -: SLICE_W]} && img_lo[1][i] == {1'b0, eb[SLICE_W-1:0]},
            $sformatf("V2[%0d] K=%0d", i, k));
    end
  endtask

  initial begin
    for (int v = 0; v < 2; v++) begin start[v] = 0; in_valid[v] = 0; in_sign[v] = 0; in_mag[v] = '0; end
    cfg_k = 4;
    repeat (3) @(posedge clk);
    rst = 0;
    run(4);                       // the 2 x 4 / 4 x 2 example tile
    for (int i = 0; i < 6; i++) run(1 + $urandom % K_MAX);
    run(K_MAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
