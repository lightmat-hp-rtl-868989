// tb_fp2bfp -- self-checking testbench of the FP2BFP converter.
// Sends random FP32 blocks (random length, exponent spread, signs, zeros,
// run-time mantissa width 2..10), including blocks whose shared exponent
// must be clamped, blocks with subnormals and with an infinity, with random
// backpressure on the mantissa output. Checks
// the shared exponent and every sign/mantissa against the reference in
// tb_ref_pkg, the block length, the 'sat' flag, and that the exponent
// appears two cycles after the last value is accepted.
module tb_fp2bfp;
  import lmhp_pkg::*;
  import tb_ref_pkg::*;

  localparam int MANT_W = 10, EXP_W = 6, K_MAX = 64;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic [3:0]  cfg_mant_bits;
  logic        in_valid, in_ready, in_last;
  fp32_t       in_data;
  logic        exp_valid, out_valid, out_ready, out_sign, out_last, sat;
  logic signed [EXP_W-1:0] exp_out;
  logic [MANT_W-1:0] out_mag;

  fp2bfp #(.MANT_W(MANT_W), .EXP_W(EXP_W), .K_MAX(K_MAX)) dut (.*);

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

  // random output backpressure
  always @(negedge clk) out_ready <= ($urandom % 4) != 0;

  logic [31:0] blk[$];
  int          exp_seen_cycle, last_acc_cycle, cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  task automatic run_block(int len, int ebase, int espread, int b, bit expect_sat, int special = 0);
    int es_ref, got_es, n;
    blk.delete();
    for (int i = 0; i < len; i++) blk.push_back(rand_fp32(ebase, espread, 6));
    // special = 1: some subnormals; special = 2: one infinity
    if (special == 1) for (int i = 0; i < len; i += 2) blk[i] = {1'($urandom), 8'h00, 23'($urandom)};
    if (special == 2) blk[len / 2] = {1'($urandom), 8'hFF, 23'h0};
    cfg_mant_bits = 4'(b);
    // send
    for (int i = 0; i < len; i++) begin
      @(negedge clk);
      in_valid = 1; in_data = blk[i]; in_last = (i == len - 1);
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      if (i == len - 1) last_acc_cycle = cyc;
    end
    @(negedge clk); in_valid = 0; in_last = 0;
    // exponent
    while (!exp_valid) @(posedge clk);
    exp_seen_cycle = cyc;
    es_ref = bfp_shared_exp(blk, b, EXP_W);
    got_es = int'(exp_out);
    check(got_es == es_ref, $sformatf("shared exp got %0d exp %0d (b=%0d)", got_es, es_ref, b));
    check(exp_seen_cycle - last_acc_cycle == 2, $sformatf("exp latency %0d", exp_seen_cycle - last_acc_cycle));
    // mantissas
    n = 0;
    while (n < len) begin
      @(posedge clk);
      if (out_valid && out_ready) begin
        int m_ref;
        m_ref = bfp_mantissa(blk[n], es_ref, b);
        check(int'(out_mag) == m_ref, $sformatf("mant[%0d] got %0d exp %0d (x=%h es=%0d b=%0d)", n, out_mag, m_ref, blk[n], es_ref, b));
        check(out_sign == blk[n][31], "sign");
        check(out_last == (n == len - 1), "last flag");
        n++;
      end
    end
    if (expect_sat) check(sat == 1'b1, "sat flag after clamped block");
  endtask

  initial begin
    in_valid = 0; in_last = 0; in_data = '0; cfg_mant_bits = 4'd10;
    repeat (3) @(posedge clk);
    rst = 0;
    // normal blocks, 10-bit mantissa (main configuration)
    for (int i = 0; i < 40; i++) run_block(1 + $urandom % K_MAX, 100 + $urandom % 40, $urandom % 12, 10, 0);
    // run-time mantissa widths 2..10
    for (int i = 0; i < 40; i++) run_block(1 + $urandom % 16, 110 + $urandom % 20, $urandom % 6, 2 + $urandom % 9, 0);
    check(sat == 1'b0, "no sat in range");
    // all-zero block
    blk.delete();
    // tiny values: exponent clamped at the bottom, mantissas round to 0
    run_block(8, 20, 3, 10, 0);
    // subnormal inputs become zero mantissas
    run_block(12, 120, 8, 10, 0, 1);
    check(sat == 1'b0, "no sat for low clamp or subnormals");
    // huge values: exponent clamped at the top, mantissas saturate
    run_block(8, 200, 5, 10, 1);
    // an infinity saturates its mantissa and clamps the shared exponent
    run_block(10, 125, 4, 10, 1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
