// tb_dppu -- self-checking testbench of the Digital Post-Processing Unit.
// The four ADC Capture buffers are modelled in the testbench (synchronous
// read, one cycle). They are filled from random signed 10-bit mantissa pairs
// split into 5-bit slices, exactly as the photonic core would produce them
// (a1b1, a2b1, a1b2, a2b2, sign tag in buffer 1). Each of the L*L group
// results must equal the signed dot product sum_t ma[t]*mb[t] of its group,
// computed directly from the unsliced mantissas; also checks group order,
// result count, the 'done' pulse and the L*L*K + 2 cycle latency.
module tb_dppu;
  import lmhp_pkg::*;

  localparam int L = 2, MANT_W = 10, SLICE_W = 5, ADC_W = 12, K_MAX = 64, DEPTH = 256;
  localparam int AW = $clog2(DEPTH), ACC_W = acc_width(MANT_W, K_MAX);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic                    start, out_valid, done;
  logic [6:0]              cfg_k;
  logic [AW-1:0]           rd_addr;
  logic [ADC_W:0]          rd_data [4];
  logic signed [ACC_W-1:0] out_data;
  logic [1:0]              out_grp;

  dppu #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .ADC_W(ADC_W), .K_MAX(K_MAX), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [ADC_W:0] cap [4][DEPTH];
  always @(posedge clk) for (int c = 0; c < 4; c++) rd_data[c] <= cap[c][rd_addr];

  longint expv [L*L];

  task automatic run(int k);
    int ngot = 0, ndone = 0, t_start, t_last;
    for (int g = 0; g < L * L; g++) expv[g] = 0;
    for (int i = 0; i < L * L * k; i++) begin
      int ma, mb, sa, sb, a1, a2, b1, b2;
      ma = $urandom % 1024; mb = $urandom % 1024; sa = $urandom % 2; sb = $urandom % 2;
      if (i % 7 == 3) ma = 1023;
      a1 = ma >> 5; a2 = ma & 31; b1 = mb >> 5; b2 = mb & 31;
      cap[0][i] = {1'(sa ^ sb), ADC_W'(a1 * b1)};
      cap[1][i] = {1'b0, ADC_W'(a2 * b1)};
      cap[2][i] = {1'b0, ADC_W'(a1 * b2)};
      cap[3][i] = {1'b0, ADC_W'(a2 * b2)};
      expv[i / k] += (sa ^ sb) ? -longint'(ma * mb) : longint'(ma * mb);
    end
    cfg_k = 7'(k);
    @(negedge clk); start = 1; t_start = $time / 10; @(negedge clk); start = 0;
    while (ngot < L * L) begin
      @(posedge clk); #1;
      if (out_valid) begin
        check(int'(out_grp) == ngot, $sformatf("group order got %0d exp %0d", out_grp, ngot));
        check(longint'(out_data) == expv[ngot], $sformatf("K=%0d group %0d got %0d exp %0d", k, ngot, out_data, expv[ngot]));
        ngot++;
        t_last = $time / 10;
      end
      if (done) ndone++;
    end
    check(ndone == 1, "one done pulse");
    check(t_last - t_start == L * L * k + 1, $sformatf("latency %0d for K=%0d", t_last - t_start, k));
  endtask

  initial begin
    start = 0; cfg_k = 1;
    repeat (3) @(posedge clk);
    rst = 0;
    run(1);
    run(4);
    for (int i = 0; i < 8; i++) run(1 + $urandom % K_MAX);
    run(K_MAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
