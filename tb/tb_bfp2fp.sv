// tb_bfp2fp -- self-checking testbench of the BFP2FP converter.
// Loads random shared exponents for the L rows and L columns, sends random
// signed integers (all magnitudes up to the accumulator width, plus zero,
// +/-1, powers of two and round-to-even ties) under random output
// backpressure, and checks every FP32 result bit-exactly against the real
// value P * 2^(E_A[row] + E_B[col]) rounded to FP32 (nearest-even) by the
// reference in tb_ref_pkg; row/col/last must travel with the data.
module tb_bfp2fp;
  import lmhp_pkg::*;
  import tb_ref_pkg::*;

  localparam int L = 2, EXP_W = 6, ACC_W = 33;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic                    ea_we, eb_we, in_valid, in_ready, in_last, out_valid, out_ready, out_last;
  logic                    ea_idx, eb_idx, in_row, in_col, out_row, out_col;
  logic signed [EXP_W-1:0] ea, eb;
  logic signed [ACC_W-1:0] in_data;
  fp32_t                   out_data;

  bfp2fp #(.L(L), .EXP_W(EXP_W), .ACC_W(ACC_W)) dut (.*);

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

  int ea_ref [L], eb_ref [L];
  typedef struct { logic [31:0] bits; int row; int col; bit last; longint p; } exp_t;
  exp_t q [$];

  always @(negedge clk) out_ready <= ($urandom % 3) != 0;

  // scoreboard
  always @(posedge clk) if (!rst && out_valid && out_ready) begin
    exp_t e;
    e = q.pop_front();
    check(out_data == e.bits, $sformatf("P=%0d row %0d col %0d got %h exp %h", e.p, e.row, e.col, out_data, e.bits));
    check(int'(out_row) == e.row && int'(out_col) == e.col && out_last == e.last, "row/col/last");
  end

  function automatic longint rand_p(int kind);
    longint m;
    int nb;
    case (kind)
      0: return 0;
      1: return ($urandom % 2) ? 1 : -1;
      2: begin m = longint'(1) << ($urandom % (ACC_W - 1)); return ($urandom % 2) ? m : -m; end
      3: begin // tie: 25 significant bits ending in ...1 followed by the guard bit
           m = (longint'(1) << 24) | (longint'($urandom % (1 << 23)) << 1) | 1;
           m = m << ($urandom % 7);
           return ($urandom % 2) ? m : -m;
         end
      default: begin
        nb = 1 + $urandom % (ACC_W - 1);
        m  = longint'({$urandom, $urandom}) & ((longint'(1) << nb) - 1);
        return ($urandom % 2) ? m : -m;
      end
    endcase
  endfunction

  initial begin
    ea_we = 0; eb_we = 0; ea_idx = 0; eb_idx = 0; ea = '0; eb = '0;
    in_valid = 0; in_last = 0; in_row = 0; in_col = 0; in_data = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int tile = 0; tile < 200; tile++) begin
      for (int j = 0; j < L; j++) begin
        @(negedge clk);
        ea_ref[j] = int'($urandom % 64) - 32; eb_ref[j] = int'($urandom % 64) - 32;
        ea_we = 1; eb_we = 1; ea_idx = 1'(j); eb_idx = 1'(j);
        ea = EXP_W'(ea_ref[j]); eb = EXP_W'(eb_ref[j]);
      end
      @(negedge clk); ea_we = 0; eb_we = 0;
      for (int e = 0; e < L * L; e++) begin
        exp_t x;
        x.p = rand_p($urandom % 8);
        x.row = e / L; x.col = e % L; x.last = (e == L * L - 1);
        x.bits = real_to_fp32_rne(real'(x.p) * pow2(ea_ref[x.row] + eb_ref[x.col]));
        in_valid = 1; in_data = ACC_W'(x.p); in_row = 1'(x.row); in_col = 1'(x.col); in_last = x.last;
        q.push_back(x);
        @(posedge clk);
        while (!in_ready) @(posedge clk);
        @(negedge clk);
      end
      in_valid = 0;
      while (q.size() > 0) @(negedge clk);
    end
    check(q.size() == 0, "all results received");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
