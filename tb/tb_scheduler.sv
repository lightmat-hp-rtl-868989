// tb_scheduler -- self-checking testbench of the tile scheduler.
// Three lane models sit behind the scheduler. Each lane model records the
// tile pair it is given, drops its converter 'ready' for a random number of
// cycles after each block (as the real FP2BFP does while it computes the
// block exponent) and reports idle again a random time after its last block.
// The memory model returns a word that encodes its own address, so every
// streamed value can be checked against the element the lane should receive:
// A[p*L+j][t] and B[t][r*L+j], or zero for padded rows and columns. Checks:
// every tile pair assigned once, only to idle lanes, block contents, last
// flags, block counts, and 'done'. Several matrix shapes, including ones that
// need padding and several rounds.
module tb_scheduler;
  import lmhp_pkg::*;

  localparam int NUM_PPU = 3, L = 2, K_MAX = 16, AW = 16, DW = 8;
  localparam int KW = $clog2(K_MAX + 1);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          start, done;
  logic [DW-1:0] cfg_m, cfg_n, assign_p, assign_r;
  logic [KW-1:0] cfg_k;
  logic [AW-1:0] base_a, base_b, mem_a_addr, mem_b_addr;
  logic          mem_a_en, mem_b_en;
  fp32_t         mem_a_data, mem_b_data, a_data, b_data;
  logic          lane_idle[NUM_PPU], lane_assign[NUM_PPU];
  logic          a_valid[NUM_PPU], a_ready[NUM_PPU], b_valid[NUM_PPU], b_ready[NUM_PPU];
  logic          a_last, b_last;

  scheduler #(.NUM_PPU(NUM_PPU), .L(L), .K_MAX(K_MAX), .AW(AW), .DW(DW)) dut (.*);

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

  // memory: word = {tag, address}
  always_ff @(posedge clk) begin
    if (mem_a_en) mem_a_data <= fp32_t'({16'hA000, 16'(mem_a_addr)});
    if (mem_b_en) mem_b_data <= fp32_t'({16'hB000, 16'(mem_b_addr)});
  end

  // lane models
  int lp[NUM_PPU], lr[NUM_PPU], ta[NUM_PPU], tb_[NUM_PPU], ja[NUM_PPU], jb[NUM_PPU];
  int hold_a[NUM_PPU], hold_b[NUM_PPU], idle_wait[NUM_PPU];
  bit busy[NUM_PPU];
  int seen[int];
  int m_i, n_i, k_i, ba, bb;

  always_comb for (int i = 0; i < NUM_PPU; i++) begin
    lane_idle[i] = !busy[i];
    a_ready[i]   = busy[i] && hold_a[i] == 0 && ja[i] < L;
    b_ready[i]   = busy[i] && hold_b[i] == 0 && jb[i] < L;
  end

  always @(posedge clk) if (!rst) begin
    for (int i = 0; i < NUM_PPU; i++) begin
      if (lane_assign[i]) begin
        check(!busy[i], "assignment to an idle lane");
        busy[i] <= 1; lp[i] <= int'(assign_p); lr[i] <= int'(assign_r);
        ta[i] <= 0; tb_[i] <= 0; ja[i] <= 0; jb[i] <= 0; hold_a[i] <= 0; hold_b[i] <= 0;
        idle_wait[i] <= 1 + $urandom % 6;
        check(!seen.exists(int'(assign_p) * 256 + int'(assign_r)), "tile pair assigned once");
        seen[int'(assign_p) * 256 + int'(assign_r)] = 1;
      end else if (busy[i]) begin
        if (hold_a[i] > 0) hold_a[i] <= hold_a[i] - 1;
        if (hold_b[i] > 0) hold_b[i] <= hold_b[i] - 1;
        if (a_valid[i]) begin
          int row; logic [31:0] e;
          check(a_ready[i], "A value only when ready");
          row = lp[i] * L + ja[i];
          e = (row < m_i) ? {16'hA000, 16'(ba + row * k_i + ta[i])} : 32'h0;
          check(a_data == e, $sformatf("lane %0d A blk %0d t %0d got %h exp %h", i, ja[i], ta[i], a_data, e));
          check(a_last == (ta[i] == k_i - 1), "a_last");
          if (ta[i] == k_i - 1) begin
            ta[i] <= 0; ja[i] <= ja[i] + 1; hold_a[i] <= 1 + $urandom % 4;
          end else ta[i] <= ta[i] + 1;
        end
        if (b_valid[i]) begin
          int col; logic [31:0] e;
          check(b_ready[i], "B value only when ready");
          col = lr[i] * L + jb[i];
          e = (col < n_i) ? {16'hB000, 16'(bb + tb_[i] * n_i + col)} : 32'h0;
          check(b_data == e, $sformatf("lane %0d B blk %0d t %0d got %h exp %h", i, jb[i], tb_[i], b_data, e));
          check(b_last == (tb_[i] == k_i - 1), "b_last");
          if (tb_[i] == k_i - 1) begin
            tb_[i] <= 0; jb[i] <= jb[i] + 1; hold_b[i] <= 1 + $urandom % 4;
          end else tb_[i] <= tb_[i] + 1;
        end
        if (ja[i] == L && jb[i] == L) begin
          if (idle_wait[i] == 0) busy[i] <= 0;
          else idle_wait[i] <= idle_wait[i] - 1;
        end
      end
    end
  end

  task automatic run(int m, int n, int k);
    int cyc = 0;
    m_i = m; n_i = n; k_i = k; ba = $urandom % 100; bb = 2000 + $urandom % 100;
    seen.delete();
    @(negedge clk);
    cfg_m = DW'(m); cfg_n = DW'(n); cfg_k = KW'(k); base_a = AW'(ba); base_b = AW'(bb);
    start = 1;
    @(negedge clk); start = 0;
    check(!done, "done cleared by start");
    while (!done && cyc < 50000) begin @(negedge clk); cyc++; end
    check(done, "done reached");
    check(seen.size() == ((m + L - 1) / L) * ((n + L - 1) / L),
          $sformatf("M=%0d N=%0d: %0d tile pairs assigned", m, n, seen.size()));
    for (int i = 0; i < NUM_PPU; i++) check(!busy[i], "all lanes idle at done");
    repeat (3) @(negedge clk);
    check(done, "done holds");
  endtask

  initial begin
    start = 0; cfg_m = 0; cfg_n = 0; cfg_k = 0; base_a = 0; base_b = 0;
    for (int i = 0; i < NUM_PPU; i++) begin busy[i] = 0; ja[i] = 0; jb[i] = 0; hold_a[i] = 0; hold_b[i] = 0; end
    repeat (3) @(posedge clk);
    rst = 0;
    repeat (2) @(posedge clk);
    run(2, 2, 4);      // one tile, one round
    run(4, 6, 3);      // six tile pairs, two rounds
    run(5, 3, 7);      // padded rows and columns
    run(1, 1, 1);
    for (int i = 0; i < 6; i++) run(1 + $urandom % 9, 1 + $urandom % 9, 1 + $urandom % K_MAX);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
