// tb_result_concat -- self-checking testbench of the Result Concatenator.
// Four lane models each offer a random sequence of tile results (random tile
// coordinates, in-tile row/column and data) with random valid gaps, holding
// each offer until it is accepted. Every accepted element inside M x N must
// be written once, one cycle later, to base_c + row*N + col with its data;
// elements outside must be dropped and counted. Round-robin fairness: a lane
// that keeps its offer valid is served within NUM_PPU cycles. Counters are
// checked against the model and after 'clear'.
module tb_result_concat;
  import lmhp_pkg::*;

  localparam int NUM_PPU = 4, L = 2, AW = 16, DW = 8;
  localparam int LW = 1;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic          clear;
  logic [DW-1:0] cfg_m, cfg_n;
  logic [AW-1:0] base_c, mem_c_addr;
  logic          res_valid[NUM_PPU], res_ready[NUM_PPU];
  fp32_t         res_data[NUM_PPU], mem_c_data;
  logic [DW-1:0] res_p[NUM_PPU], res_r[NUM_PPU];
  logic [LW-1:0] res_row[NUM_PPU], res_col[NUM_PPU];
  logic          mem_c_we;
  logic [31:0]   n_written, n_cropped;

  result_concat #(.NUM_PPU(NUM_PPU), .L(L), .AW(AW), .DW(DW)) dut (.*);

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

  int m_i, n_i, bc, exp_w, exp_c, wait_cyc[NUM_PPU], busy_pct;
  bit pend_we; int pend_addr; logic [31:0] pend_data;

  // new random offer for lane i
  task automatic new_offer(int i);
    res_p[i]   = DW'($urandom % 5);
    res_r[i]   = DW'($urandom % 5);
    res_row[i] = LW'($urandom % L);
    res_col[i] = LW'($urandom % L);
    res_data[i] = $urandom;
  endtask

  // check the write produced by the previous cycle's grant, then decide
  always @(posedge clk) if (!rst) begin
    int ng;
    if (pend_we) begin
      check(mem_c_we, "write one cycle after grant");
      check(int'(mem_c_addr) == pend_addr, $sformatf("address %0d exp %0d", mem_c_addr, pend_addr));
      check(mem_c_data == pend_data, "write data");
    end else check(!mem_c_we, "no spurious write");
    pend_we = 0;
    ng = 0;
    for (int i = 0; i < NUM_PPU; i++) if (res_valid[i] && res_ready[i]) begin
      int gr, gc;
      ng++;
      gr = int'(res_p[i]) * L + int'(res_row[i]);
      gc = int'(res_r[i]) * L + int'(res_col[i]);
      if (gr < m_i && gc < n_i) begin
        pend_we = 1; pend_addr = (bc + gr * n_i + gc) % (1 << AW); pend_data = res_data[i]; exp_w++;
      end else exp_c++;
    end
    check(ng <= 1, "at most one grant per cycle");
    for (int i = 0; i < NUM_PPU; i++) begin
      if (res_valid[i] && !res_ready[i]) begin
        wait_cyc[i]++;
        check(wait_cyc[i] < NUM_PPU, $sformatf("lane %0d starved", i));
      end else wait_cyc[i] = 0;
    end
  end

  // drive offers on the negative edge
  always @(negedge clk) if (!rst) begin
    for (int i = 0; i < NUM_PPU; i++) begin
      if (res_valid[i] && res_ready_q[i]) res_valid[i] = 0;
      if (!res_valid[i] && ($urandom % 100) < busy_pct) begin new_offer(i); res_valid[i] = 1; end
    end
  end
  logic res_ready_q[NUM_PPU];
  always @(posedge clk) for (int i = 0; i < NUM_PPU; i++) res_ready_q[i] <= res_ready[i];

  initial begin
    clear = 0; base_c = 0; cfg_m = 0; cfg_n = 0; busy_pct = 0;
    exp_w = 0; exp_c = 0; pend_we = 0;
    for (int i = 0; i < NUM_PPU; i++) begin res_valid[i] = 0; wait_cyc[i] = 0; new_offer(i); end
    repeat (3) @(posedge clk);
    rst = 0;
    for (int ph = 0; ph < 6; ph++) begin
      busy_pct = 0;
      repeat (4) @(negedge clk);
      m_i = 1 + $urandom % 10; n_i = 1 + $urandom % 10; bc = $urandom % 1000;
      cfg_m = DW'(m_i); cfg_n = DW'(n_i); base_c = AW'(bc);
      clear = 1; exp_w = 0; exp_c = 0;
      @(negedge clk); clear = 0;
      busy_pct = (ph % 2) ? 100 : 40;
      repeat (400) @(negedge clk);
      busy_pct = 0;
      repeat (8) @(negedge clk);
      check(int'(n_written) == exp_w, $sformatf("n_written %0d exp %0d", n_written, exp_w));
      check(int'(n_cropped) == exp_c, $sformatf("n_cropped %0d exp %0d", n_cropped, exp_c));
      check(exp_w > 0 && exp_c > 0, "both written and cropped elements seen");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
