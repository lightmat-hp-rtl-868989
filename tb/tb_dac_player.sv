// tb_dac_player -- self-checking testbench of the DAC Player.
// Fills the SRAM with random {tag, slice} words, triggers playback of random
// lengths (including the full depth) and checks every played code and tag,
// the number of samples, that the first sample appears two clock edges after
// the trigger, that playback is gap-free, and that a trigger while busy is
// ignored.
module tb_dac_player;
  import lmhp_pkg::*;

  localparam int DEPTH = 512, SLICE_W = 5, DAC_W = 14, AW = $clog2(DEPTH);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic             wr_en, trigger, busy, dac_valid, dac_tag;
  logic [AW-1:0]    wr_addr;
  logic [SLICE_W:0] wr_data;
  logic [AW:0]      play_len;
  logic [DAC_W-1:0] dac_code;

  dac_player #(.DEPTH(DEPTH), .SLICE_W(SLICE_W), .DAC_W(DAC_W)) dut (.*);

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

  logic [SLICE_W:0] ref_mem [DEPTH];

  task automatic play(int len);
    int n = 0, first = -1, c = 0;
    @(negedge clk); trigger = 1; play_len = (AW+1)'(len);
    @(negedge clk); trigger = 0;
    // a second trigger while busy must be ignored
    trigger = 1; play_len = 1;
    @(negedge clk); trigger = 0;
    c = 2;
    while (n < len && c < len + 10) begin
      if (dac_valid) begin
        if (first < 0) first = c;
        check(dac_code == DAC_W'(ref_mem[n][SLICE_W-1:0]) && dac_tag == ref_mem[n][SLICE_W],
              $sformatf("sample %0d", n));
        n++;
      end else if (first >= 0) check(0, "gap in playback");
      @(negedge clk); c++;
    end
    check(n == len, $sformatf("played %0d of %0d", n, len));
    check(first == 2, $sformatf("first sample %0d edges after trigger", first));
    repeat (3) begin check(!dac_valid, "no extra samples"); @(negedge clk); end
  endtask

  initial begin
    wr_en = 0; trigger = 0; wr_addr = '0; wr_data = '0; play_len = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      ref_mem[i] = (SLICE_W+1)'($urandom);
      wr_en = 1; wr_addr = AW'(i); wr_data = ref_mem[i];
    end
    @(negedge clk); wr_en = 0;
    play(16);
    for (int i = 0; i < 5; i++) play(2 + $urandom % (DEPTH - 2));
    play(DEPTH);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
