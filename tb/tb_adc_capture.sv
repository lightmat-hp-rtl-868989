// tb_adc_capture -- self-checking testbench of the ADC Capture buffer.
// Captures random words under a random enable pattern, reads the buffer back
// through the synchronous port and checks contents, count, the one-cycle read
// latency, 'clear', and that writes stop when the buffer is full.
module tb_adc_capture;
  localparam int DEPTH = 256, ADC_W = 12, AW = $clog2(DEPTH);

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic           clear, cap_en;
  logic [ADC_W:0] cap_data, rd_data;
  logic [AW-1:0]  rd_addr;
  logic [AW:0]    count;

  adc_capture #(.DEPTH(DEPTH), .ADC_W(ADC_W)) dut (.*);

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

  logic [ADC_W:0] ref_q [$];

  task automatic capture(int n);
    ref_q.delete();
    @(negedge clk); clear = 1; @(negedge clk); clear = 0;
    check(count == 0, "count cleared");
    while (ref_q.size() < n) begin
      cap_en = ($urandom % 3) != 0; cap_data = (ADC_W+1)'($urandom);
      if (cap_en && ref_q.size() < DEPTH) ref_q.push_back(cap_data);
      @(negedge clk);
    end
    cap_en = 0;
    check(int'(count) == ((n < DEPTH) ? n : DEPTH), $sformatf("count %0d exp %0d", count, n));
    for (int i = 0; i < ref_q.size(); i++) begin
      rd_addr = AW'(i);
      @(negedge clk);
      check(rd_data == ref_q[i], $sformatf("word %0d", i));
    end
  endtask

  initial begin
    clear = 0; cap_en = 0; cap_data = '0; rd_addr = '0;
    repeat (3) @(posedge clk);
    rst = 0;
    capture(16);
    capture(100);
    capture(DEPTH);
    // over-full: extra samples are dropped
    @(negedge clk); cap_en = 1; cap_data = '1; @(negedge clk); cap_en = 0;
    check(int'(count) == DEPTH, "count saturates at depth");
    rd_addr = AW'(DEPTH - 1); @(negedge clk);
    check(rd_data == ref_q[DEPTH - 1], "last word kept when full");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
