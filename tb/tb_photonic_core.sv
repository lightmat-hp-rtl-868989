// tb_photonic_core -- self-checking testbench of the photonic core model.
// Drives random DAC codes each cycle (5-bit slices, and some full-range codes
// to reach ADC saturation) and checks, LAT cycles later, that ADC 1..4 carry
// a1*b1, a2*b1, a1*b2, a2*b2 (DAC 1..4 = a1, a2, b1, b2), clipped at full scale.
module tb_photonic_core;
  localparam int DAC_W = 14, ADC_W = 12, LAT = 4;

  logic clk = 0;
  always #5 clk = ~clk;

  logic [DAC_W-1:0] dac_code [4];
  logic [ADC_W-1:0] adc_code [4];

  photonic_core #(.DAC_W(DAC_W), .ADC_W(ADC_W), .LAT(LAT)) dut (.*);

  int checks = 0, failures = 0, nsat = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL: %s", what); end
  endtask
  initial begin : watchdog
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int hist [$][4];

  function automatic int clip(int p);
    return (p > (1 << ADC_W) - 1) ? (1 << ADC_W) - 1 : p;
  endfunction

  initial begin
    for (int c = 0; c < 4; c++) dac_code[c] = '0;
    for (int cyc = 0; cyc < 2000; cyc++) begin
      int d [4];
      @(negedge clk);
      for (int c = 0; c < 4; c++) begin
        d[c] = (cyc % 10 == 9) ? int'($urandom % 200) : int'($urandom % 32);
        dac_code[c] = DAC_W'(d[c]);
      end
      hist.push_back('{clip(d[0] * d[2]), clip(d[1] * d[2]), clip(d[0] * d[3]), clip(d[1] * d[3])});
      if (cyc >= LAT) begin
        for (int c = 0; c < 4; c++) begin
          check(int'(adc_code[c]) == hist[cyc - LAT][c], $sformatf("cycle %0d adc%0d", cyc, c + 1));
          if (hist[cyc - LAT][c] == (1 << ADC_W) - 1) nsat++;
        end
      end
    end
    check(nsat > 0, "saturation reached");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
