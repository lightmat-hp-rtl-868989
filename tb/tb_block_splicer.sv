// tb_block_splicer -- self-checking testbench of the Block Splicer.
// Sends the L*L results of a tile in a random group order with random gaps,
// then drains the tile under random backpressure. Checks that it comes out
// row-major, element (row, col) being the value sent for group col*L + row,
// with the right row/col tags and out_last only on the last element.
module tb_block_splicer;
  import lmhp_pkg::*;

  localparam int L = 2, ACC_W = 33;

  logic clk = 0, rst = 1;
  always #5 clk = ~clk;

  logic                    in_valid, out_valid, out_ready, out_last;
  logic signed [ACC_W-1:0] in_data, out_data;
  logic [1:0]              in_grp;
  logic                    out_row, out_col;

  block_splicer #(.L(L), .ACC_W(ACC_W)) dut (.*);

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

  logic signed [ACC_W-1:0] val [L*L];

  initial begin
    in_valid = 0; in_data = '0; in_grp = '0; out_ready = 0;
    repeat (3) @(posedge clk);
    rst = 0;
    for (int tile = 0; tile < 50; tile++) begin
      int ord [L*L];
      int n;
      n = 0;
      for (int g = 0; g < L * L; g++) begin ord[g] = g; val[g] = ACC_W'({$urandom, $urandom}); end
      if (tile > 0) ord.shuffle();
      for (int i = 0; i < L * L; i++) begin
        @(negedge clk);
        in_valid = 0;
        while ($urandom % 3 == 0) @(negedge clk);
        in_valid = 1; in_grp = 2'(ord[i]); in_data = val[ord[i]];
      end
      @(negedge clk); in_valid = 0;
      while (n < L * L) begin
        out_ready = ($urandom % 2) == 1;
        #1;
        if (out_valid && out_ready) begin
          int r, c;
          r = n / L; c = n % L;
          check(out_row == 1'(r) && out_col == 1'(c), $sformatf("tile %0d elem %0d row/col", tile, n));
          check(out_data == val[c * L + r], $sformatf("tile %0d elem %0d value", tile, n));
          check(out_last == (n == L * L - 1), "last");
          n++;
        end
        @(negedge clk);
      end
      out_ready = 0;
      check(!out_valid, $sformatf("tile drained (row %0d col %0d)", out_row, out_col));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
