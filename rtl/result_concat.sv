// result_concat -- Result Concatenator: places tile results into C.
//
// Every lane offers FP32 results of its L x L output tile with the tile
// coordinates (p, r) and the element's row/column in the tile. A round-robin
// arbiter grants one lane per cycle (res_ready), starting the search after the
// last lane granted. The granted element has global position
// (p*L + row, r*L + col); if that lies inside M x N it is written to
// C[row][col] at base_c + row*N + col (row-major) on the next cycle, otherwise
// it belongs to the zero padding of a partial edge tile and is dropped.
// n_written / n_cropped count writes and dropped elements since 'clear'.
// Placement and cropping follow the paper; round-robin arbitration and the
// single write port are this design's choices.
// Lint note: the round-robin index is an int of which only the low bits are
// used.
module result_concat
  import lmhp_pkg::*;
#(
  parameter int unsigned NUM_PPU = NUM_PPU_DEF,
  parameter int unsigned L       = L_DEF,
  parameter int unsigned AW      = ADDR_W_DEF,
  parameter int unsigned DW      = 16,
  localparam int unsigned NW     = (NUM_PPU > 1) ? $clog2(NUM_PPU) : 1,
  localparam int unsigned LW     = (L > 1) ? $clog2(L) : 1
) (
  input  logic              clk,
  input  logic              rst,
  input  logic              clear,
  input  logic [DW-1:0]     cfg_m,
  input  logic [DW-1:0]     cfg_n,
  input  logic [AW-1:0]     base_c,
  input  logic              res_valid [NUM_PPU],
  output logic              res_ready [NUM_PPU],
  input  fp32_t             res_data  [NUM_PPU],
  input  logic [DW-1:0]     res_p     [NUM_PPU],
  input  logic [DW-1:0]     res_r     [NUM_PPU],
  input  logic [LW-1:0]     res_row   [NUM_PPU],
  input  logic [LW-1:0]     res_col   [NUM_PPU],
  output logic              mem_c_we,
  output logic [AW-1:0]     mem_c_addr,
  output fp32_t             mem_c_data,
  output logic [31:0]       n_written,
  output logic [31:0]       n_cropped
);

  logic [NW-1:0] rr, gnt;
  logic          any;

  always_comb begin
    any = 1'b0;
    gnt = '0;
    for (int k = 0; k < NUM_PPU; k++) begin
      int idx;
      idx = int'(rr) + k;
      if (idx >= NUM_PPU) idx = idx - NUM_PPU;
      if (!any && res_valid[idx]) begin
        any = 1'b1;
        gnt = NW'(idx);
      end
    end
    for (int i = 0; i < NUM_PPU; i++) res_ready[i] = any && (gnt == NW'(i));
  end

  logic [31:0] grow, gcol;
  assign grow = 32'(res_p[gnt]) * L + 32'(res_row[gnt]);
  assign gcol = 32'(res_r[gnt]) * L + 32'(res_col[gnt]);

  always_ff @(posedge clk) begin
    if (rst) begin
      rr         <= '0;
      mem_c_we   <= 1'b0;
      mem_c_addr <= '0;
      mem_c_data <= '0;
      n_written  <= '0;
      n_cropped  <= '0;
    end else begin
      mem_c_we <= 1'b0;
      if (clear) begin
        n_written <= '0;
        n_cropped <= '0;
      end
      if (any) begin
        rr <= (gnt == NW'(NUM_PPU - 1)) ? '0 : gnt + 1'b1;
        if (grow < 32'(cfg_m) && gcol < 32'(cfg_n)) begin
          mem_c_we   <= 1'b1;
          mem_c_addr <= AW'(32'(base_c) + grow * 32'(cfg_n) + gcol);
          mem_c_data <= res_data[gnt];
          n_written  <= n_written + 1'b1;
        end else begin
          n_cropped  <= n_cropped + 1'b1;
        end
      end
    end
  end

endmodule
