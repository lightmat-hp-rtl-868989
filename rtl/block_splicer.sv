// block_splicer -- Block Splicer: assembles one L x L result tile.
//
// The DPPU delivers the L*L dot products of a tile pair in the order of the
// flattened streams, group g = col*L + row. The splicer stores them in an
// L*L register tile and, once all have arrived, streams the tile out in
// row-major order (c11, c12, c21, c22 for L = 2) with its row and column,
// using valid/ready; out_last marks the final element. While the tile is
// being streamed out no new input is expected (the PPU does not start the
// next tile pair before the tile has left). Buffering in registers and the
// valid/ready output are this design's own choices.
module block_splicer
  import lmhp_pkg::*;
#(
  parameter int unsigned L     = L_DEF,
  parameter int unsigned ACC_W = acc_width(MANT_W_DEF, K_MAX_DEF),
  localparam int unsigned GW   = $clog2(L * L),
  localparam int unsigned LW   = (L > 1) ? $clog2(L) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     in_valid,
  input  logic signed [ACC_W-1:0]  in_data,
  input  logic [GW-1:0]            in_grp,
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic signed [ACC_W-1:0]  out_data,
  output logic [LW-1:0]            out_row,
  output logic [LW-1:0]            out_col,
  output logic                     out_last
);

  logic signed [ACC_W-1:0] tile [L*L];
  logic [GW:0]             n_in;
  logic                    emitting;
  logic [LW-1:0]           row, col;

  assign out_valid = emitting;
  assign out_row   = row;
  assign out_col   = col;
  assign out_data  = tile[GW'(32'(col) * L + 32'(row))];
  assign out_last  = (row == LW'(L - 1)) && (col == LW'(L - 1));

  always_ff @(posedge clk) begin
    if (in_valid) tile[in_grp] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      n_in     <= '0;
      emitting <= 1'b0;
      row      <= '0;
      col      <= '0;
    end else begin
      if (in_valid) begin
        if (n_in + 1'b1 == (GW+1)'(L * L)) begin
          n_in     <= '0;
          emitting <= 1'b1;
          row      <= '0;
          col      <= '0;
        end else begin
          n_in <= n_in + 1'b1;
        end
      end
      if (emitting && out_ready) begin
        if (col == LW'(L - 1)) begin
          col <= '0;
          if (row == LW'(L - 1)) emitting <= 1'b0;
          else                   row      <= row + 1'b1;
        end else begin
          col <= col + 1'b1;
        end
      end
    end
  end

  a_no_input_while_emitting: assert property (@(posedge clk) disable iff (rst)
    emitting |-> !in_valid);

endmodule
