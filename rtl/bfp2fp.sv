// bfp2fp -- BFP to FP32 converter (BFP2FP).
//
// Each PPU result is a signed integer dot product P of a row of A and a
// column of B, expressed in units of 2^(E_A[row] + E_B[col]), the shared
// exponents of that row and column. The converter keeps the L row exponents
// of the A tile and the L column exponents of the B tile in small register
// files (written straight from the FP2BFP converters, bypassing the PPU) and
// forms  C = P * 2^(E_A[row] + E_B[col])  as an IEEE FP32 number:
//   |P| is normalised by a leading-one search, its significand rounded to 24
//   bits (round to nearest, ties to even) and the exponent set to
//   msb(|P|) + E_A + E_B + 127. P = 0 gives +0; results past the FP32 range
//   become +/-Inf or are flushed to +/-0 (not reachable with the default widths).
// Timing: one result per cycle, one register stage, valid/ready on both
// sides; row, column and last travel with the data. The rescaling follows the
// paper; the rounding mode and the register files are this design's choices.
// Lint note: only the low 25 bits of the right-shifted magnitude form the
// significand; the upper bits are zero by construction and unused.
module bfp2fp
  import lmhp_pkg::*;
#(
  parameter int unsigned L      = L_DEF,
  parameter int unsigned EXP_W  = EXP_W_DEF,
  parameter int unsigned ACC_W  = acc_width(MANT_W_DEF, K_MAX_DEF),
  localparam int unsigned LW    = (L > 1) ? $clog2(L) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  // shared exponents of the tile pair
  input  logic                     ea_we,
  input  logic [LW-1:0]            ea_idx,
  input  logic signed [EXP_W-1:0]  ea,
  input  logic                     eb_we,
  input  logic [LW-1:0]            eb_idx,
  input  logic signed [EXP_W-1:0]  eb,
  // integer results
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic signed [ACC_W-1:0]  in_data,
  input  logic [LW-1:0]            in_row,
  input  logic [LW-1:0]            in_col,
  input  logic                     in_last,
  // FP32 results
  output logic                     out_valid,
  input  logic                     out_ready,
  output fp32_t                    out_data,
  output logic [LW-1:0]            out_row,
  output logic [LW-1:0]            out_col,
  output logic                     out_last
);

  logic signed [EXP_W-1:0] ea_rf [L];
  logic signed [EXP_W-1:0] eb_rf [L];

  always_ff @(posedge clk) begin
    if (ea_we) ea_rf[ea_idx] <= ea;
    if (eb_we) eb_rf[eb_idx] <= eb;
  end

  // ------------------------------------------------------------ conversion
  localparam int unsigned QW = $clog2(ACC_W + 1);
  logic [ACC_W-1:0]   mag, shifted;
  logic [QW-1:0]      q;
  logic               nz, guard, sticky;
  logic [63:0]        gbits;
  logic [24:0]        sig;
  logic signed [15:0] e_unb, e_bias;
  fp32_t              conv;

  always_comb begin
    mag = in_data[ACC_W-1] ? ACC_W'(-in_data) : ACC_W'(in_data);
    nz  = (mag != '0);
    q   = '0;
    for (int i = 0; i < ACC_W; i++) if (mag[i]) q = QW'(i);
    guard   = 1'b0;
    sticky  = 1'b0;
    shifted = '0;
    gbits   = '0;
    if (q <= QW'(23)) begin
      sig = 25'(shl64(64'(mag), 7'(QW'(23) - q)));
    end else begin
      shifted = ACC_W'(shr64(64'(mag), 7'(q - QW'(23))));
      sig     = 25'(shifted);
      gbits   = shr64(64'(mag), 7'(q - QW'(24)));
      guard   = gbits[0];
      for (int i = 0; i < ACC_W; i++) if (QW'(i) < q - 24 && mag[i]) sticky = 1'b1;
      if (guard && (sticky || sig[0])) sig = sig + 25'd1;
    end
    e_unb = 16'(q) + 16'(ea_rf[in_row]) + 16'(eb_rf[in_col]);
    if (sig[24]) begin
      sig   = sig >> 1;
      e_unb = e_unb + 16'sd1;
    end
    e_bias    = e_unb + 16'sd127;
    conv.sign = in_data[ACC_W-1];
    conv.exp  = e_bias[7:0];
    conv.frac = sig[22:0];
    if (!nz)                   conv = '0;
    else if (e_bias >= 16'sd255) begin conv.exp = 8'hFF; conv.frac = '0; end
    else if (e_bias <= 16'sd0)   begin conv.exp = 8'h00; conv.frac = '0; end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk) begin
    if (rst) begin
      out_valid <= 1'b0;
      out_data  <= '0;
      out_row   <= '0;
      out_col   <= '0;
      out_last  <= 1'b0;
    end else if (in_ready) begin
      out_valid <= in_valid;
      if (in_valid) begin
        out_data <= conv;
        out_row  <= in_row;
        out_col  <= in_col;
        out_last <= in_last;
      end
    end
  end

endmodule
