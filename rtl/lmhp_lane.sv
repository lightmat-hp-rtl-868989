// lmhp_lane -- one processing lane: FP2BFP (A), FP2BFP (B), PPU, BFP2FP.
//
// A lane computes one L x L tile of C = A x B from an L x K tile of A and a
// K x L tile of B. The scheduler pulses 'assign' with the tile coordinates
// (tile_p: row tile of A, tile_r: column tile of B) and then streams the L
// rows of the A tile and the L columns of the B tile as FP32 blocks of K
// values. Each FP2BFP turns a block into one shared exponent and K mantissas;
// the mantissas go to the PPU, while the exponents go straight to the BFP2FP
// register files (exponent j of A is row j, exponent j of B is column j). The
// PPU returns the integer tile, which BFP2FP rescales to FP32 and sends out
// with the tile coordinates and the element's row/column inside the tile.
// 'idle' is high when the lane holds no tile pair. 'sat' is sticky and
// reports a clamped shared exponent or a saturated mantissa.
// This grouping is the per-lane box of the system diagram; the tile
// coordinate bookkeeping is this design's own.
// Lint note: the converters' out_last outputs are left open on purpose; the
// PPU counts K values per block itself.
module lmhp_lane
  import lmhp_pkg::*;
#(
  parameter int unsigned L        = L_DEF,
  parameter int unsigned MANT_W   = MANT_W_DEF,
  parameter int unsigned SLICE_W  = SLICE_W_DEF,
  parameter int unsigned EXP_W    = EXP_W_DEF,
  parameter int unsigned K_MAX    = K_MAX_DEF,
  parameter int unsigned DEPTH    = SRAM_DEPTH,
  parameter int unsigned PHOT_LAT = PHOT_LAT_DEF,
  parameter int unsigned TW       = 16,
  localparam int unsigned ACC_W   = acc_width(MANT_W, K_MAX),
  localparam int unsigned KW      = $clog2(K_MAX + 1),
  localparam int unsigned BW      = $clog2(MANT_W + 1),
  localparam int unsigned LW      = (L > 1) ? $clog2(L) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [KW-1:0]    cfg_k,
  input  logic [BW-1:0]    cfg_mant_bits,
  input  logic             assign_en,
  input  logic [TW-1:0]    assign_p,
  input  logic [TW-1:0]    assign_r,
  output logic             idle,
  output logic             sat,
  // A tile, row-major FP32 blocks
  input  logic             a_valid,
  output logic             a_ready,
  input  fp32_t            a_data,
  input  logic             a_last,
  // B tile, column-major FP32 blocks
  input  logic             b_valid,
  output logic             b_ready,
  input  fp32_t            b_data,
  input  logic             b_last,
  // FP32 tile results
  output logic             res_valid,
  input  logic             res_ready,
  output fp32_t            res_data,
  output logic [TW-1:0]    res_p,
  output logic [TW-1:0]    res_r,
  output logic [LW-1:0]    res_row,
  output logic [LW-1:0]    res_col
);

  logic              busy;
  logic [TW-1:0]     p_q, r_q;
  logic [LW-1:0]     ea_cnt, eb_cnt;

  // FP2BFP converters
  logic                    ea_v, eb_v, ma_v, mb_v, ma_r, mb_r, ma_s, mb_s, sat_a, sat_b;
  logic signed [EXP_W-1:0] ea, eb;
  logic [MANT_W-1:0]       ma, mb;

  fp2bfp #(.MANT_W(MANT_W), .EXP_W(EXP_W), .K_MAX(K_MAX)) u_fp2bfp_a (
    .clk, .rst, .cfg_mant_bits, .in_valid(a_valid), .in_ready(a_ready), .in_data(a_data), .in_last(a_last),
    .exp_valid(ea_v), .exp_out(ea), .out_valid(ma_v), .out_ready(ma_r), .out_sign(ma_s), .out_mag(ma),
    .out_last(), .sat(sat_a));

  fp2bfp #(.MANT_W(MANT_W), .EXP_W(EXP_W), .K_MAX(K_MAX)) u_fp2bfp_b (
    .clk, .rst, .cfg_mant_bits, .in_valid(b_valid), .in_ready(b_ready), .in_data(b_data), .in_last(b_last),
    .exp_valid(eb_v), .exp_out(eb), .out_valid(mb_v), .out_ready(mb_r), .out_sign(mb_s), .out_mag(mb),
    .out_last(), .sat(sat_b));

  assign sat = sat_a | sat_b;

  // PPU
  logic                    p_valid, p_ready, p_last, ppu_idle;
  logic signed [ACC_W-1:0] p_data;
  logic [LW-1:0]           p_row, p_col;

  ppu #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .K_MAX(K_MAX), .DEPTH(DEPTH), .PHOT_LAT(PHOT_LAT)) u_ppu (
    .clk, .rst, .start(assign_en), .cfg_k, .idle(ppu_idle),
    .a_valid(ma_v), .a_ready(ma_r), .a_sign(ma_s), .a_mag(ma),
    .b_valid(mb_v), .b_ready(mb_r), .b_sign(mb_s), .b_mag(mb),
    .res_valid(p_valid), .res_ready(p_ready), .res_data(p_data),
    .res_row(p_row), .res_col(p_col), .res_last(p_last));

  // BFP2FP
  logic out_last;
  bfp2fp #(.L(L), .EXP_W(EXP_W), .ACC_W(ACC_W)) u_bfp2fp (
    .clk, .rst,
    .ea_we(ea_v), .ea_idx(ea_cnt), .ea(ea), .eb_we(eb_v), .eb_idx(eb_cnt), .eb(eb),
    .in_valid(p_valid), .in_ready(p_ready), .in_data(p_data), .in_row(p_row), .in_col(p_col), .in_last(p_last),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data),
    .out_row(res_row), .out_col(res_col), .out_last(out_last));

  assign res_p = p_q;
  assign res_r = r_q;
  assign idle  = !busy;

  always_ff @(posedge clk) begin
    if (rst) begin
      busy   <= 1'b0;
      p_q    <= '0;
      r_q    <= '0;
      ea_cnt <= '0;
      eb_cnt <= '0;
    end else begin
      if (assign_en) begin
        busy   <= 1'b1;
        p_q    <= assign_p;
        r_q    <= assign_r;
        ea_cnt <= '0;
        eb_cnt <= '0;
      end else begin
        if (ea_v) ea_cnt <= ea_cnt + 1'b1;
        if (eb_v) eb_cnt <= eb_cnt + 1'b1;
        if (res_valid && res_ready && out_last) busy <= 1'b0;
      end
    end
  end

  a_assign_when_idle: assert property (@(posedge clk) disable iff (rst)
    assign_en |-> (!busy && ppu_idle));

endmodule
