// lightmat_hp_top -- LightMat-HP: tiled BFP matrix multiply on photonic lanes.
//
// Computes C = A x B for FP32 matrices held in external memory:
//   A is M x K at base_a, B is K x N at base_b, C is M x N at base_c, all
//   row-major, one FP32 word per address.
// The scheduler cuts A into L-row tiles and B into L-column tiles (K is not
// split: a tile spans the whole inner dimension, K <= K_MAX) and streams each
// tile pair to an idle lane. Each of the NUM_PPU lanes converts its rows and
// columns to block floating point, multiplies the mantissas as 5-bit slices on
// its photonic processing unit, sums and rescales the products and returns an
// L x L FP32 tile; the result concatenator writes the tiles into C, cropping
// the zero padding of edge tiles.
//
// Interface: set cfg_* and the base addresses, pulse 'start', wait for 'done'
// (level, until the next start). cfg_mant_bits (2..MANT_W) selects the BFP
// mantissa width at run time. External memory: read ports A and B return data
// the cycle after *_en; the C port writes when mem_c_we is high. 'sat' is the
// OR of the lanes' sticky saturation flags. n_written / n_cropped count the
// elements of C written and the padded elements dropped in the current run.
// The photonic core inside every PPU is a behavioural model.
module lightmat_hp_top
  import lmhp_pkg::*;
#(
  parameter int unsigned NUM_PPU  = NUM_PPU_DEF,
  parameter int unsigned L        = L_DEF,
  parameter int unsigned MANT_W   = MANT_W_DEF,
  parameter int unsigned SLICE_W  = SLICE_W_DEF,
  parameter int unsigned EXP_W    = EXP_W_DEF,
  parameter int unsigned DEPTH    = SRAM_DEPTH,
  parameter int unsigned K_MAX    = DEPTH / (L * L),
  parameter int unsigned PHOT_LAT = PHOT_LAT_DEF,
  parameter int unsigned AW       = ADDR_W_DEF,
  parameter int unsigned DW       = 16,
  localparam int unsigned KW      = $clog2(K_MAX + 1),
  localparam int unsigned BW      = $clog2(MANT_W + 1)
) (
  input  logic            clk,
  input  logic            rst,
  input  logic            start,
  input  logic [DW-1:0]   cfg_m,
  input  logic [DW-1:0]   cfg_n,
  input  logic [KW-1:0]   cfg_k,
  input  logic [BW-1:0]   cfg_mant_bits,
  input  logic [AW-1:0]   base_a,
  input  logic [AW-1:0]   base_b,
  input  logic [AW-1:0]   base_c,
  output logic            done,
  output logic            sat,
  output logic [31:0]     n_written,
  output logic [31:0]     n_cropped,
  // external memory
  output logic            mem_a_en,
  output logic [AW-1:0]   mem_a_addr,
  input  fp32_t           mem_a_data,
  output logic            mem_b_en,
  output logic [AW-1:0]   mem_b_addr,
  input  fp32_t           mem_b_data,
  output logic            mem_c_we,
  output logic [AW-1:0]   mem_c_addr,
  output fp32_t           mem_c_data
);

  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1;

  logic          lane_idle [NUM_PPU];
  logic          lane_asg  [NUM_PPU];
  logic          lane_sat  [NUM_PPU];
  logic [DW-1:0] asg_p, asg_r;
  logic          a_valid [NUM_PPU], a_ready [NUM_PPU], b_valid [NUM_PPU], b_ready [NUM_PPU];
  fp32_t         a_data, b_data;
  logic          a_last, b_last;
  logic          r_valid [NUM_PPU], r_ready [NUM_PPU];
  fp32_t         r_data  [NUM_PPU];
  logic [DW-1:0] r_p [NUM_PPU], r_r [NUM_PPU];
  logic [LW-1:0] r_row [NUM_PPU], r_col [NUM_PPU];

  scheduler #(.NUM_PPU(NUM_PPU), .L(L), .K_MAX(K_MAX), .AW(AW), .DW(DW)) u_sched (
    .clk, .rst, .start, .cfg_m, .cfg_n, .cfg_k, .base_a, .base_b, .done,
    .mem_a_en, .mem_a_addr, .mem_a_data, .mem_b_en, .mem_b_addr, .mem_b_data,
    .lane_idle, .lane_assign(lane_asg), .assign_p(asg_p), .assign_r(asg_r),
    .a_valid, .a_ready, .a_data, .a_last, .b_valid, .b_ready, .b_data, .b_last);

  for (genvar i = 0; i < NUM_PPU; i++) begin : g_lane
    lmhp_lane #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .EXP_W(EXP_W), .K_MAX(K_MAX),
                .DEPTH(DEPTH), .PHOT_LAT(PHOT_LAT), .TW(DW)) u_lane (
      .clk, .rst, .cfg_k, .cfg_mant_bits,
      .assign_en(lane_asg[i]), .assign_p(asg_p), .assign_r(asg_r),
      .idle(lane_idle[i]), .sat(lane_sat[i]),
      .a_valid(a_valid[i]), .a_ready(a_ready[i]), .a_data, .a_last,
      .b_valid(b_valid[i]), .b_ready(b_ready[i]), .b_data, .b_last,
      .res_valid(r_valid[i]), .res_ready(r_ready[i]), .res_data(r_data[i]),
      .res_p(r_p[i]), .res_r(r_r[i]), .res_row(r_row[i]), .res_col(r_col[i]));
  end

  always_comb begin
    sat = 1'b0;
    for (int i = 0; i < NUM_PPU; i++) sat |= lane_sat[i];
  end

  result_concat #(.NUM_PPU(NUM_PPU), .L(L), .AW(AW), .DW(DW)) u_concat (
    .clk, .rst, .clear(start), .cfg_m, .cfg_n, .base_c,
    .res_valid(r_valid), .res_ready(r_ready), .res_data(r_data), .res_p(r_p), .res_r(r_r),
    .res_row(r_row), .res_col(r_col),
    .mem_c_we, .mem_c_addr, .mem_c_data, .n_written, .n_cropped);

endmodule
