// ppu -- Photonic Processing Unit: multiplies one tile pair of BFP mantissas.
//
// Structure (one instance of each per PPU):
//   MPU1  -> DAC Player1 (a1 + sign tag), DAC Player2 (a2)
//   MPU2  -> DAC Player3 (b1 + sign tag), DAC Player4 (b2)
//   DAC Players -> photonic_core (MZM1..4) -> ADC Capture1..4
//   ADC Captures -> DPPU -> Block Splicer -> result stream (P_k)
// The four MZMs give all four 5-bit x 5-bit sub-products of one mantissa pair
// per sample, so a 10-bit x 10-bit product costs one sample slot.
//
// Sequence after 'start' (cfg_k = K, the inner dimension of the tile pair):
//   LOAD   the MPUs accept the A tile (L rows of K, row-major) and the B tile
//          (L columns of K, column-major) and fill the DAC Player SRAMs with
//          the flattened L*L*K-sample streams.
//   PLAY   all four DAC Players are triggered together and play L*L*K
//          samples; the play strobe and sign(a) xor sign(b), delayed by the
//          photonic latency, make the ADC Captures record the products.
//   POST   the DPPU reads the captures and forms the L*L dot products.
//   SPLICE the Block Splicer streams the L x L tile out (row-major,
//          valid/ready, res_last on the final element).
// 'idle' is high when a new tile pair may be started. The block composition
// follows the paper; the sequencing is this design's own. Only the two-slice
// mapping is built (mantissas of up to 2*SLICE_W bits in one pass).
// Lint note: the tag bits of DAC Players 2 and 4 (low slices) are always zero
// and unused; only the high-slice players carry the sign tags.
module ppu
  import lmhp_pkg::*;
#(
  parameter int unsigned L        = L_DEF,
  parameter int unsigned MANT_W   = MANT_W_DEF,
  parameter int unsigned SLICE_W  = SLICE_W_DEF,
  parameter int unsigned K_MAX    = K_MAX_DEF,
  parameter int unsigned DEPTH    = SRAM_DEPTH,
  parameter int unsigned DAC_W    = DAC_W_DEF,
  parameter int unsigned ADC_W    = ADC_W_DEF,
  parameter int unsigned PHOT_LAT = PHOT_LAT_DEF,
  localparam int unsigned ACC_W   = acc_width(MANT_W, K_MAX),
  localparam int unsigned KW      = $clog2(K_MAX + 1),
  localparam int unsigned AW      = $clog2(DEPTH),
  localparam int unsigned LW      = (L > 1) ? $clog2(L) : 1
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic [KW-1:0]            cfg_k,
  output logic                     idle,
  // M_A stream
  input  logic                     a_valid,
  output logic                     a_ready,
  input  logic                     a_sign,
  input  logic [MANT_W-1:0]        a_mag,
  // M_B stream
  input  logic                     b_valid,
  output logic                     b_ready,
  input  logic                     b_sign,
  input  logic [MANT_W-1:0]        b_mag,
  // P_k stream
  output logic                     res_valid,
  input  logic                     res_ready,
  output logic signed [ACC_W-1:0]  res_data,
  output logic [LW-1:0]            res_row,
  output logic [LW-1:0]            res_col,
  output logic                     res_last
);

  initial assert (L * L * K_MAX <= DEPTH) else $error("ppu: tile pair does not fit the DAC Player SRAM");

  typedef enum logic [2:0] {P_IDLE, P_LOAD, P_PLAY, P_DRAIN, P_POST, P_SPLICE} pstate_t;
  pstate_t state;

  // ------------------------------------------------------------------ MPUs
  logic              mpu_start, mpu1_done, mpu2_done;
  logic              w1_en, w2_en;
  logic [AW-1:0]     w1_addr, w2_addr;
  logic [SLICE_W:0]  w1_hi, w1_lo, w2_hi, w2_lo;
  logic              a_rdy_i, b_rdy_i;

  assign mpu_start = start && (state == P_IDLE);
  assign a_ready   = a_rdy_i && (state == P_LOAD);
  assign b_ready   = b_rdy_i && (state == P_LOAD);

  mpu #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .IS_B(1'b0), .K_MAX(K_MAX), .DEPTH(DEPTH)) u_mpu1 (
    .clk, .rst, .start(mpu_start), .cfg_k,
    .in_valid(a_valid && state == P_LOAD), .in_ready(a_rdy_i), .in_sign(a_sign), .in_mag(a_mag),
    .wr_en(w1_en), .wr_addr(w1_addr), .wr_hi(w1_hi), .wr_lo(w1_lo), .done(mpu1_done));

  mpu #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .IS_B(1'b1), .K_MAX(K_MAX), .DEPTH(DEPTH)) u_mpu2 (
    .clk, .rst, .start(mpu_start), .cfg_k,
    .in_valid(b_valid && state == P_LOAD), .in_ready(b_rdy_i), .in_sign(b_sign), .in_mag(b_mag),
    .wr_en(w2_en), .wr_addr(w2_addr), .wr_hi(w2_hi), .wr_lo(w2_lo), .done(mpu2_done));

  // ----------------------------------------------------------- DAC Players
  logic              trig;
  logic [AW:0]       play_len;
  logic [3:0]        dp_busy, dp_valid, dp_tag;
  logic [DAC_W-1:0]  dac_code [4];
  logic [ADC_W-1:0]  adc_code [4];

  assign play_len = (AW+1)'(32'(L) * 32'(L) * 32'(cfg_k));

  dac_player #(.DEPTH(DEPTH), .SLICE_W(SLICE_W), .DAC_W(DAC_W)) u_dac1 (
    .clk, .rst, .wr_en(w1_en), .wr_addr(w1_addr), .wr_data(w1_hi), .trigger(trig), .play_len,
    .busy(dp_busy[0]), .dac_valid(dp_valid[0]), .dac_code(dac_code[0]), .dac_tag(dp_tag[0]));
  dac_player #(.DEPTH(DEPTH), .SLICE_W(SLICE_W), .DAC_W(DAC_W)) u_dac2 (
    .clk, .rst, .wr_en(w1_en), .wr_addr(w1_addr), .wr_data(w1_lo), .trigger(trig), .play_len,
    .busy(dp_busy[1]), .dac_valid(dp_valid[1]), .dac_code(dac_code[1]), .dac_tag(dp_tag[1]));
  dac_player #(.DEPTH(DEPTH), .SLICE_W(SLICE_W), .DAC_W(DAC_W)) u_dac3 (
    .clk, .rst, .wr_en(w2_en), .wr_addr(w2_addr), .wr_data(w2_hi), .trigger(trig), .play_len,
    .busy(dp_busy[2]), .dac_valid(dp_valid[2]), .dac_code(dac_code[2]), .dac_tag(dp_tag[2]));
  dac_player #(.DEPTH(DEPTH), .SLICE_W(SLICE_W), .DAC_W(DAC_W)) u_dac4 (
    .clk, .rst, .wr_en(w2_en), .wr_addr(w2_addr), .wr_data(w2_lo), .trigger(trig), .play_len,
    .busy(dp_busy[3]), .dac_valid(dp_valid[3]), .dac_code(dac_code[3]), .dac_tag(dp_tag[3]));

  // --------------------------------------------------------- photonic core
  photonic_core #(.DAC_W(DAC_W), .ADC_W(ADC_W), .LAT(PHOT_LAT)) u_core (
    .clk, .dac_code, .adc_code);

  // capture strobe and sign tag, delayed to line up with the ADC samples
  logic [PHOT_LAT-1:0] cap_pipe, sgn_pipe;
  always_ff @(posedge clk) begin
    if (rst) begin
      cap_pipe <= '0;
      sgn_pipe <= '0;
    end else begin
      cap_pipe <= {cap_pipe[PHOT_LAT-2:0], dp_valid[0]};
      sgn_pipe <= {sgn_pipe[PHOT_LAT-2:0], dp_tag[0] ^ dp_tag[2]};
    end
  end

  // ---------------------------------------------------------- ADC Captures
  logic [AW-1:0]  cap_rd_addr;
  logic [ADC_W:0] cap_rd_data [4];
  logic [AW:0]    cap_count [4];
  logic           cap_clear;
  assign cap_clear = mpu_start;

  for (genvar c = 0; c < 4; c++) begin : g_cap
    adc_capture #(.DEPTH(DEPTH), .ADC_W(ADC_W)) u_cap (
      .clk, .rst, .clear(cap_clear), .cap_en(cap_pipe[PHOT_LAT-1]),
      .cap_data({(c == 0) ? sgn_pipe[PHOT_LAT-1] : 1'b0, adc_code[c]}),
      .rd_addr(cap_rd_addr), .rd_data(cap_rd_data[c]), .count(cap_count[c]));
  end

  // ------------------------------------------------------------------ DPPU
  logic                    dppu_start, dppu_valid, dppu_done;
  logic signed [ACC_W-1:0] dppu_data;
  logic [$clog2(L*L)-1:0]  dppu_grp;

  dppu #(.L(L), .MANT_W(MANT_W), .SLICE_W(SLICE_W), .ADC_W(ADC_W), .K_MAX(K_MAX), .DEPTH(DEPTH)) u_dppu (
    .clk, .rst, .start(dppu_start), .cfg_k, .rd_addr(cap_rd_addr), .rd_data(cap_rd_data),
    .out_valid(dppu_valid), .out_data(dppu_data), .out_grp(dppu_grp), .done(dppu_done));

  block_splicer #(.L(L), .ACC_W(ACC_W)) u_splicer (
    .clk, .rst, .in_valid(dppu_valid), .in_data(dppu_data), .in_grp(dppu_grp),
    .out_valid(res_valid), .out_ready(res_ready), .out_data(res_data),
    .out_row(res_row), .out_col(res_col), .out_last(res_last));

  // --------------------------------------------------------------- control
  assign trig       = (state == P_LOAD) && mpu1_done && mpu2_done;
  assign dppu_start = (state == P_DRAIN) && (cap_count[0] == play_len) && (cap_pipe == '0);
  assign idle       = (state == P_IDLE);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= P_IDLE;
    end else begin
      unique case (state)
        P_IDLE:   if (start) state <= P_LOAD;
        P_LOAD:   if (trig) state <= P_PLAY;
        P_PLAY:   if (dp_busy == '0 && dp_valid == '0 && !trig) state <= P_DRAIN;
        P_DRAIN:  if (dppu_start) state <= P_POST;
        P_POST:   if (dppu_done) state <= P_SPLICE;
        P_SPLICE: if (res_valid && res_ready && res_last) state <= P_IDLE;
        default:  state <= P_IDLE;
      endcase
    end
  end

  // The four DAC Players are triggered together and stay aligned.
  a_players_aligned: assert property (@(posedge clk) disable iff (rst)
    (dp_valid == '0) || (dp_valid == '1));

endmodule
