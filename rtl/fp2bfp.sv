// fp2bfp -- FP32 to block-floating-point converter (FP2BFP).
//
// A block is one row of an A tile or one column of a B tile (K values). The
// converter gives the block one shared exponent
//     e_s = floor(log2(max |x_i|)) - (b - 1)
// and each value a sign and a b-bit magnitude m_i = round(|x_i| / 2^e_s),
// b = cfg_mant_bits (2..MANT_W, sampled when a block starts). This is the
// conversion rule of block floating point; the two-pass structure is this
// design's own:
//   COLLECT  values are written into a K_MAX-deep buffer while the largest
//            exponent field is tracked; in_last ends the block.
//   EXPO     e_s is formed, clamped to the EXP_W-bit two's complement range,
//            and presented for one cycle on exp_valid/exp_out.
//   EMIT     the buffer is read back, each value is shifted to e_s, rounded
//            half-up and saturated at 2^b-1, and streamed out with valid/ready.
// Here b counts magnitude bits and the sign travels separately (the sign +
// M-bit mantissa layout of the BFP format); zero and subnormal inputs give a
// zero mantissa, Inf/NaN and exponent clamping set the sticky 'sat' flag.
//
// Timing: one value accepted per cycle while collecting; e_s appears one cycle
// after in_last; mantissas follow at up to one per cycle. in_ready is low from
// in_last until the last mantissa of the block has been issued.
module fp2bfp
  import lmhp_pkg::*;
#(
  parameter int unsigned MANT_W = MANT_W_DEF,
  parameter int unsigned EXP_W  = EXP_W_DEF,
  parameter int unsigned K_MAX  = K_MAX_DEF,
  localparam int unsigned KW    = $clog2(K_MAX + 1),
  localparam int unsigned BW    = $clog2(MANT_W + 1)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic [BW-1:0]            cfg_mant_bits,
  // FP32 input stream
  input  logic                     in_valid,
  output logic                     in_ready,
  input  fp32_t                    in_data,
  input  logic                     in_last,
  // shared exponent, one pulse per block
  output logic                     exp_valid,
  output logic signed [EXP_W-1:0]  exp_out,
  // mantissa stream
  output logic                     out_valid,
  input  logic                     out_ready,
  output logic                     out_sign,
  output logic [MANT_W-1:0]        out_mag,
  output logic                     out_last,
  output logic                     sat
);

  localparam int EMIN = -(2 ** (EXP_W - 1));
  localparam int EMAX = (2 ** (EXP_W - 1)) - 1;

  typedef enum logic [1:0] {S_COLLECT, S_EXPO, S_EMIT} state_t;
  state_t state;

  fp32_t           buf_mem [K_MAX];
  logic [KW-1:0]   wr_ptr, rd_ptr, len;
  logic [7:0]      max_exp;
  logic [BW-1:0]   bits_q;
  logic signed [EXP_W-1:0] es_q;

  // ---------------------------------------------------------------- exponent
  logic signed [10:0] es_full;
  logic signed [EXP_W-1:0] es_clamped;
  logic               es_hi;
  always_comb begin
    es_full    = 11'(signed'({3'b000, max_exp})) - 11'sd127 - 11'(signed'({1'b0, bits_q})) + 11'sd1;
    es_hi      = 1'b0;
    if (max_exp == 8'd0)               es_clamped = EXP_W'(EMIN);   // all-zero block
    else if (es_full > 11'(EMAX)) begin es_clamped = EXP_W'(EMAX); es_hi = 1'b1; end
    else if (es_full < 11'(EMIN))      es_clamped = EXP_W'(EMIN);
    else                               es_clamped = EXP_W'(es_full);
  end

  // ---------------------------------------------------------- value -> mantissa
  fp32_t              rd_val;
  logic [MANT_W-1:0]  conv_mag;
  logic               conv_sat;
  logic [MANT_W:0]    max_mag;
  logic signed [11:0] sh;
  logic [25:0]        sig, rnd;
  always_comb begin
    rd_val   = buf_mem[rd_ptr[$clog2(K_MAX)-1:0]];
    max_mag  = (MANT_W + 1)'(shl64(64'd1, 7'(bits_q)) - 64'd1);
    conv_sat = 1'b0;
    conv_mag = '0;
    sig      = {3'b001, rd_val.frac};
    // shift right by 23 + e_s - e
    sh       = 12'sd23 + 12'(es_q) - (12'(signed'({4'b0000, rd_val.exp})) - 12'sd127);
    rnd      = '0;
    if (rd_val.exp == 8'hFF) begin
      conv_mag = max_mag[MANT_W-1:0];
      conv_sat = 1'b1;
    end else if (rd_val.exp != 8'd0) begin
      if (sh <= 0) begin
        conv_mag = max_mag[MANT_W-1:0];
        conv_sat = 1'b1;
      end else if (sh <= 12'sd25) begin
        // round half up: (sig + 2^(sh-1)) >> sh == ((sig >> (sh-1)) + 1) >> 1
        rnd = 26'((shr64(64'(sig), 7'(sh - 12'sd1)) + 64'd1) >> 1);
        if (rnd > 26'(max_mag)) conv_mag = max_mag[MANT_W-1:0];
        else                    conv_mag = rnd[MANT_W-1:0];
      end
    end
  end

  assign in_ready = (state == S_COLLECT);

  logic emit_go;
  assign emit_go = (state == S_EMIT) && (rd_ptr != len) && (!out_valid || out_ready);

  always_ff @(posedge clk) begin
    if (in_valid && in_ready) buf_mem[wr_ptr[$clog2(K_MAX)-1:0]] <= in_data;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_COLLECT;
      wr_ptr    <= '0;
      rd_ptr    <= '0;
      len       <= '0;
      max_exp   <= '0;
      bits_q    <= BW'(MANT_W);
      es_q      <= '0;
      exp_valid <= 1'b0;
      exp_out   <= '0;
      out_valid <= 1'b0;
      out_sign  <= 1'b0;
      out_mag   <= '0;
      out_last  <= 1'b0;
      sat       <= 1'b0;
    end else begin
      exp_valid <= 1'b0;
      if (out_valid && out_ready) out_valid <= 1'b0;
      unique case (state)
        S_COLLECT: begin
          if (in_valid) begin
            if (wr_ptr == '0) begin
              bits_q  <= cfg_mant_bits;
              max_exp <= in_data.exp;
            end else if (in_data.exp > max_exp) begin
              max_exp <= in_data.exp;
            end
            wr_ptr <= wr_ptr + 1'b1;
            if (in_last) begin
              len   <= wr_ptr + 1'b1;
              state <= S_EXPO;
            end
          end
        end
        S_EXPO: begin
          es_q      <= es_clamped;
          exp_out   <= es_clamped;
          exp_valid <= 1'b1;
          if (es_hi) sat <= 1'b1;
          rd_ptr    <= '0;
          state     <= S_EMIT;
        end
        S_EMIT: begin
          if (emit_go) begin
            out_valid <= 1'b1;
            out_sign  <= rd_val.sign;
            out_mag   <= conv_mag;
            out_last  <= (rd_ptr + 1'b1 == len);
            if (conv_sat) sat <= 1'b1;
            rd_ptr    <= rd_ptr + 1'b1;
            if (rd_ptr + 1'b1 == len) begin
              state  <= S_COLLECT;
              wr_ptr <= '0;
            end
          end
        end
        default: state <= S_COLLECT;
      endcase
    end
  end

  // A block never exceeds the buffer.
  a_no_overflow: assert property (@(posedge clk) disable iff (rst)
    (in_valid && in_ready) |-> (wr_ptr < KW'(K_MAX)));

endmodule
