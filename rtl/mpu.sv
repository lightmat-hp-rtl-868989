// mpu -- Mantissa Processing Unit: slicing and flattening of one operand.
//
// Each BFP mantissa (sign + MANT_W magnitude bits) is cut into a high slice
// (upper SLICE_W bits, a1/b1) and a low slice (lower SLICE_W bits, a2/b2).
// The high slice goes to the first of the unit's two DAC Players (MZM1 or
// MZM3), the low slice to the second (MZM2 or MZM4), and the sign rides along
// as a tag bit in the high-slice word; it is not sent to the DAC.
//
// The unit also lays out the tile in the order the DAC Players play it, so
// that the two operand streams line up element by element:
//   IS_B = 0 (MPU1, tile of A, input row-major, element e = row*K + t):
//            the whole tile is repeated L times:     addr = rep*L*K + e
//   IS_B = 1 (MPU2, tile of B, input column-major, e = col*K + t):
//            each column is repeated L times:        addr = (col*L + rep)*K + t
// Sample i of the played stream then multiplies A[g % L][t] by B[t][g / L]
// with g = i / K, t = i % K. Every mantissa is written to its L addresses on
// L consecutive cycles, so the unit accepts one mantissa every L cycles
// (in_ready stalls the converter in between). Where the flattening is done
// and the one-write-per-cycle port are this design's own choices.
//
// Interface: 'start' clears the element counter; 'done' rises once L*cfg_k
// mantissas have been fully written and stays high until the next start.
// Lint note: the write address is computed in 32 bits and only its low
// log2(DEPTH) bits are used (the address range is checked by the PPU).
module mpu
  import lmhp_pkg::*;
#(
  parameter int unsigned L       = L_DEF,
  parameter int unsigned MANT_W  = MANT_W_DEF,
  parameter int unsigned SLICE_W = SLICE_W_DEF,
  parameter bit          IS_B    = 1'b0,
  parameter int unsigned K_MAX   = K_MAX_DEF,
  parameter int unsigned DEPTH   = SRAM_DEPTH,
  localparam int unsigned KW     = $clog2(K_MAX + 1),
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               start,
  input  logic [KW-1:0]      cfg_k,
  input  logic               in_valid,
  output logic               in_ready,
  input  logic               in_sign,
  input  logic [MANT_W-1:0]  in_mag,
  // write ports of the two DAC Players
  output logic               wr_en,
  output logic [AW-1:0]      wr_addr,
  output logic [SLICE_W:0]   wr_hi,     // {sign tag, high slice}
  output logic [SLICE_W:0]   wr_lo,     // {1'b0, low slice}
  output logic               done
);

  initial assert (MANT_W == 2 * SLICE_W)
    else $error("mpu: the four-MZM core multiplies two slices per operand");

  localparam int unsigned LW = (L > 1) ? $clog2(L) : 1;

  logic              busy;
  logic [LW-1:0]     rep;
  logic [KW-1:0]     t;          // position inside the block
  logic [LW-1:0]     blk;        // row of A / column of B
  logic              h_sign;
  logic [MANT_W-1:0] h_mag;
  logic              last_rep;

  assign last_rep = (rep == LW'(L - 1));
  assign in_ready = !done && (!busy || last_rep);

  logic [31:0] addr_w;
  always_comb begin
    if (!IS_B) addr_w = (32'(rep) * 32'(L) + 32'(blk)) * 32'(cfg_k) + 32'(t);
    else       addr_w = (32'(blk) * 32'(L) + 32'(rep)) * 32'(cfg_k) + 32'(t);
  end

  assign wr_en   = busy;
  assign wr_addr = addr_w[AW-1:0];
  assign wr_hi   = {h_sign, h_mag[MANT_W-1 -: SLICE_W]};
  assign wr_lo   = {1'b0, h_mag[SLICE_W-1:0]};

  always_ff @(posedge clk) begin
    if (rst || start) begin
      busy   <= 1'b0;
      rep    <= '0;
      t      <= '0;
      blk    <= '0;
      h_sign <= 1'b0;
      h_mag  <= '0;
      done   <= 1'b0;
    end else begin
      if (busy) begin
        if (last_rep) begin
          rep  <= '0;
          busy <= 1'b0;
          if (t + 1'b1 == cfg_k) begin
            t <= '0;
            if (blk == LW'(L - 1)) done <= 1'b1;
            else                   blk  <= blk + 1'b1;
          end else begin
            t <= t + 1'b1;
          end
        end else begin
          rep <= rep + 1'b1;
        end
      end
      if (in_valid && in_ready) begin
        busy   <= 1'b1;
        h_sign <= in_sign;
        h_mag  <= in_mag;
      end
    end
  end

endmodule
