// dac_player -- DAC Player: one slice stream of a tile pair, played on trigger.
//
// A DEPTH-word SRAM (32 KB taken as 16384 two-byte samples) is filled through
// the write port by the MPU. A one-cycle 'trigger' with 'play_len' starts
// playback: addresses 0..play_len-1 are read one per cycle and each word is
// presented, one cycle after its read, as a DAC code (the slice value,
// zero-extended to DAC_W bits) plus the tag bit that rides in the word.
// dac_valid marks played samples; 'busy' is high from trigger to the last
// sample. The SRAM size follows the paper; one sample per clock and the
// linear code mapping (no MZM pre-distortion) are this design's choices.
module dac_player
  import lmhp_pkg::*;
#(
  parameter int unsigned DEPTH   = SRAM_DEPTH,
  parameter int unsigned SLICE_W = SLICE_W_DEF,
  parameter int unsigned DAC_W   = DAC_W_DEF,
  localparam int unsigned AW     = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst,
  input  logic               wr_en,
  input  logic [AW-1:0]      wr_addr,
  input  logic [SLICE_W:0]   wr_data,    // {tag, slice}
  input  logic               trigger,
  input  logic [AW:0]        play_len,
  output logic               busy,
  output logic               dac_valid,
  output logic [DAC_W-1:0]   dac_code,
  output logic               dac_tag
);

  logic [SLICE_W:0] mem [DEPTH];
  logic [AW:0]      rd_ptr, len_q;
  logic [SLICE_W:0] rd_q;

  always_ff @(posedge clk) begin
    if (wr_en) mem[wr_addr] <= wr_data;
  end

  always_ff @(posedge clk) begin
    if (busy) rd_q <= mem[rd_ptr[AW-1:0]];
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      busy      <= 1'b0;
      rd_ptr    <= '0;
      len_q     <= '0;
      dac_valid <= 1'b0;
    end else begin
      dac_valid <= busy;
      if (trigger && !busy) begin
        busy   <= (play_len != '0);
        rd_ptr <= '0;
        len_q  <= play_len;
      end else if (busy) begin
        rd_ptr <= rd_ptr + 1'b1;
        if (rd_ptr + 1'b1 == len_q) busy <= 1'b0;
      end
    end
  end

  assign dac_code = DAC_W'(rd_q[SLICE_W-1:0]);
  assign dac_tag  = rd_q[SLICE_W];

endmodule
