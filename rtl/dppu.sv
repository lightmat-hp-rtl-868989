// dppu -- Digital Post-Processing Unit: slice recombination and row sums.
//
// After a tile pair has been played, the four ADC Captures hold, at every
// address i, the sub-products a1*b1, a2*b1, a1*b2, a2*b2 of one mantissa pair,
// and capture 1 also holds the sign tag sign(a) xor sign(b). The DPPU reads
// the captures in address order and forms
//     p_i = +/- ( (a1b1 << 2*SLICE_W) + ((a2b1 + a1b2) << SLICE_W) + a2b2 )
// (shifts of 10, 5 and 0 bits for 5-bit slices), then adds K consecutive
// products: group g = i / K is one dot product of the tile, A row g % L with
// B column g / L. One result leaves per group, tagged with g, as a signed
// ACC_W-bit integer in units of 2^(E_A + E_B).
//
// Timing: 'start' begins reading L*L*cfg_k addresses at one per cycle; the
// captures answer one cycle later and a group's sum appears on out_valid two
// cycles after its last address. 'done' pulses with the last group.
// The recombination follows the paper; read order and widths are this
// design's own.
module dppu
  import lmhp_pkg::*;
#(
  parameter int unsigned L       = L_DEF,
  parameter int unsigned MANT_W  = MANT_W_DEF,
  parameter int unsigned SLICE_W = SLICE_W_DEF,
  parameter int unsigned ADC_W   = ADC_W_DEF,
  parameter int unsigned K_MAX   = K_MAX_DEF,
  parameter int unsigned DEPTH   = SRAM_DEPTH,
  localparam int unsigned ACC_W  = acc_width(MANT_W, K_MAX),
  localparam int unsigned KW     = $clog2(K_MAX + 1),
  localparam int unsigned AW     = $clog2(DEPTH),
  localparam int unsigned GW     = $clog2(L * L)
) (
  input  logic                     clk,
  input  logic                     rst,
  input  logic                     start,
  input  logic [KW-1:0]            cfg_k,
  output logic [AW-1:0]            rd_addr,
  input  logic [ADC_W:0]           rd_data [4],
  output logic                     out_valid,
  output logic signed [ACC_W-1:0]  out_data,
  output logic [GW-1:0]            out_grp,
  output logic                     done
);

  logic          iss;
  logic [AW:0]   addr;
  logic [KW-1:0] t_iss;
  logic [GW-1:0] g_iss;
  logic          v_d;
  logic [KW-1:0] t_d;
  logic [GW-1:0] g_d;
  logic signed [ACC_W-1:0] acc;

  assign rd_addr = addr[AW-1:0];

  // recombination of the four sub-products
  logic [ACC_W-1:0]        mag;
  logic signed [ACC_W-1:0] prod, acc_next;
  always_comb begin
    mag = (ACC_W'(rd_data[0][ADC_W-1:0]) << (2 * SLICE_W))
        + ((ACC_W'(rd_data[1][ADC_W-1:0]) + ACC_W'(rd_data[2][ADC_W-1:0])) << SLICE_W)
        +  ACC_W'(rd_data[3][ADC_W-1:0]);
    prod     = rd_data[0][ADC_W] ? -signed'(mag) : signed'(mag);
    acc_next = (t_d == '0) ? prod : acc + prod;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      iss       <= 1'b0;
      addr      <= '0;
      t_iss     <= '0;
      g_iss     <= '0;
      v_d       <= 1'b0;
      t_d       <= '0;
      g_d       <= '0;
      acc       <= '0;
      out_valid <= 1'b0;
      out_data  <= '0;
      out_grp   <= '0;
      done      <= 1'b0;
    end else begin
      out_valid <= 1'b0;
      done      <= 1'b0;
      // address issue
      v_d <= iss;
      t_d <= t_iss;
      g_d <= g_iss;
      if (start && !iss) begin
        iss   <= (cfg_k != '0);
        addr  <= '0;
        t_iss <= '0;
        g_iss <= '0;
      end else if (iss) begin
        addr <= addr + 1'b1;
        if (t_iss + 1'b1 == cfg_k) begin
          t_iss <= '0;
          g_iss <= g_iss + 1'b1;
          if (g_iss == GW'(L * L - 1)) iss <= 1'b0;
        end else begin
          t_iss <= t_iss + 1'b1;
        end
      end
      // accumulate
      if (v_d) begin
        acc <= acc_next;
        if (t_d + 1'b1 == cfg_k) begin
          out_valid <= 1'b1;
          out_data  <= acc_next;
          out_grp   <= g_d;
          done      <= (g_d == GW'(L * L - 1));
        end
      end
    end
  end

endmodule
