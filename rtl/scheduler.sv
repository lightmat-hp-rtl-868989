// scheduler -- tiles A and B and streams tile pairs to the lanes.
//
// A (M x K, row-major at base_a) is cut into ceil(M/L) row tiles of L x K and
// B (K x N, row-major at base_b) into ceil(N/L) column tiles of K x L; tile
// pair (p, r) produces output tile C[p][r]. Rows of A beyond M and columns of
// B beyond N are padded with zeros (no memory read); the concatenator drops
// the matching outputs. Policy (this design's own choice):
//   * work proceeds in rounds; a round waits until every lane is idle, then
//     assigns the next min(NUM_PPU, remaining) tile pairs in (p, r) order to
//     lanes 0, 1, ... ('lane_assign' pulse with assign_p / assign_r);
//   * it then streams block j = 0..L-1 to every assigned lane in turn: row j
//     of the lane's A tile on the A port and column j of its B tile on the B
//     port, K values each, one per cycle, with a_last/b_last on the K-th value;
//   * a block starts only when both converters of that lane are ready, and a
//     one-cycle gap follows each block so a converter can drop its ready.
// External memory: two read ports with one cycle of latency (data appears
// the cycle after mem_*_en). 'done' is high once the last round has finished
// (all lanes idle) and stays high until the next 'start'. Sizes up to 2^DW-1.
module scheduler
  import lmhp_pkg::*;
#(
  parameter int unsigned NUM_PPU = NUM_PPU_DEF,
  parameter int unsigned L       = L_DEF,
  parameter int unsigned K_MAX   = K_MAX_DEF,
  parameter int unsigned AW      = ADDR_W_DEF,
  parameter int unsigned DW      = 16,
  localparam int unsigned NW     = (NUM_PPU > 1) ? $clog2(NUM_PPU) : 1,
  localparam int unsigned KW     = $clog2(K_MAX + 1),
  localparam int unsigned LW     = (L > 1) ? $clog2(L) : 1
) (
  input  logic                clk,
  input  logic                rst,
  input  logic                start,
  input  logic [DW-1:0]       cfg_m,
  input  logic [DW-1:0]       cfg_n,
  input  logic [KW-1:0]       cfg_k,
  input  logic [AW-1:0]       base_a,
  input  logic [AW-1:0]       base_b,
  output logic                done,
  // external memory read ports
  output logic                mem_a_en,
  output logic [AW-1:0]       mem_a_addr,
  input  fp32_t               mem_a_data,
  output logic                mem_b_en,
  output logic [AW-1:0]       mem_b_addr,
  input  fp32_t               mem_b_data,
  // lanes
  input  logic                lane_idle  [NUM_PPU],
  output logic                lane_assign[NUM_PPU],
  output logic [DW-1:0]       assign_p,
  output logic [DW-1:0]       assign_r,
  output logic                a_valid    [NUM_PPU],
  input  logic                a_ready    [NUM_PPU],
  output fp32_t               a_data,
  output logic                a_last,
  output logic                b_valid    [NUM_PPU],
  input  logic                b_ready    [NUM_PPU],
  output fp32_t               b_data,
  output logic                b_last
);

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_ASSIGN, S_CHECK, S_STREAM, S_GAP, S_DONE} sstate_t;
  sstate_t state;

  logic [DW-1:0] ntp, ntr, tp, tr;
  logic [NW-1:0] lane, nl;
  logic [LW-1:0] blk;
  logic [KW-1:0] t;
  logic [DW-1:0] lane_p [NUM_PPU];
  logic [DW-1:0] lane_r [NUM_PPU];
  logic          all_idle, tiles_left, last_tile;

  assign ntp = DW'((32'(cfg_m) + L - 1) / L);
  assign ntr = DW'((32'(cfg_n) + L - 1) / L);
  assign tiles_left = (tp < ntp);
  assign last_tile  = (tp + 1'b1 == ntp) && (tr + 1'b1 == ntr);

  always_comb begin
    all_idle = 1'b1;
    for (int i = 0; i < NUM_PPU; i++) if (!lane_idle[i]) all_idle = 1'b0;
  end

  // lane assignment pulses
  always_comb begin
    for (int i = 0; i < NUM_PPU; i++) lane_assign[i] = (state == S_ASSIGN) && (lane == NW'(i));
  end
  assign assign_p = tp;
  assign assign_r = tr;

  // read address generation
  logic [31:0] row_a, col_b;
  logic        pad_a, pad_b, issue;
  always_comb begin
    row_a      = 32'(lane_p[lane]) * L + 32'(blk);
    col_b      = 32'(lane_r[lane]) * L + 32'(blk);
    pad_a      = (row_a >= 32'(cfg_m));
    pad_b      = (col_b >= 32'(cfg_n));
    issue      = (state == S_STREAM);
    mem_a_en   = issue && !pad_a;
    mem_b_en   = issue && !pad_b;
    mem_a_addr = AW'(32'(base_a) + row_a * 32'(cfg_k) + 32'(t));
    mem_b_addr = AW'(32'(base_b) + 32'(t) * 32'(cfg_n) + col_b);
  end

  // one-cycle pipeline matching the memory latency
  logic          v_d, last_d, pad_a_d, pad_b_d;
  logic [NW-1:0] lane_d;
  always_ff @(posedge clk) begin
    if (rst) begin
      v_d <= 1'b0; last_d <= 1'b0; pad_a_d <= 1'b0; pad_b_d <= 1'b0; lane_d <= '0;
    end else begin
      v_d     <= issue;
      last_d  <= issue && (t + 1'b1 == cfg_k);
      pad_a_d <= pad_a;
      pad_b_d <= pad_b;
      lane_d  <= lane;
    end
  end

  always_comb begin
    for (int i = 0; i < NUM_PPU; i++) begin
      a_valid[i] = v_d && (lane_d == NW'(i));
      b_valid[i] = v_d && (lane_d == NW'(i));
    end
  end
  assign a_data = pad_a_d ? '0 : mem_a_data;
  assign b_data = pad_b_d ? '0 : mem_b_data;
  assign a_last = last_d;
  assign b_last = last_d;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      tp <= '0; tr <= '0; lane <= '0; nl <= '0; blk <= '0; t <= '0;
      done <= 1'b0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          tp <= '0; tr <= '0; done <= 1'b0;
          state <= S_WAIT;
        end
        S_WAIT: if (all_idle) begin
          lane <= '0;
          if (tiles_left) state <= S_ASSIGN;
          else begin
            done  <= 1'b1;
            state <= S_DONE;
          end
        end
        S_ASSIGN: begin
          lane_p[lane] <= tp;
          lane_r[lane] <= tr;
          if (tr + 1'b1 == ntr) begin
            tr <= '0;
            tp <= tp + 1'b1;
          end else begin
            tr <= tr + 1'b1;
          end
          if (last_tile || lane == NW'(NUM_PPU - 1)) begin
            nl    <= lane;          // index of the last lane of the round
            lane  <= '0;
            blk   <= '0;
            state <= S_CHECK;
          end else begin
            lane <= lane + 1'b1;
          end
        end
        S_CHECK: if (a_ready[lane] && b_ready[lane]) begin
          t     <= '0;
          state <= S_STREAM;
        end
        S_STREAM: begin
          t <= t + 1'b1;
          if (t + 1'b1 == cfg_k) state <= S_GAP;
        end
        S_GAP: begin
          if (lane == nl) begin
            lane <= '0;
            if (blk == LW'(L - 1)) state <= S_WAIT;
            else begin
              blk   <= blk + 1'b1;
              state <= S_CHECK;
            end
          end else begin
            lane  <= lane + 1'b1;
            state <= S_CHECK;
          end
        end
        S_DONE: if (start) begin
          tp <= '0; tr <= '0; done <= 1'b0;
          state <= S_WAIT;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // A block is streamed without a stall: the converter stays ready throughout.
  a_stream_accepted: assert property (@(posedge clk) disable iff (rst)
    v_d |-> (a_ready[lane_d] && b_ready[lane_d]));

endmodule
