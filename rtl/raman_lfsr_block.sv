// raman_lfsr_block: on-the-fly index generator for stochastically pruned weights.
//
// Pointwise weights are pruned in 1x16 tiles so that each tile keeps exactly
// THETA non-zero weights (4, 8 or 12 for 75/50/25 % pruning). Only the weight
// values are stored; their positions inside the tile are regenerated here by
// four 4-bit LFSRs, one per MAC unit, so a PE receives four indices per cycle
// and a tile takes THETA/4 cycles. That much follows the paper.
//
// This design's own choices: the LFSRs use the maximal polynomial
// x^4 + x^3 + 1 (Fibonacci form), whose states form one 15-long cycle. A tile
// is identified by its reduction row `row` (the input channel of a pointwise
// layer). With q = THETA/4, the tile of row r uses the THETA consecutive
// cycle positions starting q*r (mod 15) after the layer seed; LFSR k covers
// the k-th stretch of q of them. The four LFSRs are loaded with their start
// states when a tile begins and then step once per cycle, so a tile's THETA
// indices are distinct, successive rows get shifted patterns, and the pattern
// of a row does not depend on which zero rows were skipped before it. The
// tile index is the LFSR state minus one (0..14), so position 15 is always
// pruned. THETA = 16 selects dense operation: indices 4*s + k.
//
// Interface: `load` (first cycle of a tile) loads the start states for `row`,
// `theta` and `seed`; `step` advances by one cycle. Both act at the clock
// edge, so `idx` (registered state, combinational decode) holds the indices of
// the cycle that follows a `load` or `step`. `last` marks the final step of a
// tile.
module raman_lfsr_block
  import raman_pkg::*;
(
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  load,
  input  logic                  step,
  input  logic [4:0]            theta,
  input  logic [3:0]            seed,
  input  logic [11:0]           row,
  output logic [NMAC-1:0][IDX_W-1:0] idx,
  output logic                  last
);

  logic [NMAC-1:0][3:0] state;
  logic [NMAC-1:0][3:0] starts;
  logic [1:0]           cnt;       // step inside the tile
  logic [1:0]           q_m1;      // THETA/4 - 1
  logic                 dense;
  logic [3:0]           seed_nz;
  logic [3:0]           row_mod;   // row mod 15

  assign dense   = (theta == 5'd16);
  assign q_m1    = 2'(theta[4:2] - 3'd1);
  assign seed_nz = (seed == 4'd0) ? 4'd1 : seed;  // the all-zero state is a lock-up state
  assign row_mod = 4'(row % 12'd15);

  always_comb begin
    for (int k = 0; k < NMAC; k++) begin
      starts[k] = lfsr4_advance(seed_nz, ((int'(row_mod) + k) * (int'(q_m1) + 1)) % 15);
    end
  end

  assign last = (cnt == q_m1);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= '{default: 4'd1};
      cnt   <= '0;
    end else if (load) begin
      state <= starts;
      cnt   <= '0;
    end else if (step) begin
      for (int k = 0; k < NMAC; k++) state[k] <= lfsr4_next(state[k]);
      cnt <= cnt + 2'd1;
    end
  end

  always_comb begin
    for (int k = 0; k < NMAC; k++) begin
      if (dense) idx[k] = IDX_W'(4 * int'(cnt) + k);
      else       idx[k] = state[k] - 4'd1;
    end
  end

endmodule
