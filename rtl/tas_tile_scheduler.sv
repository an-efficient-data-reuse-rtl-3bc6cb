// tas_tile_scheduler: walks the tile loop nest of tile-based adaptive
// stationary and hands out one tile step at a time.
//
// The two loop orders are the paper's (outermost first):
//
//   IS-OS (M < K)                         WS-OS (M >= K)
//   (4) for mi   in 0 .. M/m-1            (4) for ki   in 0 .. K/k-1
//   (3) for kblk in 0 .. K/k'-1           (3) for mblk in 0 .. M/m'-1
//   (2) for ni   in 0 .. N/n-1            (2) for ni   in 0 .. N/n-1
//   (1) for s    in 0 .. k'/k-1           (1) for s    in 0 .. m'/m-1
//         ki = kblk*k'/k + s                    mi = mblk*m'/m + s
//
// Loop (1) is the temporal reuse: in IS-OS the input tile (mi, ni) stays while
// k'/k weight tiles pass it; in WS-OS the weight tile (ni, ki) stays while
// m'/m input tiles pass it. Loop (2) is the spatial reuse of partial sums: the
// k'/k (or m'/m) output tiles of a block stay in on-chip slot s until the
// whole N dimension has been added, so partial sums never go off chip.
//
// Both orders are run by one counter nest: `outer` (loop 4), `blk_base`
// (loop 3, counts in tiles), `n` (loop 2) and `s` (loop 1); the mode only
// swaps which counters give mi and ki. The number of on-chip partial-sum tiles,
// PSUM_TILES = k'/k = m'/m, is this design's choice (the paper ties it to the
// on-chip memory size but gives no number). When the chunked dimension is not
// a multiple of PSUM_TILES, the last block is shorter; that too is this
// design's choice. The fetch flags new_if / new_wp compare each step's tiles
// with those of the step before, so they also catch reuse across loop
// boundaries (for example a single-tile N dimension).
//
// Interface: a `start` pulse while idle latches the mode and the sizes in
// tiles. The current step is presented on `step` with `step_valid`; it
// advances when `step_ready` is high in the same cycle. `done` pulses with the
// last accepted step (or right after `start` if a size is zero).
module tas_tile_scheduler
  import tas_pkg::*;
#(
  parameter int unsigned PSUM_TILES = PSUM_TILES_DEF
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  tas_mode_e mode,
  input  dim_t      m_tiles,
  input  dim_t      n_tiles,
  input  dim_t      k_tiles,
  output tas_step_t step,
  output logic      step_valid,
  input  logic      step_ready,
  output logic      busy,
  output logic      done
);

  tas_mode_e mode_q;
  dim_t      mt_q, nt_q, kt_q;
  dim_t      outer, blk_base, n;
  slot_t     s;

  // Tile on chip before the current step, for the fetch flags.
  logic      if_vld, wp_vld;
  dim_t      if_mi, if_ni, wp_ni, wp_ki;

  dim_t      outer_cnt;   // trip count of loop (4)
  dim_t      chunk_cnt;   // tiles of the dimension cut into blocks by loop (3)
  dim_t      blk_left;    // tiles left in the chunked dimension from blk_base
  dim_t      s_lim;       // trip count of loop (1) for this block
  logic      last_s, last_n, last_blk, last_outer;
  logic      fire;

  always_comb begin
    outer_cnt = (mode_q == MODE_IS_OS) ? mt_q : kt_q;
    chunk_cnt = (mode_q == MODE_IS_OS) ? kt_q : mt_q;
    blk_left  = chunk_cnt - blk_base;
    s_lim     = (blk_left < dim_t'(PSUM_TILES)) ? blk_left : dim_t'(PSUM_TILES);
    last_s     = (dim_t'(s) == s_lim - 1'b1);
    last_n     = (n == nt_q - 1'b1);
    last_blk   = (blk_left <= dim_t'(PSUM_TILES));
    last_outer = (outer == outer_cnt - 1'b1);

    step.ni   = n;
    step.slot = s;
    if (mode_q == MODE_IS_OS) begin
      step.mi = outer;
      step.ki = blk_base + dim_t'(s);
    end else begin
      step.mi = blk_base + dim_t'(s);
      step.ki = outer;
    end
    step.first_n = (n == '0);
    step.last_n  = last_n;
    step.new_if  = !(if_vld && if_mi == step.mi && if_ni == step.ni);
    step.new_wp  = !(wp_vld && wp_ni == step.ni && wp_ki == step.ki);

    step_valid = busy;
    fire       = busy && step_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      done     <= 1'b0;
      mode_q   <= MODE_IS_OS;
      mt_q     <= '0;
      nt_q     <= '0;
      kt_q     <= '0;
      outer    <= '0;
      blk_base <= '0;
      n        <= '0;
      s        <= '0;
      if_vld   <= 1'b0;
      wp_vld   <= 1'b0;
      if_mi    <= '0;
      if_ni    <= '0;
      wp_ni    <= '0;
      wp_ki    <= '0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          mode_q   <= mode;
          mt_q     <= m_tiles;
          nt_q     <= n_tiles;
          kt_q     <= k_tiles;
          outer    <= '0;
          blk_base <= '0;
          n        <= '0;
          s        <= '0;
          if_vld   <= 1'b0;
          wp_vld   <= 1'b0;
          if (m_tiles == '0 || n_tiles == '0 || k_tiles == '0) done <= 1'b1;
          else                                                 busy <= 1'b1;
        end
      end else if (fire) begin
        if_vld <= 1'b1;
        wp_vld <= 1'b1;
        if_mi  <= step.mi;
        if_ni  <= step.ni;
        wp_ni  <= step.ni;
        wp_ki  <= step.ki;
        // Loop (1): temporal reuse of the stationary tile.
        if (!last_s) begin
          s <= s + 1'b1;
        end else begin
          s <= '0;
          // Loop (2): walk N while the partial sums stay on chip.
          if (!last_n) begin
            n <= n + 1'b1;
          end else begin
            n <= '0;
            // Loop (3): next block of k'/k (or m'/m) output tiles.
            if (!last_blk) begin
              blk_base <= blk_base + dim_t'(PSUM_TILES);
            end else begin
              blk_base <= '0;
              // Loop (4).
              if (!last_outer) begin
                outer <= outer + 1'b1;
              end else begin
                outer <= '0;
                busy  <= 1'b0;
                done  <= 1'b1;
              end
            end
          end
        end
      end
    end
  end

endmodule
