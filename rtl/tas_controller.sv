// tas_controller: executes the tile steps of tile-based adaptive stationary.
//
// For each step from the scheduler the controller
//   1. fetches the input tile (mi, ni) into the IF buffer, only if new_if;
//   2. fetches the weight tile (ni, ki) into the WP buffer, only if new_wp;
//   3. loads the PE array with the partial sums of slot `slot`, or with zero
//      on the first step along N;
//   4. runs TILE multiply-accumulate cycles (column l of the input tile times
//      row l of the weight tile in cycle l);
//   5. stores the accumulators back into the slot;
//   6. on the last step along N writes the finished output tile (mi, ki) to
//      external memory, one row per word;
// and then accepts the step. Skipping fetches 1 and 2 is how the stationary
// tile is reused; keeping partial sums in the slot until step 6 is the output
// stationary part, so partial sums are never read back from external memory.
//
// The paper stresses that DRAM cannot read and write at the same time. The
// controller therefore has a single request port shared by reads and writes,
// and issues a write only when no read is outstanding (checked by an
// assertion). The phases above run strictly one after another, without
// double buffering; that, the port and the memory layout are this design's
// choices.
//
// External memory layout (word addressed, one word = TILE consecutive
// elements of a matrix row): input row r, word c at if_base + r*N/n + c;
// weight row r, word c at wp_base + r*K/k + c; output row r, word c at
// out_base + r*K/k + c. Read words carry TILE DATA_W-bit elements, written
// words TILE ACC_W-bit sums, element j in the j-th field from bit 0.
//
// Memory port timing: a request is taken in a cycle with mem_req and
// mem_ready high. Read data return in request order, any number of cycles
// later, with mem_rvalid.
module tas_controller
  import tas_pkg::*;
#(
  parameter int unsigned TILE       = TILE_DEF,
  parameter int unsigned PSUM_TILES = PSUM_TILES_DEF,
  parameter int unsigned ADDR_W     = ADDR_W_DEF,
  localparam int unsigned IDX_W     = (TILE > 1) ? $clog2(TILE) : 1,
  localparam int unsigned SLOT_IW   = (PSUM_TILES > 1) ? $clog2(PSUM_TILES) : 1
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // Job geometry, in tiles, and base word addresses.
  input  dim_t                   n_tiles,
  input  dim_t                   k_tiles,
  input  logic [ADDR_W-1:0]      if_base,
  input  logic [ADDR_W-1:0]      wp_base,
  input  logic [ADDR_W-1:0]      out_base,
  // Tile steps from the scheduler.
  input  tas_step_t              step,
  input  logic                   step_valid,
  output logic                   step_ready,
  // External memory.
  output logic                   mem_req,
  output logic                   mem_we,
  output logic [ADDR_W-1:0]      mem_addr,
  input  logic                   mem_ready,
  input  logic                   mem_rvalid,
  // Tile buffers (write data come straight from mem_rdata).
  output logic                   if_wr_en,
  output logic                   wp_wr_en,
  output logic [IDX_W-1:0]       buf_wr_row,
  output logic [IDX_W-1:0]       buf_rd_idx,
  // PE array.
  output logic                   pe_load,
  output logic                   pe_zero,
  output logic                   pe_mac_en,
  // Partial-sum buffer (write-back data come from its rd_row).
  output logic                   ps_wr_en,
  output logic [SLOT_IW-1:0]     ps_slot,
  output logic [IDX_W-1:0]       ps_row_sel,
  output logic                   active
);

  typedef enum logic [2:0] {
    S_IDLE, S_FETCH_IF, S_FETCH_WP, S_LOAD, S_MAC, S_STORE, S_WB, S_ACK
  } state_e;

  state_e    state;
  tas_step_t st;
  logic [IDX_W:0] issued, recv;   // requests issued / read words received
  logic [IDX_W:0] l;              // MAC cycle
  logic [IDX_W:0] pend;           // reads outstanding
  logic           fetching, take, last_issue, last_recv;
  logic [ADDR_W-1:0] row_addr;

  always_comb begin
    fetching   = (state == S_FETCH_IF) || (state == S_FETCH_WP);
    mem_req    = (fetching && issued != (IDX_W+1)'(TILE)) || (state == S_WB);
    mem_we     = (state == S_WB);
    take       = mem_req && mem_ready;
    last_issue = (issued == (IDX_W+1)'(TILE - 1));
    last_recv  = (recv == (IDX_W+1)'(TILE - 1));

    // Word address of row `issued` of the tile being moved.
    unique case (state)
      S_FETCH_IF: row_addr = if_base
                  + ADDR_W'((ADDR_W'(st.mi) * TILE + ADDR_W'(issued)) * ADDR_W'(n_tiles))
                  + ADDR_W'(st.ni);
      S_FETCH_WP: row_addr = wp_base
                  + ADDR_W'((ADDR_W'(st.ni) * TILE + ADDR_W'(issued)) * ADDR_W'(k_tiles))
                  + ADDR_W'(st.ki);
      default:    row_addr = out_base
                  + ADDR_W'((ADDR_W'(st.mi) * TILE + ADDR_W'(issued)) * ADDR_W'(k_tiles))
                  + ADDR_W'(st.ki);
    endcase
    mem_addr = row_addr;

    if_wr_en   = (state == S_FETCH_IF) && mem_rvalid;
    wp_wr_en   = (state == S_FETCH_WP) && mem_rvalid;
    buf_wr_row = recv[IDX_W-1:0];
    buf_rd_idx = l[IDX_W-1:0];
    pe_load    = (state == S_LOAD);
    pe_zero    = st.first_n;
    pe_mac_en  = (state == S_MAC);
    ps_wr_en   = (state == S_STORE);
    ps_slot    = SLOT_IW'(st.slot);
    ps_row_sel = issued[IDX_W-1:0];
    step_ready = (state == S_ACK);
    active     = (state != S_IDLE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= S_IDLE;
      st     <= '0;
      issued <= '0;
      recv   <= '0;
      l      <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (step_valid) begin
          st     <= step;
          issued <= '0;
          recv   <= '0;
          state  <= step.new_if ? S_FETCH_IF : (step.new_wp ? S_FETCH_WP : S_LOAD);
        end
        S_FETCH_IF, S_FETCH_WP: begin
          if (take) issued <= issued + 1'b1;
          if (mem_rvalid) begin
            recv <= recv + 1'b1;
            if (last_recv) begin
              issued <= '0;
              recv   <= '0;
              state  <= (state == S_FETCH_IF && st.new_wp) ? S_FETCH_WP : S_LOAD;
            end
          end
        end
        S_LOAD: begin
          l     <= '0;
          state <= S_MAC;
        end
        S_MAC: begin
          l <= l + 1'b1;
          if (l == (IDX_W+1)'(TILE - 1)) state <= S_STORE;
        end
        S_STORE: begin
          issued <= '0;
          state  <= st.last_n ? S_WB : S_ACK;
        end
        S_WB: if (take) begin
          issued <= issued + 1'b1;
          if (last_issue) state <= S_ACK;
        end
        S_ACK: state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // Reads outstanding, for the no-read-during-write rule.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) pend <= '0;
    else        pend <= pend + (IDX_W+1)'(take && !mem_we) - (IDX_W+1)'(mem_rvalid);
  end

  a_no_rw_overlap: assert property (@(posedge clk) disable iff (!rst_n)
                                    (mem_req && mem_we) |-> (pend == '0))
    else $error("write issued while a read is outstanding");
  a_rvalid_expected: assert property (@(posedge clk) disable iff (!rst_n)
                                      mem_rvalid |-> (pend != '0) && fetching)
    else $error("read data without a read outstanding");

endmodule
