// tas_accelerator: matrix-multiplication engine with tile-based adaptive
// stationary (TAS) data reuse.
//
// One job computes OUT[M][K] = IN[M][N] x W[N][K] (a linear projection of a
// transformer layer: M tokens, N input features, K output features) with all
// three matrices in external memory. The engine works on TILE x TILE tiles and
// picks its loop order per job: if M < K it keeps the input tile on chip while
// several weight tiles pass (IS-OS), otherwise it keeps the weight tile on
// chip while several input tiles pass (WS-OS). In both orders PSUM_TILES
// output tiles stay on chip until the whole N dimension is summed, so every
// output element is written exactly once and no partial sum is ever read back
// from external memory. The selection rule and the two loop orders follow the
// paper; the datapath around them (PE array organisation, buffers, widths,
// memory port and layout, sequential fetch/compute/write-back) is this
// design's own, since the paper presents TAS as a dataflow that any tiled
// accelerator can adopt.
//
// Blocks: tas_mode_select (M < K comparator), tas_tile_scheduler (loop nest),
// tas_controller (per-step sequencing and memory traffic), two
// tas_tile_buffer (input and weight tile), tas_pe_array (TILE x TILE MACs),
// tas_psum_buffer (PSUM_TILES partial-sum tiles).
//
// Interface: set dim_m, dim_n, dim_k (elements, multiples of TILE, non-zero)
// and the three base word addresses, then pulse `start` while `busy` is low.
// `mode` shows the scheme chosen; `done` pulses one cycle after the last
// output word has been accepted by the memory. The memory port is the one of
// tas_controller: single request channel, reads answered in order with
// mem_rvalid, never a write while a read is outstanding. The inputs must stay
// stable while busy.
module tas_accelerator
  import tas_pkg::*;
#(
  parameter int unsigned TILE       = TILE_DEF,
  parameter int unsigned PSUM_TILES = PSUM_TILES_DEF,
  parameter int unsigned DATA_W     = DATA_W_DEF,
  parameter int unsigned ACC_W      = ACC_W_DEF,
  parameter int unsigned ADDR_W     = ADDR_W_DEF
) (
  input  logic                   clk,
  input  logic                   rst_n,
  // Job.
  input  logic                   start,
  input  dim_t                   dim_m,
  input  dim_t                   dim_n,
  input  dim_t                   dim_k,
  input  logic [ADDR_W-1:0]      if_base,
  input  logic [ADDR_W-1:0]      wp_base,
  input  logic [ADDR_W-1:0]      out_base,
  output logic                   busy,
  output logic                   done,
  output tas_mode_e              mode,
  // External memory.
  output logic                   mem_req,
  output logic                   mem_we,
  output logic [ADDR_W-1:0]      mem_addr,
  output logic [TILE*ACC_W-1:0]  mem_wdata,
  input  logic                   mem_ready,
  input  logic [TILE*DATA_W-1:0] mem_rdata,
  input  logic                   mem_rvalid
);

  localparam int unsigned IDX_W   = (TILE > 1) ? $clog2(TILE) : 1;
  localparam int unsigned SLOT_IW = (PSUM_TILES > 1) ? $clog2(PSUM_TILES) : 1;
  localparam int unsigned TSHIFT  = $clog2(TILE);

  dim_t      m_tiles, n_tiles, k_tiles;
  tas_mode_e mode_sel;
  tas_step_t step;
  logic      step_valid, step_ready, sched_busy, sched_done, ctrl_active;

  logic                         if_wr_en, wp_wr_en, pe_load, pe_zero, pe_mac_en, ps_wr_en;
  logic [IDX_W-1:0]             buf_wr_row, buf_rd_idx, ps_row_sel;
  logic [SLOT_IW-1:0]           ps_slot;
  logic [TILE*DATA_W-1:0]       if_col, if_row_unused, wp_col_unused, wp_row;
  logic [TILE*TILE*ACC_W-1:0]   acc, ps_tile, pe_psum_in;

  // Sizes in tiles (TILE is a power of two).
  always_comb begin
    m_tiles = dim_m >> TSHIFT;
    n_tiles = dim_n >> TSHIFT;
    k_tiles = dim_k >> TSHIFT;
  end

  tas_mode_select u_mode (
    .dim_m (dim_m),
    .dim_k (dim_k),
    .mode  (mode_sel)
  );

  tas_tile_scheduler #(.PSUM_TILES(PSUM_TILES)) u_sched (
    .clk        (clk),
    .rst_n      (rst_n),
    .start      (start && !busy),
    .mode       (mode_sel),
    .m_tiles    (m_tiles),
    .n_tiles    (n_tiles),
    .k_tiles    (k_tiles),
    .step       (step),
    .step_valid (step_valid),
    .step_ready (step_ready),
    .busy       (sched_busy),
    .done       (sched_done)
  );

  tas_controller #(
    .TILE(TILE), .PSUM_TILES(PSUM_TILES), .ADDR_W(ADDR_W)
  ) u_ctrl (
    .clk        (clk),
    .rst_n      (rst_n),
    .n_tiles    (n_tiles),
    .k_tiles    (k_tiles),
    .if_base    (if_base),
    .wp_base    (wp_base),
    .out_base   (out_base),
    .step       (step),
    .step_valid (step_valid),
    .step_ready (step_ready),
    .mem_req    (mem_req),
    .mem_we     (mem_we),
    .mem_addr   (mem_addr),
    .mem_ready  (mem_ready),
    .mem_rvalid (mem_rvalid),
    .if_wr_en   (if_wr_en),
    .wp_wr_en   (wp_wr_en),
    .buf_wr_row (buf_wr_row),
    .buf_rd_idx (buf_rd_idx),
    .pe_load    (pe_load),
    .pe_zero    (pe_zero),
    .pe_mac_en  (pe_mac_en),
    .ps_wr_en   (ps_wr_en),
    .ps_slot    (ps_slot),
    .ps_row_sel (ps_row_sel),
    .active     (ctrl_active)
  );

  tas_tile_buffer #(.TILE(TILE), .DATA_W(DATA_W)) u_if_buf (
    .clk     (clk),
    .wr_en   (if_wr_en),
    .wr_row  (buf_wr_row),
    .wr_data (mem_rdata),
    .rd_idx  (buf_rd_idx),
    .rd_col  (if_col),
    .rd_row  (if_row_unused)
  );

  tas_tile_buffer #(.TILE(TILE), .DATA_W(DATA_W)) u_wp_buf (
    .clk     (clk),
    .wr_en   (wp_wr_en),
    .wr_row  (buf_wr_row),
    .wr_data (mem_rdata),
    .rd_idx  (buf_rd_idx),
    .rd_col  (wp_col_unused),
    .rd_row  (wp_row)
  );

  always_comb pe_psum_in = pe_zero ? '0 : ps_tile;

  tas_pe_array #(.TILE(TILE), .DATA_W(DATA_W), .ACC_W(ACC_W)) u_pe (
    .clk     (clk),
    .load    (pe_load),
    .psum_in (pe_psum_in),
    .mac_en  (pe_mac_en),
    .a_col   (if_col),
    .b_row   (wp_row),
    .acc     (acc)
  );

  tas_psum_buffer #(.PSUM_TILES(PSUM_TILES), .TILE(TILE), .ACC_W(ACC_W)) u_psum (
    .clk     (clk),
    .wr_en   (ps_wr_en),
    .wr_slot (ps_slot),
    .wr_tile (acc),
    .rd_slot (ps_slot),
    .rd_tile (ps_tile),
    .row_sel (ps_row_sel),
    .rd_row  (mem_wdata)
  );

  // Job status: busy from start until the scheduler has handed out its last
  // step and the controller has finished it.
  logic job;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      job  <= 1'b0;
      done <= 1'b0;
      mode <= MODE_IS_OS;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        job  <= 1'b1;
        mode <= mode_sel;
      end else if (job && !sched_busy && !ctrl_active && !start) begin
        job  <= 1'b0;
        done <= 1'b1;
      end
    end
  end
  always_comb busy = job;

endmodule
