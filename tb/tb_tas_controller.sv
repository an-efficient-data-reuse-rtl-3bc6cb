// tb_tas_controller: drives hand-made tile steps into the controller, with a
// stalling behavioural memory, and checks
//   - the external addresses it reads (input tile rows, then weight tile
//     rows, only when new_if / new_wp ask for it) and writes (output tile
//     rows, only on the last step along N, reading psum row r for word r);
//   - the buffer write strobes and rows, the PE load (zero on the first step
//     along N), TILE MAC cycles with column index 0..TILE-1, one psum store
//     into the step's slot, and one step_ready per step;
//   - that a step needing no memory traffic takes TILE + 3 cycles from
//     step_valid to step_ready (idle, load, TILE MACs, store);
//   - that no write starts while a read is in flight.
module tb_tas_controller;
  import tas_pkg::*;

  localparam int unsigned T = TILE_DEF, P = PSUM_TILES_DEF, AW = ADDR_W_DEF;
  localparam int unsigned IW = $clog2(T), SW = $clog2(P);
  localparam logic [AW-1:0] IFB = 32'h100, WPB = 32'h2000, OUTB = 32'h30000;
  localparam dim_t NT = 5, KT = 7;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  tas_step_t step = '0;
  logic step_valid = 1'b0, step_ready;
  logic mem_req, mem_we, mem_ready, mem_rvalid;
  logic [AW-1:0] mem_addr;
  logic [T*ACC_W_DEF-1:0] wdata_unused;
  logic [T*DATA_W_DEF-1:0] rdata_unused;
  logic if_wr_en, wp_wr_en, pe_load, pe_zero, pe_mac_en, ps_wr_en, active;
  logic [IW-1:0] buf_wr_row, buf_rd_idx, ps_row_sel;
  logic [SW-1:0] ps_slot;
  int checks = 0, failures = 0;

  tas_controller dut (
    .clk(clk), .rst_n(rst_n), .n_tiles(NT), .k_tiles(KT),
    .if_base(IFB), .wp_base(WPB), .out_base(OUTB),
    .step(step), .step_valid(step_valid), .step_ready(step_ready),
    .mem_req(mem_req), .mem_we(mem_we), .mem_addr(mem_addr),
    .mem_ready(mem_ready), .mem_rvalid(mem_rvalid),
    .if_wr_en(if_wr_en), .wp_wr_en(wp_wr_en), .buf_wr_row(buf_wr_row),
    .buf_rd_idx(buf_rd_idx), .pe_load(pe_load), .pe_zero(pe_zero),
    .pe_mac_en(pe_mac_en), .ps_wr_en(ps_wr_en), .ps_slot(ps_slot),
    .ps_row_sel(ps_row_sel), .active(active)
  );

  assign wdata_unused = '0;
  tas_ext_mem_model #(.TILE(T), .ADDR_W(AW), .LATENCY(2), .STALL_PCT(25)) u_mem (
    .clk(clk), .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(wdata_unused),
    .ready(mem_ready), .rdata(rdata_unused), .rvalid(mem_rvalid)
  );

  // Trace of the step in progress.
  logic [AW-1:0] rd_addr_q[$], wr_addr_q[$];
  int wr_rowsel_q[$], if_rows_q[$], wp_rows_q[$], mac_idx_q[$];
  int n_load, n_zero, n_store, n_ready, store_slot;

  always @(posedge clk) if (rst_n) begin
    if (mem_req && mem_ready) begin
      if (mem_we) begin
        wr_addr_q.push_back(mem_addr);
        wr_rowsel_q.push_back(int'(ps_row_sel));
      end else rd_addr_q.push_back(mem_addr);
    end
    if (if_wr_en) if_rows_q.push_back(int'(buf_wr_row));
    if (wp_wr_en) wp_rows_q.push_back(int'(buf_wr_row));
    if (pe_mac_en) mac_idx_q.push_back(int'(buf_rd_idx));
    if (pe_load) begin
      n_load++;
      if (pe_zero) n_zero++;
    end
    if (ps_wr_en) begin
      n_store++;
      store_slot = int'(ps_slot);
    end
    if (step_ready) n_ready++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_step(input int mi, input int ni, input int ki, input int slot,
                          input bit first_n, input bit last_n,
                          input bit new_if, input bit new_wp, output int cycles);
    logic [AW-1:0] exp_rd[$], exp_wr[$];
    rd_addr_q.delete(); wr_addr_q.delete(); wr_rowsel_q.delete();
    if_rows_q.delete(); wp_rows_q.delete(); mac_idx_q.delete();
    n_load = 0; n_zero = 0; n_store = 0; n_ready = 0; store_slot = -1;
    @(negedge clk);
    step.mi = dim_t'(mi); step.ni = dim_t'(ni); step.ki = dim_t'(ki);
    step.slot = slot_t'(slot);
    step.first_n = first_n; step.last_n = last_n;
    step.new_if = new_if; step.new_wp = new_wp;
    step_valid = 1'b1;
    cycles = 0;
    while (!step_ready) begin
      @(negedge clk);
      cycles++;
    end
    @(negedge clk);
    step_valid = 1'b0;
    @(negedge clk);

    if (new_if) for (int r = 0; r < T; r++) exp_rd.push_back(IFB + AW'((mi*T + r)*NT + ni));
    if (new_wp) for (int r = 0; r < T; r++) exp_rd.push_back(WPB + AW'((ni*T + r)*KT + ki));
    if (last_n) for (int r = 0; r < T; r++) exp_wr.push_back(OUTB + AW'((mi*T + r)*KT + ki));
    check(rd_addr_q == exp_rd, $sformatf("read addresses (%0d of %0d)", rd_addr_q.size(), exp_rd.size()));
    check(wr_addr_q == exp_wr, $sformatf("write addresses (%0d of %0d)", wr_addr_q.size(), exp_wr.size()));
    for (int r = 0; r < wr_rowsel_q.size(); r++) check(wr_rowsel_q[r] == r, "write-back psum row");
    check(if_rows_q.size() == (new_if ? T : 0), "IF buffer writes");
    check(wp_rows_q.size() == (new_wp ? T : 0), "WP buffer writes");
    foreach (if_rows_q[r]) check(if_rows_q[r] == r, "IF row order");
    foreach (wp_rows_q[r]) check(wp_rows_q[r] == r, "WP row order");
    check(mac_idx_q.size() == T, $sformatf("%0d MAC cycles", mac_idx_q.size()));
    foreach (mac_idx_q[l]) check(mac_idx_q[l] == l, "MAC column order");
    check(n_load == 1 && n_zero == (first_n ? 1 : 0), "PE load / zero");
    check(n_store == 1 && store_slot == slot, "psum store");
    check(n_ready == 1, "one step_ready");
    check(!active, "idle after step");
  endtask

  initial begin
    int cyc;
    n_load = 0; n_zero = 0; n_store = 0; n_ready = 0; store_slot = -1;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_step(1, 2, 3, 1, 1, 0, 1, 1, cyc);   // both tiles fetched, first along N
    run_step(1, 4, 6, 3, 0, 1, 0, 1, cyc);   // weight only, last along N: write-back
    run_step(2, 0, 0, 0, 1, 1, 1, 0, cyc);   // input only, N/n = 1
    run_step(0, 3, 5, 2, 0, 0, 0, 0, cyc);   // no traffic at all
    check(cyc == T + 3, $sformatf("compute-only step took %0d cycles, expected %0d", cyc, T + 3));
    for (int i = 0; i < 6; i++)
      run_step($urandom_range(0, 7), $urandom_range(0, 4), $urandom_range(0, 6),
               $urandom_range(0, P-1), 1'($urandom), 1'($urandom), 1'($urandom), 1'($urandom), cyc);
    check(u_mem.rw_conflicts == 0, "write while a read was in flight");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
