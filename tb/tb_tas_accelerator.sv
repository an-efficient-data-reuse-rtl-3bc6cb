// tb_tas_accelerator: end-to-end test of the TAS matrix engine at its default
// parameters (TILE = 8, PSUM_TILES = 4, 8-bit operands, 32-bit sums).
//
// Runs a list of jobs OUT = IN x W through the engine with a behavioural
// external memory that stalls at random, and for each job checks
//   - every output element against a product computed here;
//   - the scheme chosen (IS-OS iff M < K);
//   - the external reads and writes against the access counts of the two loop
//     orders: IS-OS reads the input matrix once per block of PSUM_TILES weight
//     tile columns, the weight matrix once per input tile row; WS-OS reads the
//     weight matrix once per block of PSUM_TILES input tile rows, the input
//     matrix once per weight tile column; both write each output word once and
//     never read partial sums back;
//   - that no write reaches the memory while a read is in flight.
// It also counts how often each mechanism occurred (both schemes, the M = K
// tie, input-tile reuse, weight-tile reuse, a short last partial-sum block,
// memory stalls, output write-back) and fails if one never did.
module tb_tas_accelerator;
  import tas_pkg::*;

  localparam int unsigned T  = TILE_DEF;
  localparam int unsigned P  = PSUM_TILES_DEF;
  localparam int unsigned DW = DATA_W_DEF;
  localparam int unsigned AW = ACC_W_DEF;
  localparam int unsigned ADW = ADDR_W_DEF;
  localparam logic [ADW-1:0] IF_BASE  = 32'h0000_0000;
  localparam logic [ADW-1:0] WP_BASE  = 32'h0010_0000;
  localparam logic [ADW-1:0] OUT_BASE = 32'h0020_0000;
  localparam int WATCHDOG = 2_000_000;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start = 1'b0;
  dim_t dim_m = '0, dim_n = '0, dim_k = '0;
  logic busy, done;
  tas_mode_e mode;
  logic mem_req, mem_we, mem_ready, mem_rvalid;
  logic [ADW-1:0] mem_addr;
  logic [T*AW-1:0] mem_wdata;
  logic [T*DW-1:0] mem_rdata;

  tas_accelerator dut (
    .clk(clk), .rst_n(rst_n), .start(start),
    .dim_m(dim_m), .dim_n(dim_n), .dim_k(dim_k),
    .if_base(IF_BASE), .wp_base(WP_BASE), .out_base(OUT_BASE),
    .busy(busy), .done(done), .mode(mode),
    .mem_req(mem_req), .mem_we(mem_we), .mem_addr(mem_addr), .mem_wdata(mem_wdata),
    .mem_ready(mem_ready), .mem_rdata(mem_rdata), .mem_rvalid(mem_rvalid)
  );

  tas_ext_mem_model #(.TILE(T), .DATA_W(DW), .ACC_W(AW), .ADDR_W(ADW),
                      .LATENCY(3), .STALL_PCT(15)) u_mem (
    .clk(clk), .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ready(mem_ready), .rdata(mem_rdata), .rvalid(mem_rvalid)
  );

  int checks = 0, failures = 0;
  int n_is = 0, n_ws = 0, n_tie = 0, n_if_reuse = 0, n_wp_reuse = 0;
  int n_short_blk = 0, n_wb = 0;

  // Mechanism counters, from the step handshake inside the engine.
  always @(posedge clk) if (rst_n && dut.step_valid && dut.step_ready) begin
    if (!dut.step.new_if) n_if_reuse++;
    if (!dut.step.new_wp) n_wp_reuse++;
    if (dut.step.last_n)  n_wb++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  function automatic int ceil_div(input int a, input int b);
    return (a + b - 1) / b;
  endfunction

  task automatic run_job(input int M, input int N, input int K);
    int a[], w[];
    longint ref_v;
    int mt, nt, kt, r0, w0, exp_r, exp_w, cyc;
    bit exp_is;
    logic [T*AW-1:0] word;
    a = new[M*N];
    w = new[N*K];
    foreach (a[i]) a[i] = int'($urandom_range(0, 255)) - 128;
    foreach (w[i]) w[i] = int'($urandom_range(0, 255)) - 128;
    // Input row r, word c holds elements c*T .. c*T+T-1 of that row.
    for (int r = 0; r < M; r++)
      for (int c = 0; c < N/T; c++) begin
        word = '0;
        for (int j = 0; j < T; j++) word[j*DW +: DW] = DW'(a[r*N + c*T + j]);
        u_mem.poke(IF_BASE + ADW'(r*(N/T) + c), word);
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < K/T; c++) begin
        word = '0;
        for (int j = 0; j < T; j++) word[j*DW +: DW] = DW'(w[r*K + c*T + j]);
        u_mem.poke(WP_BASE + ADW'(r*(K/T) + c), word);
      end
    for (int r = 0; r < M; r++)
      for (int c = 0; c < K/T; c++) u_mem.poke(OUT_BASE + ADW'(r*(K/T) + c), '1);

    r0 = int'(u_mem.reads);
    w0 = int'(u_mem.writes);
    @(negedge clk);
    dim_m = dim_t'(M); dim_n = dim_t'(N); dim_k = dim_t'(K);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
    end

    mt = M/T; nt = N/T; kt = K/T;
    exp_is = (M < K);
    check(mode == (exp_is ? MODE_IS_OS : MODE_WS_OS), $sformatf("mode for M=%0d K=%0d", M, K));
    if (exp_is) n_is++; else n_ws++;
    if (M == K) n_tie++;
    if (( exp_is && kt % P != 0) || (!exp_is && mt % P != 0)) n_short_blk++;

    // Output values.
    for (int r = 0; r < M; r++)
      for (int c = 0; c < kt; c++) begin
        word = u_mem.peek(OUT_BASE + ADW'(r*kt + c));
        for (int j = 0; j < T; j++) begin
          ref_v = 0;
          for (int x = 0; x < N; x++) ref_v += longint'(a[r*N + x]) * longint'(w[x*K + c*T + j]);
          check(word[j*AW +: AW] == AW'(ref_v),
                $sformatf("OUT[%0d][%0d] = %0d, expected %0d", r, c*T+j,
                          $signed(word[j*AW +: AW]), ref_v));
        end
      end

    // External memory traffic, in words (nt > 1 in every job whose counts are checked).
    if (nt > 1) begin
      if (exp_is) exp_r = mt*nt*T * ceil_div(kt, P) + mt * (nt*T*kt);
      else        exp_r = nt*T*kt * ceil_div(mt, P) + kt * (mt*T*nt);
      exp_w = M * kt;
      check(int'(u_mem.reads) - r0 == exp_r,
            $sformatf("reads %0d, expected %0d", int'(u_mem.reads) - r0, exp_r));
      check(int'(u_mem.writes) - w0 == exp_w,
            $sformatf("writes %0d, expected %0d", int'(u_mem.writes) - w0, exp_w));
    end
    $display("job M=%0d N=%0d K=%0d %s: %0d cycles, reads %0d, writes %0d",
             M, N, K, exp_is ? "IS-OS" : "WS-OS", cyc,
             int'(u_mem.reads) - r0, int'(u_mem.writes) - w0);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    repeat (2) @(negedge clk);
    run_job(16, 24, 40);   // IS-OS, K/k = 5: one full and one short block
    run_job(40, 16, 24);   // WS-OS, M/m = 5: one full and one short block
    run_job(32, 16, 32);   // M = K: WS-OS
    run_job(8, 8, 64);     // IS-OS, N/n = 1: input tile kept across blocks
    run_job(64, 8, 8);     // WS-OS, single weight tile kept for the whole job
    run_job(24, 32, 64);   // IS-OS, two full blocks

    check(u_mem.rw_conflicts == 0, "write while a read was in flight");
    check(n_is > 0, "IS-OS never ran");
    check(n_ws > 0, "WS-OS never ran");
    check(n_tie > 0, "M = K never ran");
    check(n_if_reuse > 0, "input tile never reused");
    check(n_wp_reuse > 0, "weight tile never reused");
    check(n_short_blk > 0, "short partial-sum block never ran");
    check(u_mem.stalls > 0, "memory never stalled");
    check(n_wb > 0, "no output write-back");
    $display("mechanisms: IS-OS %0d, WS-OS %0d, tie %0d, IF reuse %0d, WP reuse %0d, short block %0d, stalls %0d, write-backs %0d",
             n_is, n_ws, n_tie, n_if_reuse, n_wp_reuse, n_short_blk, u_mem.stalls, n_wb);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
