// tb_tas_projection_workloads: runs transformer linear projections of
// realistic size through the TAS engine at its default parameters.
//
// Workload: the 1024 x 1024 projection of a Wav2Vec2.0-large encoder layer
// (hidden size 1024), OUT[M][1024] = IN[M][1024] x W[1024][1024], for the four
// sequence lengths M of the evaluation: 115 tokens (shortest LibriSpeech
// utterance), 384 (average), 1565 (longest) and 15000 (long speech). Lengths
// are padded up to a multiple of the tile size (120, 384, 1568, 15000). The
// first three run in full; 15000 runs against the first 64 output features
// only (a column slice that keeps the loop order, since M >= K holds for both,
// and keeps the run short). The scheme must be IS-OS for 115 and 384 and WS-OS
// for 1565 and 15000. Each job checks the chosen scheme, the external reads
// and writes against the access counts of its loop order, and a sample of 512
// output elements against products computed here.
//
// Two BERT-Base jobs follow (hidden size 768): a 512-token sequence against
// the full 768 x 768 projection (M < K: IS-OS), and a 3072-token sequence
// against the first 64 output features (M >= K: WS-OS).
module tb_tas_projection_workloads;
  import tas_pkg::*;

  localparam int unsigned T  = TILE_DEF;
  localparam int unsigned P  = PSUM_TILES_DEF;
  localparam int unsigned DW = DATA_W_DEF;
  localparam int unsigned AW = ACC_W_DEF;
  localparam int unsigned ADW = ADDR_W_DEF;
  localparam logic [ADW-1:0] IF_BASE  = 32'h0000_0000;
  localparam logic [ADW-1:0] WP_BASE  = 32'h0100_0000;
  localparam logic [ADW-1:0] OUT_BASE = 32'h0200_0000;
  localparam longint WATCHDOG = 64'd400_000_000;

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
                      .LATENCY(3), .STALL_PCT(0)) u_mem (
    .clk(clk), .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ready(mem_ready), .rdata(mem_rdata), .rvalid(mem_rvalid)
  );

  int checks = 0, failures = 0;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // Operand values are a fixed hash of their position, so they need not be
  // stored here: in(r, c) and w(r, c) in -128 .. 127.
  function automatic int in_v(input int r, input int c);
    return int'(((r * 131 + c * 29 + 7) * 2654435761) >> 8) % 256 - 128;
  endfunction
  function automatic int w_v(input int r, input int c);
    return int'(((r * 17 + c * 113 + 3) * 2246822519) >> 9) % 256 - 128;
  endfunction

  task automatic run_job(input string name, input int M, input int N, input int K,
                         input tas_mode_e exp_mode);
    logic [T*AW-1:0] word;
    longint ref_v, cyc;
    int mt, nt, kt, r0, w0;
    longint exp_r;
    mt = M/T; nt = N/T; kt = K/T;
    for (int r = 0; r < M; r++)
      for (int c = 0; c < nt; c++) begin
        word = '0;
        for (int j = 0; j < T; j++) word[j*DW +: DW] = DW'(in_v(r, c*T + j));
        u_mem.poke(IF_BASE + ADW'(r*nt + c), word);
      end
    for (int r = 0; r < N; r++)
      for (int c = 0; c < kt; c++) begin
        word = '0;
        for (int j = 0; j < T; j++) word[j*DW +: DW] = DW'(w_v(r, c*T + j));
        u_mem.poke(WP_BASE + ADW'(r*kt + c), word);
      end
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
    check(mode == exp_mode, $sformatf("%s: scheme %s", name, mode.name()));
    if (exp_mode == MODE_IS_OS) exp_r = longint'(M*nt) * ((kt + P - 1) / P) + longint'(mt) * (N*kt);
    else                        exp_r = longint'(N*kt) * ((mt + P - 1) / P) + longint'(kt) * (M*nt);
    check(longint'(int'(u_mem.reads) - r0) == exp_r,
          $sformatf("%s: reads %0d, expected %0d", name, int'(u_mem.reads) - r0, exp_r));
    check(int'(u_mem.writes) - w0 == M*kt,
          $sformatf("%s: writes %0d, expected %0d", name, int'(u_mem.writes) - w0, M*kt));
    for (int s = 0; s < 512; s++) begin
      int r = int'($urandom_range(0, M-1)), c = int'($urandom_range(0, K-1));
      word = u_mem.peek(OUT_BASE + ADW'(r*kt + c/T));
      ref_v = 0;
      for (int x = 0; x < N; x++) ref_v += longint'(in_v(r, x)) * longint'(w_v(x, c));
      check(word[(c%T)*AW +: AW] == AW'(ref_v), $sformatf("%s: OUT[%0d][%0d]", name, r, c));
    end
    $display("%s: M=%0d N=%0d K=%0d %s, %0d cycles, %0d words read, %0d written",
             name, M, N, K, mode.name(), cyc, int'(u_mem.reads) - r0, int'(u_mem.writes) - w0);
  endtask

  initial begin
    repeat (4) @(negedge clk);
    rst_n = 1'b1;
    run_job("seq_len 115", 120, 1024, 1024, MODE_IS_OS);
    run_job("seq_len 384", 384, 1024, 1024, MODE_IS_OS);
    run_job("seq_len 1565", 1568, 1024, 1024, MODE_WS_OS);
    run_job("seq_len 15000, 64 output columns", 15000, 1024, 64, MODE_WS_OS);
    run_job("BERT-Base, 512 tokens", 512, 768, 768, MODE_IS_OS);
    run_job("BERT-Base, 3072 tokens, 64 output columns", 3072, 768, 64, MODE_WS_OS);
    check(u_mem.rw_conflicts == 0, "write while a read was in flight");
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
