// tb_tas_tile_scheduler: compares the scheduler's step sequence with the two
// loop nests written out here as plain for-loops (IS-OS: m, k-block, n, k
// within block; WS-OS: k, m-block, n, m within block), for several sizes,
// including ones whose chunked dimension is not a multiple of PSUM_TILES,
// with a random step_ready. Also checks the first/last-along-N flags, the
// fetch flags against the tile of the previous step, the step count, the
// done pulse, a job with a zero size, and that a step is offered every cycle
// while step_ready is held high.
module tb_tas_tile_scheduler;
  import tas_pkg::*;

  localparam int unsigned P = 3;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic      start = 1'b0, step_ready = 1'b0;
  tas_mode_e mode = MODE_IS_OS;
  dim_t      mt = '0, nt = '0, kt = '0;
  tas_step_t step;
  logic      step_valid, busy, done;
  int checks = 0, failures = 0;

  tas_tile_scheduler #(.PSUM_TILES(P)) dut (
    .clk(clk), .rst_n(rst_n), .start(start), .mode(mode),
    .m_tiles(mt), .n_tiles(nt), .k_tiles(kt),
    .step(step), .step_valid(step_valid), .step_ready(step_ready),
    .busy(busy), .done(done)
  );

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  tas_step_t exp_q[$];

  task automatic build(input tas_mode_e md, input int M, input int N, input int K);
    tas_step_t e;
    int pmi = -1, pni = -1, wni = -1, wki = -1;
    int outer = (md == MODE_IS_OS) ? M : K;
    int chunk = (md == MODE_IS_OS) ? K : M;
    exp_q.delete();
    for (int o = 0; o < outer; o++)
      for (int b = 0; b < chunk; b += P)
        for (int n = 0; n < N; n++)
          for (int s = 0; s < P && b + s < chunk; s++) begin
            e = '0;
            e.mi = dim_t'((md == MODE_IS_OS) ? o : b + s);
            e.ki = dim_t'((md == MODE_IS_OS) ? b + s : o);
            e.ni = dim_t'(n);
            e.slot = slot_t'(s);
            e.first_n = (n == 0);
            e.last_n  = (n == N - 1);
            e.new_if  = !(pmi == int'(e.mi) && pni == n);
            e.new_wp  = !(wni == n && wki == int'(e.ki));
            pmi = int'(e.mi); pni = n; wni = n; wki = int'(e.ki);
            exp_q.push_back(e);
          end
  endtask

  task automatic run(input tas_mode_e md, input int M, input int N, input int K,
                     input bit always_ready);
    int got = 0, cyc = 0, total;
    bit saw_done = 0;
    build(md, M, N, K);
    total = exp_q.size();
    @(negedge clk);
    mode = md; mt = dim_t'(M); nt = dim_t'(N); kt = dim_t'(K);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    while (!saw_done && cyc < 100000) begin
      step_ready = always_ready ? 1'b1 : 1'($urandom_range(0, 1));
      #1;
      if (step_valid && step_ready) begin
        if (got < total) begin
          check(step == exp_q[got],
                $sformatf("%s %0dx%0dx%0d step %0d: got mi%0d ni%0d ki%0d s%0d f%0b l%0b if%0b wp%0b, expected mi%0d ni%0d ki%0d s%0d f%0b l%0b if%0b wp%0b",
                          md.name(), M, N, K, got, step.mi, step.ni, step.ki, step.slot,
                          step.first_n, step.last_n, step.new_if, step.new_wp,
                          exp_q[got].mi, exp_q[got].ni, exp_q[got].ki, exp_q[got].slot,
                          exp_q[got].first_n, exp_q[got].last_n, exp_q[got].new_if,
                          exp_q[got].new_wp));
        end
        got++;
      end
      @(negedge clk);
      cyc++;
      if (done) saw_done = 1;
    end
    step_ready = 1'b0;
    check(got == total, $sformatf("%0d steps, expected %0d", got, total));
    check(saw_done && !busy, "done / busy at end");
    if (always_ready)
      check(cyc == total, $sformatf("took %0d cycles for %0d steps", cyc, total));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run(MODE_IS_OS, 2, 3, 7, 0);   // K/k = 7 = 3 + 3 + 1
    run(MODE_WS_OS, 5, 2, 3, 0);   // M/m = 5 = 3 + 2
    run(MODE_IS_OS, 1, 1, 4, 0);   // N/n = 1
    run(MODE_WS_OS, 6, 4, 2, 1);   // full blocks, one step per cycle
    run(MODE_IS_OS, 3, 2, 3, 1);
    run(MODE_WS_OS, 1, 1, 1, 0);
    // A zero size finishes at once.
    @(negedge clk);
    mode = MODE_IS_OS; mt = '0; nt = 4; kt = 4;
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    check(done && !busy && !step_valid, "zero-size job");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
