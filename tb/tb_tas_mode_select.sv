// tb_tas_mode_select: checks the M < K decision of the adaptive mechanism on
// the worked sizes of a speech model (1024-wide projections, token counts 115,
// 384, 1565 and 15000), on the tie M = K, and on random sizes.
module tb_tas_mode_select;
  import tas_pkg::*;

  dim_t      m, k;
  tas_mode_e mode;
  int checks = 0, failures = 0;

  tas_mode_select dut (.dim_m(m), .dim_k(k), .mode(mode));

  task automatic try(input int mm, input int kk, input tas_mode_e exp);
    m = dim_t'(mm);
    k = dim_t'(kk);
    #1;
    checks++;
    if (mode !== exp) begin
      failures++;
      $display("FAIL: M=%0d K=%0d gave %s", mm, kk, mode.name());
    end
  endtask

  initial begin
    try(115,   1024, MODE_IS_OS);
    try(384,   1024, MODE_IS_OS);
    try(1565,  1024, MODE_WS_OS);
    try(15000, 1024, MODE_WS_OS);
    try(1024,  1024, MODE_WS_OS);   // tie goes to weight stationary
    try(0, 1, MODE_IS_OS);
    try(65535, 65535, MODE_WS_OS);
    for (int i = 0; i < 2000; i++) begin
      int unsigned a = $urandom_range(0, 65535), b = $urandom_range(0, 65535);
      try(int'(a), int'(b), (a < b) ? MODE_IS_OS : MODE_WS_OS);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
