// tb_tas_pe_array: loads a random partial-sum tile (or zero), feeds the
// columns of a random input tile and the rows of a random weight tile for
// TILE cycles, and compares the accumulators with psum + A x B computed here.
// Checks that the result is there exactly TILE cycles after the load, and
// that idle cycles (mac_en low) keep the accumulators.
module tb_tas_pe_array;
  import tas_pkg::*;

  localparam int unsigned T = TILE_DEF, DW = DATA_W_DEF, AW = ACC_W_DEF;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                load = 1'b0, mac_en = 1'b0;
  logic [T*T*AW-1:0]   psum_in = '0, acc;
  logic [T*DW-1:0]     a_col = '0, b_row = '0;
  int checks = 0, failures = 0;

  tas_pe_array #(.TILE(T), .DATA_W(DW), .ACC_W(AW)) dut (
    .clk(clk), .load(load), .psum_in(psum_in), .mac_en(mac_en),
    .a_col(a_col), .b_row(b_row), .acc(acc)
  );

  initial begin
    int a[T][T], b[T][T];
    longint p0[T][T], ref_v;
    int cyc;
    for (int rep = 0; rep < 20; rep++) begin
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++) begin
          a[i][j] = int'($urandom_range(0, 255)) - 128;
          b[i][j] = int'($urandom_range(0, 255)) - 128;
          p0[i][j] = (rep % 3 == 0) ? 0 : longint'(int'($urandom_range(0, 2000000)) - 1000000);
          psum_in[(i*T+j)*AW +: AW] = AW'(p0[i][j]);
        end
      @(negedge clk);
      load = 1'b1;
      @(negedge clk);
      load = 1'b0;
      cyc = 0;
      for (int l = 0; l < T; l++) begin
        mac_en = 1'b1;
        for (int i = 0; i < T; i++) a_col[i*DW +: DW] = DW'(a[i][l]);
        for (int j = 0; j < T; j++) b_row[j*DW +: DW] = DW'(b[l][j]);
        @(negedge clk);
        cyc++;
        if (l == T/2) begin   // a stalled cycle in between
          mac_en = 1'b0;
          a_col = '1;
          @(negedge clk);
        end
      end
      mac_en = 1'b0;
      checks++;
      if (cyc != T) begin
        failures++;
        $display("FAIL: %0d MAC cycles", cyc);
      end
      for (int i = 0; i < T; i++)
        for (int j = 0; j < T; j++) begin
          ref_v = p0[i][j];
          for (int l = 0; l < T; l++) ref_v += longint'(a[i][l]) * longint'(b[l][j]);
          checks++;
          if (acc[(i*T+j)*AW +: AW] !== AW'(ref_v)) begin
            failures++;
            $display("FAIL: rep %0d acc[%0d][%0d] = %0d, expected %0d", rep, i, j,
                     $signed(acc[(i*T+j)*AW +: AW]), ref_v);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
