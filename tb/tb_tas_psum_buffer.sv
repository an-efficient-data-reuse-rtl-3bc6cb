// tb_tas_psum_buffer: writes random tiles into random slots and reads back
// whole tiles and single rows against a copy kept here.
module tb_tas_psum_buffer;
  import tas_pkg::*;

  localparam int unsigned P = PSUM_TILES_DEF, T = TILE_DEF, AW = ACC_W_DEF;
  localparam int unsigned SW = $clog2(P), IW = $clog2(T);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              wr_en = 1'b0;
  logic [SW-1:0]     wr_slot = '0, rd_slot = '0;
  logic [IW-1:0]     row_sel = '0;
  logic [T*T*AW-1:0] wr_tile = '0, rd_tile;
  logic [T*AW-1:0]   rd_row;
  logic [T*T*AW-1:0] ref_m [P];
  int checks = 0, failures = 0;

  tas_psum_buffer #(.PSUM_TILES(P), .TILE(T), .ACC_W(AW)) dut (
    .clk(clk), .wr_en(wr_en), .wr_slot(wr_slot), .wr_tile(wr_tile),
    .rd_slot(rd_slot), .rd_tile(rd_tile), .row_sel(row_sel), .rd_row(rd_row)
  );

  function automatic logic [T*T*AW-1:0] rnd_tile();
    logic [T*T*AW-1:0] t;
    for (int e = 0; e < T*T; e++) t[e*AW +: AW] = AW'($urandom);
    return t;
  endfunction

  initial begin
    for (int s = 0; s < P; s++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_slot = SW'(s); ref_m[s] = rnd_tile(); wr_tile = ref_m[s];
    end
    for (int it = 0; it < 200; it++) begin
      @(negedge clk);
      wr_en = 1'($urandom_range(0, 1));
      wr_slot = SW'($urandom_range(0, P-1));
      wr_tile = rnd_tile();
      if (wr_en) ref_m[wr_slot] = wr_tile;
      @(negedge clk);
      wr_en = 1'b0;
      rd_slot = SW'($urandom_range(0, P-1));
      row_sel = IW'($urandom_range(0, T-1));
      #1;
      checks += 2;
      if (rd_tile !== ref_m[rd_slot]) begin
        failures++;
        $display("FAIL: slot %0d tile", rd_slot);
      end
      if (rd_row !== ref_m[rd_slot][row_sel*T*AW +: T*AW]) begin
        failures++;
        $display("FAIL: slot %0d row %0d", rd_slot, row_sel);
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
