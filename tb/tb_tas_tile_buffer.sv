// tb_tas_tile_buffer: writes random tiles row by row and reads them back as
// rows and as columns, against a copy kept here; also checks that a cycle
// without wr_en leaves the tile unchanged.
module tb_tas_tile_buffer;
  import tas_pkg::*;

  localparam int unsigned T = TILE_DEF, DW = DATA_W_DEF, IW = $clog2(T);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic              wr_en = 1'b0;
  logic [IW-1:0]     wr_row = '0, rd_idx = '0;
  logic [T*DW-1:0]   wr_data = '0, rd_col, rd_row;
  logic [DW-1:0]     ref_t [T][T];
  int checks = 0, failures = 0;

  tas_tile_buffer #(.TILE(T), .DATA_W(DW)) dut (
    .clk(clk), .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .rd_idx(rd_idx), .rd_col(rd_col), .rd_row(rd_row)
  );

  task automatic check_all();
    for (int x = 0; x < T; x++) begin
      rd_idx = IW'(x);
      #1;
      for (int e = 0; e < T; e++) begin
        checks += 2;
        if (rd_row[e*DW +: DW] !== ref_t[x][e]) begin
          failures++;
          $display("FAIL: row %0d elem %0d", x, e);
        end
        if (rd_col[e*DW +: DW] !== ref_t[e][x]) begin
          failures++;
          $display("FAIL: col %0d elem %0d", x, e);
        end
      end
    end
  endtask

  initial begin
    for (int rep = 0; rep < 4; rep++) begin
      for (int r = 0; r < T; r++) begin
        @(negedge clk);
        wr_en = 1'b1;
        wr_row = IW'(r);
        for (int e = 0; e < T; e++) begin
          ref_t[r][e] = DW'($urandom);
          wr_data[e*DW +: DW] = ref_t[r][e];
        end
      end
      @(negedge clk);
      wr_en = 1'b0;
      wr_data = '1;
      @(negedge clk);
      check_all();
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
