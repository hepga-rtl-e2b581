// tb_pim_crossbar: the 128x128, 2-bit-cell crossbar against a reference array.
// Every cell is programmed with random values through the 4-cell write port.
// Then random 1-bit input vectors are applied to random columns, and each
// bit-line sum is compared with the reference sum. Random rows are read and
// each level compared with G_OFF + cell*(G_ON-G_OFF)/3.
module tb_pim_crossbar;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int ROWS = 128, COLS = 128, CB = 2, WRC = 4;
  logic             wr_en, mac_en, rd_en;
  logic [6:0]       wr_row, rd_row, wr_col, mac_col;
  logic [7:0]       wr_data;
  logic [ROWS-1:0]  mac_in;
  logic [8:0]       mac_sum;
  logic [COLS-1:0][7:0] rd_level;
  logic [1:0]       ref_cell [ROWS][COLS];
  int checks = 0, failures = 0;

  pim_crossbar #(.ROWS(ROWS), .COLS(COLS), .CELL_BITS(CB), .WR_CELLS(WRC)) dut (
    .clk(clk), .wr_en(wr_en), .wr_row(wr_row), .wr_col(wr_col), .wr_data(wr_data),
    .mac_en(mac_en), .mac_in(mac_in), .mac_col(mac_col), .mac_sum(mac_sum),
    .rd_en(rd_en), .rd_row(rd_row), .rd_level(rd_level));

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    wr_en = 0; mac_en = 0; rd_en = 0; wr_row = 0; wr_col = 0; wr_data = 0;
    mac_in = '0; mac_col = 0; rd_row = 0;
    for (int r = 0; r < ROWS; r++)
      for (int g = 0; g < COLS / WRC; g++) begin
        @(negedge clk);
        wr_en   = 1'b1;
        wr_row  = 7'(r);
        wr_col  = 7'(g * WRC);
        wr_data = 8'($urandom);
        if (r == 5) wr_data = 8'hFF;
        for (int s = 0; s < WRC; s++) ref_cell[r][g*WRC+s] = wr_data[s*CB +: CB];
      end
    @(negedge clk);
    wr_en = 1'b0;
    for (int t = 0; t < 200; t++) begin
      int exp_sum;
      mac_en  = 1'b1;
      mac_col = 7'($urandom_range(0, COLS - 1));
      for (int r = 0; r < ROWS; r++) mac_in[r] = (t == 0) ? 1'b1 : 1'($urandom);
      exp_sum = 0;
      for (int r = 0; r < ROWS; r++) if (mac_in[r]) exp_sum += ref_cell[r][mac_col];
      @(negedge clk);
      mac_en = 1'b0;
      checks++;
      if (int'(mac_sum) != exp_sum) begin
        failures++;
        $display("MAC mismatch col=%0d got=%0d exp=%0d", mac_col, mac_sum, exp_sum);
      end
    end
    for (int t = 0; t < 50; t++) begin
      rd_en  = 1'b1;
      rd_row = 7'($urandom_range(0, ROWS - 1));
      @(negedge clk);
      rd_en = 1'b0;
      for (int c = 0; c < COLS; c++) begin
        int exp_l;
        exp_l = 16 + int'(ref_cell[rd_row][c]) * 192 / 3;
        checks++;
        if (int'(rd_level[c]) != exp_l) begin
          failures++;
          if (failures < 10) $display("read mismatch row=%0d col=%0d got=%0d exp=%0d", rd_row, c, rd_level[c], exp_l);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
