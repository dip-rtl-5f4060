// tb_dip_wbuf -- self-checking test of the permutating weight buffer.
//
// A random tile is written row by row in natural order. Every permutated row
// j is then read, with sw_perm low, and each element compared with
// W[(j + c) mod N][c] taken from the testbench's own copy of the tile
// (Algorithm-1 order). With sw_perm high every bank must return its word j
// unchanged. N = 5 checks the modulo for a size that is not a power of two;
// the 3 x 3 case of the paper's example is checked at the end, with the
// letters a..i encoded as 10..18: rows (a e i), (b f g), (c d h).
module tb_dip_wbuf;
  localparam int unsigned N      = 5;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned RW     = $clog2(N);

  logic clk = 1'b0;
  logic sw_perm, wr_en;
  logic [RW-1:0] wr_row, rd_row;
  logic [N-1:0][DATA_W-1:0] wr_data, rd_data;

  logic sw_perm3, wr_en3;
  logic [1:0] wr_row3, rd_row3;
  logic [2:0][DATA_W-1:0] wr_data3, rd_data3;

  int checks = 0, failures = 0;

  dip_wbuf #(.N(N), .DATA_W(DATA_W)) dut (.*);
  dip_wbuf #(.N(3), .DATA_W(DATA_W)) dut3 (
    .clk(clk), .sw_perm(sw_perm3), .wr_en(wr_en3), .wr_row(wr_row3),
    .wr_data(wr_data3), .rd_row(rd_row3), .rd_data(rd_data3));

  always #5 clk = ~clk;

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [DATA_W-1:0] W [N][N];

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  initial begin
    sw_perm = 0; wr_en = 0; wr_row = '0; rd_row = '0; wr_data = '0;
    sw_perm3 = 0; wr_en3 = 0; wr_row3 = '0; rd_row3 = '0; wr_data3 = '0;
    for (int pass = 0; pass < 4; pass++) begin
      for (int i = 0; i < int'(N); i++)
        for (int c = 0; c < int'(N); c++) W[i][c] = DATA_W'($urandom);
      // write in a shuffled row order
      for (int k = 0; k < int'(N); k++) begin
        int i;
        i = (k * 2 + pass) % N;
        @(negedge clk);
        wr_en = 1; wr_row = RW'(i);
        for (int c = 0; c < int'(N); c++) wr_data[c] = W[i][c];
      end
      @(negedge clk);
      wr_en = 0;
      for (int j = 0; j < int'(N); j++) begin
        sw_perm = 0; rd_row = RW'(j); #1;
        for (int c = 0; c < int'(N); c++)
          chk($sformatf("perm row %0d col %0d", j, c), int'(rd_data[c]),
              int'(W[dip_pkg::dip_perm_row(j, c, N)][c]));
        sw_perm = 1; #1;
        for (int c = 0; c < int'(N); c++)
          chk($sformatf("straight row %0d col %0d", j, c), int'(rd_data[c]),
              int'(W[j][c]));
      end
    end
    // the paper's 3x3 example: Matrix-2 = (a d g / b e h / c f i)
    begin
      int m2 [3][3];
      int expd [3][3];
      m2   = '{'{10, 13, 16}, '{11, 14, 17}, '{12, 15, 18}};
      expd = '{'{10, 14, 18}, '{11, 15, 16}, '{12, 13, 17}};  // a e i / b f g / c d h
      for (int i = 0; i < 3; i++) begin
        @(negedge clk);
        wr_en3 = 1; wr_row3 = 2'(i);
        for (int c = 0; c < 3; c++) wr_data3[c] = DATA_W'(m2[i][c]);
      end
      @(negedge clk);
      wr_en3 = 0;
      for (int j = 0; j < 3; j++) begin
        rd_row3 = 2'(j); #1;
        for (int c = 0; c < 3; c++)
          chk($sformatf("3x3 row %0d col %0d", j, c), int'(rd_data3[c]), expd[j][c]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
