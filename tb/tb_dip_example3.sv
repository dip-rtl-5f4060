// tb_dip_example3 -- the 3 x 3 worked example, cycle by cycle.
//
// Matrix-1 = (1 2 3 / 4 5 6 / 7 8 9) times Matrix-2 = (a d g / b e h /
// c f i), with the letters a..i encoded as 10..18. The natural Matrix-2 is
// written into the buffer; the core permutates it to (a e i / b f g /
// c d h) while loading it last row first, and the first input row enters in
// the last shift cycle. Besides the three output rows (1a+2b+3c, 2e+3f+1d,
// 3i+1g+2h), the test checks the intermediate states of the walk-through:
// the weights resident in each PE row, the input rows as rotated by the
// diagonal links, (2 3 1) in row 1 and (3 1 2) in row 2, and the row-1 psums
// (1a+2b, 2e+3f, 3i+1g). With the two-stage MAC each step happens one edge
// later than in a single-stage drawing; the last output row must be
// registered 2N + S - 2 = 6 edges after the edge that registers the first
// input row.
module tb_dip_example3;
  localparam int unsigned N      = 3;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;

  logic clk = 1'b0;
  logic rst_n;
  logic sw_perm, wr_en;
  logic [1:0] wr_row;
  logic [N-1:0][DATA_W-1:0] wr_data;
  logic wload_valid, wload_ready, wloaded;
  logic in_valid, in_ready;
  logic [N-1:0][DATA_W-1:0] in_row;
  logic psum_take;
  logic [N-1:0][ACC_W-1:0] psum_in;
  logic out_valid;
  logic [N-1:0][ACC_W-1:0] out_row;

  int checks = 0, failures = 0;

  dip_top #(.N(N), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (500) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  localparam int a = 10, b = 11, c = 12, d = 13, e = 14, f = 15, g = 16, h = 17, i = 18;
  int m1 [3][3] = '{'{1, 2, 3}, '{4, 5, 6}, '{7, 8, 9}};
  int m2 [3][3] = '{'{a, d, g}, '{b, e, h}, '{c, f, i}};

  task automatic chk(string what, int got, int exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  int cyc = 0, t_first = -1, n_out = 0, t_last = -1;
  int exp_out [3][3];
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (in_valid && in_ready && t_first < 0) t_first <= cyc;
    if (out_valid) begin
      for (int k = 0; k < 3; k++)
        chk($sformatf("output row %0d col %0d", n_out, k), int'($signed(out_row[k])),
            exp_out[n_out][k]);
      n_out <= n_out + 1;
      t_last <= cyc;
    end
  end

  initial begin
    exp_out = '{'{1*a + 2*b + 3*c, 2*e + 3*f + 1*d, 3*i + 1*g + 2*h},
                '{4*a + 5*b + 6*c, 5*e + 6*f + 4*d, 6*i + 4*g + 5*h},
                '{7*a + 8*b + 9*c, 8*e + 9*f + 7*d, 9*i + 7*g + 8*h}};
    rst_n = 0; sw_perm = 0; wr_en = 0; wr_row = '0; wr_data = '0;
    wload_valid = 0; in_valid = 0; in_row = '0; psum_in = '0;
    #12 rst_n = 1;
    for (int r = 0; r < 3; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = 2'(r);
      for (int k = 0; k < 3; k++) wr_data[k] = DATA_W'(m2[r][k]);
    end
    @(negedge clk);
    wr_en = 0;
    wload_valid = 1;
    for (int k = 0; k < 3; k++) in_row[k] = DATA_W'(m1[0][k]);
    in_valid = 1;
    @(negedge clk);
    wload_valid = 0;
    // three shift cycles ("cycles -2, -1, 0"); row 0 enters in the last one
    for (int r = 0; r < 3; r++) begin
      while (!(in_valid && in_ready)) @(negedge clk);
      @(posedge clk); #1;
      if (r == 0) begin
        // weights now resident: rows (a e i), (b f g), (c d h)
        chk("w row0", {24'(dut.u_array.g_row[0].g_col[0].u_pe.w_o),
                       24'(dut.u_array.g_row[0].g_col[1].u_pe.w_o),
                       24'(dut.u_array.g_row[0].g_col[2].u_pe.w_o)} == {24'(a), 24'(e), 24'(i)}, 1);
        chk("w row1", {24'(dut.u_array.g_row[1].g_col[0].u_pe.w_o),
                       24'(dut.u_array.g_row[1].g_col[1].u_pe.w_o),
                       24'(dut.u_array.g_row[1].g_col[2].u_pe.w_o)} == {24'(b), 24'(f), 24'(g)}, 1);
        chk("w row2", {24'(dut.u_array.g_row[2].g_col[0].u_pe.w_o),
                       24'(dut.u_array.g_row[2].g_col[1].u_pe.w_o),
                       24'(dut.u_array.g_row[2].g_col[2].u_pe.w_o)} == {24'(c), 24'(d), 24'(h)}, 1);
      end
      if (r == 1) begin
        // input row (1 2 3) has reached PE row 1 as (2 3 1)
        chk("row1 in0", int'(dut.u_array.g_row[1].g_col[0].u_pe.in_o), 2);
        chk("row1 in1", int'(dut.u_array.g_row[1].g_col[1].u_pe.in_o), 3);
        chk("row1 in2", int'(dut.u_array.g_row[1].g_col[2].u_pe.in_o), 1);
      end
      if (r == 2) begin
        // and PE row 2 as (3 1 2)
        chk("row2 in0", int'(dut.u_array.g_row[2].g_col[0].u_pe.in_o), 3);
        chk("row2 in1", int'(dut.u_array.g_row[2].g_col[1].u_pe.in_o), 1);
        chk("row2 in2", int'(dut.u_array.g_row[2].g_col[2].u_pe.in_o), 2);
      end
      if (r < 2) for (int k = 0; k < 3; k++) in_row[k] = DATA_W'(m1[r + 1][k]);
      else in_valid = 0;
      @(negedge clk);
    end
    // the row-1 psums of input row (1 2 3) are registered one edge later
    @(negedge clk);
    chk("row1 psum0", int'(dut.u_array.g_row[1].g_col[0].u_pe.pe_output), 1*a + 2*b);
    chk("row1 psum1", int'(dut.u_array.g_row[1].g_col[1].u_pe.pe_output), 2*e + 3*f);
    chk("row1 psum2", int'(dut.u_array.g_row[1].g_col[2].u_pe.pe_output), 3*i + 1*g);
    repeat (10) @(negedge clk);
    chk("output rows", n_out, 3);
    // visible one cycle after the edge that registered it
    chk("latency 2N+S-2", t_last - t_first - 1, dip_pkg::dip_tile_latency(N));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
