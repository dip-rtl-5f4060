// tb_dip_full -- the core at its default size (64 x 64 PEs, INT8, 32-bit
// psums), on a 64 x 128 by 128 x 64 product.
//
// The two 64 x 64 weight tiles of B are written in natural order and
// permutated by the buffer at load time. For each of them the 64 rows of the
// matching 64 x 64 slice of A are streamed back to back; the second pass feeds
// the psums of the first back through psum_in, so the core's output after it
// is C = A * B, which is compared with a product computed here. The first
// pass also checks the paper's timing: the 64th output row is registered
// 2N + S - 2 = 128 edges after the first input row, with one output row per
// cycle and every PE row busy from the N-th cycle on.
module tb_dip_full;
  localparam int unsigned N      = dip_pkg::DIP_N;
  localparam int unsigned DATA_W = dip_pkg::DIP_DATA_W;
  localparam int unsigned ACC_W  = dip_pkg::DIP_ACC_W;
  localparam int unsigned RW     = $clog2(N);
  localparam int unsigned K      = 2 * N;

  logic clk = 1'b0;
  logic rst_n;
  logic sw_perm, wr_en;
  logic [RW-1:0] wr_row;
  logic [N-1:0][DATA_W-1:0] wr_data;
  logic wload_valid, wload_ready, wloaded;
  logic in_valid, in_ready;
  logic [N-1:0][DATA_W-1:0] in_row;
  logic psum_take;
  logic [N-1:0][ACC_W-1:0] psum_in;
  logic out_valid;
  logic [N-1:0][ACC_W-1:0] out_row;

  int checks = 0, failures = 0;

  dip_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A [N][K];
  int B [K][N];
  longint C_ref [N][N];
  longint C_acc [N][N];
  int pass = 0;
  int cyc = 0, t_first = -1, t_last = -1, n_out = 0, n_psum = 0;
  int t_full = -1;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (pass == 0 && in_valid && in_ready && t_first < 0) t_first <= cyc;
    if (pass == 0 && t_full < 0 && dut.pe_en == '1) t_full <= cyc;
    if (out_valid) begin
      for (int c = 0; c < int'(N); c++) C_acc[n_out % N][c] = longint'($signed(out_row[c]));
      if (n_out == int'(N) - 1) t_last <= cyc;
      n_out <= n_out + 1;
    end
  end

  always @(negedge clk) if (rst_n) begin
    psum_in = '0;
    if (psum_take) begin
      if (n_psum >= int'(N))
        for (int c = 0; c < int'(N); c++) psum_in[c] = ACC_W'(C_acc[n_psum % N][c]);
      n_psum++;
    end
  end

  task automatic write_and_load(int kt);
    for (int r = 0; r < int'(N); r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = RW'(r);
      for (int c = 0; c < int'(N); c++) wr_data[c] = DATA_W'(B[kt * N + r][c]);
    end
    @(negedge clk);
    wr_en = 0;
    wload_valid = 1;
    #1;
    while (!wload_ready) begin
      @(negedge clk);
      #1;
    end
    @(negedge clk);
    wload_valid = 0;
  endtask

  task automatic stream(int kt);
    for (int m = 0; m < int'(N); m++) begin
      for (int c = 0; c < int'(N); c++) in_row[c] = DATA_W'(A[m][kt * N + c]);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  initial begin
    rst_n = 0; sw_perm = 0; wr_en = 0; wr_row = '0; wr_data = '0;
    wload_valid = 0; in_valid = 0; in_row = '0; psum_in = '0;
    for (int m = 0; m < int'(N); m++)
      for (int k = 0; k < int'(K); k++) A[m][k] = int'($signed(DATA_W'($urandom)));
    for (int k = 0; k < int'(K); k++)
      for (int c = 0; c < int'(N); c++) B[k][c] = int'($signed(DATA_W'($urandom)));
    for (int m = 0; m < int'(N); m++)
      for (int c = 0; c < int'(N); c++) begin
        C_ref[m][c] = 0;
        for (int k = 0; k < int'(K); k++) C_ref[m][c] += longint'(A[m][k]) * B[k][c];
      end
    #12 rst_n = 1;
    write_and_load(0);
    stream(0);
    while (n_out < int'(N)) @(negedge clk);
    // first pass: single 64-deep tile
    chk("tile latency (edges)", t_last - t_first - 1, dip_pkg::dip_tile_latency(N));
    chk("TFPU (cycles to all rows busy)", t_full - t_first + 1, N);
    for (int m = 0; m < int'(N); m++)
      for (int c = 0; c < int'(N); c++) begin
        longint e;
        e = 0;
        for (int k = 0; k < int'(N); k++) e += longint'(A[m][k]) * B[k][c];
        chk($sformatf("P0[%0d][%0d]", m, c), C_acc[m][c], e);
      end
    pass = 1;
    write_and_load(1);
    stream(1);
    while (n_out < 2 * int'(N)) @(negedge clk);
    for (int m = 0; m < int'(N); m++)
      for (int c = 0; c < int'(N); c++)
        chk($sformatf("C[%0d][%0d]", m, c), C_acc[m][c], C_ref[m][c]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
