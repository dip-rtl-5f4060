// tb_dip_top -- end-to-end test of the DiP core: a tiled matrix product.
//
// C = A * B is computed with A of M x K and B of K x KC, INT8, on a reduced
// N x N core. B is cut into N x N weight tiles; for each weight tile the M
// rows of the matching slice of A are streamed through the array, and the
// psum rows of the previous inner-dimension tile are fed back through
// psum_in, so that the core's own accumulation path builds C. The result is
// compared with a product computed here with plain loops.
//
// Mechanisms exercised and counted (each must occur at least once):
//   * run-time permutation (sw_perm = 0) and software permutation (sw_perm = 1,
//     the testbench permutates the tile with Algorithm 1 before writing it);
//   * the first input row of a tile entering in the last weight-shift cycle;
//   * bubbles in the input stream;
//   * a weight load that must wait for the array to drain;
//   * psum accumulation through psum_in;
//   * the weight buffer being rewritten while the array computes.
// Timing checks: every output row appears N + 2 cycles after its input row;
// the first tile is streamed with no bubbles, and its N-th output row must be
// registered 2N + S - 2 edges after its first input row (S = 2), with one
// output row per cycle.
module tb_dip_top;
  localparam int unsigned N      = 4;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned RW     = $clog2(N);
  localparam int unsigned M      = 10;
  localparam int unsigned K      = 12;
  localparam int unsigned KC     = 8;
  localparam int unsigned KT     = K / N;
  localparam int unsigned NT     = KC / N;

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

  dip_top #(.N(N), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int A [M][K];
  int B [K][KC];
  longint C_ref [M][KC];
  longint C_acc [M][KC];

  // row bookkeeping: what each accepted row is
  typedef struct { int m; int kt; int nt; int t_acc; } row_t;
  row_t psum_q [$];
  row_t out_q  [$];

  int cyc = 0;
  int n_hw = 0, n_sw = 0, n_overlap = 0, n_bubble = 0, n_drain = 0;
  int n_accum = 0, n_wr_busy = 0, n_out = 0;
  int t_first0 = -1, t_last0 = -1;
  int cur_kt, cur_nt;
  bit streaming;
  int cur_row_m;
  int first_acc = -1;

  task automatic chk(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  // Monitor, sampling just before each edge.
  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    if (wload_valid && !wload_ready) n_drain++;
    if (wr_en && out_q.size() != 0) n_wr_busy++;
    if (streaming && !in_valid) n_bubble++;
    if (in_valid && in_ready) begin
      row_t r;
      if (!wloaded) n_overlap++;  // only in the last shift cycle
      r = '{m: cur_row_m, kt: cur_kt, nt: cur_nt, t_acc: cyc};
      psum_q.push_back(r);
      out_q.push_back(r);
    end
    if (out_valid) begin
      row_t r;
      r = out_q.pop_front();
      chk($sformatf("latency row m=%0d", r.m), cyc - r.t_acc, N + 2);
      for (int c = 0; c < int'(N); c++)
        C_acc[r.m][r.nt * N + c] = longint'($signed(out_row[c]));
      if (r.kt == 0 && r.nt == 0) begin
        n_out++;
        if (n_out == int'(N)) t_last0 = cyc;
      end
    end
  end

  // psum_in must hold the right row whenever psum_take is high
  always @(negedge clk) if (rst_n) begin
    psum_in = '{default: ACC_W'($urandom)};
    if (psum_take) begin
      row_t r;
      r = psum_q[0];
      for (int c = 0; c < int'(N); c++)
        psum_in[c] = (r.kt == 0) ? '0 : ACC_W'(C_acc[r.m][r.nt * N + c]);
      if (r.kt != 0) n_accum++;
    end
  end
  always @(posedge clk) if (rst_n && psum_take) void'(psum_q.pop_front());

  task automatic write_tile(int kt, int nt, bit sw);
    // the buffer is read while a tile shifts in: wait until that is over
    @(negedge clk);
    while (!wloaded) @(negedge clk);
    for (int i = 0; i < int'(N); i++) begin
      @(negedge clk);
      wr_en = 1'b1;
      wr_row = RW'(i);
      for (int c = 0; c < int'(N); c++) begin
        int src;
        src = sw ? ((i + c) % N) : i;   // Algorithm 1 for software permutation
        wr_data[c] = DATA_W'(B[kt * N + src][nt * N + c]);
      end
    end
    @(negedge clk);
    wr_en = 1'b0;
  endtask

  task automatic load_tile(bit sw, bit offer_rows);
    @(negedge clk);
    sw_perm = sw;
    wload_valid = 1'b1;
    // offer the first row already, so it can enter in the last shift cycle
    in_valid = offer_rows;
    #1;
    while (!wload_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk); #1;
    wload_valid = 1'b0;
    if (sw) n_sw++; else n_hw++;
  endtask

  task automatic stream_rows(int kt, int nt, bit bubbles);
    int m;
    m = 0;
    streaming = 1'b1;
    while (m < int'(M)) begin
      cur_row_m = m;
      for (int c = 0; c < int'(N); c++) in_row[c] = DATA_W'(A[m][kt * N + c]);
      in_valid = !bubbles || ($urandom_range(0, 3) != 0);
      @(posedge clk);
      if (in_valid && in_ready) m++;
      @(negedge clk);
    end
    in_valid = 1'b0;
    streaming = 1'b0;
  endtask

  initial begin
    rst_n = 1'b0; sw_perm = 0; wr_en = 0; wr_row = '0; wr_data = '0;
    wload_valid = 0; in_valid = 0; in_row = '0; psum_in = '0;
    streaming = 0; cur_kt = 0; cur_nt = 0; cur_row_m = 0;
    for (int i = 0; i < int'(M); i++)
      for (int k = 0; k < int'(K); k++) A[i][k] = int'($signed(DATA_W'($urandom)));
    for (int k = 0; k < int'(K); k++)
      for (int j = 0; j < int'(KC); j++) B[k][j] = int'($signed(DATA_W'($urandom)));
    for (int i = 0; i < int'(M); i++)
      for (int j = 0; j < int'(KC); j++) begin
        C_ref[i][j] = 0;
        for (int k = 0; k < int'(K); k++) C_ref[i][j] += longint'(A[i][k]) * B[k][j];
      end
    #12 rst_n = 1'b1;

    // first weight tile: run-time permutation, no bubbles
    chk("wloaded after reset", wloaded, 0);
    // (no tile in the array yet, so the buffer may be written at once)
    for (int i = 0; i < int'(N); i++) begin
      @(negedge clk);
      wr_en = 1'b1; wr_row = RW'(i);
      for (int c = 0; c < int'(N); c++) wr_data[c] = DATA_W'(B[i][c]);
    end
    @(negedge clk);
    wr_en = 1'b0;
    cur_kt = 0; cur_nt = 0;
    in_row = '0;
    for (int c = 0; c < int'(N); c++) in_row[c] = DATA_W'(A[0][c]);
    load_tile(1'b0, 1'b1);
    for (int t = 0; t < int'(NT * KT); t++) begin
      int kt, nt, nkt, nnt;
      bit nsw;
      kt = t % KT; nt = t / KT;
      cur_kt = kt; cur_nt = nt;
      if (t + 1 < int'(NT * KT)) begin
        nkt = (t + 1) % KT; nnt = (t + 1) / KT;
        nsw = 1'($urandom) | (t == 1);
        if (t == 0) nsw = 1'b0;
        // rewrite the buffer with the next tile while this one streams
        fork
          stream_rows(kt, nt, t != 0);
          write_tile(nkt, nnt, nsw);
        join
        // the next tile's first row is offered while the load waits
        cur_kt = nkt; cur_nt = nnt; cur_row_m = 0;
        for (int c = 0; c < int'(N); c++) in_row[c] = DATA_W'(A[0][nkt * N + c]);
        load_tile(nsw, 1'b1);
      end else begin
        stream_rows(kt, nt, 1'b1);
      end
    end
    repeat (int'(N) + 6) @(posedge clk);
    #1;

    for (int i = 0; i < int'(M); i++)
      for (int j = 0; j < int'(KC); j++)
        chk($sformatf("C[%0d][%0d]", i, j), C_acc[i][j], C_ref[i][j]);
    chk("out rows left", out_q.size(), 0);
    // steady state: the first N rows of tile 0 finish 2N+S-2 edges after the first entered
    chk("tile latency", t_last0 - first_acc, 2 * N + dip_pkg::DIP_S_MAC - 2 + 1);
    $display("hw_perm=%0d sw_perm=%0d overlap=%0d bubbles=%0d drain_stall=%0d accum=%0d wr_busy=%0d",
             n_hw, n_sw, n_overlap, n_bubble, n_drain, n_accum, n_wr_busy);
    if (n_hw == 0)      begin failures++; $display("FAIL no run-time permutation tile"); end
    if (n_sw == 0)      begin failures++; $display("FAIL no software permutation tile"); end
    if (n_overlap == 0) begin failures++; $display("FAIL no row entered during the last shift"); end
    if (n_bubble == 0)  begin failures++; $display("FAIL no input bubble"); end
    if (n_drain == 0)   begin failures++; $display("FAIL no drain stall"); end
    if (n_accum == 0)   begin failures++; $display("FAIL no psum accumulation"); end
    if (n_wr_busy == 0) begin failures++; $display("FAIL no buffer write during compute"); end
    checks += 7;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && in_valid && in_ready && first_acc < 0) first_acc <= cyc;
endmodule
