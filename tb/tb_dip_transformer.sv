// tb_dip_transformer -- transformer-layer matrix products on the default
// 64 x 64 core.
//
// The products of one encoder layer of a Vanilla-Transformer-sized model
// (sequence length l = 64, d_model = 512, head size d_k = 64, FFN size
// d_FFN = 2048) are run one after another, each as (M, N, K) = rows of the
// first operand, inner dimension, columns of the second operand:
//   input projection  l x d_model x d_k      (64 x 512 x 64)
//   Q * K^T           l x d_k x l            (64 x 64 x 64)
//   S * V             l x l x d_k            (64 x 64 x 64)
//   output projection l x d_model x d_model  (64 x 512 x 512)
//   FFN1 (with bias)  l x d_model x d_FFN    (64 x 512 x 2048)
//   FFN2 (with bias)  l x d_FFN x d_model    (64 x 2048 x 512)
// Each product is tiled into 64 x 64 weight tiles. A weight tile is written
// into the buffer while the previous one computes, loaded (run-time
// permutation), and the 64 matching input rows stream through; the psums of
// the previous inner-dimension tile come back in through psum_in (for FFN1
// and FFN2 the first tile takes the bias there instead of zero). Operands
// are random INT8; requantisation, softmax and the activation function lie
// outside the core and are not modelled. Every output element is compared
// with a product computed here, and the cycle count of each product is
// printed next to the count of weight tiles.
module tb_dip_transformer;
  localparam int unsigned N      = dip_pkg::DIP_N;
  localparam int unsigned DATA_W = dip_pkg::DIP_DATA_W;
  localparam int unsigned ACC_W  = dip_pkg::DIP_ACC_W;
  localparam int unsigned RW     = $clog2(N);

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
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // current product: A is M x KI, B is KI x KC, bias has KC entries
  int M, KI, KC;
  int A [][];
  int B [][];
  int bias [];
  longint C [][];
  int cur_kt, cur_nt;
  int cyc = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // every accepted row is tagged with its tile and row, for its psum and its output
  typedef struct { int m; int kt; int nt; } tag_t;
  tag_t psum_q [$];
  tag_t out_q  [$];
  int cur_m;

  always @(posedge clk) if (rst_n) begin
    if (in_valid && in_ready) begin
      psum_q.push_back('{m: cur_m, kt: cur_kt, nt: cur_nt});
      out_q.push_back('{m: cur_m, kt: cur_kt, nt: cur_nt});
    end
    if (psum_take) void'(psum_q.pop_front());
    if (out_valid) begin
      tag_t g;
      g = out_q.pop_front();
      for (int c = 0; c < int'(N); c++)
        C[g.m][g.nt * N + c] = longint'($signed(out_row[c]));
    end
  end

  always @(negedge clk) if (rst_n) begin
    psum_in = '0;
    if (psum_take) begin
      tag_t g;
      g = psum_q[0];
      for (int c = 0; c < int'(N); c++)
        psum_in[c] = (g.kt == 0) ? ACC_W'(bias[g.nt * N + c])
                                 : ACC_W'(C[g.m][g.nt * N + c]);
    end
  end

  task automatic write_tile(int kt, int nt);
    for (int r = 0; r < int'(N); r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = RW'(r);
      for (int c = 0; c < int'(N); c++) wr_data[c] = DATA_W'(B[kt * N + r][nt * N + c]);
    end
    @(negedge clk);
    wr_en = 0;
  endtask

  task automatic load_tile();
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
    for (int m = 0; m < M; m++) begin
      cur_m = m;
      for (int c = 0; c < int'(N); c++) in_row[c] = DATA_W'(A[m][kt * N + c]);
      in_valid = 1;
      @(posedge clk);
      while (!in_ready) @(posedge clk);
      @(negedge clk);
    end
    in_valid = 0;
  endtask

  task automatic gemm(string name, int m_, int ki_, int kc_, bit with_bias);
    int t0, kt_n, nt_n, tiles;
    M = m_; KI = ki_; KC = kc_;
    A = new[M]; foreach (A[i]) A[i] = new[KI];
    B = new[KI]; foreach (B[i]) B[i] = new[KC];
    C = new[M]; foreach (C[i]) C[i] = new[KC];
    bias = new[KC];
    foreach (A[i, k]) A[i][k] = int'($signed(DATA_W'($urandom)));
    foreach (B[i, k]) B[i][k] = int'($signed(DATA_W'($urandom)));
    foreach (bias[i]) bias[i] = with_bias ? int'($urandom_range(0, 20000)) - 10000 : 0;
    kt_n = KI / int'(N); nt_n = KC / int'(N); tiles = kt_n * nt_n;
    t0 = cyc;
    write_tile(0, 0);
    for (int t = 0; t < tiles; t++) begin
      cur_kt = t % kt_n; cur_nt = t / kt_n;
      load_tile();
      if (t + 1 < tiles) begin
        fork
          stream(cur_kt);
          begin
            @(negedge clk);
            while (!wloaded) @(negedge clk);
            write_tile((t + 1) % kt_n, (t + 1) / kt_n);
          end
        join
      end else begin
        stream(cur_kt);
      end
    end
    while (out_q.size() != 0) @(negedge clk);
    for (int i = 0; i < M; i++)
      for (int j = 0; j < KC; j++) begin
        longint e;
        e = bias[j];
        for (int k = 0; k < KI; k++) e += longint'(A[i][k]) * B[k][j];
        checks++;
        if (C[i][j] != e) begin
          failures++;
          if (failures < 20)
            $display("FAIL %s C[%0d][%0d]: got %0d expected %0d", name, i, j, C[i][j], e);
        end
      end
    $display("%s (%0d x %0d x %0d): %0d weight tiles, %0d cycles", name, M, KI, KC,
             tiles, cyc - t0);
  endtask

  localparam int L = 64, DMODEL = 512, DK = 64, DFFN = 2048;

  initial begin
    rst_n = 0; sw_perm = 0; wr_en = 0; wr_row = '0; wr_data = '0;
    wload_valid = 0; in_valid = 0; in_row = '0; psum_in = '0;
    cur_kt = 0; cur_nt = 0; cur_m = 0;
    #12 rst_n = 1;
    gemm("input projection", L, DMODEL, DK, 1'b0);
    gemm("Q*K^T", L, DK, L, 1'b0);
    gemm("S*V", L, L, DK, 1'b0);
    gemm("output projection", L, DMODEL, DMODEL, 1'b0);
    gemm("FFN1", L, DMODEL, DFFN, 1'b1);
    gemm("FFN2", L, DFFN, DMODEL, 1'b1);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
