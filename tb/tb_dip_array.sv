// tb_dip_array -- self-checking test of the N x N DiP array on its own.
//
// The testbench plays the sequencer: it permutates a random signed weight
// tile itself (W_perm[j][c] = W[(j+c) mod N][c]), shifts it in last row first
// with wshift, and then streams random input rows, one per cycle with random
// bubbles, raising pe_en / mul_en / adder_en of row r exactly r, r+1 and r+2
// cycles after a row enters. Each output row is compared, at the cycle it is
// due (N + 2 cycles after its input row), with x * W computed here from the
// natural, unpermutated tile, plus the random psum fed into the top row two cycles after the row. A
// second weight tile is loaded after a drain and tested the same way.
module tb_dip_array;
  localparam int unsigned N      = 4;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;
  localparam int unsigned ROWS   = 24;

  logic clk = 1'b0;
  logic rst_n;
  logic wshift;
  logic [N-1:0] pe_en, mul_en, adder_en;
  logic [N-1:0][DATA_W-1:0] in_row, w_row;
  logic [N-1:0][ACC_W-1:0]  psum_row, out_row;

  int checks = 0, failures = 0;

  dip_array #(.N(N), .DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  int W [N][N];
  int X [ROWS][N];
  int P [ROWS][N];
  int t_in [ROWS];
  int cyc;
  bit [N+2:0] tok;     // tok[k]: a row entered k cycles ago

  always @(posedge clk) cyc <= cyc + 1;

  task automatic load_weights();
    for (int i = 0; i < int'(N); i++)
      for (int c = 0; c < int'(N); c++)
        W[i][c] = int'($signed(DATA_W'($urandom)));
    for (int s = 0; s < int'(N); s++) begin
      int j;
      j = N - 1 - s;
      wshift = 1'b1;
      for (int c = 0; c < int'(N); c++)
        w_row[c] = DATA_W'(W[(j + c) % N][c]);
      @(posedge clk); #1;
    end
    wshift = 1'b0;
  endtask

  // enables follow tokens: pe_en[r] = tok[r], mul_en[r] = tok[r+1], adder_en[r] = tok[r+2]
  task automatic drive_enables(bit enter);
    tok[0] = enter;
    for (int r = 0; r < int'(N); r++) begin
      pe_en[r]    = tok[r];
      mul_en[r]   = tok[r+1];
      adder_en[r] = tok[r+2];
    end
  endtask

  task automatic run_tile();
    int sent, got, pend;
    sent = 0; got = 0; pend = 0;
    for (int k = 0; k < int'(ROWS); k++)
      for (int c = 0; c < int'(N); c++) begin
        X[k][c] = int'($signed(DATA_W'($urandom)));
        P[k][c] = int'($urandom_range(0, 2000)) - 1000;
      end
    tok = '0;
    while (got < int'(ROWS)) begin
      bit enter;
      enter = (sent < int'(ROWS)) && ($urandom_range(0, 3) != 0);
      drive_enables(enter);
      if (enter) begin
        for (int c = 0; c < int'(N); c++) in_row[c] = DATA_W'(X[sent][c]);
        t_in[sent] = cyc;
      end else begin
        in_row = '{default: DATA_W'($urandom)};
      end
      // the psum of a row is read by the top row's adder two cycles after
      // the row entered
      psum_row = '{default: ACC_W'($urandom)};
      if (tok[2]) begin
        for (int c = 0; c < int'(N); c++) psum_row[c] = ACC_W'(P[pend][c]);
        pend++;
      end
      if (enter) sent++;
      @(posedge clk); #1;
      tok = {tok[N+1:0], 1'b0};
      tok[1] = enter;
      // a finished row sits in the bottom adder registers N+2 cycles after entry
      if (tok[N+2]) begin
        for (int c = 0; c < int'(N); c++) begin
          longint e;
          e = P[got][c];
          for (int k = 0; k < int'(N); k++) e += longint'(X[got][k]) * W[k][c];
          checks++;
          if ($signed(out_row[c]) != int'(e)) begin
            failures++;
            $display("FAIL row %0d col %0d: got %0d expected %0d", got, c,
                     $signed(out_row[c]), e);
          end
        end
        checks++;
        if (cyc - t_in[got] != int'(N) + 2) begin
          failures++;
          $display("FAIL row %0d latency %0d", got, cyc - t_in[got]);
        end
        got++;
      end
    end
    drive_enables(1'b0);
  endtask

  initial begin
    rst_n = 1'b0; wshift = 0; pe_en = '0; mul_en = '0; adder_en = '0;
    in_row = '0; w_row = '0; psum_row = '0; cyc = 0; tok = '0;
    #12 rst_n = 1'b1;
    @(posedge clk); #1;
    load_weights();
    run_tile();
    repeat (3) @(posedge clk);
    #1;
    load_weights();
    run_tile();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
