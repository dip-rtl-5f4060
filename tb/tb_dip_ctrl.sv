// tb_dip_ctrl -- self-checking test of the DiP sequencer.
//
// The testbench records in which cycles an input row was accepted and, every
// cycle, checks each control output against that record: pe_en[r], mul_en[r]
// and adder_en[r] must be high exactly r, r+1 and r+2 cycles after an
// acceptance, psum_take 2 and out_valid N+2 cycles after. A weight load must
// raise wshift for exactly N cycles with wload_row counting N-1 down to 0,
// accept an input row only in the last of them, and set wloaded afterwards.
// Loads are requested while rows are still in flight: the test checks that
// no new row is accepted while the request waits, that the load is granted
// in the first cycle in which rows 0..N-2 will not multiply again, and that
// while wshift is high no row but the bottom one, and that one only in the
// first shift cycle, multiplies.
module tb_dip_ctrl;
  localparam int unsigned N  = 5;
  localparam int unsigned RW = $clog2(N);
  localparam int unsigned MAXC = 4000;

  logic clk = 1'b0;
  logic rst_n;
  logic wload_valid, wload_ready, wloaded;
  logic [RW-1:0] wload_row;
  logic in_valid, in_ready;
  logic wshift;
  logic [N-1:0] pe_en, mul_en, adder_en;
  logic psum_take, out_valid;

  int checks = 0, failures = 0;

  dip_ctrl #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (MAXC + 100) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  bit acc [MAXC + 16];   // acc[t]: a row was accepted in cycle t
  int cyc;
  int shift_run;         // consecutive wshift cycles so far
  int loads_done, stall_cycles, grants_in_flight;

  function automatic bit acc_at(int t);
    return (t >= 0) ? acc[t] : 1'b0;
  endfunction

  task automatic chk(string what, bit got, bit exp);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL cycle %0d %s: got %0b expected %0b", cyc, what, got, exp);
    end
  endtask

  // Per-cycle checks, sampled just before the edge.
  always @(negedge clk) if (rst_n) begin
    bit fire;
    fire = in_valid && in_ready;
    acc[cyc] = fire;
    for (int r = 0; r < int'(N); r++) begin
      chk($sformatf("pe_en[%0d]", r),    pe_en[r],    acc_at(cyc - r));
      chk($sformatf("mul_en[%0d]", r),   mul_en[r],   acc_at(cyc - r - 1));
      chk($sformatf("adder_en[%0d]", r), adder_en[r], acc_at(cyc - r - 2));
    end
    chk("psum_take", psum_take, acc_at(cyc - 2));
    chk("out_valid", out_valid, acc_at(cyc - int'(N) - 2));
    if (wshift) begin
      chk("wload_row", 1'b1, wload_row == RW'(N - 1 - shift_run));
      // no multiply with weights that are changing
      for (int r = 0; r < int'(N) - 1; r++) chk("mul during load", mul_en[r], 1'b0);
      if (shift_run > 0) chk("bottom mul during load", mul_en[N-1], 1'b0);
      chk("in_ready during load", in_ready, shift_run == int'(N) - 1);
    end
    // a waiting load request blocks input and is granted as soon as drained
    if (wload_valid && !wshift) begin
      bit busy;
      busy = 1'b0;
      for (int k = 0; k <= int'(N) - 3; k++) busy |= acc_at(cyc - 1 - k);
      chk("in_ready while load waits", in_ready, 1'b0);
      chk("wload_ready when drained", wload_ready, !busy);
      if (busy) stall_cycles++;
    end
  end

  always @(posedge clk) if (rst_n) begin
    cyc <= cyc + 1;
    shift_run <= wshift ? shift_run + 1 : 0;
    if (wshift && shift_run == int'(N) - 1) loads_done <= loads_done + 1;
  end

  task automatic request_load();
    wload_valid = 1'b1;
    #1;
    while (!wload_ready) begin
      @(negedge clk);
      #1;
    end
    @(posedge clk); #1;
    wload_valid = 1'b0;
  endtask

  int prev_loads;

  initial begin
    rst_n = 1'b0; wload_valid = 0; in_valid = 0; cyc = 0; shift_run = 0;
    loads_done = 0; stall_cycles = 0;
    #12 rst_n = 1'b1;
    @(negedge clk);
    chk("in_ready before weights", in_ready, 1'b0);
    chk("wloaded after reset", wloaded, 1'b0);
    for (int tile = 0; tile < 6; tile++) begin
      prev_loads = loads_done;
      // rows offered during the load too: only the last load cycle takes one
      in_valid = 1'b1;
      request_load();
      repeat (int'(N) + 1) @(negedge clk);
      chk("one load finished", 1'b1, loads_done == prev_loads + 1);
      chk("wloaded", wloaded, 1'b1);
      repeat (30) begin
        in_valid = ($urandom_range(0, 3) != 0);
        @(negedge clk);
      end
    end
    in_valid = 1'b0;
    repeat (int'(N) + 4) @(negedge clk);
    checks++;
    if (stall_cycles == 0) begin
      failures++;
      $display("FAIL the drain stall never happened");
    end
    $display("loads=%0d drain_stall_cycles=%0d", loads_done, stall_cycles);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
