// tb_dip_pe -- self-checking test of one DiP processing element.
//
// Random operands and random enable patterns are applied for many cycles. A
// reference model kept in the testbench (plain integer arithmetic, one
// variable per register) predicts the four registers, and the PE's outputs
// are compared with it after every edge. Directed cases check sign handling
// (-128 * -128, -128 * 127) and that each register holds its value when its
// enable is low. The two-edge input-to-psum latency is checked directly.
module tb_dip_pe;
  localparam int unsigned DATA_W = 8;
  localparam int unsigned ACC_W  = 32;

  logic clk = 1'b0;
  logic rst_n;
  logic wshift, pe_en, mul_en, adder_en;
  logic [DATA_W-1:0] in_i, w_i, in_o, w_o;
  logic [ACC_W-1:0]  psum_i, pe_output;

  int checks = 0, failures = 0;

  dip_pe #(.DATA_W(DATA_W), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // reference registers
  int ref_w, ref_in, ref_mul;
  longint ref_add;

  task automatic check(string what, longint got, longint exp);
    checks++;
    if (got != exp) begin
      failures++;
      $display("FAIL %s: got %0d expected %0d", what, got, exp);
    end
  endtask

  task automatic step();
    // model the edge
    int n_w, n_in, n_mul;
    longint n_add;
    n_w   = wshift   ? int'($signed(w_i))  : ref_w;
    n_in  = pe_en    ? int'($signed(in_i)) : ref_in;
    n_mul = mul_en   ? ref_in * ref_w      : ref_mul;
    n_add = adder_en ? (longint'($signed(psum_i)) + longint'(ref_mul)) : ref_add;
    @(posedge clk);
    #1;
    ref_w = n_w; ref_in = n_in; ref_mul = n_mul;
    ref_add = longint'($signed(ACC_W'(n_add)));
    check("w_o", longint'($signed(w_o)), ref_w);
    check("in_o", longint'($signed(in_o)), ref_in);
    check("pe_output", longint'($signed(pe_output)), ref_add);
  endtask

  initial begin
    rst_n = 1'b0;
    {wshift, pe_en, mul_en, adder_en} = '0;
    in_i = '0; w_i = '0; psum_i = '0;
    ref_w = 0; ref_in = 0; ref_mul = 0; ref_add = 0;
    #12 rst_n = 1'b1;
    @(negedge clk);
    check("reset out", longint'(pe_output), 0);

    // Directed: load weight -128 and input -128, check the psum two edges on.
    wshift = 1; pe_en = 1; w_i = 8'h80; in_i = 8'h80; psum_i = 32'd5;
    step();
    wshift = 0; pe_en = 0; mul_en = 1;
    step();
    mul_en = 0; adder_en = 1;
    step();
    check("-128*-128+5", longint'($signed(pe_output)), 16384 + 5);
    // Directed: -128 * 127 with a negative psum.
    adder_en = 0;
    pe_en = 1; in_i = 8'd127; step();
    pe_en = 0; mul_en = 1; step();
    mul_en = 0; adder_en = 1; psum_i = -32'sd7; step();
    check("-128*127-7", longint'($signed(pe_output)), -16256 - 7);
    adder_en = 0;

    // Random enables and data.
    repeat (2000) begin
      @(negedge clk);
      {wshift, pe_en, mul_en, adder_en} = 4'($urandom);
      in_i   = DATA_W'($urandom);
      w_i    = DATA_W'($urandom);
      psum_i = ACC_W'($urandom);
      step();
    end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
