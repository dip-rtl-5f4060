// dip_pe -- one processing element of the DiP systolic array.
//
// The PE holds four enabled registers and a two-stage multiply-accumulate
// path, as in the paper's PE diagram:
//   * weight register, enabled by wshift; its output feeds the multiplier and
//     is passed to the PE below (weights shift down a column while loading);
//   * input register, enabled by pe_en; its output feeds the multiplier and is
//     passed on to the next PE row through the array's diagonal wiring;
//   * multiplier register, enabled by mul_en, holds input * weight;
//   * adder register, enabled by adder_en, holds psum_i + product; this is
//     pe_output, the psum handed to the PE below.
// Timing: an operand pair registered at edge E gives its product at E+1 and
// its psum at E+2, each one clock edge per enable.
// Operands are signed two's-complement INT8 (the paper's precision); the
// product is sign-extended to the ACC_W-bit accumulator (ACC_W is this
// design's choice). All registers clear on the asynchronous active-low reset,
// which the paper does not specify.
module dip_pe #(
  parameter int unsigned DATA_W = dip_pkg::DIP_DATA_W,
  parameter int unsigned ACC_W  = dip_pkg::DIP_ACC_W
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              wshift,
  input  logic              pe_en,
  input  logic              mul_en,
  input  logic              adder_en,
  input  logic [DATA_W-1:0] in_i,
  input  logic [DATA_W-1:0] w_i,
  input  logic [ACC_W-1:0]  psum_i,
  output logic [DATA_W-1:0] in_o,
  output logic [DATA_W-1:0] w_o,
  output logic [ACC_W-1:0]  pe_output
);

  logic [DATA_W-1:0]          w_q;
  logic [DATA_W-1:0]          in_q;
  logic signed [2*DATA_W-1:0] mul_q;
  logic [ACC_W-1:0]           add_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      w_q   <= '0;
      in_q  <= '0;
      mul_q <= '0;
      add_q <= '0;
    end else begin
      if (wshift)   w_q   <= w_i;
      if (pe_en)    in_q  <= in_i;
      if (mul_en)   mul_q <= $signed(in_q) * $signed(w_q);
      if (adder_en) add_q <= psum_i + ACC_W'(mul_q);
    end
  end

  assign in_o      = in_q;
  assign w_o       = w_q;
  assign pe_output = add_q;

endmodule
