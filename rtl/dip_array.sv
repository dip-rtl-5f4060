// dip_array -- the N x N DiP systolic array.
//
// Rows of the input matrix enter row 0 of the array, one element per column.
// Each PE registers its input and hands it to the next row, but shifted one
// column to the left: PE(r,c) feeds PE(r+1,c-1), and the leftmost PE(r,0)
// feeds the rightmost PE(r+1,N-1). An input row therefore appears in array
// row r rotated left by r positions, so PE(r,c) sees input element (r+c) mod N.
// Loaded with the permutated weight tile W_perm[r][c] = W[(r+c) mod N][c],
// each PE multiplies matching elements, and the psums flowing down column c
// add up to the dot product of the input row with column c of W. No input or
// output skew buffers are needed: a whole row goes in, and a whole output row,
// in natural column order, comes out of the bottom row.
//
// Weights enter at the top (w_row) and move down one row per wshift edge;
// wshift is one signal shared by every PE. pe_en, mul_en and adder_en are
// shared along each PE row (index r). psum_row is the Psum input of the top
// row: zero for a fresh product, or an earlier psum tile to accumulate onto.
// Timing: an input row registered in row 0 at edge E leaves the bottom row's
// adder registers at edge E + N + 1 (two MAC stages plus one edge per row).
// The registered inputs and weights of the bottom row have nowhere to go and
// are left unconnected (lint reports them as unused bits).
// The diagonal wiring, per-row enables and shared wshift follow the paper;
// signedness, widths and reset are this design's choices.
module dip_array #(
  parameter int unsigned N      = dip_pkg::DIP_N,
  parameter int unsigned DATA_W = dip_pkg::DIP_DATA_W,
  parameter int unsigned ACC_W  = dip_pkg::DIP_ACC_W
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        wshift,
  input  logic [N-1:0]                pe_en,
  input  logic [N-1:0]                mul_en,
  input  logic [N-1:0]                adder_en,
  input  logic [N-1:0][DATA_W-1:0]    in_row,
  input  logic [N-1:0][DATA_W-1:0]    w_row,
  input  logic [N-1:0][ACC_W-1:0]     psum_row,
  output logic [N-1:0][ACC_W-1:0]     out_row
);

  // Nets between the rows: index r is what enters PE row r.
  logic [N:0][N-1:0][DATA_W-1:0] in_net;
  logic [N:0][N-1:0][DATA_W-1:0] w_net;
  logic [N:0][N-1:0][ACC_W-1:0]  psum_net;
  // Registered inputs leaving each row, before the diagonal shift.
  logic [N-1:0][N-1:0][DATA_W-1:0] in_out;

  assign in_net[0]   = in_row;
  assign w_net[0]    = w_row;
  assign psum_net[0] = psum_row;

  for (genvar r = 0; r < N; r++) begin : g_row
    for (genvar c = 0; c < N; c++) begin : g_col
      dip_pe #(
        .DATA_W (DATA_W),
        .ACC_W  (ACC_W)
      ) u_pe (
        .clk       (clk),
        .rst_n     (rst_n),
        .wshift    (wshift),
        .pe_en     (pe_en[r]),
        .mul_en    (mul_en[r]),
        .adder_en  (adder_en[r]),
        .in_i      (in_net[r][c]),
        .w_i       (w_net[r][c]),
        .psum_i    (psum_net[r][c]),
        .in_o      (in_out[r][c]),
        .w_o       (w_net[r+1][c]),
        .pe_output (psum_net[r+1][c])
      );
      // Diagonal link: PE(r,c) feeds PE(r+1, c-1); PE(r,0) wraps to
      // PE(r+1, N-1).
      assign in_net[r+1][(c + N - 1) % N] = in_out[r][c];
    end
  end

  assign out_row = psum_net[N];

endmodule
