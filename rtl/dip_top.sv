// dip_top -- DiP matrix-multiplication core: weight buffer, sequencer and an
// N x N diagonal-input, permutated-weight-stationary systolic array.
//
// Use. (1) Write an N x N weight tile into the buffer, one row per cycle
// (wr_en, wr_row, wr_data), in natural order; set sw_perm only if the rows
// written are already permutated by software. (2) Request a load
// (wload_valid until wload_ready): for N cycles the buffer is read one
// permutated row per cycle, last row first, and shifted into the array. (3)
// Stream input rows (in_valid / in_ready, one row of N INT8 values per
// cycle); any number of rows may follow a weight load, so a tall input
// matrix runs against one stationary weight tile. (4) Each input row x gives
// one output row y = x * W (N sums of ACC_W bits, in natural column order)
// on out_row while out_valid is high.
//
// psum_in is the psum entering the top PE row: the array reads it in the
// cycle psum_take is high, two cycles after the row it belongs to was
// accepted. Tie it to zero for a plain product, or feed back the psum row
// of an earlier tile to accumulate over the inner dimension.
//
// Timing (two-stage MAC, S = 2): an input row accepted in cycle t appears on
// out_row in cycle t + N + 2; a tile of N rows accepted back to back is done
// 2N + S - 2 = 2N edges after its first row was registered. One output row
// leaves per cycle in steady state. A new weight load waits until the rows
// above the bottom one have finished with the old weights.
//
// The array, its wiring and its control signals follow the paper; the port
// protocol, the buffer and the accumulation port timing are this design's.
module dip_top #(
  parameter int unsigned N      = dip_pkg::DIP_N,
  parameter int unsigned DATA_W = dip_pkg::DIP_DATA_W,
  parameter int unsigned ACC_W  = dip_pkg::DIP_ACC_W
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // weight buffer
  input  logic                     sw_perm,
  input  logic                     wr_en,
  input  logic [$clog2(N)-1:0]     wr_row,
  input  logic [N-1:0][DATA_W-1:0] wr_data,
  // weight-tile load into the array
  input  logic                     wload_valid,
  output logic                     wload_ready,
  output logic                     wloaded,
  // input rows
  input  logic                     in_valid,
  output logic                     in_ready,
  input  logic [N-1:0][DATA_W-1:0] in_row,
  // top-row psum inputs
  output logic                     psum_take,
  input  logic [N-1:0][ACC_W-1:0]  psum_in,
  // output rows
  output logic                     out_valid,
  output logic [N-1:0][ACC_W-1:0]  out_row
);

  logic                     wshift;
  logic [N-1:0]             pe_en, mul_en, adder_en;
  logic [$clog2(N)-1:0]     wload_row;
  logic [N-1:0][DATA_W-1:0] w_row;

  dip_wbuf #(
    .N      (N),
    .DATA_W (DATA_W)
  ) u_wbuf (
    .clk     (clk),
    .sw_perm (sw_perm),
    .wr_en   (wr_en),
    .wr_row  (wr_row),
    .wr_data (wr_data),
    .rd_row  (wload_row),
    .rd_data (w_row)
  );

  dip_ctrl #(
    .N (N)
  ) u_ctrl (
    .clk         (clk),
    .rst_n       (rst_n),
    .wload_valid (wload_valid),
    .wload_ready (wload_ready),
    .wload_row   (wload_row),
    .wloaded     (wloaded),
    .in_valid    (in_valid),
    .in_ready    (in_ready),
    .wshift      (wshift),
    .pe_en       (pe_en),
    .mul_en      (mul_en),
    .adder_en    (adder_en),
    .psum_take   (psum_take),
    .out_valid   (out_valid)
  );

  dip_array #(
    .N      (N),
    .DATA_W (DATA_W),
    .ACC_W  (ACC_W)
  ) u_array (
    .clk      (clk),
    .rst_n    (rst_n),
    .wshift   (wshift),
    .pe_en    (pe_en),
    .mul_en   (mul_en),
    .adder_en (adder_en),
    .in_row   (in_row),
    .w_row    (w_row),
    .psum_row (psum_in),
    .out_row  (out_row)
  );

  // The buffer must not change under a tile that is being shifted in.
  a_no_write_while_loading : assert property (@(posedge clk) disable iff (!rst_n)
    wshift |-> !wr_en);

endmodule
