// dip_ctrl -- control sequencer of the DiP core.
//
// It drives the four PE control signals of the array: wshift, shared by all
// PEs, and pe_en, mul_en and adder_en, one of each per PE row.
//
// Weight loading. A weight-load request is taken with a valid/ready handshake
// (wload_valid, wload_ready). In the N cycles that follow, wshift is high and
// wload_row names the row of the permutated weight tile to place on top of the
// array, last row first (N-1, N-2, ... 0), so that after N shifts row j of the
// tile sits in PE row j. The last of these cycles is also the first in which
// an input row may enter, as in the paper's 3x3 walk-through where the first
// input row and the last weight row are loaded together.
//
// Streaming. Once the weights are in place, an input row enters whenever
// in_valid and in_ready are both high, one row per cycle with no gaps needed.
// A one-bit token per accepted row moves down a shift register v: pe_en of
// row r is v[r], mul_en is v[r+1] and adder_en is v[r+2], so each register
// of each row is enabled only in the cycle in which it takes live data. out_valid
// (v[N+2]) marks the cycle in which the bottom row's adder registers hold a
// finished output row; psum_take (= adder_en of row 0, two cycles after a
// row entered) marks the cycle in which the array reads the top-row psum
// inputs for that row.
//
// Drain. Because wshift is shared, a new weight tile may not start shifting
// in while a row of the array still has to multiply with the old weights.
// wload_ready therefore waits until no accepted row is left in v[1..N-2]; the
// last old multiply in the bottom row may then coincide with the first weight
// shift. While a load request is pending no new input row is accepted, so the
// array drains.
//
// The control signals and their sharing are the paper's; the handshakes, the
// token shift register and the drain rule are this design's own way of
// producing the schedule the paper describes.
module dip_ctrl #(
  parameter int unsigned N = dip_pkg::DIP_N
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // weight-tile load request
  input  logic                 wload_valid,
  output logic                 wload_ready,
  output logic [$clog2(N)-1:0] wload_row,
  output logic                 wloaded,     // a complete weight tile is in the array
  // input rows
  input  logic                 in_valid,
  output logic                 in_ready,
  // array control
  output logic                 wshift,
  output logic [N-1:0]         pe_en,
  output logic [N-1:0]         mul_en,
  output logic [N-1:0]         adder_en,
  output logic                 psum_take,
  output logic                 out_valid
);

  localparam int unsigned RW = $clog2(N);

  logic          loading;
  logic [RW-1:0] load_cnt;
  logic          load_last;
  logic          in_fire;
  logic          drained;
  logic [N+2:1]  v;     // row tokens; v[0] is in_fire

  assign load_last = loading && (load_cnt == RW'(N - 1));

  // No token in v[1..N-2]: after the next edge no row above the bottom one
  // will multiply again with the weights now held.
  always_comb begin
    drained = 1'b1;
    for (int k = 1; k <= int'(N) - 2; k++) begin
      if (v[k]) drained = 1'b0;
    end
  end

  assign wload_ready = !loading && drained && !in_fire;
  assign in_ready    = load_last || (wloaded && !loading && !wload_valid);
  assign in_fire     = in_valid && in_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      loading  <= 1'b0;
      load_cnt <= '0;
      wloaded  <= 1'b0;
    end else if (wload_valid && wload_ready) begin
      loading  <= 1'b1;
      load_cnt <= '0;
      wloaded  <= 1'b0;
    end else if (load_last) begin
      loading  <= 1'b0;
      load_cnt <= '0;
      wloaded  <= 1'b1;
    end else if (loading) begin
      load_cnt <= load_cnt + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) v <= '0;
    else        v <= {v[N+1:1], in_fire};
  end

  assign wshift    = loading;
  assign wload_row = RW'(N - 1) - load_cnt;

  always_comb begin
    pe_en[0]  = in_fire;
    mul_en    = v[N:1];
    adder_en  = v[N+1:2];
    for (int r = 1; r < int'(N); r++) pe_en[r] = v[r];
  end

  assign psum_take = adder_en[0];
  assign out_valid = v[N+2];

  // A load may only be accepted once the rows above the bottom one are idle.
  a_drain_before_load : assert property (@(posedge clk) disable iff (!rst_n)
    (wload_valid && wload_ready) |-> drained);
  // Input rows enter only when a weight tile is (or is becoming) resident.
  a_input_needs_weights : assert property (@(posedge clk) disable iff (!rst_n)
    in_fire |-> (wloaded || load_last));

endmodule
