// dip_wbuf -- multi-bank weight buffer that permutates weights at run time.
//
// The DiP dataflow needs the weight tile permutated before it is loaded:
// column c is rotated up by c places, W_perm[j][c] = W[(j + c) mod N][c].
// The permutation can be done in software, or at run time by reading a
// multi-bank memory with per-bank addresses. This buffer does the latter. It
// has one bank per array column, each N words of DATA_W bits; bank c holds
// column c of the tile. A write stores one natural weight row: wr_data[c]
// goes to word wr_row of bank c. A read of permutated row j addresses bank c
// at word (j + c) mod N, so all N banks are read in one cycle with no data
// movement. With sw_perm set the buffer reads every bank at word j, for a
// tile that software has already permutated.
// Timing: writes take effect at the clock edge; reads are combinational (the
// banks are register arrays), so rd_data belongs to rd_row in the same cycle.
// The per-bank address arithmetic is this design's reading of the paper's
// "re-scheduling memory access across multi-bank memories"; the paper gives
// no memory organisation, no ports and no timing for it.
module dip_wbuf #(
  parameter int unsigned N      = dip_pkg::DIP_N,
  parameter int unsigned DATA_W = dip_pkg::DIP_DATA_W
) (
  input  logic                     clk,
  input  logic                     sw_perm,
  input  logic                     wr_en,
  input  logic [$clog2(N)-1:0]     wr_row,
  input  logic [N-1:0][DATA_W-1:0] wr_data,
  input  logic [$clog2(N)-1:0]     rd_row,
  output logic [N-1:0][DATA_W-1:0] rd_data
);

  localparam int unsigned RW = $clog2(N);

  for (genvar c = 0; c < N; c++) begin : g_bank
    logic [DATA_W-1:0] mem [N];
    logic [RW-1:0]     rd_addr;

    always_ff @(posedge clk) begin
      if (wr_en) mem[wr_row] <= wr_data[c];
    end

    // (rd_row + c) mod N, computed one bit wider so that N need not be a
    // power of two.
    always_comb begin
      logic [RW:0] sum;
      sum = {1'b0, rd_row} + (RW+1)'(c);
      if (sum >= (RW+1)'(N)) sum = sum - (RW+1)'(N);
      rd_addr = sw_perm ? rd_row : sum[RW-1:0];
    end

    assign rd_data[c] = mem[rd_addr];
  end

endmodule
