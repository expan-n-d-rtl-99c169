// weight_mem -- local weight memory of the weight-stationary accelerator.
//
// Holds the weights and biases of the fully-connected layer once they have
// been moved in, so that every input vector reuses them. The array is split
// by lane: each of the DEPTH words holds one weight for each of the LANES
// MACs, so one read feeds all MACs at once (the row-wise partitioning of the
// weights array). Word address a = group * ROWS + row, where row is the
// input index (the bias occupies the last row) and group selects a set of
// LANES neurons.
//
// Word width WW is N-1 bits when posits are stored and M bits when converted
// fixed-point values are stored. One write port writes a single lane of a
// word; one synchronous read port returns a whole word one clock after the
// address (block-RAM style). Contents are not reset.
module weight_mem #(
  parameter int unsigned WW    = expannd_pkg::POSIT_N - 1,
  parameter int unsigned LANES = expannd_pkg::OUT_DIM,
  parameter int unsigned DEPTH = expannd_pkg::IN_DIM + 1,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  parameter int unsigned LW    = (LANES > 1) ? $clog2(LANES) : 1
) (
  input  logic                     clk,
  input  logic                     we,
  input  logic [AW-1:0]            waddr,
  input  logic [LW-1:0]            wlane,
  input  logic [WW-1:0]            wdata,
  input  logic                     re,
  input  logic [AW-1:0]            raddr,
  output logic [LANES-1:0][WW-1:0] rdata
);
  logic [WW-1:0] mem [DEPTH][LANES];

  always_ff @(posedge clk) begin
    if (we) mem[waddr][wlane] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) begin
      for (int l = 0; l < int'(LANES); l++) rdata[l] <= mem[raddr][l];
    end
  end
endmodule
