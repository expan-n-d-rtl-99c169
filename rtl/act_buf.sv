// act_buf -- input activation buffer.
//
// Keeps one input activation vector (DEPTH signed M-bit fixed-point values)
// while the MAC lanes walk through it, once per group of neurons. One write
// port fills it from the activation stream; one synchronous read port returns
// the addressed value one clock later, in step with the weight memory.
// Contents are not reset.
module act_buf #(
  parameter int unsigned W     = expannd_pkg::FXP_M,
  parameter int unsigned DEPTH = expannd_pkg::IN_DIM,
  parameter int unsigned AW    = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic          clk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [W-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [W-1:0]  rdata
);
  logic [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    if (re) rdata <= mem[raddr];
  end
endmodule
