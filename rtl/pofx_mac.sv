// pofx_mac -- multiply-accumulate unit with a PoFx converter and ReLU.
//
// The weight (or bias) arrives as a normalized posit, Posit(N-1, ES), and is
// turned into FxP(M, M-1) by a PoFx converter; an M x M signed multiplier
// forms the 2M-bit product with the M-bit input activation; a 3M-bit adder
// adds it to the accumulator register, whose width leaves room for the growth
// of long dot products; the registered sum feeds a ReLU that delivers the
// M-bit output activation. This is the structure of the paper's MAC
// schematic. With CONVERT = 0 the PoFx is left out and the weight input is
// already FxP(M, M-1), which is the MAC of an accelerator that converts weights
// once, when they are loaded.
//
// Control (this design's choice; the schematic shows only clr, reset and the
// clock): rst is a synchronous reset to 0; en adds the current product; clr
// empties the accumulator, and clr together with en starts a new sum with the
// current product, so back-to-back dot products need no idle cycle. The sum
// is available one clock after the last en; act_o and sat_o are combinational
// from the register. of_o is the PoFx overflow flag of the current weight.
module pofx_mac #(
  parameter int unsigned N        = expannd_pkg::POSIT_N,
  parameter int unsigned ES       = expannd_pkg::POSIT_ES,
  parameter int unsigned M        = expannd_pkg::FXP_M,
  parameter bit          CONVERT  = 1'b1,
  parameter int unsigned WW       = CONVERT ? N - 1 : M   // weight input width
) (
  input  logic                  clk,
  input  logic                  rst,
  input  logic                  clr,
  input  logic                  en,
  input  logic [WW-1:0]         w_i,
  input  logic signed [M-1:0]   act_i,
  output logic signed [3*M-1:0] acc_o,
  output logic signed [M-1:0]   act_o,
  output logic                  sat_o,
  output logic                  of_o
);
  logic signed [M-1:0]   w_fxp;
  logic signed [2*M-1:0] product;
  logic signed [3*M-1:0] sum;

  if (CONVERT) begin : g_pofx
    logic neg_one_unused;
    pofx #(.N(N), .ES(ES), .M(M)) u_pofx (
      .posit_i(w_i), .fxp_o(w_fxp), .of_o(of_o), .neg_one_o(neg_one_unused));
  end else begin : g_fxp
    assign w_fxp = $signed(w_i[M-1:0]);
    assign of_o  = 1'b0;
  end

  always_comb begin
    product = w_fxp * act_i;
    sum     = (clr ? '0 : acc_o) + (3 * M)'(product);
  end

  always_ff @(posedge clk) begin
    if (rst)                acc_o <= '0;
    else if (en)            acc_o <= sum;
    else if (clr)           acc_o <= '0;
  end

  relu_act #(.M(M), .IN_W(3 * M), .SHIFT(M - 1)) u_relu (
    .sum_i(acc_o), .act_o(act_o), .sat_o(sat_o));

endmodule
