// relu_act -- ReLU activation on the wide accumulator.
//
// The MAC accumulates signed products in a 3M-bit register; once a neuron's
// dot product is complete, that sum goes through the activation function and
// leaves as an M-bit fixed-point activation. Negative sums give 0 (ReLU).
// Positive sums are brought back to the activation format by dropping the
// SHIFT fraction bits the weights contributed (an arithmetic right shift,
// i.e. truncation) and are saturated to the largest positive M-bit value.
//
// The ReLU and the 3M -> M width step follow the MAC schematic; where the
// binary point of the output lies, truncation rather than rounding, and
// saturation are choices of this design. Combinational.
module relu_act #(
  parameter int unsigned M     = expannd_pkg::FXP_M,      // output width
  parameter int unsigned IN_W  = 3 * M,                   // accumulator width
  parameter int unsigned SHIFT = M - 1                    // fraction bits dropped
) (
  input  logic signed [IN_W-1:0] sum_i,
  output logic signed [M-1:0]    act_o,
  output logic                   sat_o     // positive sum was clipped
);
  localparam logic signed [IN_W-1:0] MAXV = IN_W'((1 << (M - 1)) - 1);
  logic signed [IN_W-1:0] scaled;

  always_comb begin
    scaled = sum_i >>> SHIFT;
    sat_o  = 1'b0;
    if (sum_i[IN_W-1]) begin
      act_o = '0;
    end else if (scaled > MAXV) begin
      act_o = MAXV[M-1:0];
      sat_o = 1'b1;
    end else begin
      act_o = scaled[M-1:0];
    end
  end
endmodule
