// tb_expannd_fc_accel -- end-to-end test of the accelerator at its default
// size: Posit(6,2) weights, 8-bit fixed point, a 64 x 10 layer with biases,
// ten MAC lanes, weights stored as posits. The accelerator is instantiated
// without parameter overrides; fc_accel_driver streams two weight sets and
// nine input vectors through it and checks every output against the
// reference model.
module tb_expannd_fc_accel;
  import expannd_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       rst;
  logic [7:0] s_w_tdata, s_a_tdata, m_a_tdata;
  logic       s_w_tvalid, s_w_tlast, s_w_tready;
  logic       s_a_tvalid, s_a_tlast, s_a_tready;
  logic       m_a_tvalid, m_a_tlast, m_a_tready;
  logic       weights_loaded, busy, of_seen, sat_seen, proto_err;
  int         checks, failures;
  bit         done;

  expannd_fc_accel dut (
    .clk, .rst,
    .s_w_tdata, .s_w_tvalid, .s_w_tlast, .s_w_tready,
    .s_a_tdata, .s_a_tvalid, .s_a_tlast, .s_a_tready,
    .m_a_tdata, .m_a_tvalid, .m_a_tlast, .m_a_tready,
    .weights_loaded_o(weights_loaded), .busy_o(busy),
    .pofx_of_seen_o(of_seen), .relu_sat_seen_o(sat_seen),
    .protocol_err_o(proto_err));

  fc_accel_driver #(
    .N(POSIT_N), .ES(POSIT_ES), .M(FXP_M), .A_FRAC(ACT_FRAC),
    .NIN(IN_DIM), .NOUT(OUT_DIM), .LANES(OUT_DIM), .USE_BIAS(1'b1),
    .TEST_PROTOCOL(1'b0), .NVEC(6), .WDATA_W(8), .ADATA_W(8)
  ) drv (
    .clk, .rst,
    .s_w_tdata, .s_w_tvalid, .s_w_tlast, .s_w_tready,
    .s_a_tdata, .s_a_tvalid, .s_a_tlast, .s_a_tready,
    .m_a_tdata, .m_a_tvalid, .m_a_tlast, .m_a_tready,
    .weights_loaded_o(weights_loaded), .busy_o(busy),
    .pofx_of_seen_o(of_seen), .relu_sat_seen_o(sat_seen),
    .protocol_err_o(proto_err),
    .checks, .failures, .done);

  initial begin
    wait (done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
