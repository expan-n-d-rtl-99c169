// tb_fc_workload -- the accelerator workload of the evaluation: the default
// 64 x 10 layer (Posit(6,2) weights stored as posits, 8-bit fixed point,
// ReLU) processes 1000 input activation vectors of size 1 x 64. The
// accelerator is instantiated without parameter overrides. fc_accel_driver
// streams the weights once, 997 vectors, a second weight set and three more
// vectors, compares all 10,000 outputs against the reference model and
// checks the compute latency of every vector. A watchdog stops the run after
// two million clocks.
module tb_fc_workload;
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
    .TEST_PROTOCOL(1'b0), .NVEC(997), .WDATA_W(8), .ADATA_W(8)
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
    repeat (2000000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
