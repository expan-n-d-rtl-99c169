// tb_fc_accel_modes -- the accelerator in its other configurations.
//
// Instance A: weights converted once on the load path and stored as FxP(8)
//   ("Move"), Posit(6,2), 64 x 10 layer with biases, three MAC lanes so the
//   ten neurons take four groups; also checks that a misplaced tlast is
//   flagged.
// Instance B: weights stored as posits ("Move & Store") in the Posit(5,0)
//   configuration of the accelerator comparison, no biases, 16 inputs,
//   6 neurons on 4 lanes.
// Instance C: the "base" schedule of the accelerator comparison, a single MAC
//   lane working through all ten neurons one after another, Posit(6,0)
//   weights stored as posits, full 64 x 10 layer with biases.
// Instance D: the same Posit(6,0) weights at full size converted on the load
//   path and stored as FxP(8), ten lanes.
// All four run the full fc_accel_driver sequence against the reference model,
// including the latency check of every vector.
module tb_fc_accel_modes;
  import expannd_pkg::*;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  // ---------------- instance A ----------------
  logic       rst_a;
  logic [7:0] a_s_w_tdata, a_s_a_tdata, a_m_a_tdata;
  logic       a_s_w_tvalid, a_s_w_tlast, a_s_w_tready;
  logic       a_s_a_tvalid, a_s_a_tlast, a_s_a_tready;
  logic       a_m_a_tvalid, a_m_a_tlast, a_m_a_tready;
  logic       a_loaded, a_busy, a_of, a_sat, a_perr;
  int         a_checks, a_failures;
  bit         a_done;

  expannd_fc_accel #(.LANES(3), .STORE(STORE_FXP)) dut_a (
    .clk, .rst(rst_a),
    .s_w_tdata(a_s_w_tdata), .s_w_tvalid(a_s_w_tvalid), .s_w_tlast(a_s_w_tlast), .s_w_tready(a_s_w_tready),
    .s_a_tdata(a_s_a_tdata), .s_a_tvalid(a_s_a_tvalid), .s_a_tlast(a_s_a_tlast), .s_a_tready(a_s_a_tready),
    .m_a_tdata(a_m_a_tdata), .m_a_tvalid(a_m_a_tvalid), .m_a_tlast(a_m_a_tlast), .m_a_tready(a_m_a_tready),
    .weights_loaded_o(a_loaded), .busy_o(a_busy), .pofx_of_seen_o(a_of),
    .relu_sat_seen_o(a_sat), .protocol_err_o(a_perr));

  fc_accel_driver #(.N(7), .ES(2), .M(8), .A_FRAC(4), .NIN(64), .NOUT(10), .LANES(3),
                    .USE_BIAS(1'b1), .TEST_PROTOCOL(1'b1), .NVEC(5)) drv_a (
    .clk, .rst(rst_a),
    .s_w_tdata(a_s_w_tdata), .s_w_tvalid(a_s_w_tvalid), .s_w_tlast(a_s_w_tlast), .s_w_tready(a_s_w_tready),
    .s_a_tdata(a_s_a_tdata), .s_a_tvalid(a_s_a_tvalid), .s_a_tlast(a_s_a_tlast), .s_a_tready(a_s_a_tready),
    .m_a_tdata(a_m_a_tdata), .m_a_tvalid(a_m_a_tvalid), .m_a_tlast(a_m_a_tlast), .m_a_tready(a_m_a_tready),
    .weights_loaded_o(a_loaded), .busy_o(a_busy), .pofx_of_seen_o(a_of),
    .relu_sat_seen_o(a_sat), .protocol_err_o(a_perr),
    .checks(a_checks), .failures(a_failures), .done(a_done));

  // ---------------- instance B ----------------
  logic       rst_b;
  logic [7:0] b_s_w_tdata, b_s_a_tdata, b_m_a_tdata;
  logic       b_s_w_tvalid, b_s_w_tlast, b_s_w_tready;
  logic       b_s_a_tvalid, b_s_a_tlast, b_s_a_tready;
  logic       b_m_a_tvalid, b_m_a_tlast, b_m_a_tready;
  logic       b_loaded, b_busy, b_of, b_sat, b_perr;
  int         b_checks, b_failures;
  bit         b_done;

  expannd_fc_accel #(.N(6), .ES(0), .NIN(16), .NOUT(6), .LANES(4), .USE_BIAS(1'b0),
                     .STORE(STORE_POSIT)) dut_b (
    .clk, .rst(rst_b),
    .s_w_tdata(b_s_w_tdata), .s_w_tvalid(b_s_w_tvalid), .s_w_tlast(b_s_w_tlast), .s_w_tready(b_s_w_tready),
    .s_a_tdata(b_s_a_tdata), .s_a_tvalid(b_s_a_tvalid), .s_a_tlast(b_s_a_tlast), .s_a_tready(b_s_a_tready),
    .m_a_tdata(b_m_a_tdata), .m_a_tvalid(b_m_a_tvalid), .m_a_tlast(b_m_a_tlast), .m_a_tready(b_m_a_tready),
    .weights_loaded_o(b_loaded), .busy_o(b_busy), .pofx_of_seen_o(b_of),
    .relu_sat_seen_o(b_sat), .protocol_err_o(b_perr));

  fc_accel_driver #(.N(6), .ES(0), .M(8), .A_FRAC(4), .NIN(16), .NOUT(6), .LANES(4),
                    .USE_BIAS(1'b0), .TEST_PROTOCOL(1'b0), .NVEC(8)) drv_b (
    .clk, .rst(rst_b),
    .s_w_tdata(b_s_w_tdata), .s_w_tvalid(b_s_w_tvalid), .s_w_tlast(b_s_w_tlast), .s_w_tready(b_s_w_tready),
    .s_a_tdata(b_s_a_tdata), .s_a_tvalid(b_s_a_tvalid), .s_a_tlast(b_s_a_tlast), .s_a_tready(b_s_a_tready),
    .m_a_tdata(b_m_a_tdata), .m_a_tvalid(b_m_a_tvalid), .m_a_tlast(b_m_a_tlast), .m_a_tready(b_m_a_tready),
    .weights_loaded_o(b_loaded), .busy_o(b_busy), .pofx_of_seen_o(b_of),
    .relu_sat_seen_o(b_sat), .protocol_err_o(b_perr),
    .checks(b_checks), .failures(b_failures), .done(b_done));

  // ---------------- instance C ----------------
  logic       rst_c;
  logic [7:0] c_s_w_tdata, c_s_a_tdata, c_m_a_tdata;
  logic       c_s_w_tvalid, c_s_w_tlast, c_s_w_tready;
  logic       c_s_a_tvalid, c_s_a_tlast, c_s_a_tready;
  logic       c_m_a_tvalid, c_m_a_tlast, c_m_a_tready;
  logic       c_loaded, c_busy, c_of, c_sat, c_perr;
  int         c_checks, c_failures;
  bit         c_done;

  expannd_fc_accel #(.N(6), .ES(0), .LANES(1), .STORE(STORE_POSIT)) dut_c (
    .clk, .rst(rst_c),
    .s_w_tdata(c_s_w_tdata), .s_w_tvalid(c_s_w_tvalid), .s_w_tlast(c_s_w_tlast), .s_w_tready(c_s_w_tready),
    .s_a_tdata(c_s_a_tdata), .s_a_tvalid(c_s_a_tvalid), .s_a_tlast(c_s_a_tlast), .s_a_tready(c_s_a_tready),
    .m_a_tdata(c_m_a_tdata), .m_a_tvalid(c_m_a_tvalid), .m_a_tlast(c_m_a_tlast), .m_a_tready(c_m_a_tready),
    .weights_loaded_o(c_loaded), .busy_o(c_busy), .pofx_of_seen_o(c_of),
    .relu_sat_seen_o(c_sat), .protocol_err_o(c_perr));

  fc_accel_driver #(.N(6), .ES(0), .M(8), .A_FRAC(4), .NIN(64), .NOUT(10), .LANES(1),
                    .USE_BIAS(1'b1), .TEST_PROTOCOL(1'b0), .NVEC(4)) drv_c (
    .clk, .rst(rst_c),
    .s_w_tdata(c_s_w_tdata), .s_w_tvalid(c_s_w_tvalid), .s_w_tlast(c_s_w_tlast), .s_w_tready(c_s_w_tready),
    .s_a_tdata(c_s_a_tdata), .s_a_tvalid(c_s_a_tvalid), .s_a_tlast(c_s_a_tlast), .s_a_tready(c_s_a_tready),
    .m_a_tdata(c_m_a_tdata), .m_a_tvalid(c_m_a_tvalid), .m_a_tlast(c_m_a_tlast), .m_a_tready(c_m_a_tready),
    .weights_loaded_o(c_loaded), .busy_o(c_busy), .pofx_of_seen_o(c_of),
    .relu_sat_seen_o(c_sat), .protocol_err_o(c_perr),
    .checks(c_checks), .failures(c_failures), .done(c_done));

  // ---------------- instance D ----------------
  logic       rst_d;
  logic [7:0] d_s_w_tdata, d_s_a_tdata, d_m_a_tdata;
  logic       d_s_w_tvalid, d_s_w_tlast, d_s_w_tready;
  logic       d_s_a_tvalid, d_s_a_tlast, d_s_a_tready;
  logic       d_m_a_tvalid, d_m_a_tlast, d_m_a_tready;
  logic       d_loaded, d_busy, d_of, d_sat, d_perr;
  int         d_checks, d_failures;
  bit         d_done;

  expannd_fc_accel #(.N(6), .ES(0), .STORE(STORE_FXP)) dut_d (
    .clk, .rst(rst_d),
    .s_w_tdata(d_s_w_tdata), .s_w_tvalid(d_s_w_tvalid), .s_w_tlast(d_s_w_tlast), .s_w_tready(d_s_w_tready),
    .s_a_tdata(d_s_a_tdata), .s_a_tvalid(d_s_a_tvalid), .s_a_tlast(d_s_a_tlast), .s_a_tready(d_s_a_tready),
    .m_a_tdata(d_m_a_tdata), .m_a_tvalid(d_m_a_tvalid), .m_a_tlast(d_m_a_tlast), .m_a_tready(d_m_a_tready),
    .weights_loaded_o(d_loaded), .busy_o(d_busy), .pofx_of_seen_o(d_of),
    .relu_sat_seen_o(d_sat), .protocol_err_o(d_perr));

  fc_accel_driver #(.N(6), .ES(0), .M(8), .A_FRAC(4), .NIN(64), .NOUT(10), .LANES(10),
                    .USE_BIAS(1'b1), .TEST_PROTOCOL(1'b0), .NVEC(4)) drv_d (
    .clk, .rst(rst_d),
    .s_w_tdata(d_s_w_tdata), .s_w_tvalid(d_s_w_tvalid), .s_w_tlast(d_s_w_tlast), .s_w_tready(d_s_w_tready),
    .s_a_tdata(d_s_a_tdata), .s_a_tvalid(d_s_a_tvalid), .s_a_tlast(d_s_a_tlast), .s_a_tready(d_s_a_tready),
    .m_a_tdata(d_m_a_tdata), .m_a_tvalid(d_m_a_tvalid), .m_a_tlast(d_m_a_tlast), .m_a_tready(d_m_a_tready),
    .weights_loaded_o(d_loaded), .busy_o(d_busy), .pofx_of_seen_o(d_of),
    .relu_sat_seen_o(d_sat), .protocol_err_o(d_perr),
    .checks(d_checks), .failures(d_failures), .done(d_done));

  initial begin
    wait (a_done && b_done && c_done && d_done);
    $display("TB_RESULT checks=%0d failures=%0d", a_checks + b_checks + c_checks + d_checks, a_failures + b_failures + c_failures + d_failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", a_checks + b_checks + c_checks + d_checks, a_failures + b_failures + c_failures + d_failures + 1);
    $finish;
  end
endmodule
