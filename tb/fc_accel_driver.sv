// fc_accel_driver -- stimulus and checking for expannd_fc_accel.
//
// Connects to all ports of one accelerator instance (built with the same
// parameter values as given here) and runs a complete sequence: reset, a
// weight set streamed in, a series of input vectors, a second weight set,
// more vectors. Every output vector is compared beat by beat with fc_ref_pkg,
// tlast is checked, and for vectors sent and drained without gaps the latency
// from the first input beat to the first output beat is compared with
// NIN + GROUPS*(ROWS+2) clocks. It counts how often each mechanism of the
// design was exercised (bias rows, PoFx underflow, the -1 weight, ReLU clamp
// and clip, input bubbles, output back-pressure, weight reload, and with
// TEST_PROTOCOL a misplaced tlast) and counts a failure for any that never
// happened. Signals are driven and sampled on the falling clock edge.
module fc_accel_driver
  import pofx_ref_pkg::*;
  import fc_ref_pkg::*;
#(
  parameter int unsigned N        = 7,
  parameter int unsigned ES       = 2,
  parameter int unsigned M        = 8,
  parameter int unsigned A_FRAC   = 4,
  parameter int unsigned NIN      = 64,
  parameter int unsigned NOUT     = 10,
  parameter int unsigned LANES    = 10,
  parameter bit          USE_BIAS = 1'b1,
  parameter bit          TEST_PROTOCOL = 1'b0,
  parameter int unsigned NVEC     = 6,
  parameter int unsigned WDATA_W  = 8,
  parameter int unsigned ADATA_W  = 8
) (
  input  logic               clk,
  output logic               rst,
  output logic [WDATA_W-1:0] s_w_tdata,
  output logic               s_w_tvalid,
  output logic               s_w_tlast,
  input  logic               s_w_tready,
  output logic [ADATA_W-1:0] s_a_tdata,
  output logic               s_a_tvalid,
  output logic               s_a_tlast,
  input  logic               s_a_tready,
  input  logic [ADATA_W-1:0] m_a_tdata,
  input  logic               m_a_tvalid,
  input  logic               m_a_tlast,
  output logic               m_a_tready,
  input  logic               weights_loaded_o,
  input  logic               busy_o,
  input  logic               pofx_of_seen_o,
  input  logic               relu_sat_seen_o,
  input  logic               protocol_err_o,
  output int                 checks,
  output int                 failures,
  output bit                 done
);
  localparam int ROWS   = NIN + (USE_BIAS ? 1 : 0);
  localparam int GROUPS = (NOUT + LANES - 1) / LANES;
  localparam int EXP_LAT = NIN + GROUPS * (ROWS + 2);

  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // mechanism counters
  int n_bias = 0, n_underflow = 0, n_negone = 0, n_relu_neg = 0, n_relu_sat = 0;
  int n_bubble = 0, n_stall = 0, n_reload = 0, n_proto = 0, n_latency = 0;

  int wcode[];
  int x[];
  int y_exp[];
  int y_got[];
  int first_in_cyc, first_out_cyc;
  bit last_ok;
  bit can_underflow;

  function automatic void check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endfunction

  function automatic void make_weights(int seed_sel);
    wcode = new[NOUT * ROWS];
    foreach (wcode[k]) wcode[k] = int'($urandom_range(0, (1 << (N - 1)) - 1));
    // make sure the corner codes occur: -1 and a value PoFx flushes to zero
    wcode[seed_sel % (NOUT * ROWS)]       = 1 << (N - 2);
    wcode[(seed_sel + 7) % (NOUT * ROWS)] = 1;
    foreach (wcode[k]) begin
      if (code_underflows(wcode[k], N, ES, M)) n_underflow++;
      if (norm_posit_value(wcode[k], N, ES) == -1.0) n_negone++;
    end
  endfunction

  task automatic send_weights(bit bubbles, bit bad_last);
    for (int k = 0; k < NOUT * ROWS; k++) begin
      if (bubbles && ($urandom_range(0, 3) == 0)) begin
        s_w_tvalid = 1'b0;
        n_bubble++;
        @(negedge clk);
      end
      s_w_tdata  = WDATA_W'(wcode[k]);
      s_w_tlast  = (k == NOUT * ROWS - 1) ^ (bad_last && k == 3);
      s_w_tvalid = 1'b1;
      while (!s_w_tready) @(negedge clk);
      @(negedge clk);
    end
    s_w_tvalid = 1'b0;
    s_w_tlast  = 1'b0;
  endtask

  task automatic send_vector(bit bubbles);
    for (int k = 0; k < NIN; k++) begin
      if (bubbles && ($urandom_range(0, 3) == 0)) begin
        s_a_tvalid = 1'b0;
        n_bubble++;
        @(negedge clk);
      end
      s_a_tdata  = ADATA_W'(x[k]);
      s_a_tlast  = (k == NIN - 1);
      s_a_tvalid = 1'b1;
      while (!s_a_tready) @(negedge clk);
      if (k == 0) first_in_cyc = cyc;
      @(negedge clk);
    end
    s_a_tvalid = 1'b0;
    s_a_tlast  = 1'b0;
  endtask

  task automatic receive_vector(bit stalls);
    int k = 0;
    y_got   = new[NOUT];
    last_ok = 1'b1;
    while (k < int'(NOUT)) begin
      m_a_tready = stalls ? ($urandom_range(0, 2) != 0) : 1'b1;
      if (m_a_tvalid) begin
        if (!m_a_tready) n_stall++;
        else begin
          if (k == 0) first_out_cyc = cyc;
          y_got[k] = int'($signed(m_a_tdata[M-1:0]));
          if (m_a_tlast != (k == int'(NOUT) - 1)) last_ok = 1'b0;
          k++;
        end
      end
      @(negedge clk);
    end
    m_a_tready = 1'b0;
  endtask

  task automatic run_vector(int kind, bit bubbles, bit stalls);
    fc_events_t ev;
    x = new[NIN];
    foreach (x[k]) begin
      case (kind)
        0: x[k] = int'($urandom_range(0, (1 << M) - 1)) - (1 << (M - 1));
        1: x[k] = (1 << (M - 1)) - 1;                 // all at the top
        2: x[k] = 0;                                  // bias only
        default: x[k] = int'($urandom_range(0, 1 << A_FRAC));
      endcase
    end
    fc_ref(wcode, x, NIN, NOUT, USE_BIAS, N, ES, M, A_FRAC, y_exp, ev);
    n_relu_neg += ev.n_negative;
    n_relu_sat += ev.n_saturated;
    if (USE_BIAS) n_bias += NOUT;
    fork
      send_vector(bubbles);
      receive_vector(stalls);
    join
    for (int o = 0; o < int'(NOUT); o++)
      check(y_got[o] == y_exp[o],
            $sformatf("output %0d: got %0d expected %0d", o, y_got[o], y_exp[o]));
    check(last_ok, "tlast on the output stream");
    if (!bubbles && !stalls) begin
      n_latency++;
      check(first_out_cyc - first_in_cyc == EXP_LAT,
            $sformatf("latency %0d clocks, expected %0d", first_out_cyc - first_in_cyc, EXP_LAT));
    end
  endtask

  initial begin
    checks = 0;
    failures = 0;
    done = 1'b0;
    rst = 1'b1;
    s_w_tvalid = 1'b0; s_w_tlast = 1'b0; s_w_tdata = '0;
    s_a_tvalid = 1'b0; s_a_tlast = 1'b0; s_a_tdata = '0;
    m_a_tready = 1'b0;
    repeat (3) @(negedge clk);
    rst = 1'b0;
    @(negedge clk);
    check(!weights_loaded_o && !busy_o, "idle and empty after reset");

    // an activation offered before any weights must not be taken
    s_a_tvalid = 1'b1;
    repeat (3) @(negedge clk);
    check(!s_a_tready && !busy_o, "activations refused without weights");
    s_a_tvalid = 1'b0;

    if (TEST_PROTOCOL) begin
      make_weights(3);
      send_weights(1'b0, 1'b1);
      @(negedge clk);
      check(protocol_err_o, "misplaced tlast flagged");
      if (protocol_err_o) n_proto++;
      rst = 1'b1;
      @(negedge clk);
      rst = 1'b0;
      @(negedge clk);
    end

    // first weight set, then vectors of every kind
    make_weights(5);
    send_weights(1'b1, 1'b0);
    @(negedge clk);
    check(weights_loaded_o, "weights loaded");
    run_vector(0, 1'b0, 1'b0);
    run_vector(1, 1'b0, 1'b0);
    run_vector(2, 1'b1, 1'b0);
    for (int v = 3; v < int'(NVEC); v++) run_vector(v % 4, v[0], v[1]);

    // second weight set: reload, then more vectors
    make_weights(11);
    send_weights(1'b0, 1'b0);
    n_reload++;
    @(negedge clk);
    run_vector(0, 1'b0, 1'b1);
    run_vector(3, 1'b1, 1'b1);
    run_vector(0, 1'b0, 1'b0);

    check(pofx_of_seen_o == (n_underflow > 0), "PoFx underflow flag");
    check(relu_sat_seen_o == (n_relu_sat > 0), "ReLU clip flag");
    check(protocol_err_o == 1'b0, "no protocol error on good frames");

    $display("mechanisms: bias=%0d pofx_underflow=%0d neg_one=%0d relu_clamp=%0d relu_clip=%0d",
             n_bias, n_underflow, n_negone, n_relu_neg, n_relu_sat);
    $display("            input_bubbles=%0d output_stalls=%0d weight_reloads=%0d latency_checks=%0d tlast_errors=%0d",
             n_bubble, n_stall, n_reload, n_latency, n_proto);
    check(!USE_BIAS || n_bias > 0, "bias row exercised");
    // only formats whose smallest value lies below 2^-(M-1) can underflow
    can_underflow = 1'b0;
    for (int c = 0; c < (1 << (N - 1)); c++)
      if (code_underflows(c, N, ES, M)) can_underflow = 1'b1;
    check(!can_underflow || n_underflow > 0, "PoFx underflow exercised");
    check(n_negone > 0, "-1 weight exercised");
    check(n_relu_neg > 0, "ReLU clamp exercised");
    check(n_relu_sat > 0, "ReLU clip exercised");
    check(n_bubble > 0, "input bubbles exercised");
    check(n_stall > 0, "output back-pressure exercised");
    check(n_reload > 0, "weight reload exercised");
    check(n_latency > 0, "latency measured");
    check(!TEST_PROTOCOL || n_proto > 0, "tlast error exercised");
    done = 1'b1;
  end
endmodule
