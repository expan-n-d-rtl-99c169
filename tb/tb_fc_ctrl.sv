// tb_fc_ctrl -- self-checking test of the accelerator sequencer.
//
// Runs fc_ctrl on its own at a small size (4 inputs, 5 neurons, 2 lanes, so
// three groups of which the last is half used, with bias rows) and checks the
// control it produces clock by clock against what the schedule prescribes:
// the memory slot of every weight beat, the buffer address of every
// activation beat, the read addresses, the one-clock-late mac_en / mac_clr /
// bias_sel, one capture per group, the compute time GROUPS*(ROWS+2), an output
// index that holds under back-pressure with tlast on the last beat, refusal of
// activations before weights, and the sticky error of a misplaced tlast.
module tb_fc_ctrl;
  localparam int IN_DIM = 4, OUT_DIM = 5, LANES = 2;
  localparam int ROWS = IN_DIM + 1, GROUPS = 3;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic       rst;
  logic       w_valid, w_last, w_ready, wm_we;
  logic [3:0] wm_waddr, wm_raddr;
  logic [0:0] wm_wlane;
  logic       a_valid, a_last, a_ready, ab_we;
  logic [1:0] ab_waddr, ab_raddr;
  logic       rd_en, mac_en, mac_clr, bias_sel, cap;
  logic [1:0] cap_group;
  logic       o_valid, o_last, o_ready;
  logic [2:0] o_idx;
  logic       loaded, busy, perr;

  fc_ctrl #(.IN_DIM(IN_DIM), .OUT_DIM(OUT_DIM), .LANES(LANES), .USE_BIAS(1'b1)) dut (
    .clk, .rst,
    .w_valid_i(w_valid), .w_last_i(w_last), .w_ready_o(w_ready),
    .wm_we_o(wm_we), .wm_waddr_o(wm_waddr), .wm_wlane_o(wm_wlane),
    .a_valid_i(a_valid), .a_last_i(a_last), .a_ready_o(a_ready),
    .ab_we_o(ab_we), .ab_waddr_o(ab_waddr),
    .rd_en_o(rd_en), .wm_raddr_o(wm_raddr), .ab_raddr_o(ab_raddr),
    .mac_en_o(mac_en), .mac_clr_o(mac_clr), .bias_sel_o(bias_sel),
    .cap_o(cap), .cap_group_o(cap_group),
    .o_valid_o(o_valid), .o_last_o(o_last), .o_ready_i(o_ready), .o_idx_o(o_idx),
    .weights_loaded_o(loaded), .busy_o(busy), .protocol_err_o(perr));

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // monitor of the compute phase
  int n_rd = 0, n_en = 0, n_clr = 0, n_bias = 0, n_cap = 0, rd_prev = -1;
  int exp_rd_addr [$];
  bit last_rd_prev = 0;
  int rd_row_prev = 0;
  always @(posedge clk) begin
    if (!rst) begin
      // control must follow the read by exactly one clock
      if (mac_en != last_rd_prev) begin failures++; $display("FAIL mac_en timing"); end
      if (mac_en) begin
        n_en++;
        if (mac_clr != (rd_row_prev == 0)) begin failures++; $display("FAIL mac_clr"); end
        if (bias_sel != (rd_row_prev == ROWS - 1)) begin failures++; $display("FAIL bias_sel"); end
        if (mac_clr) n_clr++;
        if (bias_sel) n_bias++;
      end
      checks++;
      last_rd_prev = rd_en;
      if (rd_en) begin
        int g, r;
        g = n_rd / ROWS;
        r = n_rd % ROWS;
        rd_row_prev = r;
        checks++;
        if (int'(wm_raddr) != g * ROWS + r || (r < IN_DIM && int'(ab_raddr) != r)) begin
          failures++;
          $display("FAIL read %0d: addr %0d/%0d", n_rd, wm_raddr, ab_raddr);
        end
        n_rd++;
      end
      if (cap) begin
        checks++;
        if (int'(cap_group) != n_cap) begin failures++; $display("FAIL cap_group"); end
        n_cap++;
      end
    end
  end

  initial begin
    int t0, t1, k, stalls;
    rst = 1; w_valid = 0; w_last = 0; a_valid = 0; a_last = 0; o_ready = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    @(negedge clk);
    a_valid = 1;
    repeat (2) @(negedge clk);
    check(!a_ready && !busy, "activations refused before weights");
    a_valid = 0;

    // weight load: one beat per clock, slot of every beat
    for (k = 0; k < OUT_DIM * ROWS; k++) begin
      int n, r;
      n = k / ROWS;
      r = k % ROWS;
      w_valid = 1;
      w_last  = (k == OUT_DIM * ROWS - 1);
      while (!w_ready) @(negedge clk);
      check(wm_we && int'(wm_waddr) == (n / LANES) * ROWS + r && int'(wm_wlane) == n % LANES,
            $sformatf("weight beat %0d slot %0d/%0d", k, wm_waddr, wm_wlane));
      @(negedge clk);
    end
    w_valid = 0; w_last = 0;
    @(negedge clk);
    check(loaded && !perr, "weights loaded");

    // activation load
    for (k = 0; k < IN_DIM; k++) begin
      a_valid = 1;
      a_last  = (k == IN_DIM - 1);
      while (!a_ready) @(negedge clk);
      check(ab_we && int'(ab_waddr) == k, "activation address");
      @(negedge clk);
    end
    a_valid = 0; a_last = 0;
    t0 = $time / 10;
    while (!o_valid) @(negedge clk);
    t1 = $time / 10;
    check(t1 - t0 == GROUPS * (ROWS + 2),
          $sformatf("compute took %0d clocks", t1 - t0));
    check(n_rd == GROUPS * ROWS && n_en == GROUPS * ROWS && n_clr == GROUPS &&
          n_bias == GROUPS && n_cap == GROUPS, "compute phase counts");

    // drain with back-pressure
    k = 0;
    stalls = 0;
    while (k < OUT_DIM) begin
      o_ready = (($time / 10) % 3 != 0);
      check(o_valid && int'(o_idx) == k && o_last == (k == OUT_DIM - 1), "output beat");
      if (o_ready) k++;
      else stalls++;
      @(negedge clk);
    end
    o_ready = 0;
    check(!busy && stalls > 0, "drain finished after stalls");

    // a misplaced tlast on the weight stream
    for (k = 0; k < OUT_DIM * ROWS; k++) begin
      w_valid = 1;
      w_last  = (k == 2);
      while (!w_ready) @(negedge clk);
      @(negedge clk);
    end
    w_valid = 0; w_last = 0;
    @(negedge clk);
    check(perr && loaded, "protocol error flagged");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
