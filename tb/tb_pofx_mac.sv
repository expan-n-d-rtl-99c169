// tb_pofx_mac -- self-checking test of the PoFx MAC unit.
//
// Two instances at the default size (Posit(6,2) weights, M = 8): one with the
// PoFx in the weight path, one fed with already converted FxP weights. Random
// dot products of random length are run through both, with clr+en starting
// each new sum back to back, occasional idle cycles (en low), a clr on its
// own and a reset in the middle. After every clock the 24-bit accumulator and
// the ReLU output are compared with a model built from the real-valued posit
// decoder, and the PoFx overflow flag with the model's underflow test.
module tb_pofx_mac;
  import pofx_ref_pkg::*;
  import fc_ref_pkg::*;

  localparam int N = 7, ES = 2, M = 8;

  int checks = 0;
  int failures = 0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic               rst, clr, en;
  logic [N-2:0]       w_posit;
  logic [M-1:0]       w_fxp;
  logic signed [M-1:0] a;
  logic signed [3*M-1:0] acc_p, acc_f;
  logic signed [M-1:0]   y_p, y_f;
  logic sat_p, sat_f, of_p, of_f;

  pofx_mac dut (
    .clk, .rst, .clr, .en, .w_i(w_posit), .act_i(a),
    .acc_o(acc_p), .act_o(y_p), .sat_o(sat_p), .of_o(of_p));

  pofx_mac #(.CONVERT(1'b0)) dut_fxp (
    .clk, .rst, .clr, .en, .w_i(w_fxp), .act_i(a),
    .acc_o(acc_f), .act_o(y_f), .sat_o(sat_f), .of_o(of_f));

  longint model;
  int n_first = 0, n_idle = 0, n_clr = 0, n_sat = 0, n_neg = 0, n_of = 0;

  function automatic int relu_model(longint s);
    if (s < 0) return 0;
    if ((s >>> (M - 1)) > 127) return 127;
    return int'(s >>> (M - 1));
  endfunction

  task automatic cmp(string what);
    checks++;
    if (longint'(acc_p) != model || longint'(acc_f) != model ||
        int'(y_p) != relu_model(model) || int'(y_f) != relu_model(model)) begin
      failures++;
      $display("FAIL %s: acc %0d/%0d y %0d/%0d, expected acc %0d y %0d",
               what, acc_p, acc_f, y_p, y_f, model, relu_model(model));
    end
    if (model < 0) n_neg++;
    if ((model >>> (M - 1)) > 127) n_sat++;
  endtask

  initial begin
    int code, wv, len;
    rst = 1; clr = 0; en = 0; w_posit = '0; w_fxp = '0; a = '0;
    model = 0;
    repeat (2) @(negedge clk);
    rst = 0;
    for (int t = 0; t < 300; t++) begin
      len = int'($urandom_range(1, 40));
      for (int k = 0; k < len; k++) begin
        if ($urandom_range(0, 5) == 0) begin
          en = 0; clr = 0; n_idle++;
          @(negedge clk);
          cmp("idle");
        end
        code    = int'($urandom_range(0, (1 << (N - 1)) - 1));
        wv      = pofx_expect(norm_posit_value(code, N, ES), M);
        w_posit = code[N-2:0];
        w_fxp   = M'(wv);
        a       = (t % 3 == 0) ? 8'sd127 : M'($urandom_range(0, 255));
        en      = 1;
        clr     = (k == 0);
        #1;
        checks++;
        if (of_p != code_underflows(code, N, ES, M)) begin
          failures++;
          $display("FAIL of flag for code %0d", code);
        end
        if (of_p) n_of++;
        if (clr) begin model = 0; n_first++; end
        model = model + longint'(wv) * longint'(a);
        @(negedge clk);
        cmp("accumulate");
      end
      en = 0; clr = 0;
      if (t == 100) begin
        clr = 1; n_clr++;
        @(negedge clk);
        model = 0;
        cmp("clear");
        clr = 0;
      end
      if (t == 200) begin
        rst = 1;
        @(negedge clk);
        model = 0;
        cmp("reset");
        rst = 0;
      end
    end
    checks++;
    if (n_first == 0 || n_idle == 0 || n_clr == 0 || n_sat == 0 || n_neg == 0 || n_of == 0) begin
      failures++;
      $display("FAIL a mechanism was never exercised");
    end
    $display("first=%0d idle=%0d clr=%0d sat=%0d neg=%0d of=%0d", n_first, n_idle, n_clr, n_sat, n_neg, n_of);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
