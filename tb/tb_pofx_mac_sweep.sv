// tb_pofx_mac_sweep -- the PoFx MAC across the weight formats of the MAC
// evaluation.
//
// Instantiates pofx_mac for every Posit(N-1, ES) weight format with N-1 from 4
// to 7 and ES from 0 to 2 feeding an 8-bit fixed-point MAC, and for three
// wider formats, Posit(7,1), Posit(8,2) and Posit(11,2), feeding a 16-bit
// MAC. Each instance runs random dot products of 1 to 65 products back to
// back (clr together with en starts the next one) with random activations and
// weight codes. After every clock the 3M-bit accumulator and the M-bit ReLU
// output are compared with a model built from the real-valued posit decoder
// (weight truncated to M-1 fraction bits, ReLU = clamp at 0, shift by M-1,
// saturate at 2^(M-1)-1); the PoFx underflow flag is compared for every
// weight. Each instance must see a negative sum, a clipped output and, where
// the format can produce one, an underflowing weight. A watchdog ends a
// stalled run.
module tb_pofx_mac_sweep;
  import pofx_ref_pkg::*;
  import fc_ref_pkg::*;

  localparam int NCFG = 15;
  localparam int CN  [NCFG] = '{5, 6, 7, 8, 5, 6, 7, 8, 5, 6, 7, 8, 8, 9, 12};
  localparam int CES [NCFG] = '{0, 0, 0, 0, 1, 1, 1, 1, 2, 2, 2, 2, 1, 2, 2};
  localparam int CM  [NCFG] = '{8, 8, 8, 8, 8, 8, 8, 8, 8, 8, 8, 8, 16, 16, 16};

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst = 1'b1;
  int   checks   [NCFG];
  int   failures [NCFG];
  logic [NCFG-1:0] done = '0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int N  = CN[c];
    localparam int ES = CES[c];
    localparam int M  = CM[c];

    logic                  clr, en;
    logic [N-2:0]          w;
    logic signed [M-1:0]   a;
    logic signed [3*M-1:0] acc;
    logic signed [M-1:0]   y;
    logic                  sat, of_flag;

    pofx_mac #(.N(N), .ES(ES), .M(M)) dut (
      .clk, .rst, .clr, .en, .w_i(w), .act_i(a),
      .acc_o(acc), .act_o(y), .sat_o(sat), .of_o(of_flag));

    function automatic longint relu_model(longint s);
      longint top = (64'sd1 <<< (M - 1)) - 1;
      if (s < 0) return 0;
      if ((s >>> (M - 1)) > top) return top;
      return s >>> (M - 1);
    endfunction

    initial begin
      longint model;
      int     code, wv, len;
      int     n_neg, n_sat, n_of;
      bit     can_uf;
      checks[c] = 0; failures[c] = 0;
      n_neg = 0; n_sat = 0; n_of = 0;
      clr = 1'b0; en = 1'b0; w = '0; a = '0;
      model = 0;
      can_uf = 1'b0;
      for (int k = 0; k < (1 << (N - 1)); k++)
        if (code_underflows(k, N, ES, M)) can_uf = 1'b1;
      wait (!rst);
      @(negedge clk);
      for (int t = 0; t < 60; t++) begin
        len = int'($urandom_range(1, 65));
        for (int k = 0; k < len; k++) begin
          code = int'($urandom_range(0, (1 << (N - 1)) - 1));
          wv   = pofx_expect(norm_posit_value(code, N, ES), M);
          w    = code[N-2:0];
          // every fourth dot product uses the largest activation, to reach
          // the clipping limit
          if (t % 4 == 0) a = M'((1 << (M - 1)) - 1);
          else            a = M'($urandom);
          en   = 1'b1;
          clr  = (k == 0);
          #1;
          checks[c]++;
          if (of_flag != code_underflows(code, N, ES, M)) begin
            failures[c]++;
            $display("FAIL Posit(%0d,%0d)/M=%0d: flag of code %0d", N - 1, ES, M, code);
          end
          if (of_flag) n_of++;
          if (clr) model = 0;
          model = model + longint'(wv) * longint'(a);
          @(negedge clk);
          checks[c]++;
          if (longint'(acc) != model || longint'(y) != relu_model(model) ||
              sat != (model >= 0 && (model >>> (M - 1)) > relu_model(model))) begin
            failures[c]++;
            if (failures[c] < 5)
              $display("FAIL Posit(%0d,%0d)/M=%0d: acc %0d y %0d sat %b, expected %0d %0d",
                       N - 1, ES, M, acc, y, sat, model, relu_model(model));
          end
          if (model < 0) n_neg++;
          if (model >= 0 && (model >>> (M - 1)) > relu_model(model)) n_sat++;
        end
      end
      en = 1'b0; clr = 1'b0;
      checks[c] += 3;
      if (n_neg == 0) failures[c]++;
      if (n_sat == 0) failures[c]++;
      if (can_uf && n_of == 0) failures[c]++;
      $display("Posit(%0d,%0d) -> FxP(%0d): negative=%0d clipped=%0d underflow=%0d",
               N - 1, ES, M, n_neg, n_sat, n_of);
      done[c] = 1'b1;
    end
  end

  initial begin
    int tc, tf;
    repeat (2) @(negedge clk);
    rst = 1'b0;
    wait (&done);
    tc = 0; tf = 0;
    for (int c = 0; c < NCFG; c++) begin tc += checks[c]; tf += failures[c]; end
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end

  initial begin
    int tc, tf;
    repeat (100000) @(posedge clk);
    tc = 0; tf = 1;
    for (int c = 0; c < NCFG; c++) begin tc += checks[c]; tf += failures[c]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", tc, tf);
    $finish;
  end
endmodule
