// tb_pofx -- exhaustive self-checking test of the PoFx converter.
//
// Several Posit(N-1, ES) -> FxP(M) configurations are instantiated side by
// side, among them the default Posit(6,2) -> FxP(8) and the Posit(3,0) of the
// 4-bit example table. Every normalized bit pattern is applied and the output
// is compared with the value decoded by real arithmetic (pofx_ref_pkg): the
// fixed-point word, the overflow flag (set exactly for nonzero values below
// 2^-F) and the -1 flag. The eight values of the Posit(4,0) example table are
// also checked directly.
module tb_pofx;
  import pofx_ref_pkg::*;

  int checks   = 0;
  int failures = 0;

  localparam int NCFG = 7;
  localparam int CN  [NCFG] = '{7, 4, 6, 8, 8, 5, 12};
  localparam int CES [NCFG] = '{2, 0, 0, 3, 1, 2, 2};
  localparam int CM  [NCFG] = '{8, 8, 8, 8, 16, 4, 16};

  logic [NCFG-1:0] done = '0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int N = CN[c];
    localparam int ES = CES[c];
    localparam int M = CM[c];
    logic [N-2:0]        pin;
    logic signed [M-1:0] fout;
    logic                of_flag, neg1;

    pofx #(.N(N), .ES(ES), .M(M)) dut (
      .posit_i(pin), .fxp_o(fout), .of_o(of_flag), .neg_one_o(neg1));

    initial begin
      real v;
      int  exp_val;
      bit  exp_of, exp_n1;
      for (int unsigned b = 0; b < (1 << (N - 1)); b++) begin
        pin = b[N-2:0];
        #1;
        v       = norm_posit_value(b, N, ES);
        exp_n1  = (v == -1.0);
        exp_val = pofx_expect(v, M);
        exp_of  = (v != 0.0) && !exp_n1 && ((v < 0.0 ? -v : v) < 2.0 ** (-(M - 1)));
        checks++;
        if (int'(fout) != exp_val || of_flag != exp_of || neg1 != exp_n1) begin
          failures++;
          $display("FAIL N=%0d ES=%0d M=%0d in=%b value=%f: got %0d of=%0b n1=%0b, expected %0d of=%0b n1=%0b",
                   N, ES, M, pin, v, fout, of_flag, neg1, exp_val, exp_of, exp_n1);
        end
      end
      done[c] = 1'b1;
    end
  end

  // Posit(N=4, ES=0) table: normalized 3-bit code -> value, as FxP(8,7).
  localparam int TAB_CODE [8] = '{0, 1, 2, 3, 4, 5, 6, 7};
  localparam int TAB_FXP  [8] = '{0, 32, 64, 96, -127, -96, -64, -32};
  initial begin
    #500;
    for (int i = 0; i < 8; i++) begin
      g_cfg[1].pin = TAB_CODE[i][2:0];
      #1;
      checks++;
      if (int'(g_cfg[1].fout) != TAB_FXP[i]) begin
        failures++;
        $display("FAIL table code %b: got %0d expected %0d", TAB_CODE[i][2:0],
                 g_cfg[1].fout, TAB_FXP[i]);
      end
    end
    wait (&done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
