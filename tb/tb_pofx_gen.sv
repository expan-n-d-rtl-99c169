// tb_pofx_gen -- exhaustive self-checking test of the general converter.
//
// Several Posit(N, ES) -> FxP(M, F) configurations run side by side, the
// default Posit(8,2) -> FxP(16,8) among them. Every bit pattern is applied
// and compared with the value decoded by real arithmetic (pofx_ref_pkg):
// the fixed-point word (truncated toward zero, saturated at the range
// limit), the saturation flag, the flush flag and the NaR flag. The test also
// counts how many patterns took the left shift, the right shift, saturation
// and flush paths, and fails if a configuration never reached one of them.
// A watchdog ends the run if the stimulus stalls.
module tb_pofx_gen;
  import pofx_ref_pkg::*;

  int checks   = 0;
  int failures = 0;

  localparam int NCFG = 5;
  localparam int CN  [NCFG] = '{8, 4, 8, 6, 12};
  localparam int CES [NCFG] = '{2, 0, 1, 1, 1};
  localparam int CM  [NCFG] = '{16, 7, 8, 12, 24};
  localparam int CF  [NCFG] = '{8, 4, 3, 4, 10};

  logic [NCFG-1:0] done = '0;

  for (genvar c = 0; c < NCFG; c++) begin : g_cfg
    localparam int N  = CN[c];
    localparam int ES = CES[c];
    localparam int M  = CM[c];
    localparam int F  = CF[c];
    logic [N-1:0]        pin;
    logic signed [M-1:0] fout;
    logic                of_flag, uf_flag, nar_flag;

    pofx_gen #(.N(N), .ES(ES), .M(M), .F(F)) dut (
      .posit_i(pin), .fxp_o(fout), .of_o(of_flag), .uf_o(uf_flag), .nar_o(nar_flag));

    initial begin
      real    v, a;
      longint exp_val;
      bit     exp_of, exp_uf, exp_nar;
      int     n_left, n_right, n_of, n_uf;
      n_left = 0; n_right = 0; n_of = 0; n_uf = 0;
      for (int unsigned b = 0; b < (1 << N); b++) begin
        pin = b[N-1:0];
        #1;
        v       = posit_value(b, N, ES);
        a       = (v < 0.0) ? -v : v;
        exp_nar = (b == (32'd1 << (N - 1)));
        exp_of  = 1'b0;
        exp_uf  = 1'b0;
        if (exp_nar) begin
          exp_val = -(64'sd1 <<< (M - 1));
        end else if (a >= 2.0 ** (M - 1 - F)) begin
          exp_of  = 1'b1;
          exp_val = (64'sd1 <<< (M - 1)) - 1;
        end else begin
          exp_val = longint'($rtoi(a * (2.0 ** F)));
          exp_uf  = (a > 0.0) && (exp_val == 0);
        end
        if (!exp_nar && v < 0.0) exp_val = -exp_val;
        if (a >= 2.0 && !exp_of) n_left++;
        if (a > 0.0 && a < 1.0 && !exp_uf) n_right++;
        if (exp_of) n_of++;
        if (exp_uf) n_uf++;
        checks++;
        if (longint'(fout) != exp_val || of_flag != exp_of || uf_flag != exp_uf ||
            nar_flag != exp_nar) begin
          failures++;
          if (failures < 20)
            $display("FAIL Posit(%0d,%0d)->FxP(%0d,%0d) in=%b value=%f got %0d of=%b uf=%b nar=%b exp %0d of=%b uf=%b nar=%b",
                     N, ES, M, F, pin, v, fout, of_flag, uf_flag, nar_flag,
                     exp_val, exp_of, exp_uf, exp_nar);
        end
      end
      $display("Posit(%0d,%0d)->FxP(%0d,%0d): left=%0d right=%0d saturate=%0d flush=%0d",
               N, ES, M, F, n_left, n_right, n_of, n_uf);
      checks += 3;
      if (n_left == 0)  failures++;
      if (n_right == 0) failures++;
      if (n_of == 0)    failures++;
      done[c] = 1'b1;
    end
  end

  initial begin
    wait (&done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #10000000;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
