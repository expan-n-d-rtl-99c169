// fc_ref_pkg -- reference model of the fully-connected layer for the
// testbenches: y[n] = ReLU(sum_i w[n][i] * x[i] + b[n] * 1.0), where weights
// and biases are normalized posit codes decoded with real arithmetic
// (pofx_ref_pkg) and quantized to FxP(M, M-1), activations are integers in
// FxP(M, a_frac), and the output is the sum shifted right by M-1, clipped to
// [0, 2^(M-1)-1]. It also reports which events the vector exercised.
package fc_ref_pkg;
  import pofx_ref_pkg::*;

  typedef struct {
    int n_negative;   // outputs clamped to 0 by ReLU
    int n_saturated;  // outputs clipped at the top
  } fc_events_t;

  // wcode: nout*rows codes, neuron-major, bias last in each neuron when
  // use_bias. x: nin activations. Returns y (nout values).
  function automatic void fc_ref(input int wcode[], input int x[], input int nin,
                                 input int nout, input bit use_bias, input int n,
                                 input int es, input int m, input int a_frac,
                                 output int y[], output fc_events_t ev);
    int  rows = nin + (use_bias ? 1 : 0);
    longint sum;
    int  w;
    longint maxv = (64'sd1 << (m - 1)) - 1;
    y  = new[nout];
    ev = '{0, 0};
    for (int o = 0; o < nout; o++) begin
      sum = 0;
      for (int r = 0; r < rows; r++) begin
        w = pofx_expect(norm_posit_value(wcode[o*rows + r], n, es), m);
        if (r < nin) sum += longint'(w) * longint'(x[r]);
        else         sum += longint'(w) * (64'sd1 << a_frac);
      end
      if (sum < 0) begin
        y[o] = 0;
        ev.n_negative++;
      end else if ((sum >>> (m - 1)) > maxv) begin
        y[o] = int'(maxv);
        ev.n_saturated++;
      end else begin
        y[o] = int'(sum >>> (m - 1));
      end
    end
  endfunction

  // Is a weight code flushed to zero by PoFx (nonzero, below 2^-(m-1))?
  function automatic bit code_underflows(int code, int n, int es, int m);
    real v = norm_posit_value(code, n, es);
    real a = (v < 0.0) ? -v : v;
    return (v != 0.0) && (v != -1.0) && (a < 2.0 ** (-(m - 1)));
  endfunction
endpackage
