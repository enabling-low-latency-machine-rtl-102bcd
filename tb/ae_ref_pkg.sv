// ae_ref_pkg: bit-exact software reference of the encoder arithmetic, used by
// the testbenches to compute expected outputs independently of the RTL.
//
// Values are handled as 64-bit integers in units of 2^-13 (the accumulator's
// LSB). The full model's requantisation is computed with real arithmetic
// (round half up of v / 1024), the nano model's with integer division, so the
// reference does not copy the RTL's bit slicing.
package ae_ref_pkg;

  localparam longint ACC_HI = (64'sd1 <<< 29) - 1;
  localparam longint ACC_LO = -(64'sd1 <<< 29);

  // Exact sum of products plus bias, in units of 2^-13.
  function automatic longint exact_sum(input int n, input int x[], input int w[], input int b);
    longint s;
    s = longint'(b) * 128;
    for (int i = 0; i < n; i++) s += longint'(x[i]) * longint'(w[i]);
    return s;
  endfunction

  // Cast to <30,17>: saturate (full) or wrap (nano).
  function automatic longint to_acc(input longint s, input bit nano);
    longint m;
    if (!nano) begin
      if (s > ACC_HI) return ACC_HI;
      if (s < ACC_LO) return ACC_LO;
      return s;
    end
    m = s % (64'sd1 <<< 30);
    if (m < 0) m += (64'sd1 <<< 30);
    if (m > ACC_HI) m -= (64'sd1 <<< 30);
    return m;
  endfunction

  // ReLU and conversion to unsigned <10,7> (code = value * 8).
  function automatic int relu_q(input longint v, input bit nano);
    real    r;
    longint q;
    if (v <= 0) return 0;
    if (!nano) begin
      r = real'(v) / 1024.0;
      q = longint'($floor(r + 0.5));
      return (q > 1023) ? 1023 : int'(q);
    end
    q = v / 1024;             // v > 0: division truncates
    return int'(q % 1024);
  endfunction

  // Was the accumulator cast saturating/wrapping for this sum?
  function automatic bit acc_overflow(input longint s);
    return (s > ACC_HI) || (s < ACC_LO);
  endfunction

  // Expected latent code of output o for pulse x under weights w (row-major,
  // o*n + i) and biases b.
  function automatic int expect_q(input int n, input int o, input int x[], input int w[],
                                  input int b[], input bit nano);
    int wr[] = new[n];
    for (int i = 0; i < n; i++) wr[i] = w[o * n + i];
    return relu_q(to_acc(exact_sum(n, x, wr, b[o]), nano), nano);
  endfunction

  // A synthetic calorimeter pulse: baseline plus amplitude * (t/tau)^2 *
  // exp(2 - 2 t/tau) starting at sample t0, with a little noise, in <16,9>
  // units (1/128). The shape only has to look like a pulse.
  function automatic void make_pulse(input int n, input real amp, input int t0, ref int x[]);
    real t, v;
    for (int i = 0; i < n; i++) begin
      t = real'(i - t0) / 3.0;
      v = (t > 0.0) ? amp * t * t * $exp(2.0 - 2.0 * t) : 0.0;
      v += 0.5 + real'($urandom_range(0, 100)) / 100.0 - 0.5;
      x[i] = int'(v * 128.0);
      if (x[i] > 32767) x[i] = 32767;
    end
  endfunction

  // Stimulus kinds used by the testbenches.
  //   0: random samples and weights over the full ranges
  //   1: synthetic pulse with random weights
  //   2: every product at its positive maximum (accumulator overflows upward)
  //   3: every product at its negative maximum (accumulator overflows downward)
  //   4: small values that land between latent codes (exercises rounding)
  function automatic void make_vector(input int kind, input int n, ref int x[], ref int w[], ref int b);
    case (kind)
      0: begin
        for (int i = 0; i < n; i++) begin
          x[i] = $urandom_range(0, 65535) - 32768;
          w[i] = $urandom_range(0, 1023) - 512;
        end
        b = $urandom_range(0, 1023) - 512;
      end
      1: begin
        make_pulse(n, real'($urandom_range(1, 250)), $urandom_range(1, (n > 16) ? 12 : 3), x);
        for (int i = 0; i < n; i++) w[i] = $urandom_range(0, 80) - 20;
        b = $urandom_range(0, 64) - 32;
      end
      2: begin
        for (int i = 0; i < n; i++) begin x[i] = -32768; w[i] = -512; end
        b = 511;
      end
      3: begin
        for (int i = 0; i < n; i++) begin x[i] = 32767; w[i] = -512; end
        b = -512;
      end
      default: begin
        for (int i = 0; i < n; i++) begin
          x[i] = $urandom_range(0, 40);
          w[i] = $urandom_range(0, 40) - 8;
        end
        b = $urandom_range(0, 20);
      end
    endcase
  endfunction

endpackage
