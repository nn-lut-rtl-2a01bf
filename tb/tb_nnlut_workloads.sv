// tb_nnlut_workloads: Transformer non-linear operations run through the NN-LUT
// special function unit at its default size (16 lanes, 16 entries, INT32).
//
// The unit approximates only the scalar functions; the reductions around them
// (row maximum, sums, mean, variance) and the final element-wise products are
// done here in the testbench, standing in for the accelerator's other
// arithmetic. Each operation reloads the shared table, which is what switches
// the unit from one function to the next:
//   GELU      - one feed-forward activation row of 3072 values in (-5, 5)
//   Softmax   - attention-score rows of sequence length 16, 128 and 1024:
//               exp(x - max) through the exp table, then 1/sum through the
//               reciprocal table (the sums of 16 rows go through as one vector)
//   LayerNorm - 16 rows of 768 channels, half of them with variance below 1,
//               so that 1/sqrt(variance) needs the input scaling
// The row lengths are those of a RoBERTa-base model (hidden size 768,
// feed-forward size 3072) and of the sequence lengths of the system study.
// Tables are chord fits of the exact functions on hand-placed breakpoints, the
// same as in tb_nnlut_sfu. Results are compared with double-precision
// references within a tolerance; every vector must return exactly 2 cycles
// after it entered, and a stream of V vectors must take V+2 cycles.
module tb_nnlut_workloads;
  import nnlut_pkg::*;

  localparam int L = DEF_LANES;
  localparam int N = DEF_N_ENTRIES;
  localparam int W = DEF_DATA_W;
  localparam real ONE   = 65536.0;     // 1.0 for x, t, y
  localparam real S_ONE = 16777216.0;  // 1.0 for s

  typedef enum int {F_GELU, F_EXP, F_DIV, F_RSQRT} func_e;

  logic clk = 0, rst_n = 0;
  logic cfg_we = 0;
  logic [3:0] cfg_addr = '0;
  logic signed [W-1:0] cfg_s = '0, cfg_t = '0, cfg_d = '0;
  logic in_valid = 0, in_scale = 0;
  logic signed [W-1:0] in_x [L];
  logic out_valid;
  logic signed [W-1:0] out_y [L];
  logic [L-1:0] out_sat;
  logic [3:0] out_seg [L];

  nnlut_sfu dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, shown = 0;
  int n_switch = 0, n_scaled_rows = 0;

  task automatic check(bit ok, string what, real got, real want);
    checks++;
    if (!ok) begin
      failures++;
      if (shown++ < 12) $display("FAIL %s: got %f want %f", what, got, want);
    end
  endtask

  // ---- reference functions -------------------------------------------------------
  function automatic real erf_r(real v);   // Abramowitz-Stegun 7.1.26, |err| < 1.5e-7
    real tt, a, sgn;
    sgn = (v < 0) ? -1.0 : 1.0;
    a = (v < 0) ? -v : v;
    tt = 1.0 / (1.0 + 0.3275911 * a);
    return sgn * (1.0 - (((((1.061405429 * tt - 1.453152027) * tt) + 1.421413741) * tt
                  - 0.284496736) * tt + 0.254829592) * tt * $exp(-a * a));
  endfunction

  function automatic real fref(func_e f, real v);
    case (f)
      F_GELU:  return 0.5 * v * (1.0 + erf_r(v / $sqrt(2.0)));
      F_EXP:   return $exp(v);
      F_DIV:   return 1.0 / v;
      default: return 1.0 / $sqrt(v);
    endcase
  endfunction

  function automatic real rnd(real lo, real hi);
    return lo + (hi - lo) * real'($urandom_range(1000000, 0)) / 1000000.0;
  endfunction

  // ---- table loading -------------------------------------------------------------------
  task automatic write_entry(int k, real s, real t, real d);
    @(negedge clk);
    cfg_we   = 1;
    cfg_addr = 4'(k);
    cfg_s    = W'(longint'($rtoi(s * S_ONE + (s >= 0 ? 0.5 : -0.5))));
    cfg_t    = W'(longint'($rtoi(t * ONE + (t >= 0 ? 0.5 : -0.5))));
    cfg_d    = W'(longint'($rtoi(d * ONE + (d >= 0 ? 0.5 : -0.5))));
    @(posedge clk);
    #1 cfg_we = 0;
  endtask

  task automatic load(func_e f);
    real bp [N-1];
    real lo, hi, a, b, s, t;
    case (f)
      F_GELU: begin
        lo = -5.0; hi = 5.0;
        for (int k = 0; k < N - 1; k++) bp[k] = -5.0 + 10.0 * real'(k + 1) / 16.0;
      end
      F_EXP: begin
        lo = -256.0; hi = 0.0;
        bp = '{-16.0, -12.0, -10.0, -8.0, -6.0, -5.0, -4.0, -3.5, -3.0, -2.5, -2.0, -1.5, -1.0, -0.6, -0.3};
      end
      default: begin   // 1/x and 1/sqrt(x) on (1, 1024), geometric breakpoints
        lo = 1.0; hi = 1024.0;
        for (int k = 0; k < N - 1; k++) bp[k] = $pow(2.0, 10.0 * real'(k + 1) / 16.0);
      end
    endcase
    for (int k = 0; k < N; k++) begin
      a = (k == 0) ? lo : bp[k-1];
      b = (k == N - 1) ? hi : bp[k];
      s = (fref(f, b) - fref(f, a)) / (b - a);
      t = fref(f, a) - s * a;
      write_entry(k, s, t, (k == 0) ? 0.0 : bp[k-1]);
    end
    n_switch++;
  endtask

  // ---- streaming: all vectors back to back, results collected 2 cycles later ---
  task automatic process(input real xin[], input bit scale, output real yout[]);
    int nvec, issued, got, cyc;
    nvec = (xin.size() + L - 1) / L;
    yout = new[xin.size()];
    issued = 0; got = 0; cyc = 0;
    while (got < nvec) begin
      @(negedge clk);
      // outputs visible now belong to the vector issued two cycles ago
      if (out_valid) begin
        checks++;
        if (cyc - 2 != got) begin
          failures++;
          $display("FAIL latency: vector %0d returned in cycle %0d", got, cyc);
        end
        for (int l = 0; l < L; l++)
          if (got * L + l < xin.size()) yout[got * L + l] = real'(out_y[l]) / ONE;
        got++;
      end
      if (issued < nvec) begin
        in_valid = 1;
        in_scale = scale;
        for (int l = 0; l < L; l++)
          in_x[l] = (issued * L + l < xin.size()) ? W'(longint'($rtoi(xin[issued * L + l] * ONE)))
                                                   : W'(ONE);
        issued++;
      end else begin
        in_valid = 0;
      end
      cyc++;
      if (cyc > nvec + 10) begin
        failures++;
        $display("FAIL stream of %0d vectors did not complete", nvec);
        break;
      end
    end
    @(negedge clk) in_valid = 0;
    checks++;
    if (cyc != nvec + 2) begin
      failures++;
      $display("FAIL %0d vectors took %0d cycles, expected %0d", nvec, cyc, nvec + 2);
    end
  endtask

  // ---- operations ------------------------------------------------------------------------
  task automatic run_gelu(int n);
    real x[], y[], ref_y;
    x = new[n];
    foreach (x[i]) x[i] = rnd(-5.0, 5.0);
    load(F_GELU);
    process(x, 0, y);
    foreach (x[i]) begin
      ref_y = fref(F_GELU, real'($rtoi(x[i] * ONE)) / ONE);
      check((y[i] - ref_y < 0.045) && (ref_y - y[i] < 0.045), "GELU", y[i], ref_y);
    end
    $display("GELU row of %0d done", n);
  endtask

  // 16 softmax rows of length sl
  task automatic run_softmax(int sl);
    real sc[16][], e_in[], e_out[], sums[], inv[], mx, p, pref, zref, err;
    e_in = new[16 * sl];
    for (int r = 0; r < 16; r++) begin
      sc[r] = new[sl];
      mx = -1.0e9;
      foreach (sc[r][i]) begin
        sc[r][i] = rnd(-6.0, 6.0);
        if (sc[r][i] > mx) mx = sc[r][i];
      end
      foreach (sc[r][i]) e_in[r * sl + i] = sc[r][i] - mx;   // in (-12, 0]
    end
    load(F_EXP);
    process(e_in, 0, e_out);
    sums = new[16];
    for (int r = 0; r < 16; r++) begin
      sums[r] = 0.0;
      for (int i = 0; i < sl; i++) sums[r] += e_out[r * sl + i];
    end
    load(F_DIV);
    process(sums, 0, inv);
    for (int r = 0; r < 16; r++) begin
      zref = 0.0;
      for (int i = 0; i < sl; i++) zref += $exp(sc[r][i]);
      for (int i = 0; i < sl; i++) begin
        p    = e_out[r * sl + i] * inv[r];
        pref = $exp(sc[r][i]) / zref;
        err  = (p > pref) ? p - pref : pref - p;
        check(err <= 0.08 * pref + 0.015 / $sqrt(real'(sl)), "softmax", p, pref);
      end
    end
    $display("softmax, 16 rows of sequence length %0d done", sl);
  endtask

  // 16 LayerNorm rows of c channels; odd rows have a small variance
  task automatic run_layernorm(int c);
    real x[16][], var_in[], rs[], mu[16], va[16], sd, yv, yref, err;
    var_in = new[16];
    for (int r = 0; r < 16; r++) begin
      sd = (r % 2 == 1) ? rnd(0.05, 0.9) : rnd(1.2, 20.0);
      x[r] = new[c];
      mu[r] = 0.0;
      foreach (x[r][i]) begin
        x[r][i] = rnd(-1.0, 1.0) * sd * 1.7 + 0.3;
        mu[r] += x[r][i];
      end
      mu[r] /= real'(c);
      va[r] = 0.0;
      foreach (x[r][i]) va[r] += (x[r][i] - mu[r]) * (x[r][i] - mu[r]);
      va[r] /= real'(c);
      var_in[r] = va[r];
      if (va[r] < 1.0) n_scaled_rows++;
    end
    load(F_RSQRT);
    process(var_in, 1, rs);
    for (int r = 0; r < 16; r++) begin
      for (int i = 0; i < c; i += 7) begin
        yv   = (x[r][i] - mu[r]) * rs[r];
        yref = (x[r][i] - mu[r]) / $sqrt(va[r]);
        err  = (yv > yref) ? yv - yref : yref - yv;
        check(err <= 0.02 * ((yref < 0) ? -yref : yref) + 0.01, "LayerNorm", yv, yref);
      end
    end
    $display("LayerNorm, 16 rows of %0d channels done (%0d rows needed input scaling)", c, n_scaled_rows);
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int l = 0; l < L; l++) in_x[l] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    run_gelu(3072);
    run_softmax(16);
    run_softmax(128);
    run_softmax(1024);
    run_layernorm(768);
    checks++;
    if (n_switch < 4 || n_scaled_rows == 0) begin
      failures++;
      $display("FAIL mechanism missing: switches=%0d scaled rows=%0d", n_switch, n_scaled_rows);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
