// tb_nnlut_sfu: end-to-end test of the NN-LUT special function unit at its
// default size (16 lanes, 16-entry table, 32-bit data).
//
// The testbench plays the role of the offline tool chain and of the engine
// around the unit:
//  1. NN conversion: a random one-hidden-layer ReLU network with 15 neurons,
//     z(x) = sum_j m_j * max(n_j*x + b_j, 0), is folded into a 16-entry table
//     (breakpoints -b_j/n_j sorted; per interval, s and t are the sums of m*n and
//     m*b over the neurons that are active there). The unit's outputs are
//     compared with z(x) evaluated directly from the network.
//  2. Non-linear operations: tables for GELU on (-5,5), exp on (-256,0),
//     1/x on (1,1024) and 1/sqrt(x) on (1,1024) are built by chord fitting on
//     hand-placed breakpoints, loaded one after the other through the
//     programming port, and run. 1/sqrt is also run on (0.1,1) with input
//     scaling. Outputs are compared with the real function within a tolerance.
//  3. Stress: a table with huge slopes and offsets drives the multiply-add and
//     the output scaling into clipping.
// In every phase each output vector is also compared bit for bit with a
// 64-bit integer model of the datapath, and must appear exactly 2 cycles after
// its input vector. Fixed point: x, t, y have 16 fractional bits, s has 24.
// Each mechanism (all 16 segments, function switches, scaled inputs, both
// kinds of clipping, back-to-back vectors, table writes while vectors are in
// flight) is counted, and one that never happened counts as a failure.
module tb_nnlut_sfu;
  import nnlut_pkg::*;

  localparam int L = DEF_LANES;
  localparam int N = DEF_N_ENTRIES;
  localparam int W = DEF_DATA_W;
  localparam real ONE   = 65536.0;     // 1.0 for x, t, y (16 fractional bits)
  localparam real S_ONE = 16777216.0;  // 1.0 for s (24 fractional bits)

  typedef enum int {F_NN, F_GELU, F_EXP, F_DIV, F_RSQRT, F_STRESS} func_e;

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

  // ---- shadow of the table and integer model -------------------------------
  longint sh_s [N], sh_t [N], sh_d [N-1];

  // expected vectors, in flight between input and output (ring buffer)
  localparam int QD = 16;
  longint q_y   [QD][L];
  int     q_sat [QD][L];
  int     q_seg [QD][L];
  real    q_ref [QD][L];
  longint q_cyc [QD];
  func_e  q_fn  [QD];
  int     q_wr = 0, q_rd = 0;
  function automatic int q_count();
    return q_wr - q_rd;
  endfunction

  int checks = 0, failures = 0;
  longint cycle = 0;
  always @(posedge clk) cycle <= cycle + 1;

  // mechanism counters
  int seg_hits [N];
  int n_switch = 0, n_scaled = 0, n_unit_sat = 0, n_post_sat = 0, n_b2b = 0, n_wr_inflight = 0;
  int n_vectors = 0;

  function automatic void model(input longint x, input bit en, output longint y,
                                output int sat, output int seg);
    longint xs, p;
    bit scaled;
    scaled = en && x > 0 && x < 65536;
    xs = scaled ? x * 1024 : x;
    seg = 0;
    for (int k = N - 2; k >= 0; k--) if (xs >= sh_d[k]) begin seg = k + 1; break; end
    p = ((sh_s[seg] * xs) >>> 24) + sh_t[seg];
    sat = 0;
    if (p > 64'sd2147483647)  begin p = 64'sd2147483647;  sat = 1; end
    if (p < -64'sd2147483648) begin p = -64'sd2147483648; sat = 1; end
    if (scaled) begin
      p = p * 32;
      if (p > 64'sd2147483647)  begin p = 64'sd2147483647;  sat |= 2; end
      if (p < -64'sd2147483648) begin p = -64'sd2147483648; sat |= 2; end
    end
    y = p;
  endfunction

  // ---- reference functions ---------------------------------------------------
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
      F_RSQRT: return 1.0 / $sqrt(v);
      default: return 0.0;
    endcase
  endfunction

  // random ReLU network, neurons kept sorted by breakpoint
  real nn_n [N-1], nn_b [N-1], nn_m [N-1];
  function automatic real nn_eval(real v);
    real z = 0.0, h;
    for (int j = 0; j < N - 1; j++) begin
      h = nn_n[j] * v + nn_b[j];
      if (h > 0.0) z += nn_m[j] * h;
    end
    return z;
  endfunction

  // ---- driving helpers ---------------------------------------------------------
  task automatic write_entry(int k, real s, real t, real d);
    @(negedge clk);
    if (q_count() != 0) n_wr_inflight++;
    cfg_we   = 1;
    cfg_addr = 4'(k);
    cfg_s    = W'(longint'($rtoi(s * S_ONE +(s >= 0 ? 0.5 : -0.5))));
    cfg_t    = W'(longint'($rtoi(t * ONE + (t >= 0 ? 0.5 : -0.5))));
    cfg_d    = W'(longint'($rtoi(d * ONE + (d >= 0 ? 0.5 : -0.5))));
    sh_s[k]  = longint'(cfg_s);
    sh_t[k]  = longint'(cfg_t);
    if (k != 0) sh_d[k-1] = longint'(cfg_d);
    @(posedge clk);
    #1 cfg_we = 0;
  endtask

  // chord fit of f on [lo, bp1], [bp1, bp2], ..., [bp15, hi]
  task automatic load_chords(func_e f, real lo, real hi, real bp [N-1]);
    real a, b, s, t;
    for (int k = 0; k < N; k++) begin
      a = (k == 0) ? lo : bp[k-1];
      b = (k == N - 1) ? hi : bp[k];
      s = (fref(f, b) - fref(f, a)) / (b - a);
      t = fref(f, a) - s * a;
      write_entry(k, s, t, (k == 0) ? 0.0 : bp[k-1]);
    end
    n_switch++;
  endtask

  // NN -> LUT conversion
  task automatic load_nn();
    real s, t;
    for (int k = 0; k < N; k++) begin
      s = 0.0; t = 0.0;
      for (int j = 0; j < N - 1; j++) begin
        // in interval k, neuron j (sorted) sits left of x iff j < k
        if ((nn_n[j] >= 0.0 && j < k) || (nn_n[j] < 0.0 && j >= k)) begin
          s += nn_m[j] * nn_n[j];
          t += nn_m[j] * nn_b[j];
        end
      end
      write_entry(k, s, t, (k == 0) ? 0.0 : -nn_b[k-1] / nn_n[k-1]);
    end
    n_switch++;
  endtask

  // present one vector; xr holds real inputs, converted to fixed point here
  bit prev_cycle_valid = 0;
  task automatic send(func_e f, real xr [L], bit scale, bit keep_valid);
    longint xi; longint yv; int sv, gv, slot;
    @(negedge clk);
    if (prev_cycle_valid) n_b2b++;
    in_valid = 1;
    in_scale = scale;
    slot = q_wr % QD;
    for (int l = 0; l < L; l++) begin
      xi = longint'($rtoi(xr[l] * ONE));
      in_x[l] = W'(xi);
      model(xi, scale, yv, sv, gv);
      q_y[slot][l] = yv; q_sat[slot][l] = sv; q_seg[slot][l] = gv;
      q_ref[slot][l] = (f == F_NN) ? nn_eval(real'(xi) / ONE) : fref(f, real'(xi) / ONE);
      seg_hits[gv]++;
      if (scale && xi > 0 && xi < 65536) n_scaled++;
      if (sv[0]) n_unit_sat++;
      if (sv[1]) n_post_sat++;
    end
    q_cyc[slot] = cycle + 2;
    q_fn[slot]  = f;
    q_wr++;
    n_vectors++;
    @(posedge clk);
    prev_cycle_valid = 1;
    if (!keep_valid) begin
      #1 in_valid = 0;
      prev_cycle_valid = 0;
    end
  endtask

  task automatic idle();
    @(negedge clk) in_valid = 0;
    prev_cycle_valid = 0;
  endtask

  // ---- output monitor ----------------------------------------------------------
  int tol_fail_shown = 0;
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      int slot; func_e fn;
      real yr, err, tol;
      checks++;
      if (q_count() == 0) begin
        failures++;
        $display("FAIL output vector with nothing expected");
      end else begin
        slot = q_rd % QD;
        q_rd++;
        fn = q_fn[slot];
        if (cycle != q_cyc[slot]) begin
          failures++;
          $display("FAIL latency: output at %0d, expected %0d", cycle, q_cyc[slot]);
        end
        for (int l = 0; l < L; l++) begin
          checks++;
          if (longint'(out_y[l]) != q_y[slot][l] || out_sat[l] != (q_sat[slot][l] != 0)
              || int'(out_seg[l]) != q_seg[slot][l]) begin
            failures++;
            if (failures < 10)
              $display("FAIL fn=%s lane %0d: y=%0d sat=%0b seg=%0d exp y=%0d sat=%0d seg=%0d",
                       fn.name(), l, out_y[l], out_sat[l], out_seg[l],
                       q_y[slot][l], q_sat[slot][l], q_seg[slot][l]);
          end
          if (fn != F_STRESS) begin
            yr  = real'(out_y[l]) / ONE;
            err = (yr > q_ref[slot][l]) ? yr - q_ref[slot][l] : q_ref[slot][l] - yr;
            case (fn)
              F_NN:    tol = 24.0 / ONE;
              F_GELU:  tol = 0.045;  // chord error of GELU near 0 with 0.625-wide segments is ~0.039
              F_EXP:   tol = 0.02;
              F_DIV:   tol = 0.06 * q_ref[slot][l] + 4.0 / ONE;  // chord of 1/x over a 1.54x span: 4.7%
              default: tol = 0.02 * q_ref[slot][l] + 80.0 / ONE;
            endcase
            checks++;
            if (err > tol) begin
              failures++;
              if (tol_fail_shown++ < 10)
                $display("FAIL accuracy fn=%s lane %0d: y=%f ref=%f", fn.name(), l, yr, q_ref[slot][l]);
            end
          end
        end
      end
    end
  end

  // ---- watchdog ------------------------------------------------------------------
  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---- stimulus ------------------------------------------------------------------
  real bp [N-1];
  real xr [L];

  task automatic run_vectors(func_e f, real lo, real hi, bit scale, int count);
    for (int v = 0; v < count; v++) begin
      for (int l = 0; l < L; l++) xr[l] = lo + (hi - lo) * (real'($urandom_range(1000000, 0)) / 1000000.0);
      // mostly back to back, sometimes a bubble
      send(f, xr, scale, ($urandom_range(4, 0) != 0) && (v != count - 1));
    end
  endtask

  initial begin
    real e, tmp;
    for (int l = 0; l < L; l++) in_x[l] = '0;
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;

    // 1. random ReLU network folded into the LUT
    for (int rep = 0; rep < 3; rep++) begin
      for (int j = 0; j < N - 1; j++) begin
        nn_n[j] = (0.5 + 1.5 * real'($urandom_range(1000, 0)) / 1000.0) * (($urandom_range(1, 0) == 1) ? 1.0 : -1.0);
        e       = -7.0 + 14.0 * real'($urandom_range(100000, 0)) / 100000.0;   // breakpoint
        nn_b[j] = -e * nn_n[j];
        nn_m[j] = -1.0 + 2.0 * real'($urandom_range(1000, 0)) / 1000.0;
      end
      for (int i = 0; i < N - 1; i++)            // sort neurons by breakpoint
        for (int j = 0; j < N - 2 - i; j++)
          if (-nn_b[j] / nn_n[j] > -nn_b[j+1] / nn_n[j+1]) begin
            tmp = nn_n[j]; nn_n[j] = nn_n[j+1]; nn_n[j+1] = tmp;
            tmp = nn_b[j]; nn_b[j] = nn_b[j+1]; nn_b[j+1] = tmp;
            tmp = nn_m[j]; nn_m[j] = nn_m[j+1]; nn_m[j+1] = tmp;
          end
      load_nn();
      run_vectors(F_NN, -8.0, 8.0, 0, 150);
    end

    // 2a. GELU on (-5, 5), uniform breakpoints
    for (int k = 0; k < N - 1; k++) bp[k] = -5.0 + 10.0 * real'(k + 1) / 16.0;
    load_chords(F_GELU, -5.0, 5.0, bp);
    run_vectors(F_GELU, -5.0, 5.0, 0, 200);

    // 2b. exp on (-256, 0), breakpoints dense near zero
    bp = '{-16.0, -12.0, -10.0, -8.0, -6.0, -5.0, -4.0, -3.5, -3.0, -2.5, -2.0, -1.5, -1.0, -0.6, -0.3};
    load_chords(F_EXP, -256.0, 0.0, bp);
    run_vectors(F_EXP, -256.0, 0.0, 0, 100);
    run_vectors(F_EXP, -8.0, 0.0, 0, 100);

    // 2c. 1/x on (1, 1024), geometric breakpoints
    for (int k = 0; k < N - 1; k++) bp[k] = $pow(2.0, 10.0 * real'(k + 1) / 16.0);
    load_chords(F_DIV, 1.0, 1024.0, bp);
    run_vectors(F_DIV, 1.0, 1024.0, 0, 100);
    run_vectors(F_DIV, 1.0, 16.0, 0, 100);

    // 2d. 1/sqrt on (1, 1024), then small inputs (0.1, 1) through input scaling
    load_chords(F_RSQRT, 1.0, 1024.0, bp);
    run_vectors(F_RSQRT, 1.0, 1024.0, 1, 100);
    run_vectors(F_RSQRT, 0.1, 1.0, 1, 100);
    run_vectors(F_RSQRT, 0.1, 4.0, 1, 100);

    // 3. stress: huge slopes and offsets, with and without scaling
    for (int k = 0; k < N - 1; k++) bp[k] = -30000.0 + 4000.0 * real'(k);
    for (int k = 0; k < N; k++)
      write_entry(k, (k % 2 == 0) ? 127.0 : -128.0, 4096.0, (k == 0) ? 0.0 : bp[k-1]);
    n_switch++;
    run_vectors(F_STRESS, -32000.0, 32000.0, 0, 40);
    run_vectors(F_STRESS, 0.0, 0.01, 1, 40);      // scaled: 4096*32 overflows after the shift
    idle();
    repeat (6) @(posedge clk);

    // ---- end checks ----
    checks++;
    if (q_count() != 0) begin failures++; $display("FAIL %0d output vectors missing", q_count()); end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (seg_hits[k] == 0) begin failures++; $display("FAIL segment %0d never used", k); end
    end
    checks++;
    if (n_switch < 5 || n_scaled == 0 || n_unit_sat == 0 || n_post_sat == 0 || n_b2b == 0 || n_wr_inflight == 0) begin
      failures++;
      $display("FAIL a mechanism never happened");
    end
    $display("vectors=%0d function switches=%0d scaled inputs=%0d multiply-add clips=%0d output-scale clips=%0d back-to-back vectors=%0d table writes with vectors in flight=%0d",
             n_vectors, n_switch, n_scaled, n_unit_sat, n_post_sat, n_b2b, n_wr_inflight);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
