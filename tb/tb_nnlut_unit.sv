// tb_nnlut_unit: self-checking test of one NN-LUT lane (comparator, LUT, multiply-add).
//
// A random ascending breakpoint set and random (s, t) rows are presented; on some
// cycles the table is replaced by a new random one, to show that a sample uses
// the table present in its look-up cycle. Inputs arrive with random gaps, often
// back to back. For every accepted sample the testbench computes, with 64-bit
// integers, the segment by a top-down scan, y = floor(s*x / 2**24) + t and the
// clipping to 32 bits, and queues it with the cycle it must appear in: the output
// must come exactly 2 cycles after the input (the published latency). Large
// slopes are used in some phases so that clipping is exercised both ways.
module tb_nnlut_unit;
  localparam int N = 16;
  localparam int W = 32;
  localparam int SFRAC = 24;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0;
  logic signed [W-1:0] x = '0;
  logic signed [W-1:0] s_tab [N], t_tab [N], bp_tab [N-1];
  logic out_valid, sat;
  logic signed [W-1:0] y;
  logic [3:0] seg;

  typedef struct {
    longint y;
    bit     sat;
    int     seg;
    longint cycle;
  } exp_t;
  exp_t q[$];

  int checks = 0, failures = 0;
  int n_sat = 0, n_b2b = 0, n_reload = 0;
  bit seg_hit [N];
  longint cycle = 0;

  nnlut_unit dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic new_table(bit big);
    int signed acc;
    acc = -$signed($urandom_range(1 << 22, 0));
    for (int k = 0; k < N - 1; k++) begin
      acc += $signed($urandom_range(1 << 18, 1));
      bp_tab[k] = acc;
    end
    for (int k = 0; k < N; k++) begin
      s_tab[k] = big ? $urandom : ($signed($urandom) >>> 12);
      t_tab[k] = big ? $urandom : ($signed($urandom) >>> 4);
    end
  endtask

  function automatic exp_t model(logic signed [W-1:0] xv);
    exp_t e;
    int i;
    longint p;
    i = 0;
    for (int k = N - 2; k >= 0; k--) if (xv >= bp_tab[k]) begin i = k + 1; break; end
    p = (longint'(s_tab[i]) * longint'(xv)) >>> SFRAC;
    p = p + longint'(t_tab[i]);
    e.sat = 0;
    if (p > 64'sd2147483647)  begin p = 64'sd2147483647;  e.sat = 1; end
    if (p < -64'sd2147483648) begin p = -64'sd2147483648; e.sat = 1; end
    e.y = p;
    e.seg = i;
    return e;
  endfunction

  // output monitor
  always @(posedge clk) begin
    if (rst_n && out_valid) begin
      exp_t e;
      checks++;
      if (q.size() == 0) begin
        failures++;
        $display("FAIL unexpected output y=%0d", y);
      end else begin
        e = q.pop_front();
        if (longint'(y) != e.y || sat != e.sat || int'(seg) != e.seg || cycle != e.cycle) begin
          failures++;
          if (failures < 10)
            $display("FAIL y=%0d sat=%0b seg=%0d @%0d, exp y=%0d sat=%0b seg=%0d @%0d",
                     y, sat, seg, cycle, e.y, e.sat, e.seg, e.cycle);
        end
      end
    end
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    exp_t e;
    bit prev_valid;
    new_table(0);
    repeat (3) @(posedge clk);
    @(negedge clk) rst_n = 1;
    prev_valid = 0;
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      if ($urandom_range(15, 0) == 0) begin
        new_table(i >= 2500 && i < 3000);
        n_reload++;
      end
      in_valid = ($urandom_range(3, 0) != 0);
      if ($urandom_range(1, 0) == 1)
        x = bp_tab[$urandom_range(N - 2, 0)] + $signed($urandom_range(2, 0)) - 1;
      else
        x = bp_tab[0] - (1 << 18) + $signed($urandom_range(bp_tab[N-2] - bp_tab[0] + (1 << 19), 0));
      if (i >= 3000 && i < 3100) x = $urandom;
      if (in_valid) begin
        e = model(x);
        e.cycle = cycle + 2;
        q.push_back(e);
        if (e.sat) n_sat++;
        if (prev_valid) n_b2b++;
        seg_hit[e.seg] = 1;
      end
      prev_valid = in_valid;
    end
    @(negedge clk) in_valid = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (q.size() != 0) begin failures++; $display("FAIL %0d outputs missing", q.size()); end
    for (int k = 0; k < N; k++) begin
      checks++;
      if (!seg_hit[k]) begin failures++; $display("FAIL segment %0d never used", k); end
    end
    checks++;
    if (n_sat == 0 || n_b2b == 0 || n_reload == 0) begin
      failures++;
      $display("FAIL coverage sat=%0d back-to-back=%0d reload=%0d", n_sat, n_b2b, n_reload);
    end
    $display("coverage: saturations=%0d back-to-back=%0d table reloads=%0d", n_sat, n_b2b, n_reload);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
