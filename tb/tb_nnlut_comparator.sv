// tb_nnlut_comparator: self-checking test of the NN-LUT segment comparator.
//
// Two instances are tested, the default 32-bit/16-entry one and a 16-bit one.
// For each trial a random ascending set of breakpoints is drawn and inputs are
// chosen at random, exactly on breakpoints, one below them and at the extremes.
// The expected segment is found by scanning the breakpoints from the top down
// for the first one not above x, independently of the thermometer count in the
// design.
module tb_nnlut_comparator;
  localparam int N = 16;

  logic signed [31:0] x32;
  logic signed [31:0] bp32 [N-1];
  logic        [3:0]  idx32;
  logic signed [15:0] x16;
  logic signed [15:0] bp16 [N-1];
  logic        [3:0]  idx16;

  int checks = 0, failures = 0;

  nnlut_comparator dut32 (.x(x32), .bp(bp32), .idx(idx32));
  nnlut_comparator #(.N_ENTRIES(N), .DATA_W(16)) dut16 (.x(x16), .bp(bp16), .idx(idx16));

  function automatic int ref_idx32(logic signed [31:0] x);
    for (int k = N - 2; k >= 0; k--) if (x >= bp32[k]) return k + 1;
    return 0;
  endfunction
  function automatic int ref_idx16(logic signed [15:0] x);
    for (int k = N - 2; k >= 0; k--) if (x >= bp16[k]) return k + 1;
    return 0;
  endfunction

  task automatic check32(logic signed [31:0] x);
    x32 = x; #1;
    checks++;
    if (int'(idx32) != ref_idx32(x)) begin
      failures++;
      if (failures < 10) $display("FAIL 32-bit x=%0d idx=%0d exp=%0d", x, idx32, ref_idx32(x));
    end
  endtask
  task automatic check16(logic signed [15:0] x);
    x16 = x; #1;
    checks++;
    if (int'(idx16) != ref_idx16(x)) begin
      failures++;
      if (failures < 10) $display("FAIL 16-bit x=%0d idx=%0d exp=%0d", x, idx16, ref_idx16(x));
    end
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int signed acc32, acc16, lo32, lo16;
    for (int trial = 0; trial < 50; trial++) begin
      // ascending breakpoints with random gaps; the first one may be negative
      acc32 = -$signed($urandom_range(1 << 20, 0));
      acc16 = -$signed($urandom_range(2000, 0));
      for (int k = 0; k < N - 1; k++) begin
        acc32 += $signed($urandom_range(1 << 16, 1));
        acc16 += $signed($urandom_range(200, 1));
        bp32[k] = acc32;
        bp16[k] = 16'(acc16);
      end
      for (int k = 0; k < N - 1; k++) begin
        check32(bp32[k]); check32(bp32[k] - 1);
        check16(bp16[k]); check16(bp16[k] - 16'sd1);
      end
      lo32 = bp32[0] - 1000;
      lo16 = int'(bp16[0]) - 100;
      for (int r = 0; r < 40; r++) begin
        check32(lo32 + $signed($urandom_range(acc32 - lo32 + 1000, 0)));
        check16(16'(lo16 + $signed($urandom_range(acc16 - lo16 + 100, 0))));
      end
      check32(32'sh7fffffff); check32(32'sh80000000);
      check16(16'sh7fff);     check16(16'sh8000);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
