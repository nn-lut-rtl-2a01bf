// tb_nnlut_scale: self-checking test of the input scaling of the 1/sqrt path.
//
// Pre-scaler: inputs 0 < x < 1.0 (1.0 = 2**16) with scaling enabled must be
// multiplied by 2**10 and flagged; zero, negative, >= 1.0 and disabled cases
// must pass unchanged. Post-scaler: flagged outputs must be multiplied by 2**5
// and clipped to the 32-bit range, unflagged ones pass unchanged. Expected values
// are computed with 64-bit integer arithmetic in the testbench.
module tb_nnlut_scale;
  logic en, scaled, y_scaled, y_sat;
  logic signed [31:0] x_in, x_out, y_in, y_out;

  int checks = 0, failures = 0;
  int n_scaled = 0, n_sat = 0;

  nnlut_scale dut (.*);

  task automatic check_pre(logic e, logic signed [31:0] x);
    logic exp_scaled;
    longint exp_x;
    en = e; x_in = x; #1;
    exp_scaled = e && (x > 0) && (x < 65536);
    exp_x = exp_scaled ? longint'(x) * 1024 : longint'(x);
    checks++;
    if (scaled !== exp_scaled || longint'(x_out) != exp_x) begin
      failures++;
      $display("FAIL pre en=%0b x=%0d -> %0d/%0b, exp %0d/%0b", e, x, x_out, scaled, exp_x, exp_scaled);
    end
    if (exp_scaled) n_scaled++;
  endtask

  task automatic check_post(logic f, logic signed [31:0] y);
    longint w, exp_y;
    logic exp_sat;
    y_scaled = f; y_in = y; #1;
    w = f ? longint'(y) * 32 : longint'(y);
    exp_sat = 0;
    exp_y = w;
    if (w > 64'sd2147483647)  begin exp_y = 64'sd2147483647;  exp_sat = 1; end
    if (w < -64'sd2147483648) begin exp_y = -64'sd2147483648; exp_sat = 1; end
    checks++;
    if (longint'(y_out) != exp_y || y_sat !== exp_sat) begin
      failures++;
      $display("FAIL post f=%0b y=%0d -> %0d/%0b, exp %0d/%0b", f, y, y_out, y_sat, exp_y, exp_sat);
    end
    if (exp_sat) n_sat++;
  endtask

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    y_scaled = 0; y_in = 0;
    check_pre(1, 0); check_pre(1, 1); check_pre(1, 65535); check_pre(1, 65536);
    check_pre(1, -1); check_pre(0, 100); check_pre(1, 32'sh7fffffff); check_pre(1, 32'sh80000000);
    for (int i = 0; i < 500; i++) begin
      check_pre(1'($urandom), $signed($urandom_range(200000, 0)) - 50000);
      check_pre(1'($urandom), $urandom);
    end
    check_post(1, 32'sh03ffffff); check_post(1, 32'sh04000000); check_post(1, -32'sh04000000);
    check_post(1, -32'sh04000001); check_post(0, 32'sh7fffffff); check_post(1, 0);
    for (int i = 0; i < 500; i++) begin
      check_post(1'($urandom), $signed($urandom) >>> $urandom_range(8, 0));
    end
    checks++;
    if (n_scaled == 0 || n_sat == 0) begin
      failures++;
      $display("FAIL coverage scaled=%0d sat=%0d", n_scaled, n_sat);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
