// tb_nnlut_table: self-checking test of the NN-LUT parameter table.
//
// Checks that reset clears every entry, that a write to entry k lands in s_k,
// t_k and (for k > 0) breakpoint d_k one cycle later, that the breakpoint of a
// write to entry 0 is discarded, and that writes do not disturb other entries.
// A shadow copy kept by the testbench is the reference.
module tb_nnlut_table;
  localparam int N = 16;
  localparam int W = 32;

  logic clk = 0, rst_n = 0;
  logic wr_en = 0;
  logic [3:0] wr_addr = '0;
  logic signed [W-1:0] wr_s = '0, wr_t = '0, wr_d = '0;
  logic signed [W-1:0] s_tab [N], t_tab [N], bp_tab [N-1];
  logic signed [W-1:0] s_ref [N], t_ref [N], bp_ref [N-1];

  int checks = 0, failures = 0;

  nnlut_table dut (.*);

  always #5 clk = ~clk;

  task automatic compare_all(string tag);
    for (int k = 0; k < N; k++) begin
      checks += 2;
      if (s_tab[k] != s_ref[k]) begin failures++; $display("FAIL %s s[%0d]", tag, k); end
      if (t_tab[k] != t_ref[k]) begin failures++; $display("FAIL %s t[%0d]", tag, k); end
    end
    for (int k = 0; k < N - 1; k++) begin
      checks++;
      if (bp_tab[k] != bp_ref[k]) begin failures++; $display("FAIL %s d[%0d]", tag, k + 1); end
    end
  endtask

  task automatic clear_ref();
    for (int k = 0; k < N; k++) begin s_ref[k] = 0; t_ref[k] = 0; end
    for (int k = 0; k < N - 1; k++) bp_ref[k] = 0;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear_ref();
    repeat (2) @(posedge clk);
    #1 compare_all("reset");
    rst_n = 1;
    for (int i = 0; i < 400; i++) begin
      @(negedge clk);
      wr_en   = ($urandom_range(3, 0) != 0);
      wr_addr = 4'($urandom_range(N - 1, 0));
      wr_s    = $urandom; wr_t = $urandom; wr_d = $urandom;
      @(posedge clk); #1;
      if (wr_en) begin
        s_ref[wr_addr] = wr_s;
        t_ref[wr_addr] = wr_t;
        if (wr_addr != 0) bp_ref[wr_addr - 1] = wr_d;
      end
      compare_all("write");
    end
    @(negedge clk); wr_en = 0; rst_n = 0;
    @(posedge clk); #1;
    clear_ref();
    compare_all("reset2");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
