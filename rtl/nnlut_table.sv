// nnlut_table: the programmable look-up table of the NN-LUT unit.
//
// Holds the approximation parameters (s_k, t_k) of the N_ENTRIES segments and the
// N_ENTRIES-1 breakpoints d_1..d_{N-1} of the non-linear function currently in
// use. The same hardware serves every function: GELU, exp, division and 1/sqrt
// differ only in these contents, which come from a one-hidden-layer ReLU network
// trained offline and folded into the table (d = -b/n sorted, s and t summed per
// interval).
//
// Interface: one write per cycle. A write to entry k stores s_k, t_k and the
// lower breakpoint of entry k, d_k (ignored for k = 0, whose lower bound is minus
// infinity). All contents are read in parallel, so every lane of the special
// function unit can use the table at once. The write format and the flip-flop
// storage are this implementation's choices.
//
// Timing: a write in cycle c is visible at the outputs from cycle c+1. Reset
// (synchronous, active low) clears the table.
module nnlut_table #(
  parameter int unsigned N_ENTRIES = nnlut_pkg::DEF_N_ENTRIES,
  parameter int unsigned DATA_W    = nnlut_pkg::DEF_DATA_W,
  localparam int unsigned IDX_W    = $clog2(N_ENTRIES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     wr_en,
  input  logic        [IDX_W-1:0]  wr_addr,
  input  logic signed [DATA_W-1:0] wr_s,
  input  logic signed [DATA_W-1:0] wr_t,
  input  logic signed [DATA_W-1:0] wr_d,
  output logic signed [DATA_W-1:0] s_tab  [N_ENTRIES],
  output logic signed [DATA_W-1:0] t_tab  [N_ENTRIES],
  output logic signed [DATA_W-1:0] bp_tab [N_ENTRIES-1]
);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      for (int k = 0; k < N_ENTRIES; k++) begin
        s_tab[k] <= '0;
        t_tab[k] <= '0;
      end
      for (int k = 0; k < N_ENTRIES - 1; k++) bp_tab[k] <= '0;
    end else if (wr_en) begin
      s_tab[wr_addr] <= wr_s;
      t_tab[wr_addr] <= wr_t;
      if (wr_addr != '0) bp_tab[wr_addr - IDX_W'(1)] <= wr_d;
    end
  end

  // A write must name an existing entry (matters when N_ENTRIES is not a power of two).
  a_wr_addr_in_range: assert property (@(posedge clk) disable iff (!rst_n)
    wr_en |-> (32'(wr_addr) < N_ENTRIES));

endmodule
