// nnlut_sfu: NN-LUT special function unit, a vector of LANES NN-LUT lanes.
//
// In the target accelerator each compute engine produces one vector of 16
// output channels per cycle; a matching vector of special function lanes applies
// the non-linear operation (GELU, exp, reciprocal, 1/sqrt) to it at the same rate.
// Every lane here is an NN-LUT lane: input scaling, then the two-cycle
// comparator/LUT/multiply-add unit, then the output half of the scaling. All
// lanes read one shared programmable table, so switching the operation means
// rewriting 16 table entries; the lanes themselves never change.
//
// Interface:
//   cfg_*      one table write per cycle (entry address, s, t, lower breakpoint d)
//   in_valid   a vector of LANES signed samples in_x is presented
//   in_scale   apply the small-input scaling of 1/sqrt to this vector
//   out_valid  the results out_y appear exactly LATENCY = 2 cycles later;
//              out_sat flags lanes whose result was clipped, out_seg the segment used
// There is no back-pressure: a vector may enter every cycle. The shared table,
// the lane count of 16 (one lane per output channel) and the valid-only
// handshake are this implementation's choices; the lane datapath follows the
// published NN-LUT unit. Reset is synchronous, active low.
//
// Programming rule (asserted): the breakpoints must be in ascending order
// whenever a vector enters.
module nnlut_sfu #(
  parameter int unsigned LANES     = nnlut_pkg::DEF_LANES,
  parameter int unsigned N_ENTRIES = nnlut_pkg::DEF_N_ENTRIES,
  parameter int unsigned DATA_W    = nnlut_pkg::DEF_DATA_W,
  parameter int unsigned SFRAC     = nnlut_pkg::DEF_SFRAC,
  parameter int unsigned XFRAC     = nnlut_pkg::DEF_XFRAC,
  parameter int unsigned LOG2_S    = nnlut_pkg::DEF_LOG2_S,
  localparam int unsigned IDX_W    = $clog2(N_ENTRIES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  // table programming
  input  logic                     cfg_we,
  input  logic        [IDX_W-1:0]  cfg_addr,
  input  logic signed [DATA_W-1:0] cfg_s,
  input  logic signed [DATA_W-1:0] cfg_t,
  input  logic signed [DATA_W-1:0] cfg_d,
  // data in
  input  logic                     in_valid,
  input  logic                     in_scale,
  input  logic signed [DATA_W-1:0] in_x    [LANES],
  // data out
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] out_y   [LANES],
  output logic        [LANES-1:0]  out_sat,
  output logic        [IDX_W-1:0]  out_seg [LANES]
);

  logic signed [DATA_W-1:0] s_tab  [N_ENTRIES];
  logic signed [DATA_W-1:0] t_tab  [N_ENTRIES];
  logic signed [DATA_W-1:0] bp_tab [N_ENTRIES-1];

  nnlut_table #(.N_ENTRIES(N_ENTRIES), .DATA_W(DATA_W)) u_table (
    .clk     (clk),
    .rst_n   (rst_n),
    .wr_en   (cfg_we),
    .wr_addr (cfg_addr),
    .wr_s    (cfg_s),
    .wr_t    (cfg_t),
    .wr_d    (cfg_d),
    .s_tab   (s_tab),
    .t_tab   (t_tab),
    .bp_tab  (bp_tab)
  );

  logic [LANES-1:0] lane_valid;

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic signed [DATA_W-1:0] x_lut, y_lut;
    logic                     scaled, unit_sat, post_sat;
    logic [nnlut_pkg::LATENCY-1:0] scaled_pipe;  // follows the sample through the unit

    nnlut_scale #(.DATA_W(DATA_W), .XFRAC(XFRAC), .LOG2_S(LOG2_S)) u_scale (
      .en       (in_scale),
      .x_in     (in_x[l]),
      .x_out    (x_lut),
      .scaled   (scaled),
      .y_in     (y_lut),
      .y_scaled (scaled_pipe[nnlut_pkg::LATENCY-1]),
      .y_out    (out_y[l]),
      .y_sat    (post_sat)
    );

    nnlut_unit #(.N_ENTRIES(N_ENTRIES), .DATA_W(DATA_W), .SFRAC(SFRAC)) u_unit (
      .clk       (clk),
      .rst_n     (rst_n),
      .in_valid  (in_valid),
      .x         (x_lut),
      .s_tab     (s_tab),
      .t_tab     (t_tab),
      .bp_tab    (bp_tab),
      .out_valid (lane_valid[l]),
      .y         (y_lut),
      .sat       (unit_sat),
      .seg       (out_seg[l])
    );

    always_ff @(posedge clk) begin
      if (!rst_n) scaled_pipe <= '0;
      else        scaled_pipe <= {scaled_pipe[nnlut_pkg::LATENCY-2:0], in_valid && scaled};
    end

    assign out_sat[l] = unit_sat | post_sat;
  end

  // All lanes run in lock-step on the same in_valid, so their valid bits are equal.
  assign out_valid = &lane_valid;

  // Breakpoints must be sorted when data is processed, or the segment index is wrong.
  logic bp_sorted;
  always_comb begin
    bp_sorted = 1'b1;
    for (int k = 0; k + 1 < N_ENTRIES - 1; k++)
      if (bp_tab[k] > bp_tab[k+1]) bp_sorted = 1'b0;
  end

  a_bp_sorted: assert property (@(posedge clk) disable iff (!rst_n) in_valid |-> bp_sorted);

endmodule
