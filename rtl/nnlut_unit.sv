// nnlut_unit: one NN-LUT arithmetic lane, y = s_i * x + t_i.
//
// Cycle 1 (look-up): the comparator finds the segment i of x among the sorted
// breakpoints, the table row (s_i, t_i) is selected, and x, s_i, t_i are captured
// in reg0, reg1 and reg2. Cycle 2 (compute): one multiplier and one adder form
// s_i*x + t_i, captured in reg3. This register placement and the two-cycle
// latency follow the published NN-LUT arithmetic unit; one sample is accepted
// every cycle.
//
// Number format (this implementation's choice): x, t and y are signed DATA_W-bit
// integers on one common scale; s has SFRAC fractional bits. The full 2*DATA_W-bit
// product is shifted right arithmetically by SFRAC (floor), t is added, and the
// sum is clipped to the DATA_W range; `sat` flags a clipped result.
//
// Interface: a valid bit travels with the data, there is no back-pressure.
// out_valid/y/sat/seg appear LATENCY = 2 cycles after in_valid/x. `seg` is the
// segment index used for the sample. Table inputs are read in the look-up cycle
// only, so reloading the table does not disturb samples already in flight.
// Reset (synchronous, active low) clears the pipeline.
module nnlut_unit #(
  parameter int unsigned N_ENTRIES = nnlut_pkg::DEF_N_ENTRIES,
  parameter int unsigned DATA_W    = nnlut_pkg::DEF_DATA_W,
  parameter int unsigned SFRAC     = nnlut_pkg::DEF_SFRAC,
  localparam int unsigned IDX_W    = $clog2(N_ENTRIES)
) (
  input  logic                     clk,
  input  logic                     rst_n,
  input  logic                     in_valid,
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [DATA_W-1:0] s_tab  [N_ENTRIES],
  input  logic signed [DATA_W-1:0] t_tab  [N_ENTRIES],
  input  logic signed [DATA_W-1:0] bp_tab [N_ENTRIES-1],
  output logic                     out_valid,
  output logic signed [DATA_W-1:0] y,
  output logic                     sat,
  output logic        [IDX_W-1:0]  seg
);

  localparam int unsigned PW = 2 * DATA_W;  // product width
  localparam logic signed [PW:0] YMAX = (PW+1)'({1'b0, {(DATA_W-1){1'b1}}});
  localparam logic signed [PW:0] YMIN = -YMAX - 1;

  // ---- cycle 1: index check and look-up -------------------------------------
  logic [IDX_W-1:0] idx;

  nnlut_comparator #(.N_ENTRIES(N_ENTRIES), .DATA_W(DATA_W)) u_cmp (
    .x   (x),
    .bp  (bp_tab),
    .idx (idx)
  );

  logic                     v1;
  logic signed [DATA_W-1:0] x_q;    // reg0
  logic signed [DATA_W-1:0] s_q;    // reg1
  logic signed [DATA_W-1:0] t_q;    // reg2
  logic        [IDX_W-1:0]  seg_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      v1    <= 1'b0;
      x_q   <= '0;
      s_q   <= '0;
      t_q   <= '0;
      seg_q <= '0;
    end else begin
      v1 <= in_valid;
      if (in_valid) begin
        x_q   <= x;
        s_q   <= s_tab[idx];
        t_q   <= t_tab[idx];
        seg_q <= idx;
      end
    end
  end

  // ---- cycle 2: multiply and add ---------------------------------------------
  logic signed [PW-1:0] prod;
  logic signed [PW:0]   sum;

  always_comb begin
    prod = PW'(s_q) * PW'(x_q);
    sum  = (PW+1)'(prod >>> SFRAC) + (PW+1)'(t_q);
  end

  always_ff @(posedge clk) begin       // reg3
    if (!rst_n) begin
      out_valid <= 1'b0;
      y         <= '0;
      sat       <= 1'b0;
      seg       <= '0;
    end else begin
      out_valid <= v1;
      if (v1) begin
        seg <= seg_q;
        if (sum > YMAX) begin
          y   <= YMAX[DATA_W-1:0];
          sat <= 1'b1;
        end else if (sum < YMIN) begin
          y   <= YMIN[DATA_W-1:0];
          sat <= 1'b1;
        end else begin
          y   <= sum[DATA_W-1:0];
          sat <= 1'b0;
        end
      end
    end
  end

endmodule
