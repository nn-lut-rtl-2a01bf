// nnlut_scale: input scaling for wide-range functions (used for 1/sqrt of LayerNorm).
//
// 1/sqrt(x) grows steeply for 0 < x < 1, which a 16-segment table fits badly. The
// table is therefore trained for x >= 1 only; a small input is multiplied by
// S = 2**LOG2_S before the look-up, and the table output is multiplied by
// sqrt(S) = 2**(LOG2_S/2) after it, since 1/sqrt(x) = sqrt(S) / sqrt(S*x). With
// S a power of two both are shifts. The scale S = 2**10 follows the published
// method; 1.0 being 2**XFRAC in the input format, and clipping of the output
// shift, are this implementation's choices.
//
// Interface: two independent combinational halves. The pre-scaler (en, x_in ->
// x_out, scaled) acts on x in the cycle it enters the LUT lane; the caller
// delays `scaled` by the lane latency and feeds it back as y_scaled together with
// the lane output y_in, giving y_out and the clip flag y_sat. No clock.
module nnlut_scale #(
  parameter int unsigned DATA_W = nnlut_pkg::DEF_DATA_W,
  parameter int unsigned XFRAC  = nnlut_pkg::DEF_XFRAC,
  parameter int unsigned LOG2_S = nnlut_pkg::DEF_LOG2_S
) (
  input  logic                     en,
  input  logic signed [DATA_W-1:0] x_in,
  output logic signed [DATA_W-1:0] x_out,
  output logic                     scaled,
  input  logic signed [DATA_W-1:0] y_in,
  input  logic                     y_scaled,
  output logic signed [DATA_W-1:0] y_out,
  output logic                     y_sat
);

  localparam int unsigned YSH = LOG2_S / 2;
  localparam logic signed [DATA_W-1:0] ONE  = DATA_W'(1) << XFRAC;
  localparam logic signed [DATA_W-1:0] YMAX = {1'b0, {(DATA_W-1){1'b1}}};
  localparam logic signed [DATA_W-1:0] YMIN = {1'b1, {(DATA_W-1){1'b0}}};

  // A scaled input (< 2**XFRAC) must not overflow, and sqrt(S) must be a power of two.
  initial begin
    assert (XFRAC + LOG2_S <= DATA_W - 2)
      else $error("nnlut_scale: XFRAC + LOG2_S must be at most DATA_W-2");
    assert (LOG2_S % 2 == 0)
      else $error("nnlut_scale: LOG2_S must be even");
  end

  always_comb begin
    scaled = en && (x_in > 0) && (x_in < ONE);
    x_out  = scaled ? (x_in <<< LOG2_S) : x_in;
  end

  logic signed [DATA_W+YSH-1:0] y_wide;

  always_comb begin
    y_wide = (DATA_W+YSH)'(y_in) <<< YSH;
    y_sat  = 1'b0;
    y_out  = y_in;
    if (y_scaled) begin
      if (y_wide > (DATA_W+YSH)'(YMAX)) begin
        y_out = YMAX;
        y_sat = 1'b1;
      end else if (y_wide < (DATA_W+YSH)'(YMIN)) begin
        y_out = YMIN;
        y_sat = 1'b1;
      end else begin
        y_out = y_wide[DATA_W-1:0];
      end
    end
  end

endmodule
