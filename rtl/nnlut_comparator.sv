// nnlut_comparator: segment index of the NN-LUT.
//
// Compares a signed input x with the N_ENTRIES-1 breakpoints d_1..d_{N-1} of the
// loaded table (ascending) and returns the 0-based index of the segment holding x:
// 0 if x < d_1, k if d_k <= x < d_{k+1}, N_ENTRIES-1 if x >= d_{N-1}. This is the
// selection rule of the piece-wise linear table in the published method.
//
// How it works: one signed ">=" comparator per breakpoint runs in parallel; for
// sorted breakpoints their outputs form a thermometer code, and the index is the
// number of comparators that fire. The thermometer-count encoder is this
// implementation's choice; the source only shows one comparator per breakpoint.
//
// Timing: purely combinational; in nnlut_unit it sits in the first (look-up) cycle.
module nnlut_comparator #(
  parameter int unsigned N_ENTRIES = nnlut_pkg::DEF_N_ENTRIES,
  parameter int unsigned DATA_W    = nnlut_pkg::DEF_DATA_W,
  localparam int unsigned IDX_W    = $clog2(N_ENTRIES)
) (
  input  logic signed [DATA_W-1:0] x,
  input  logic signed [DATA_W-1:0] bp [N_ENTRIES-1],  // bp[k] is d_{k+1}
  output logic        [IDX_W-1:0]  idx
);

  logic [N_ENTRIES-2:0] ge;  // thermometer code: ge[k] = (x >= d_{k+1})

  always_comb begin
    for (int k = 0; k < N_ENTRIES - 1; k++) ge[k] = (x >= bp[k]);
  end

  always_comb begin
    idx = '0;
    for (int k = 0; k < N_ENTRIES - 1; k++) idx = idx + IDX_W'(ge[k]);
  end

endmodule
