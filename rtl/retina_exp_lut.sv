// Square-and-exponential unit of a Retina cell: weight = 255*exp(-D^2/(2 sigma^2)).
//
// The paper computes this one-input, one-output function with a lookup table
// (block or distributed RAM). Here the table holds LUT_DEPTH entries of the
// Gaussian sampled every sigma/16; the address is |D| shifted right by
// sigma_shift and saturated at the last entry, so sigma = 2^sigma_shift/4 crad
// with D in 1/64 crad. The table contents are computed at elaboration by
// retina_pkg::gauss_weight. Purely combinational; the enclosing cell
// registers the result.
module retina_exp_lut
  import retina_pkg::*;
#(
  parameter int unsigned D_W = THETA_W + 2
) (
  input  logic signed [D_W-1:0] d_in,
  input  logic [3:0]            sigma_shift,
  output weight_t               weight
);

  localparam int unsigned IDX_W = LUT_AW;

  logic [D_W-1:0] mag;
  logic [D_W-1:0] scaled;
  logic [IDX_W-1:0] idx;

  always_comb begin
    mag    = d_in[D_W-1] ? D_W'(-d_in) : D_W'(d_in);
    scaled = mag >> sigma_shift;
    idx    = (scaled > D_W'(LUT_DEPTH - 1)) ? IDX_W'(LUT_DEPTH - 1) : scaled[IDX_W-1:0];
  end

  localparam lut_t TABLE = gauss_table();

  assign weight = TABLE[idx];

endmodule
