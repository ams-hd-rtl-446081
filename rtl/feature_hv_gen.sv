// feature_hv_gen -- thermometer (unary) feature hypervector generator.
//
// A normalised feature value f in [0,1) is compared with each level of the set
// {0, 1/D, 2/D, ..., (D-1)/D}; bit k of the output HV is 1 when f > k/D. A
// larger value therefore sets a longer run of ones from bit 0 upward, and two
// close values give HVs at a small Hamming distance. The D comparators are
// purely combinational, so one complete HV is available in the cycle the
// feature is presented (n features take n cycles in the encoder).
//
// Interface: f is an unsigned fraction of FEAT_W bits, f = f_code / 2**FEAT_W.
// The comparison f > k/D is done exactly as f_code * D > k * 2**FEAT_W.
// The comparator array and the "f > k/D" rule follow the design; the
// fixed-point format of f is this implementation's choice.
module feature_hv_gen #(
  parameter int unsigned D      = amshd_pkg::D_DEFAULT,
  parameter int unsigned FEAT_W = amshd_pkg::FEAT_W_DEFAULT
) (
  input  logic [FEAT_W-1:0] f,
  output logic [D-1:0]      hv
);

  localparam int unsigned PW = FEAT_W + $clog2(D + 1) + 1;

  logic [PW-1:0] f_scaled;
  assign f_scaled = PW'(f) * PW'(D);

  for (genvar k = 0; k < D; k++) begin : g_cmp
    localparam logic [PW-1:0] LEVEL = PW'(k) << FEAT_W;
    assign hv[k] = f_scaled > LEVEL;
  end

endmodule
