// popcount_pipe -- pipelined population count of a D-bit vector.
//
// A binary adder tree: the D input bits (padded with zeros to the next power
// of two) are summed pairwise, one tree level per clock, so the count of a
// vector presented with in_valid appears on out_count with out_valid
// LEVELS = clog2(D) cycles later. A new vector can enter every cycle. A tag
// travels with each vector so that the consumer knows what the count belongs
// to (the similarity search uses it for the class index).
// The pipelined popcount follows the design; one register per tree level and
// the tag are this implementation's choice.
module popcount_pipe #(
  parameter int unsigned D     = amshd_pkg::D_DEFAULT,
  parameter int unsigned TAG_W = 1,
  localparam int unsigned LEVELS = (D > 1) ? $clog2(D) : 1,
  localparam int unsigned CW     = $clog2(D + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic [D-1:0]     in_vec,
  input  logic [TAG_W-1:0] in_tag,
  output logic             out_valid,
  output logic [CW-1:0]    out_count,
  output logic [TAG_W-1:0] out_tag
);

  localparam int unsigned P2 = 1 << LEVELS;

  // node[l][i]: i-th partial sum after l tree levels (level 0 = input bits).
  logic [CW-1:0]    node  [LEVELS+1][P2];
  logic             vld   [LEVELS+1];
  logic [TAG_W-1:0] tag   [LEVELS+1];

  for (genvar i = 0; i < P2; i++) begin : g_leaf
    if (i < D) begin : g_bit
      assign node[0][i] = CW'(in_vec[i]);
    end else begin : g_pad
      assign node[0][i] = '0;
    end
  end
  assign vld[0] = in_valid;
  assign tag[0] = in_tag;

  for (genvar l = 1; l <= LEVELS; l++) begin : g_level
    for (genvar i = 0; i < (P2 >> l); i++) begin : g_add
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) node[l][i] <= '0;
        else        node[l][i] <= node[l-1][2*i] + node[l-1][2*i+1];
      end
    end
    // Unused upper slots of this level.
    for (genvar i = (P2 >> l); i < P2; i++) begin : g_zero
      assign node[l][i] = '0;
    end
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        vld[l] <= 1'b0;
        tag[l] <= '0;
      end else begin
        vld[l] <= vld[l-1];
        tag[l] <= tag[l-1];
      end
    end
  end

  assign out_valid = vld[LEVELS];
  assign out_count = node[LEVELS][0];
  assign out_tag   = tag[LEVELS];

endmodule
