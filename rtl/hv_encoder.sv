// hv_encoder -- encoding path of one sample: n features -> one sample HV.
//
// The normalised features of a sample arrive one per cycle on a valid/ready
// stream, feature 0 first. In the cycle feature j is accepted:
//   F_j = thermometer HV of the feature        (feature_hv_gen, combinational)
//   P_j = current state of the position chain  (position_hv_gen)
//   B_j = F_j XOR P_j                          (hv_bind)
// and B_j is added to the bundling counters (pop_threshold). The position
// chain steps once per feature, so P_0 is the seed and P_j the state after j
// steps; after the last feature it is reloaded with the seed, so every sample
// uses the same position HVs. The sample HV is the majority of the N_FEATURES
// bound HVs: bit k is 1 when more than floor(N/2) of them have a 1 there.
//
// Output: out_valid rises the cycle after the last feature and stays high,
// with out_hv and out_sb stable, until out_ready. out_sb is a sideband word
// (mode and label in the top) captured with the last feature. The next
// sample's first feature can be accepted in the cycle the output is taken.
// Timing: N_FEATURES cycles per sample at full rate, one more to hand over.
// The encoding chain follows the design; the stream handshake, the sideband
// and the reload of the seed per sample are this implementation's choice.
module hv_encoder #(
  parameter int unsigned D           = amshd_pkg::D_DEFAULT,
  parameter int unsigned N_FEATURES  = amshd_pkg::N_FEATURES_DEFAULT,
  parameter int unsigned FEAT_W      = amshd_pkg::FEAT_W_DEFAULT,
  parameter int unsigned TH_PERMILLE = amshd_pkg::TH_PERMILLE_DEFAULT,
  parameter int unsigned SB_W        = 1
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              f_valid,
  output logic              f_ready,
  input  logic [FEAT_W-1:0] f_data,
  input  logic [SB_W-1:0]   f_sb,
  output logic              out_valid,
  input  logic              out_ready,
  output logic [D-1:0]      out_hv,
  output logic [SB_W-1:0]   out_sb
);

  localparam int unsigned FI_W  = (N_FEATURES > 1) ? $clog2(N_FEATURES) : 1;
  localparam int unsigned CNT_W = $clog2(N_FEATURES + 1);
  localparam logic [FI_W-1:0]  LAST_F = FI_W'(N_FEATURES - 1);
  localparam logic [CNT_W-1:0] THR    = CNT_W'(N_FEATURES / 2);

  logic [FI_W-1:0] fidx;
  logic            accept;
  logic            last;
  logic [D-1:0]    feat_hv;
  logic [D-1:0]    pos_hv;
  logic [D-1:0]    bound_hv;

  assign f_ready = !out_valid || out_ready;
  assign accept  = f_valid && f_ready;
  assign last    = (fidx == LAST_F);

  feature_hv_gen #(.D(D), .FEAT_W(FEAT_W)) u_feat (
    .f (f_data),
    .hv(feat_hv)
  );

  position_hv_gen #(.D(D), .TH_PERMILLE(TH_PERMILLE)) u_pos (
    .clk  (clk),
    .rst_n(rst_n),
    .load (accept && last),
    .step (accept),
    .en   (1'b0),
    .hv   (pos_hv)
  );

  hv_bind #(.D(D)) u_bind (
    .a(feat_hv),
    .b(pos_hv),
    .y(bound_hv)
  );

  pop_threshold #(.D(D), .CNT_W(CNT_W)) u_bundle (
    .clk   (clk),
    .rst_n (rst_n),
    .clr   (accept && (fidx == '0)),
    .inc   (accept),
    .hv_in (bound_hv),
    .thr   (THR),
    .hv_out(out_hv)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      fidx      <= '0;
      out_valid <= 1'b0;
      out_sb    <= '0;
    end else begin
      if (out_valid && out_ready) out_valid <= 1'b0;
      if (accept) begin
        if (last) begin
          fidx      <= '0;
          out_valid <= 1'b1;
          out_sb    <= f_sb;
        end else begin
          fidx <= fidx + FI_W'(1);
        end
      end
    end
  end

  // A producer must hold its feature stable until it is accepted.
  logic              held_valid;
  logic [FEAT_W-1:0] held_data;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held_valid <= 1'b0;
      held_data  <= '0;
    end else begin
      held_valid <= f_valid && !f_ready;
      held_data  <= f_data;
      if (held_valid) begin
        assert (f_valid && f_data == held_data)
          else $error("hv_encoder: feature dropped or changed while stalled");
      end
    end
  end

endmodule
