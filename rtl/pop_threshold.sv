// pop_threshold -- bundling unit: per-dimension population counters (POP++)
// followed by a threshold check.
//
// Every dimension k owns a CNT_W-bit up-counter. Each cycle with inc high the
// HV on hv_in is added: counter k increments where hv_in[k] is 1. After the
// last HV the counters hold, per dimension, how many of the bundled HVs had a
// one there; the threshold stage turns them back into a binary HV:
//   hv_out[k] = cnt[k] > thr
// With thr = floor(N/2) for N bundled HVs this is the majority (the "sign" of
// the bipolar sum); a tie of an even N gives 0.
//
// clr empties the counters; clr together with inc starts a new bundle with
// hv_in as its first member, so back-to-back bundles lose no cycle. Counters
// saturate at their maximum instead of wrapping.
// Timing: hv_out is combinational from the counters, so it is valid the cycle
// after the last inc.
// The counters and the threshold come from the design; saturation, the tie
// rule and the clr/inc controls are this implementation's choice.
module pop_threshold #(
  parameter int unsigned D     = amshd_pkg::D_DEFAULT,
  parameter int unsigned CNT_W = 3
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             clr,
  input  logic             inc,
  input  logic [D-1:0]     hv_in,
  input  logic [CNT_W-1:0] thr,
  output logic [D-1:0]     hv_out
);

  logic [CNT_W-1:0] cnt [D];

  for (genvar k = 0; k < D; k++) begin : g_dim
    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        cnt[k] <= '0;
      end else if (clr) begin
        cnt[k] <= (inc && hv_in[k]) ? CNT_W'(1) : '0;
      end else if (inc && hv_in[k] && (cnt[k] != '1)) begin
        cnt[k] <= cnt[k] + CNT_W'(1);
      end
    end
    assign hv_out[k] = cnt[k] > thr;
  end

endmodule
