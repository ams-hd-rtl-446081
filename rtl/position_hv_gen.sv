// position_hv_gen -- position hypervector generator (pseudo-LFSR / MISR).
//
// D flip-flops FF_0..FF_{D-1} form a shift chain. The output of the last
// stage, FF_{D-1}, is fed back to every stage through the feedback mask logic:
// where mask bit k is 1 the feedback is XORed into the value entering FF_k,
// where it is 0 the previous stage passes through unchanged. Stage 0 also XORs
// in the serial input en, drawn as "EN" in the design's schematic:
//   next[0] = en ^ (mask[0] & q[D-1])
//   next[k] = q[k-1] ^ (mask[k] & q[D-1])      k = 1..D-1
// Each step yields a new D-bit position HV, so M positions take M cycles.
//
// The initial seed and the feedback mask are deterministic D-bit patterns
// derived from Sobol sequences (amshd_pkg::seed_bit / mask_bit with the
// threshold TH_PERMILLE). The register is loaded with the seed at reset and
// whenever load is high; it advances when step is high (load wins).
// The structure follows the design; the load/step controls, the use of en as
// a serial data input and the Sobol-to-bit mapping are this implementation's
// choice.
//
// Timing: hv is the register output; after load, hv = seed; after each step
// the next state appears on hv one clock later.
module position_hv_gen #(
  parameter int unsigned D           = amshd_pkg::D_DEFAULT,
  parameter int unsigned TH_PERMILLE = amshd_pkg::TH_PERMILLE_DEFAULT
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         load,
  input  logic         step,
  input  logic         en,
  output logic [D-1:0] hv
);

  logic [D-1:0] mask;
  logic [D-1:0] seed;
  logic [D-1:0] q;
  logic [D-1:0] nxt;

  for (genvar k = 0; k < D; k++) begin : g_pattern
    localparam bit MB = amshd_pkg::mask_bit(k, TH_PERMILLE);
    localparam bit SB = amshd_pkg::seed_bit(k, TH_PERMILLE);
    assign mask[k] = MB;
    assign seed[k] = SB;
  end

  // Feedback mask logic and XOR stages.
  assign nxt[0] = en ^ (mask[0] & q[D-1]);
  for (genvar k = 1; k < D; k++) begin : g_stage
    assign nxt[k] = q[k-1] ^ (mask[k] & q[D-1]);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)    q <= seed;
    else if (load) q <= seed;
    else if (step) q <= nxt;
  end

  assign hv = q;

endmodule
