// amshd_top -- AMS-HD binary hyperdimensional classifier (FPGA fabric part).
//
// Detects acute mountain sickness from a few normalised physiological
// features (SpO2, heart rate, event and time stage by default). Each sample is
// encoded into a D-bit hypervector: every feature is turned into a
// thermometer HV, bound (XOR) with the position HV of its slot and the bound
// HVs are bundled by per-dimension counters and a majority threshold. In
// training mode the sample HV is accumulated into its class's counters; a
// commit thresholds them into binary class HVs held in the class memory. In
// inference mode the sample HV is compared with every class HV by Hamming
// distance and the nearest class is the prediction; class 0 is "No AMS", any
// other class drives the AMS indicator LED.
//
// Interface (plain signals; the host processor and the processor-to-fabric
// link that normalise the features and feed these ports are outside):
//   s_valid/s_ready/s_feature  feature stream, N_FEATURES beats per sample,
//                              feature 0 first; s_mode and s_label must be
//                              valid on the last beat of the sample
//   cmd_clear, cmd_commit      start a new model / write the class HVs
//   train_busy                 a commit is in progress
//   result_valid/_class/_dist  one-cycle result of an inference
//   ams_led                    last inference predicted a class other than 0
// Timing at full rate: the result of an inference appears
// N_FEATURES + NUM_CLASSES + clog2(D) + 2 clock edges after the edge that
// accepts its first feature (16 at the defaults); a training sample takes
// N_FEATURES cycles; a commit takes NUM_CLASSES cycles. Inference waits while
// a commit runs so it never reads a half-written model.
// The datapath follows the design; the stream and command interface, the
// sequencing and the LED rule for more than two classes are this
// implementation's choice.
module amshd_top
  import amshd_pkg::*;
#(
  parameter int unsigned D            = D_DEFAULT,
  parameter int unsigned N_FEATURES   = N_FEATURES_DEFAULT,
  parameter int unsigned FEAT_W       = FEAT_W_DEFAULT,
  parameter int unsigned NUM_CLASSES  = NUM_CLASSES_DEFAULT,
  parameter int unsigned TH_PERMILLE  = TH_PERMILLE_DEFAULT,
  parameter int unsigned SAMPLE_CNT_W = SAMPLE_CNT_W_DEFAULT,
  localparam int unsigned AW          = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int unsigned CW          = $clog2(D + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              s_valid,
  output logic              s_ready,
  input  logic [FEAT_W-1:0] s_feature,
  input  mode_e             s_mode,
  input  logic [AW-1:0]     s_label,
  input  logic              cmd_clear,
  input  logic              cmd_commit,
  output logic              train_busy,
  output logic              result_valid,
  output logic [AW-1:0]     result_class,
  output logic [CW-1:0]     result_dist,
  output logic              ams_led
);

  typedef struct packed {
    mode_e         mode;
    logic [AW-1:0] label;
  } sample_sb_t;

  sample_sb_t    in_sb;
  sample_sb_t    enc_sb;
  logic          enc_valid;
  logic          enc_ready;
  logic [D-1:0]  enc_hv;

  logic          sim_ready;
  logic          sim_start;
  logic          trn_take;

  logic          mem_we;
  logic [AW-1:0] mem_waddr;
  logic [D-1:0]  mem_wdata;
  logic          mem_re;
  logic [AW-1:0] mem_raddr;
  logic [D-1:0]  mem_rdata;

  assign in_sb.mode  = s_mode;
  assign in_sb.label = s_label;

  hv_encoder #(
    .D(D), .N_FEATURES(N_FEATURES), .FEAT_W(FEAT_W),
    .TH_PERMILLE(TH_PERMILLE), .SB_W($bits(sample_sb_t))
  ) u_encoder (
    .clk      (clk),
    .rst_n    (rst_n),
    .f_valid  (s_valid),
    .f_ready  (s_ready),
    .f_data   (s_feature),
    .f_sb     (in_sb),
    .out_valid(enc_valid),
    .out_ready(enc_ready),
    .out_hv   (enc_hv),
    .out_sb   (enc_sb)
  );

  // Route the sample HV: training samples to the class counters, queries to
  // the similarity search once no commit is running.
  assign trn_take  = enc_valid && (enc_sb.mode == MODE_TRAIN) && !train_busy && !cmd_clear;
  assign sim_start = enc_valid && (enc_sb.mode == MODE_INFER) && sim_ready && !train_busy;
  assign enc_ready = trn_take || sim_start;

  class_trainer #(
    .D(D), .NUM_CLASSES(NUM_CLASSES), .SAMPLE_CNT_W(SAMPLE_CNT_W)
  ) u_trainer (
    .clk      (clk),
    .rst_n    (rst_n),
    .clr      (cmd_clear),
    .in_valid (trn_take),
    .in_hv    (enc_hv),
    .in_label (enc_sb.label),
    .commit   (cmd_commit),
    .busy     (train_busy),
    .mem_we   (mem_we),
    .mem_waddr(mem_waddr),
    .mem_wdata(mem_wdata)
  );

  class_memory #(.D(D), .NUM_CLASSES(NUM_CLASSES)) u_class_mem (
    .clk  (clk),
    .rst_n(rst_n),
    .we   (mem_we),
    .waddr(mem_waddr),
    .wdata(mem_wdata),
    .re   (mem_re),
    .raddr(mem_raddr),
    .rdata(mem_rdata)
  );

  similarity_search #(.D(D), .NUM_CLASSES(NUM_CLASSES)) u_search (
    .clk         (clk),
    .rst_n       (rst_n),
    .start       (sim_start),
    .query       (enc_hv),
    .ready       (sim_ready),
    .mem_re      (mem_re),
    .mem_raddr   (mem_raddr),
    .mem_rdata   (mem_rdata),
    .result_valid(result_valid),
    .result_class(result_class),
    .result_dist (result_dist)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)            ams_led <= 1'b0;
    else if (result_valid) ams_led <= (result_class != '0);
  end

endmodule
