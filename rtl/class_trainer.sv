// class_trainer -- accumulative (single/few-shot) learning of the class HVs.
//
// Every class owns a bundling unit (pop_threshold) with SAMPLE_CNT_W-bit
// per-dimension counters and a count of the samples it has seen. A training
// sample HV with its label is added to that class's counters in one cycle.
// On commit the class HVs are formed by the threshold stage, bit k of class c
// being 1 when more than half of the class's samples had a 1 there
// (cnt > floor(n_c / 2)); with a single sample the class HV is that sample.
// The class HVs are then written into the class memory, one class per cycle,
// so a commit takes NUM_CLASSES cycles with busy high. clr empties all
// counters and sample counts and starts a new model.
//
// Interface: in_valid/in_hv/in_label are taken when busy is low. commit and
// clr are single-cycle commands taken when busy is low (clr wins over
// in_valid and commit).
// Counting and thresholding follow the design; the majority threshold, the
// commit command and the class-serial write are this implementation's choice.
module class_trainer #(
  parameter int unsigned D            = amshd_pkg::D_DEFAULT,
  parameter int unsigned NUM_CLASSES  = amshd_pkg::NUM_CLASSES_DEFAULT,
  parameter int unsigned SAMPLE_CNT_W = amshd_pkg::SAMPLE_CNT_W_DEFAULT,
  localparam int unsigned AW          = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clr,
  input  logic          in_valid,
  input  logic [D-1:0]  in_hv,
  input  logic [AW-1:0] in_label,
  input  logic          commit,
  output logic          busy,
  output logic          mem_we,
  output logic [AW-1:0] mem_waddr,
  output logic [D-1:0]  mem_wdata
);

  localparam logic [AW-1:0] LAST = AW'(NUM_CLASSES - 1);

  logic [SAMPLE_CNT_W-1:0] n_samples [NUM_CLASSES];
  logic [D-1:0]            class_hv  [NUM_CLASSES];
  logic                    committing;
  logic [AW-1:0]           widx;
  logic                    take;

  assign take = in_valid && !busy && !clr;
  assign busy = committing;

  for (genvar c = 0; c < NUM_CLASSES; c++) begin : g_class
    logic inc_c;
    assign inc_c = take && (32'(in_label) == c);

    pop_threshold #(.D(D), .CNT_W(SAMPLE_CNT_W)) u_acc (
      .clk   (clk),
      .rst_n (rst_n),
      .clr   (clr && !busy),
      .inc   (inc_c),
      .hv_in (in_hv),
      .thr   (n_samples[c] >> 1),
      .hv_out(class_hv[c])
    );

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n)                                  n_samples[c] <= '0;
      else if (clr && !busy)                       n_samples[c] <= '0;
      else if (inc_c && (n_samples[c] != '1))      n_samples[c] <= n_samples[c] + 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      committing <= 1'b0;
      widx       <= '0;
    end else if (committing) begin
      if (widx == LAST) committing <= 1'b0;
      else              widx       <= widx + AW'(1);
    end else if (commit && !clr) begin
      committing <= 1'b1;
      widx       <= '0;
    end
  end

  assign mem_we    = committing;
  assign mem_waddr = widx;
  assign mem_wdata = class_hv[widx];

endmodule
