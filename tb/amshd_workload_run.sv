// amshd_workload_run -- one configuration of the AMS-HD classifier, trained
// and queried end to end; used by tb_amshd_workloads.
//
// The module instantiates amshd_top with the given dimension D, class count
// NUM_CLASSES and Sobol threshold TH_PERMILLE (4 features of 16 bits), runs it
// on its own clock, and checks it against a software model of the pipeline:
// thermometer encoding, the position chain, XOR binding, majority bundling,
// few-shot class HVs (majority of each class's samples) and the nearest
// class by Hamming distance (lower index on ties).
//
// Synthetic data: class c has SpO2 near 0.85 - 0.6*c/(NUM_CLASSES-1) and
// heart rate near 0.30 + 0.5*c/(NUM_CLASSES-1), with uniform noise of +-0.05,
// and random event and time stages, so higher classes stand for more severe
// AMS. The run trains TRAIN_PER_CLASS samples per class, commits, measures the
// latency of one inference at full rate (N_FEATURES + NUM_CLASSES + clog2(D)
// + 2 clock edges from the edge that accepts the first feature), then runs
// INFER_PER_CLASS back-to-back inferences per class. Every result must match
// the model in class and distance. How many samples land in the class they
// were generated from is printed for information only: with so few training
// samples and small D it varies from run to run and is not a property of the
// hardware.
//
// Interface: done rises when the run is over; checks and failures are its
// counts. Timing: its own 100 MHz clock, started after a short reset.
module amshd_workload_run
  import tb_ref_pkg::*;
  import amshd_pkg::*;
#(
  parameter int D               = 128,
  parameter int NUM_CLASSES     = 2,
  parameter int TH_PERMILLE     = 650,
  parameter int TRAIN_PER_CLASS = 5,
  parameter int INFER_PER_CLASS = 4
) (
  output logic done,
  output int   checks,
  output int   failures
);

  localparam int N  = 4;
  localparam int NC = NUM_CLASSES;
  localparam int AW = (NC > 1) ? $clog2(NC) : 1;
  localparam int CW = $clog2(D + 1);
  localparam int LATENCY = N + NC + $clog2(D) + 2;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic          s_valid = 0;
  logic          s_ready;
  logic [15:0]   s_feature = '0;
  mode_e         s_mode = MODE_INFER;
  logic [AW-1:0] s_label = '0;
  logic          cmd_clear = 0, cmd_commit = 0;
  logic          train_busy, result_valid, ams_led;
  logic [AW-1:0] result_class;
  logic [CW-1:0] result_dist;

  amshd_top #(.D(D), .NUM_CLASSES(NC), .TH_PERMILLE(TH_PERMILLE)) dut (
    .clk(clk), .rst_n(rst_n), .s_valid(s_valid), .s_ready(s_ready), .s_feature(s_feature),
    .s_mode(s_mode), .s_label(s_label), .cmd_clear(cmd_clear), .cmd_commit(cmd_commit),
    .train_busy(train_busy), .result_valid(result_valid), .result_class(result_class),
    .result_dist(result_dist), .ams_led(ams_led));

  // ---------------- reference model ----------------
  hv_t pos [N];
  int  cnt [NC][D];
  int  ns [NC];
  hv_t model [NC];

  function automatic hv_t ref_encode(input logic [15:0] fv [N]);
    hv_t r;
    hv_t b [N];
    r = '0;
    for (int j = 0; j < N; j++) b[j] = ref_thermo(fv[j], 16, D) ^ pos[j];
    for (int k = 0; k < D; k++) begin
      int c;
      c = 0;
      for (int j = 0; j < N; j++) c += int'(b[j][k]);
      r[k] = c > N / 2;
    end
    return r;
  endfunction

  typedef struct { int cls; int hd; } res_t;
  res_t exp_q [$];
  int n_result = 0;
  int last_cls = 0;

  always @(posedge clk) if (rst_n && result_valid) begin
    res_t e;
    e = exp_q.pop_front();
    checks++;
    if (int'(result_class) != e.cls || int'(result_dist) != e.hd) begin
      failures++;
      $display("FAIL D=%0d NC=%0d inference %0d: class %0d dist %0d, expected %0d / %0d",
               D, NC, n_result, result_class, result_dist, e.cls, e.hd);
    end
    last_cls <= int'(result_class);
    n_result++;
  end

  // ---------------- stimulus ----------------
  function automatic logic [15:0] to_q16(input real x);
    if (x < 0.0) x = 0.0;
    if (x > 0.9999) x = 0.9999;
    return 16'(int'(x * 65536.0));
  endfunction

  function automatic real noise(input real a);
    return a * ((real'($urandom % 2001) / 1000.0) - 1.0);
  endfunction

  function automatic void make_sample(input int cls, output logic [15:0] fv [N]);
    real sev;
    sev = (NC > 1) ? real'(cls) / real'(NC - 1) : 0.0;
    fv[0] = to_q16(0.85 - 0.6 * sev + noise(0.05));   // SpO2
    fv[1] = to_q16(0.30 + 0.5 * sev + noise(0.05));   // heart rate
    fv[2] = to_q16(real'($urandom % 7) / 7.0);        // event stage
    fv[3] = to_q16(real'($urandom % 7) / 6.5);        // time stage
  endfunction

  task automatic stream(input logic [15:0] fv [N], input mode_e mode, input int label,
                        output int first_cyc);
    for (int j = 0; j < N; j++) begin
      s_valid = 1;
      s_feature = fv[j];
      s_mode = mode;
      s_label = AW'(label);
      if (j == 0) first_cyc = cyc;
      @(posedge clk);
      while (!s_ready) begin
        if (j == 0) first_cyc = cyc;
        @(posedge clk);
      end
      @(negedge clk);
    end
    s_valid = 0;
  endtask

  function automatic res_t expect_of(input logic [15:0] fv [N]);
    res_t r;
    hv_t q;
    q = ref_encode(fv);
    r.cls = 0;
    r.hd = 1 << 30;
    for (int c = 0; c < NC; c++) begin
      int d;
      d = ref_popcount(q ^ model[c], D);
      if (d < r.hd) begin r.hd = d; r.cls = c; end
    end
    return r;
  endfunction

  initial begin
    hv_t m;
    logic [15:0] fv [N];
    hv_t h;
    int fc, correct, total;
    real th;
    done = 0;
    checks = 0;
    failures = 0;
    th = real'(TH_PERMILLE) / 1000.0;
    m = ref_mask(D, th);
    pos[0] = ref_seed(D, th);
    for (int j = 1; j < N; j++) pos[j] = ref_lfsr_step(pos[j-1], m, D, 1'b0);
    for (int c = 0; c < NC; c++) begin
      ns[c] = 0;
      for (int k = 0; k < D; k++) cnt[c][k] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // Few-shot training, classes interleaved.
    for (int i = 0; i < TRAIN_PER_CLASS * NC; i++) begin
      make_sample(i % NC, fv);
      h = ref_encode(fv);
      ns[i % NC]++;
      for (int k = 0; k < D; k++) cnt[i % NC][k] += int'(h[k]);
      stream(fv, MODE_TRAIN, i % NC, fc);
    end
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < D; k++) model[c][k] = cnt[c][k] > ns[c] / 2;
    cmd_commit = 1;
    @(negedge clk);
    cmd_commit = 0;
    while (train_busy) @(negedge clk);
    @(negedge clk);

    // Latency of one inference at full rate.
    make_sample(NC - 1, fv);
    exp_q.push_back(expect_of(fv));
    stream(fv, MODE_INFER, 0, fc);
    while (!result_valid) @(negedge clk);
    checks++;
    if (cyc - fc != LATENCY) begin
      failures++;
      $display("FAIL D=%0d NC=%0d latency %0d, expected %0d", D, NC, cyc - fc, LATENCY);
    end
    @(negedge clk);

    // Back-to-back inferences.
    correct = 0;
    total = 0;
    for (int i = 0; i < INFER_PER_CLASS * NC; i++) begin
      make_sample(i % NC, fv);
      exp_q.push_back(expect_of(fv));
      if (exp_q[exp_q.size() - 1].cls == i % NC) correct++;
      total++;
      stream(fv, MODE_INFER, 0, fc);
    end
    while (exp_q.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);

    checks++;
    if (n_result != 1 + total) begin
      failures++;
      $display("FAIL D=%0d NC=%0d: %0d results for %0d queries", D, NC, n_result, 1 + total);
    end
    $display("D=%0d classes=%0d th=%0d/1000: latency %0d cycles, %0d of %0d synthetic samples in their class",
             D, NC, TH_PERMILLE, LATENCY, correct, total);
    done = 1;
  end

endmodule
