// tb_amshd_top -- end-to-end test of the AMS-HD classifier at its default
// parameters (D=256, 4 features, 2 classes, th=0.65).
//
// A synthetic cohort stands in for the normalised sensor data: "No AMS"
// samples have high SpO2 and moderate heart rate, "AMS" samples low SpO2 and
// high heart rate, with random event and time stages and noise. The test
// trains the model (accumulated few-shot learning), commits it, runs
// inference and compares every result (class and Hamming distance) with a
// software model of the whole pipeline. It checks the 16-cycle latency of an
// inference at full rate and counts each mechanism: training samples,
// commits, clear, inferences of each class, LED set and cleared, stalls of
// the feature stream behind a busy search, and an inference held back while a
// commit is writing the model. A mechanism that never happened is a failure.
module tb_amshd_top;
  import tb_ref_pkg::*;
  import amshd_pkg::*;

  localparam int D = 256;
  localparam int N = 4;
  localparam int NC = 2;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  logic         s_valid = 0;
  logic         s_ready;
  logic [15:0]  s_feature = '0;
  mode_e        s_mode = MODE_INFER;
  logic [0:0]   s_label = '0;
  logic         cmd_clear = 0, cmd_commit = 0;
  logic         train_busy, result_valid, ams_led;
  logic [0:0]   result_class;
  logic [8:0]   result_dist;

  amshd_top dut (
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
    hv_t r = '0;
    for (int k = 0; k < D; k++) begin
      int c = 0;
      for (int j = 0; j < N; j++) begin
        hv_t b = ref_thermo(fv[j], 16, D) ^ pos[j];
        c += int'(b[k]);
      end
      r[k] = c > N / 2;
    end
    return r;
  endfunction

  // ---------------- result checking ----------------
  typedef struct { int cls; int hd; } res_t;
  res_t exp_q [$];
  int n_result = 0, n_pred [NC], n_led_on = 0, n_led_off = 0, n_stall = 0;
  int n_train = 0, n_commit = 0, n_clear = 0, n_held = 0;
  logic led_prev = 0;
  int last_cls = 0;
  always @(posedge clk) if (result_valid) last_cls <= int'(result_class);

  always @(posedge clk) if (rst_n) begin
    if (result_valid) begin
      res_t e;
      e = exp_q.pop_front();
      checks++;
      if (int'(result_class) != e.cls || int'(result_dist) != e.hd) begin
        failures++;
        $display("FAIL inference %0d: class %0d dist %0d, expected class %0d dist %0d",
                 n_result, result_class, result_dist, e.cls, e.hd);
      end
      n_pred[result_class]++;
      n_result++;
    end
    if (s_valid && !s_ready) n_stall++;
    if (train_busy && dut.enc_valid && dut.enc_sb.mode == MODE_INFER) n_held++;
    if (ams_led && !led_prev) n_led_on++;
    if (!ams_led && led_prev) n_led_off++;
    led_prev <= ams_led;
  end

  // LED follows the last result.
  always @(negedge clk) if (rst_n && n_result > 0) begin
    if (ams_led !== (n_pred[1] > 0 && last_cls == 1)) begin
      checks++;
      failures++;
      $display("FAIL LED %b after class %0d", ams_led, last_cls);
    end
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

  // Synthetic normalised sample of a class.
  function automatic void make_sample(input int cls, output logic [15:0] fv [N]);
    real spo2, hr;
    spo2 = (cls == 0 ? 0.80 : 0.30) + noise(0.15);
    hr   = (cls == 0 ? 0.35 : 0.70) + noise(0.15);
    fv[0] = to_q16(spo2);
    fv[1] = to_q16(hr);
    fv[2] = to_q16(real'($urandom % 7) / 7.0);     // event stage
    fv[3] = to_q16(real'($urandom % 7) / 6.5);     // time stage
  endfunction

  task automatic stream(input logic [15:0] fv [N], input mode_e mode, input int label,
                        output int first_cyc);
    for (int j = 0; j < N; j++) begin
      s_valid = 1;
      s_feature = fv[j];
      s_mode = (j == N - 1) ? mode : mode_e'($urandom % 2);
      s_label = (j == N - 1) ? 1'(label) : 1'($urandom);
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

  task automatic train_sample(input int cls);
    logic [15:0] fv [N];
    hv_t h;
    int fc;
    make_sample(cls, fv);
    h = ref_encode(fv);
    ns[cls]++;
    for (int k = 0; k < D; k++) cnt[cls][k] += int'(h[k]);
    stream(fv, MODE_TRAIN, cls, fc);
    n_train++;
  endtask

  task automatic model_commit();
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < D; k++) model[c][k] = cnt[c][k] > ns[c] / 2;
    while (train_busy) @(negedge clk);
    cmd_commit = 1;
    @(negedge clk);
    cmd_commit = 0;
    n_commit++;
  endtask

  task automatic model_clear();
    @(negedge clk);
    cmd_clear = 1;
    @(negedge clk);
    cmd_clear = 0;
    for (int c = 0; c < NC; c++) begin
      ns[c] = 0;
      for (int k = 0; k < D; k++) cnt[c][k] = 0;
    end
    n_clear++;
  endtask

  function automatic res_t expect_of(input logic [15:0] fv [N]);
    res_t r;
    hv_t q = ref_encode(fv);
    r.cls = 0;
    r.hd = 1 << 30;
    for (int c = 0; c < NC; c++) begin
      int d = ref_popcount(q ^ model[c], D);
      if (d < r.hd) begin r.hd = d; r.cls = c; end
    end
    return r;
  endfunction

  task automatic infer_sample(input int cls, output int first_cyc);
    logic [15:0] fv [N];
    make_sample(cls, fv);
    exp_q.push_back(expect_of(fv));
    stream(fv, MODE_INFER, 0, first_cyc);
  endtask

  // The commit is issued with the last feature of an inference sample, so the
  // encoded query is ready while the class memory is being written and must
  // wait; its result must come from the new model.
  task automatic infer_during_commit(input int cls);
    logic [15:0] fv [N];
    make_sample(cls, fv);
    for (int c = 0; c < NC; c++)
      for (int k = 0; k < D; k++) model[c][k] = cnt[c][k] > ns[c] / 2;
    exp_q.push_back(expect_of(fv));
    while (train_busy || !s_ready) @(negedge clk);
    for (int j = 0; j < N; j++) begin
      s_valid = 1;
      s_feature = fv[j];
      s_mode = MODE_INFER;
      cmd_commit = (j == N - 1);
      @(posedge clk);
      @(negedge clk);
    end
    s_valid = 0;
    cmd_commit = 0;
    n_commit++;
  endtask

  initial begin
    hv_t m;
    int fc, c0, correct;
    m = ref_mask(D, 0.65);
    pos[0] = ref_seed(D, 0.65);
    for (int j = 1; j < N; j++) pos[j] = ref_lfsr_step(pos[j-1], m, D, 1'b0);
    for (int c = 0; c < NC; c++) begin
      n_pred[c] = 0;
      ns[c] = 0;
      for (int k = 0; k < D; k++) cnt[c][k] = 0;
    end
    repeat (3) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    @(negedge clk);

    // A throw-away model, then clear.
    for (int i = 0; i < 4; i++) train_sample(i % 2);
    model_clear();

    // Few-shot training: 15 samples per class, interleaved.
    for (int i = 0; i < 30; i++) train_sample(i % 2);
    model_commit();
    while (train_busy) @(negedge clk);
    @(negedge clk);

    // Latency of one inference at full rate.
    infer_sample(1, fc);
    c0 = fc;
    while (!result_valid) @(negedge clk);
    checks++;
    if (cyc - c0 != 16) begin
      failures++;
      $display("FAIL inference latency %0d cycles, expected 16", cyc - c0);
    end
    $display("inference latency: %0d clock cycles", cyc - c0);
    @(negedge clk);

    // Back-to-back inferences: the stream stalls behind the busy search.
    for (int i = 0; i < 40; i++) infer_sample($urandom % 2, fc);
    while (exp_q.size() != 0) @(negedge clk);

    // More training, then an inference offered while the commit is running.
    for (int i = 0; i < 6; i++) train_sample(i % 2);
    infer_during_commit(0);
    infer_sample(1, fc);
    while (exp_q.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);

    // Accuracy on the synthetic cohort (informational, checked loosely).
    correct = 0;
    for (int i = 0; i < 20; i++) begin
      int want;
      want = i % 2;
      infer_sample(want, fc);
      while (exp_q.size() != 0) @(negedge clk);
      @(negedge clk);
      if (last_cls == want) correct++;
    end
    $display("synthetic cohort: %0d of 20 test samples classified as generated", correct);
    checks++;
    if (correct < 14) begin failures++; $display("FAIL classifier does not separate the cohort"); end

    // Mechanism coverage.
    $display("training samples %0d, commits %0d, clears %0d, inferences %0d (No AMS %0d, AMS %0d)",
             n_train, n_commit, n_clear, n_result, n_pred[0], n_pred[1]);
    $display("LED on %0d, LED off %0d, stalled feature cycles %0d, inference held by commit %0d cycles",
             n_led_on, n_led_off, n_stall, n_held);
    checks++; if (n_train == 0)   begin failures++; $display("FAIL no training"); end
    checks++; if (n_commit < 2)   begin failures++; $display("FAIL commit"); end
    checks++; if (n_clear == 0)   begin failures++; $display("FAIL clear"); end
    checks++; if (n_pred[0] == 0) begin failures++; $display("FAIL never No AMS"); end
    checks++; if (n_pred[1] == 0) begin failures++; $display("FAIL never AMS"); end
    checks++; if (n_led_on == 0 || n_led_off == 0) begin failures++; $display("FAIL LED never toggled"); end
    checks++; if (n_stall == 0)   begin failures++; $display("FAIL no stall"); end
    checks++; if (n_held == 0)    begin failures++; $display("FAIL no inference held by commit"); end
    checks++; if (n_result != 63) begin failures++; $display("FAIL %0d results", n_result); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
