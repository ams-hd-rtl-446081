// tb_hv_encoder -- checks the encoding path at the default size (D=256,
// 4 features, 16-bit features, th=0.65) against a software model of
// thermometer encoding, position chain, XOR binding and majority bundling.
// Samples are streamed at full rate and with random gaps and random output
// back-pressure; the test also checks that a full-rate sample takes exactly
// N_FEATURES cycles and that the sideband word follows its sample.
module tb_hv_encoder;
  import tb_ref_pkg::*;

  localparam int D = 256;
  localparam int N = 4;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic         f_valid = 0;
  logic         f_ready;
  logic [15:0]  f_data = '0;
  logic [3:0]   f_sb = '0;
  logic         out_valid;
  logic         out_ready = 0;
  logic [D-1:0] out_hv;
  logic [3:0]   out_sb;

  hv_encoder #(.SB_W(4)) dut (
    .clk(clk), .rst_n(rst_n), .f_valid(f_valid), .f_ready(f_ready), .f_data(f_data),
    .f_sb(f_sb), .out_valid(out_valid), .out_ready(out_ready), .out_hv(out_hv), .out_sb(out_sb));

  hv_t pos [N];
  hv_t exp_q [$];
  logic [3:0] exp_sb_q [$];
  int n_out = 0;
  int n_stall = 0;
  bit full_rate = 1;
  bit random_ready = 0;

  function automatic hv_t ref_sample(input logic [15:0] fv [N]);
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

  // Consumer.
  always @(posedge clk) if (rst_n) begin
    if (out_valid && out_ready) begin
      hv_t e;
      logic [3:0] es;
      e = exp_q.pop_front();
      es = exp_sb_q.pop_front();
      checks++;
      if (out_hv !== e[D-1:0] || out_sb !== es) begin
        failures++;
        $display("FAIL sample %0d: hv %h exp %h sb %h exp %h", n_out, out_hv, e[D-1:0], out_sb, es);
      end
      n_out++;
    end
    if (f_valid && !f_ready) n_stall++;
  end

  always @(negedge clk) out_ready <= random_ready ? 1'($urandom % 3 != 0) : 1'b1;

  task automatic send_sample(input logic [15:0] fv [N], input logic [3:0] sb);
    exp_q.push_back(ref_sample(fv));
    exp_sb_q.push_back(sb);
    for (int j = 0; j < N; j++) begin
      if (!full_rate) begin
        f_valid = 0;
        repeat ($urandom % 2) @(negedge clk);
      end
      f_valid = 1;
      f_data = fv[j];
      f_sb = (j == N - 1) ? sb : 4'($urandom);
      @(posedge clk);
      while (!f_ready) @(posedge clk);
      @(negedge clk);
    end
    f_valid = 0;
  endtask

  initial begin
    logic [15:0] fv [N];
    hv_t m;
    int t0, t1;
    m = ref_mask(D, 0.65);
    pos[0] = ref_seed(D, 0.65);
    for (int j = 1; j < N; j++) pos[j] = ref_lfsr_step(pos[j-1], m, D, 1'b0);
    repeat (2) @(posedge clk);
    @(negedge clk);
    rst_n = 1;
    // Full rate: N features in N cycles, output the next cycle.
    for (int s = 0; s < 10; s++) begin
      for (int j = 0; j < N; j++) fv[j] = 16'($urandom);
      if (s == 0) for (int j = 0; j < N; j++) fv[j] = 16'd0;
      if (s == 1) for (int j = 0; j < N; j++) fv[j] = 16'hFFFF;
      t0 = $time;
      send_sample(fv, 4'(s));
      t1 = $time;
      checks++;
      if ((t1 - t0) != 10 * N) begin
        failures++;
        $display("FAIL full-rate sample took %0d cycles", (t1 - t0) / 10);
      end
    end
    // Gaps and back-pressure.
    full_rate = 0;
    random_ready = 1;
    for (int s = 0; s < 40; s++) begin
      for (int j = 0; j < N; j++) fv[j] = 16'($urandom);
      send_sample(fv, 4'($urandom));
    end
    random_ready = 0;
    repeat (5) @(posedge clk);
    checks++;
    if (n_out != 50 || exp_q.size() != 0) begin
      failures++;
      $display("FAIL %0d samples out, %0d pending", n_out, exp_q.size());
    end
    checks++;
    if (n_stall == 0) begin
      failures++;
      $display("FAIL back-pressure never stalled the input");
    end
    $display("stalled cycles: %0d", n_stall);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
