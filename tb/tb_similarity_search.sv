// tb_similarity_search -- checks the Hamming-distance search with two
// instances, D=256 with 2 classes (default) and D=100 with 4 classes, each
// reading class HVs from a small registered-read memory model. Queries are
// random vectors and noisy copies of one class; the predicted class must be
// the one at the smallest distance (lowest index on ties), the distance must
// be exact, and result_valid must rise NUM_CLASSES + clog2(D) + 1 clock
// edges after the edge that takes start (NUM_CLASSES + clog2(D) + 2 edges
// counting the start edge itself).
module tb_similarity_search;
  import tb_ref_pkg::*;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  // Instance A: D=256, 2 classes.
  logic         st_a = 0, rdy_a, re_a, rv_a;
  logic [255:0] q_a = '0, rd_a;
  logic [0:0]   ra_a, rc_a;
  logic [8:0]   rdist_a;
  logic [255:0] mem_a [2];

  similarity_search dut_a (
    .clk(clk), .rst_n(rst_n), .start(st_a), .query(q_a), .ready(rdy_a),
    .mem_re(re_a), .mem_raddr(ra_a), .mem_rdata(rd_a),
    .result_valid(rv_a), .result_class(rc_a), .result_dist(rdist_a));
  always @(posedge clk) if (re_a) rd_a <= mem_a[ra_a];

  // Instance B: D=100, 4 classes.
  logic         st_b = 0, rdy_b, re_b, rv_b;
  logic [99:0]  q_b = '0, rd_b;
  logic [1:0]   ra_b, rc_b;
  logic [6:0]   rdist_b;
  logic [99:0]  mem_b [4];

  similarity_search #(.D(100), .NUM_CLASSES(4)) dut_b (
    .clk(clk), .rst_n(rst_n), .start(st_b), .query(q_b), .ready(rdy_b),
    .mem_re(re_b), .mem_raddr(ra_b), .mem_rdata(rd_b),
    .result_valid(rv_b), .result_class(rc_b), .result_dist(rdist_b));
  always @(posedge clk) if (re_b) rd_b <= mem_b[ra_b];

  function automatic hv_t rnd();
    hv_t v;
    for (int w = 0; w < MAXD / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  function automatic hv_t flip(input hv_t v, input int d, input int n);
    for (int i = 0; i < n; i++) v[$urandom % d] ^= 1'b1;
    return v;
  endfunction

  task automatic run_a(input logic [255:0] q);
    int best = 0, bd = 1 << 30, start_cyc, lat;
    hv_t t;
    for (int c = 0; c < 2; c++) begin
      t = '0; t[255:0] = q ^ mem_a[c];
      if (ref_popcount(t, 256) < bd) begin bd = ref_popcount(t, 256); best = c; end
    end
    @(negedge clk);
    while (!rdy_a) @(negedge clk);
    st_a = 1; q_a = q;
    start_cyc = cyc;
    @(negedge clk);
    st_a = 0; q_a = '0;
    while (!rv_a) @(negedge clk);
    lat = cyc - start_cyc;
    checks++;
    if (int'(rc_a) != best || int'(rdist_a) != bd || lat != 2 + 8 + 2) begin
      failures++;
      $display("FAIL A class %0d/%0d dist %0d/%0d latency %0d", rc_a, best, rdist_a, bd, lat);
    end
  endtask

  task automatic run_b(input logic [99:0] q);
    int best = 0, bd = 1 << 30, start_cyc, lat;
    hv_t t;
    for (int c = 0; c < 4; c++) begin
      t = '0; t[99:0] = q ^ mem_b[c];
      if (ref_popcount(t, 100) < bd) begin bd = ref_popcount(t, 100); best = c; end
    end
    @(negedge clk);
    while (!rdy_b) @(negedge clk);
    st_b = 1; q_b = q;
    start_cyc = cyc;
    @(negedge clk);
    st_b = 0; q_b = '0;
    while (!rv_b) @(negedge clk);
    lat = cyc - start_cyc;
    checks++;
    if (int'(rc_b) != best || int'(rdist_b) != bd || lat != 4 + 7 + 2) begin
      failures++;
      $display("FAIL B class %0d/%0d dist %0d/%0d latency %0d", rc_b, best, rdist_b, bd, lat);
    end
  endtask

  initial begin
    hv_t v;
    int hits [4];
    for (int c = 0; c < 2; c++) begin v = rnd(); mem_a[c] = v[255:0]; end
    for (int c = 0; c < 4; c++) begin v = rnd(); mem_b[c] = v[99:0]; end
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 60; i++) begin
      int c;
      c = i % 2;
      v = '0; v[255:0] = mem_a[c];
      run_a((i < 40) ? flip(v, 256, 40)[255:0] : rnd()[255:0]);
    end
    // Tie: query equidistant from both classes resolves to class 0.
    mem_a[1] = ~mem_a[0];
    v = '0; v[255:0] = mem_a[0];
    run_a(flip(v, 256, 0)[255:0] ^ {128'd0, {128{1'b1}}});
    for (int c = 0; c < 4; c++) hits[c] = 0;
    for (int i = 0; i < 80; i++) begin
      int c;
      c = i % 4;
      v = '0; v[99:0] = mem_b[c];
      run_b((i < 60) ? flip(v, 100, 15)[99:0] : rnd()[99:0]);
      if (i < 60) hits[rc_b]++;
    end
    checks++;
    if (hits[0] == 0 || hits[1] == 0 || hits[2] == 0 || hits[3] == 0) begin
      failures++; $display("FAIL not every class was predicted: %0d %0d %0d %0d", hits[0], hits[1], hits[2], hits[3]);
    end
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
