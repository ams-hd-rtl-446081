// tb_popcount_pipe -- checks the pipelined popcount at D=256 (8 levels) and
// D=100 (7 levels): a new random vector every cycle (with gaps), each count
// and tag emerging exactly clog2(D) cycles later.
module tb_popcount_pipe;
  import tb_ref_pkg::*;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic         va = 0;
  logic [255:0] veca = '0;
  logic [7:0]   taga = '0;
  logic         ova;
  logic [8:0]   cnta;
  logic [7:0]   otaga;

  logic         vb = 0;
  logic [99:0]  vecb = '0;
  logic [7:0]   tagb = '0;
  logic         ovb;
  logic [6:0]   cntb;
  logic [7:0]   otagb;

  popcount_pipe #(.TAG_W(8)) dut_a (
    .clk(clk), .rst_n(rst_n), .in_valid(va), .in_vec(veca), .in_tag(taga),
    .out_valid(ova), .out_count(cnta), .out_tag(otaga));
  popcount_pipe #(.D(100), .TAG_W(8)) dut_b (
    .clk(clk), .rst_n(rst_n), .in_valid(vb), .in_vec(vecb), .in_tag(tagb),
    .out_valid(ovb), .out_count(cntb), .out_tag(otagb));

  int exp_a [256];
  int exp_b [256];
  int sent_cyc_a [256];
  int sent_cyc_b [256];
  int cyc = 0;
  int got_a = 0, got_b = 0, sent_a = 0, sent_b = 0;

  always @(posedge clk) cyc <= cyc + 1;

  // Output monitors.
  always @(posedge clk) if (rst_n) begin
    if (ova) begin
      checks++;
      if (int'(cnta) != exp_a[otaga] || cyc - sent_cyc_a[otaga] != 8) begin
        failures++;
        $display("FAIL A tag %0d count %0d exp %0d latency %0d", otaga, cnta, exp_a[otaga], cyc - sent_cyc_a[otaga]);
      end
      got_a++;
    end
    if (ovb) begin
      checks++;
      if (int'(cntb) != exp_b[otagb] || cyc - sent_cyc_b[otagb] != 7) begin
        failures++;
        $display("FAIL B tag %0d count %0d exp %0d latency %0d", otagb, cntb, exp_b[otagb], cyc - sent_cyc_b[otagb]);
      end
      got_b++;
    end
  end

  initial begin
    hv_t t;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 200; i++) begin
      @(negedge clk);
      va = ($urandom % 4) != 0;
      vb = ($urandom % 4) != 0;
      for (int w = 0; w < 8; w++) veca[w*32 +: 32] = $urandom;
      if (i == 3) veca = '1;
      if (i == 4) veca = '0;
      for (int w = 0; w < 4; w++) t[w*32 +: 32] = $urandom;
      vecb = t[99:0];
      if (i == 5) vecb = '1;
      taga = 8'(i);
      tagb = 8'(i);
      t = '0; t[255:0] = veca;
      exp_a[i] = ref_popcount(t, 256);
      t = '0; t[99:0] = vecb;
      exp_b[i] = ref_popcount(t, 100);
      sent_cyc_a[i] = cyc;
      sent_cyc_b[i] = cyc;
      if (va) sent_a++;
      if (vb) sent_b++;
    end
    @(negedge clk);
    va = 0; vb = 0;
    repeat (12) @(posedge clk);
    checks++;
    if (got_a != sent_a || got_b != sent_b) begin
      failures++;
      $display("FAIL outputs A %0d/%0d B %0d/%0d", got_a, sent_a, got_b, sent_b);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
