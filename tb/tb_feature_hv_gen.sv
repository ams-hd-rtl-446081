// tb_feature_hv_gen -- checks the thermometer feature HV generator against
// the reference f > k/D at the default size (D=256, 16-bit features) and at a
// non-power-of-two size (D=100, 8-bit features): edge values, exact level
// boundaries and random values, plus the thermometer shape (ones form one
// run from bit 0) and the similarity of close values.
module tb_feature_hv_gen;
  import tb_ref_pkg::*;

  int checks = 0;
  int failures = 0;

  logic [15:0]  f_a;
  logic [255:0] hv_a;
  logic [7:0]   f_b;
  logic [99:0]  hv_b;

  feature_hv_gen dut_a (.f(f_a), .hv(hv_a));
  feature_hv_gen #(.D(100), .FEAT_W(8)) dut_b (.f(f_b), .hv(hv_b));

  task automatic check_a(input logic [15:0] v);
    hv_t exp;
    f_a = v;
    #1;
    exp = ref_thermo(v, 16, 256);
    checks++;
    if (hv_a !== exp[255:0]) begin
      failures++;
      $display("FAIL D=256 f=%0d got %h exp %h", v, hv_a, exp[255:0]);
    end
    // Thermometer shape: ones only below the first zero.
    checks++;
    if (((hv_a + 256'd1) & hv_a) != '0) begin
      failures++;
      $display("FAIL D=256 f=%0d not a thermometer code", v);
    end
  endtask

  task automatic check_b(input logic [7:0] v);
    hv_t exp;
    f_b = v;
    #1;
    exp = ref_thermo(v, 8, 100);
    checks++;
    if (hv_b !== exp[99:0]) begin
      failures++;
      $display("FAIL D=100 f=%0d got %h exp %h", v, hv_b, exp[99:0]);
    end
  endtask

  initial begin
    logic [255:0] h1;
    check_a(16'd0);
    check_a(16'hFFFF);
    for (int k = 0; k < 256; k += 17) begin
      check_a(16'(k * 256));
      check_a(16'(k * 256 + 1));
      if (k > 0) check_a(16'(k * 256 - 1));
    end
    for (int i = 0; i < 300; i++) check_a(16'($urandom));
    for (int i = 0; i < 256; i++) check_b(8'(i));
    // Close values give close HVs, distant values distant HVs.
    f_a = 16'd30000; #1; h1 = hv_a;
    f_a = 16'd30600; #1;
    checks++;
    if (ref_popcount(hv_t'(h1 ^ hv_a), 256) > 4) begin
      failures++;
      $display("FAIL close values too far apart");
    end
    f_a = 16'd60000; #1;
    checks++;
    if (ref_popcount(hv_t'(h1 ^ hv_a), 256) < 100) begin
      failures++;
      $display("FAIL distant values too close");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
