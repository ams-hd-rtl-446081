// tb_pop_threshold -- checks the bundling counters and threshold at D=16,
// CNT_W=3: random bundles of 1..7 HVs against a software count, every
// threshold value, clear, clear-with-increment (new bundle without a gap) and
// saturation at the counter maximum.
module tb_pop_threshold;
  localparam int D = 16;
  localparam int CW = 3;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic clr = 0, inc = 0;
  logic [D-1:0] hv_in = '0;
  logic [CW-1:0] thr = '0;
  logic [D-1:0] hv_out;
  int model [D];

  always #5 clk = ~clk;

  pop_threshold #(.D(D), .CNT_W(CW)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .inc(inc), .hv_in(hv_in), .thr(thr), .hv_out(hv_out));

  task automatic check_all_thr(input string what);
    for (int t = 0; t < 8; t++) begin
      thr = CW'(t);
      #1;
      for (int k = 0; k < D; k++) begin
        checks++;
        if (hv_out[k] !== (model[k] > t)) begin
          failures++;
          $display("FAIL %s thr=%0d bit %0d cnt=%0d out=%b", what, t, k, model[k], hv_out[k]);
        end
      end
    end
  endtask

  initial begin
    for (int k = 0; k < D; k++) model[k] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    check_all_thr("after reset");
    for (int b = 0; b < 40; b++) begin
      int n;
      n = 1 + ($urandom % 7);
      for (int i = 0; i < n; i++) begin
        @(negedge clk);
        hv_in = D'($urandom);
        clr = (i == 0);
        inc = 1;
        for (int k = 0; k < D; k++) model[k] = (i == 0 ? 0 : model[k]) + int'(hv_in[k]);
        @(posedge clk);
      end
      @(negedge clk);
      inc = 0; clr = 0;
      check_all_thr($sformatf("bundle %0d", b));
    end
    // Plain clear.
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    for (int k = 0; k < D; k++) model[k] = 0;
    check_all_thr("clear");
    // Saturation: 10 all-ones HVs.
    for (int i = 0; i < 10; i++) begin
      @(negedge clk);
      hv_in = '1; inc = 1;
    end
    @(negedge clk);
    inc = 0;
    for (int k = 0; k < D; k++) model[k] = 7;
    check_all_thr("saturation");
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
