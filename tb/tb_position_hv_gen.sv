// tb_position_hv_gen -- checks the position HV generator at D=256:
// the reset state is the Sobol seed (prefix 011, last bit 0), each step
// follows the masked-feedback shift rule with mask 110...1, the serial input
// en enters stage 0, load returns to the seed, one new HV per clock, and the
// first position HVs are near-orthogonal (normalised Hamming distance close
// to 0.5).
module tb_position_hv_gen;
  import tb_ref_pkg::*;

  localparam int D = 256;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic load = 0, step = 0, en = 0;
  logic [D-1:0] hv;

  always #5 clk = ~clk;

  position_hv_gen dut (.clk(clk), .rst_n(rst_n), .load(load), .step(step), .en(en), .hv(hv));

  hv_t mask, seed, model;

  task automatic expect_state(input string what);
    checks++;
    if (hv !== model[D-1:0]) begin
      failures++;
      $display("FAIL %s: got %h exp %h", what, hv, model[D-1:0]);
    end
  endtask

  initial begin
    hv_t p [16];
    real hd_sum;
    int  pairs;
    mask = ref_mask(D, 0.65);
    seed = ref_seed(D, 0.65);
    // Patterns printed in the design's drawing.
    checks++;
    if (!(mask[0] && mask[1] && !mask[2] && mask[D-1])) begin
      failures++; $display("FAIL reference mask prefix");
    end
    checks++;
    if (!(!seed[0] && seed[1] && seed[2] && !seed[D-1])) begin
      failures++; $display("FAIL reference seed prefix");
    end
    repeat (2) @(posedge clk);
    #1 model = seed;
    expect_state("reset state");
    rst_n = 1;
    // Hold: no step, no change.
    repeat (3) @(posedge clk);
    #1 expect_state("hold");
    // Steps with en = 0, one state per cycle.
    step = 1;
    for (int i = 0; i < 300; i++) begin
      @(posedge clk);
      model = ref_lfsr_step(model, mask, D, 1'b0);
      #1 expect_state($sformatf("step %0d", i));
    end
    // Serial input.
    for (int i = 0; i < 50; i++) begin
      en = 1'($urandom);
      @(posedge clk);
      model = ref_lfsr_step(model, mask, D, en);
      #1 expect_state($sformatf("en step %0d", i));
    end
    en = 0;
    // Load wins over step.
    load = 1;
    @(posedge clk);
    model = seed;
    #1 expect_state("load");
    load = 0;
    // Orthogonality of the first 16 position HVs.
    for (int i = 0; i < 16; i++) begin
      p[i] = '0;
      p[i][D-1:0] = hv;
      @(posedge clk);
      #1;
    end
    step = 0;
    hd_sum = 0.0;
    pairs = 0;
    for (int i = 0; i < 16; i++)
      for (int j = i + 1; j < 16; j++) begin
        hd_sum += real'(ref_popcount(p[i] ^ p[j], D)) / real'(D);
        pairs++;
      end
    $display("mean normalised Hamming distance of 16 position HVs: %f", hd_sum / pairs);
    checks++;
    if (hd_sum / pairs < 0.40 || hd_sum / pairs > 0.60) begin
      failures++; $display("FAIL position HVs not near-orthogonal");
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
