// tb_amshd_workloads -- the AMS-HD classifier at the other evaluated sizes.
//
// The default build is D = 256 with two classes (covered by tb_amshd_top).
// The design was also evaluated at other hypervector sizes, with four
// severity classes (no, mild, moderate, severe AMS) as well as two, and with
// Sobol threshold 0.75 at D = 128. This testbench runs one
// amshd_workload_run per configuration, all in parallel, each with its own
// clock. Each run trains, commits and classifies synthetic samples. It checks
// every result against a software model of the pipeline and checks the
// inference latency N_FEATURES + NUM_CLASSES + clog2(D) + 2:
//   D=128  2 classes th=0.65   (15 cycles)
//   D=128  4 classes th=0.75   (17 cycles)
//   D=512  2 classes th=0.65   (17 cycles)
// Larger sizes (1024 up to 10000) are not simulated here, to keep the
// simulator's build time within a few minutes.
// The watchdog ends the test after 200 us of simulated time.
module tb_amshd_workloads;

  localparam int NRUN = 3;
  logic done [NRUN];
  int   chk [NRUN];
  int   fl [NRUN];

  amshd_workload_run #(.D(128),  .NUM_CLASSES(2), .TH_PERMILLE(650)) u_d128   (.done(done[0]), .checks(chk[0]), .failures(fl[0]));
  amshd_workload_run #(.D(128),  .NUM_CLASSES(4), .TH_PERMILLE(750)) u_d128m  (.done(done[1]), .checks(chk[1]), .failures(fl[1]));
  amshd_workload_run #(.D(512),  .NUM_CLASSES(2), .TH_PERMILLE(650)) u_d512   (.done(done[2]), .checks(chk[2]), .failures(fl[2]));

  function automatic bit all_done();
    for (int i = 0; i < NRUN; i++) if (!done[i]) return 0;
    return 1;
  endfunction

  task automatic report(input int extra_fail);
    int checks, failures;
    checks = 0;
    failures = extra_fail;
    for (int i = 0; i < NRUN; i++) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endtask

  initial begin
    #1;
    while (!all_done()) #100;
    report(0);
    $finish;
  end

  initial begin
    #200us;
    $display("watchdog expired");
    report(1);
    $finish;
  end

endmodule
