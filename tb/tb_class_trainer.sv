// tb_class_trainer -- checks accumulative class learning at D=64 with 4
// classes: random labelled sample HVs (one class trained from a single
// sample, the others from several), commit writing every class HV to the
// memory port in NUM_CLASSES consecutive cycles with the per-dimension
// majority (cnt > floor(n/2)), samples offered during a commit being ignored,
// and clear starting a new model.
module tb_class_trainer;
  import tb_ref_pkg::*;

  localparam int D = 64;
  localparam int NC = 4;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  always #5 clk = ~clk;

  logic          clr = 0, in_valid = 0, commit = 0;
  logic [D-1:0]  in_hv = '0;
  logic [1:0]    in_label = '0;
  logic          busy, mem_we;
  logic [1:0]    mem_waddr;
  logic [D-1:0]  mem_wdata;

  class_trainer #(.D(D), .NUM_CLASSES(NC)) dut (
    .clk(clk), .rst_n(rst_n), .clr(clr), .in_valid(in_valid), .in_hv(in_hv),
    .in_label(in_label), .commit(commit), .busy(busy), .mem_we(mem_we),
    .mem_waddr(mem_waddr), .mem_wdata(mem_wdata));

  int cnt [NC][D];
  int ns [NC];
  logic [D-1:0] written [NC];
  int n_writes = 0;
  int write_cycles [$];
  int cyc = 0;
  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) if (rst_n && mem_we) begin
    written[mem_waddr] <= mem_wdata;
    write_cycles.push_back(cyc);
    checks++;
    if (int'(mem_waddr) != n_writes % NC) begin
      failures++; $display("FAIL write order: addr %0d", mem_waddr);
    end
    n_writes <= n_writes + 1;
  end

  task automatic clear_model();
    for (int c = 0; c < NC; c++) begin
      ns[c] = 0;
      for (int k = 0; k < D; k++) cnt[c][k] = 0;
    end
  endtask

  task automatic train(input logic [D-1:0] hv, input int label);
    @(negedge clk);
    in_valid = 1; in_hv = hv; in_label = 2'(label);
    if (!busy) begin
      ns[label]++;
      for (int k = 0; k < D; k++) cnt[label][k] += int'(hv[k]);
    end
    @(negedge clk);
    in_valid = 0;
  endtask

  task automatic do_commit_and_check(input string what, input bit poke);
    logic [D-1:0] e;
    @(negedge clk);
    commit = 1;
    @(negedge clk);
    commit = 0;
    if (poke) train({D{1'b1}}, 0);   // offered while busy: must be ignored
    while (busy) @(negedge clk);
    @(negedge clk);
    checks++;
    if (write_cycles.size() != NC || write_cycles[NC-1] - write_cycles[0] != NC - 1) begin
      failures++; $display("FAIL %s: %0d writes, not in consecutive cycles", what, write_cycles.size());
    end
    write_cycles.delete();
    for (int c = 0; c < NC; c++) begin
      for (int k = 0; k < D; k++) e[k] = cnt[c][k] > ns[c] / 2;
      checks++;
      if (written[c] !== e) begin
        failures++;
        $display("FAIL %s class %0d: got %h exp %h (n=%0d)", what, c, written[c], e, ns[c]);
      end
    end
  endtask

  initial begin
    logic [D-1:0] single;
    clear_model();
    repeat (2) @(posedge clk);
    rst_n = 1;
    // Class 2 is single-shot; the class HV must equal the sample.
    single = {$urandom, $urandom};
    train(single, 2);
    for (int i = 0; i < 30; i++) begin
      int l;
      l = $urandom % NC;
      if (l == 2) l = 3;
      train({$urandom, $urandom}, l);
    end
    do_commit_and_check("model 1", 1'b1);
    checks++;
    if (written[2] !== single) begin failures++; $display("FAIL single-shot class"); end
    // Few-shot continuation without clear.
    for (int i = 0; i < 7; i++) train({$urandom, $urandom}, i % NC);
    do_commit_and_check("model 1 continued", 1'b0);
    // Clear and a new model.
    @(negedge clk);
    clr = 1;
    @(negedge clk);
    clr = 0;
    clear_model();
    for (int i = 0; i < 12; i++) train({$urandom, $urandom}, i % NC);
    do_commit_and_check("model 2", 1'b0);
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
