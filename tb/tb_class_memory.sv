// tb_class_memory -- checks the class HV store (D=256, 4 words): written words
// read back one clock after the read request, reads without re hold the last
// data, and a write does not disturb the other words.
module tb_class_memory;
  localparam int D = 256;
  localparam int NC = 4;
  int checks = 0;
  int failures = 0;

  logic clk = 0;
  logic rst_n = 0;
  logic we = 0, re = 0;
  logic [D-1:0] held;
  logic [1:0] waddr = '0, raddr = '0;
  logic [D-1:0] wdata = '0;
  logic [D-1:0] rdata;
  logic [D-1:0] model [NC];

  always #5 clk = ~clk;

  class_memory #(.D(D), .NUM_CLASSES(NC)) dut (
    .clk(clk), .rst_n(rst_n), .we(we), .waddr(waddr), .wdata(wdata),
    .re(re), .raddr(raddr), .rdata(rdata));

  function automatic logic [D-1:0] rnd();
    logic [D-1:0] v;
    for (int w = 0; w < D / 32; w++) v[w*32 +: 32] = $urandom;
    return v;
  endfunction

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int c = 0; c < NC; c++) begin
      @(negedge clk);
      we = 1; waddr = 2'(c); wdata = rnd(); model[c] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int r = 0; r < 60; r++) begin
      int a;
      logic [D-1:0] prev;
      a = $urandom % NC;
      @(negedge clk);
      prev = rdata;
      re = 1; raddr = 2'(a);
      // Optionally overwrite another word in the same cycle.
      if (r % 3 == 0) begin
        we = 1; waddr = 2'((a + 1) % NC); wdata = rnd();
      end
      #1;
      checks++;
      if (rdata !== prev) begin failures++; $display("FAIL read not registered"); end
      @(posedge clk);
      if (we) model[waddr] = wdata;
      #1;
      checks++;
      if (rdata !== model[a]) begin
        failures++;
        $display("FAIL read %0d got %h exp %h", a, rdata, model[a]);
      end
      @(negedge clk);
      we = 0; re = 0;
      #1;
      checks++;
      if (rdata !== model[a]) begin failures++; $display("FAIL rdata not held"); end
      // Without re the read register keeps its word across a clock edge,
      // even when raddr points elsewhere.
      held = model[a];
      raddr = 2'((a + 1 + ($urandom % (NC - 1))) % NC);
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== held) begin failures++; $display("FAIL rdata changed without re"); end
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
