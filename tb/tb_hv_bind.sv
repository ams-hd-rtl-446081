// tb_hv_bind -- checks XOR binding on random and corner vectors, and that
// binding is its own inverse (unbinding with the same key restores the input).
module tb_hv_bind;
  int checks = 0;
  int failures = 0;

  logic [255:0] a, b, y, y2;

  hv_bind dut  (.a(a), .b(b), .y(y));
  hv_bind dut2 (.a(y), .b(b), .y(y2));

  initial begin
    for (int i = 0; i < 200; i++) begin
      for (int w = 0; w < 8; w++) begin
        a[w*32 +: 32] = $urandom;
        b[w*32 +: 32] = $urandom;
      end
      if (i == 0) begin a = '0; b = '1; end
      if (i == 1) begin a = '1; b = '1; end
      #1;
      for (int k = 0; k < 256; k++) begin
        checks++;
        if (y[k] !== (a[k] != b[k])) begin
          failures++;
          $display("FAIL bit %0d a=%b b=%b y=%b", k, a[k], b[k], y[k]);
        end
      end
      checks++;
      if (y2 !== a) begin failures++; $display("FAIL unbind"); end
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
