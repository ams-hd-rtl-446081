// hv_bind -- binding of two binary hypervectors.
//
// In binary HDC the element-wise product of bipolar vectors becomes an XOR:
// the encoder binds each feature HV with the position HV of its feature slot
// by D parallel XOR gates. Combinational, no latency.
module hv_bind #(
  parameter int unsigned D = amshd_pkg::D_DEFAULT
) (
  input  logic [D-1:0] a,
  input  logic [D-1:0] b,
  output logic [D-1:0] y
);

  assign y = a ^ b;

endmodule
