// class_memory -- storage of the trained binary class hypervectors.
//
// One D-bit word per class (NUM_CLASSES words), written as a plain array so
// that synthesis can map it to a single block RAM, as in the design, which
// keeps its whole model in one BRAM. One synchronous write port and one
// synchronous read port: rdata shows the word at raddr one clock after re is
// high (block-RAM read timing). Like a block RAM, the array itself has no
// reset: a class must be written (trained and committed) before it is read.
// The word organisation and port set are this implementation's choice.
module class_memory #(
  parameter int unsigned D           = amshd_pkg::D_DEFAULT,
  parameter int unsigned NUM_CLASSES = amshd_pkg::NUM_CLASSES_DEFAULT,
  localparam int unsigned AW         = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [D-1:0]  wdata,
  input  logic          re,
  input  logic [AW-1:0] raddr,
  output logic [D-1:0]  rdata
);

  logic [D-1:0] mem [NUM_CLASSES];

  always_ff @(posedge clk) begin
    if (we && (32'(waddr) < NUM_CLASSES)) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)  rdata <= '0;
    else if (re) rdata <= (32'(raddr) < NUM_CLASSES) ? mem[raddr] : '0;
  end

endmodule
