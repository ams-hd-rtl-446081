// similarity_search -- associative search of a query HV against the class HVs.
//
// For each class c the class HV is read from the class memory, XORed with the
// query and the ones of the result are counted: the Hamming distance
// HD(query, S_c). The class at the smallest distance (highest similarity) is
// the prediction; on equal distance the lower class index wins.
//
// The classes are read one per cycle from a single read port and stream
// through one shared popcount_pipe, so a new class enters the tree every
// cycle. A running minimum over the tree outputs picks the winner.
//
// Interface: start is taken when ready is high; query is captured then and
// ready stays low until the result is out. mem_re/mem_raddr drive the class
// memory, whose registered read returns mem_rdata one cycle later.
// Timing: result_valid is a one-cycle pulse NUM_CLASSES + clog2(D) + 1 clock
// edges after the edge that takes start.
// Hamming distance and arg-min follow the design; the class-serial schedule
// and the tie rule are this implementation's choice.
module similarity_search #(
  parameter int unsigned D           = amshd_pkg::D_DEFAULT,
  parameter int unsigned NUM_CLASSES = amshd_pkg::NUM_CLASSES_DEFAULT,
  localparam int unsigned AW         = (NUM_CLASSES > 1) ? $clog2(NUM_CLASSES) : 1,
  localparam int unsigned CW         = $clog2(D + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [D-1:0]  query,
  output logic          ready,
  output logic          mem_re,
  output logic [AW-1:0] mem_raddr,
  input  logic [D-1:0]  mem_rdata,
  output logic          result_valid,
  output logic [AW-1:0] result_class,
  output logic [CW-1:0] result_dist
);

  localparam logic [AW-1:0] LAST = AW'(NUM_CLASSES - 1);

  logic [D-1:0]  q_reg;
  logic          busy;
  logic          issuing;
  logic [AW-1:0] cidx;
  logic          rd_valid;
  logic [AW-1:0] rd_tag;

  logic          pc_valid;
  logic [CW-1:0] pc_count;
  logic [AW-1:0] pc_tag;

  logic [CW-1:0] best_dist;
  logic [AW-1:0] best_class;

  assign ready     = !busy;
  assign mem_re    = issuing;
  assign mem_raddr = cidx;

  // Issue one class read per cycle.
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      issuing <= 1'b0;
      cidx    <= '0;
      q_reg   <= '0;
    end else begin
      if (start && !busy) begin
        busy    <= 1'b1;
        issuing <= 1'b1;
        cidx    <= '0;
        q_reg   <= query;
      end else if (issuing) begin
        if (cidx == LAST) issuing <= 1'b0;
        else              cidx    <= cidx + AW'(1);
      end
      if (result_valid) busy <= 1'b0;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_valid <= 1'b0;
      rd_tag   <= '0;
    end else begin
      rd_valid <= issuing;
      rd_tag   <= cidx;
    end
  end

  popcount_pipe #(.D(D), .TAG_W(AW)) u_popcount (
    .clk      (clk),
    .rst_n    (rst_n),
    .in_valid (rd_valid),
    .in_vec   (mem_rdata ^ q_reg),
    .in_tag   (rd_tag),
    .out_valid(pc_valid),
    .out_count(pc_count),
    .out_tag  (pc_tag)
  );

  // Running arg-min over the class distances.
  logic          take;
  logic [CW-1:0] min_dist;
  logic [AW-1:0] min_class;

  always_comb begin
    take      = (pc_tag == '0) || (pc_count < best_dist);
    min_dist  = take ? pc_count : best_dist;
    min_class = take ? pc_tag   : best_class;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      best_dist    <= '0;
      best_class   <= '0;
      result_valid <= 1'b0;
      result_class <= '0;
      result_dist  <= '0;
    end else begin
      result_valid <= 1'b0;
      if (pc_valid) begin
        best_dist  <= min_dist;
        best_class <= min_class;
        if (pc_tag == LAST) begin
          result_valid <= 1'b1;
          result_class <= min_class;
          result_dist  <= min_dist;
        end
      end
    end
  end

endmodule
