// sense_amp -- behavioural model of the multi-reference sense amplifier.
//
// This is a behavioural model of an analog comparator.  One bitline feeds
// one sense amplifier.  In each cycle with en high it compares the bitline
// level with the reference level applied in that cycle and stores the
// decision (level > ref) in result slot sel; with three references it takes
// three cycles to produce all its intermediate results, as in the paper.
// q / qn are the latest decision and its complement.
//
// The strict comparison implements "1 if popcount > n/2" (the paper's
// golden output); the slot-per-reference storage is this design's choice.
module sense_amp #(
  parameter int unsigned NREF  = 3,
  parameter int unsigned CNT_W = 10,
  localparam int unsigned SEL_W = (NREF > 1) ? $clog2(NREF) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             en,
  input  logic [SEL_W-1:0] sel,
  input  logic [CNT_W-1:0] level,
  input  logic [CNT_W-1:0] ref_level,
  output logic             q,
  output logic             qn,
  output logic [NREF-1:0]  res
);
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q   <= 1'b0;
      res <= '0;
    end else if (en) begin
      q        <= level > ref_level;
      res[sel] <= level > ref_level;
    end
  end
  assign qn = ~q;
endmodule
