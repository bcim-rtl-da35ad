// sa_ref_seq -- steps the sense amplifiers of a crossbar through their
// references, one reference per clock cycle.
//
// On start it issues nref consecutive compare cycles (cmp_en high) with
// sel naming the reference slot of each cycle, from the lowest reference in
// use to the highest; done is high in the last compare cycle.  With
// nref = 1 only the main slot (NREF-1)/2 is compared, so a single-reference
// evaluation takes one cycle and a three-reference one three cycles, as the
// paper states.  nref must be odd and at most NREF; start is ignored while
// busy.  The low-to-high order is this design's choice.
module sa_ref_seq #(
  parameter int unsigned NREF = 3,
  localparam int unsigned SEL_W = (NREF > 1) ? $clog2(NREF) : 1,
  localparam int unsigned NR_W  = $clog2(NREF + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [NR_W-1:0]  nref,
  output logic             cmp_en,
  output logic [SEL_W-1:0] sel,
  output logic             done
);
  localparam int unsigned MID = (NREF - 1) / 2;

  logic [SEL_W-1:0] last_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cmp_en <= 1'b0;
      sel    <= '0;
      last_q <= '0;
    end else if (!cmp_en) begin
      if (start) begin
        cmp_en <= 1'b1;
        sel    <= SEL_W'(MID - (32'(nref) - 1) / 2);
        last_q <= SEL_W'(MID + (32'(nref) - 1) / 2);
      end
    end else if (sel == last_q) begin
      cmp_en <= 1'b0;
    end else begin
      sel <= sel + 1'b1;
    end
  end

  assign done = cmp_en && (sel == last_q);

  // nref must be odd and within range when a sequence starts.
  assert property (@(posedge clk) disable iff (!rst_n)
                   (start && !cmp_en) |-> (nref[0] && 32'(nref) <= NREF));
endmodule
