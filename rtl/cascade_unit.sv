// cascade_unit -- merges the sense results of a split weight vector.
//
// When a weight vector is longer than a crossbar column it is split into
// parts mapped on the same column of several crossbars; each part's sense
// amplifier compares its own partial popcount with references around half
// the part size.  res[p][i] is the decision of part p against reference
// slot i (slot (NREF-1)/2 = main reference, lower slots = lower references).
// With a = part 0 (SA1) and b = part 1 (SA2) and NREF = 3:
//   CASC_NONE : a[1]                                 (vector fits one column)
//   CASC_AND  : AND of the main results of parts 0..nparts-1
//   CASC_OR   : OR  of the main results of parts 0..nparts-1
//   CASC_F1   : a[0]&b[2] | a[1]&b[1] | a[2]&b[0]
//   CASC_F2   : b[2] | a[0]&b[1] | a[1]&b[0] | a[2]
// F1 only fires when the two partial counts are surely above half the whole
// vector (never a false 1); F2 relaxes it.  For NREF > 3 the same patterns
// are extended symmetrically (F1: a[i]&b[NREF-1-i]; F2: ends plus
// a[i]&b[NREF-2-i]).  Purely combinational.
//
// The two functions follow the paper's cascading-function figure and its
// loss formulas; the generalisation to more parts (AND/OR) and more
// references is this design's choice.
module cascade_unit
  import bcim_pkg::*;
#(
  parameter int unsigned NPARTS = 3,
  parameter int unsigned NREF   = 3,
  localparam int unsigned NP_W  = $clog2(NPARTS + 1)
) (
  input  casc_fn_e                    fn,
  input  logic [NP_W-1:0]             nparts,
  input  logic [NPARTS-1:0][NREF-1:0] res,
  output logic                        act
);
  localparam int unsigned MID = (NREF - 1) / 2;

  logic [NREF-1:0] a, b;
  logic            all_and, any_or, f1, f2;

  always_comb begin
    a = res[0];
    b = (NPARTS > 1) ? res[NPARTS > 1 ? 1 : 0] : '0;

    all_and = 1'b1;
    any_or  = 1'b0;
    for (int unsigned p = 0; p < NPARTS; p++) begin
      if (p < 32'(nparts)) begin
        all_and &= res[p][MID];
        any_or  |= res[p][MID];
      end
    end

    f1 = 1'b0;
    for (int unsigned i = 0; i < NREF; i++)
      f1 |= a[i] & b[NREF-1-i];

    f2 = a[NREF-1] | b[NREF-1];
    for (int unsigned i = 0; i + 1 < NREF; i++)
      f2 |= a[i] & b[NREF-2-i];

    unique case (fn)
      CASC_AND: act = all_and;
      CASC_OR:  act = any_or;
      CASC_F1:  act = f1;
      CASC_F2:  act = f2;
      default:  act = a[MID];
    endcase
  end
endmodule
