// sa_ref_gen -- reference levels of the sense amplifiers of one crossbar.
//
// The main reference is half the number of inputs mapped on the column
// (floor(vec_size/2)); with the strict comparison of sense_amp this gives
// output 1 exactly when popcount > vec_size/2, i.e. when the signed dot
// product is positive.  Auxiliary references sit at distance aux_x, 2*aux_x,
// ... below and above the main one: slot (NREF-1)/2 is the main reference,
// lower slots are lower references.  For a vector of size V split in two,
// vec_size is V/2 and the three slots are V/4 - x, V/4, V/4 + x
// (Ref0, Ref1, Ref2 of the first part in the paper's notation).
//
// Purely combinational.  Levels are clamped to 0 and to the largest count.
// The n/2 rule and the symmetric distance x follow the paper; clamping and
// the spacing of references beyond three are this design's choices.
module sa_ref_gen #(
  parameter int unsigned NREF  = 3,
  parameter int unsigned CNT_W = 10
) (
  input  logic [CNT_W-1:0]           vec_size,
  input  logic [CNT_W-1:0]           aux_x,
  output logic [NREF-1:0][CNT_W-1:0] refs
);
  localparam int MID = (NREF - 1) / 2;
  localparam int MAXV = (1 << CNT_W) - 1;

  always_comb begin
    for (int i = 0; i < NREF; i++) begin
      int lvl;
      lvl = int'(vec_size) / 2 + (i - MID) * int'(aux_x);
      if (lvl < 0)         lvl = 0;
      else if (lvl > MAXV) lvl = MAXV;
      refs[i] = CNT_W'(lvl);
    end
  end
endmodule
