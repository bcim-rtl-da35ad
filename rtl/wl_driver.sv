// wl_driver -- input-vector wordline driver of one crossbar.
//
// Every input position k of the crossbar owns two physical rows: WL_k holds
// the weight cell w and WLbar_k the complementary cell ~w (differential
// cell pair).  Driving WL_k with x and WLbar_k with ~x makes exactly one cell
// of the pair conduct when x == w, so the bitline adds XNOR(x, w).
//
// Interface: wl[2k] is WL_k and wl[2k+1] is WLbar_k.  A position whose
// row_en bit is 0 drives neither row and adds no current.  Nothing is driven
// outside a read (rd_en low).  Purely combinational.
//
// The WL / WLbar pairing follows the paper's cell drawing; the row order and
// the row_en masking are this design's choices.
module wl_driver #(
  parameter int unsigned N_IN = 512
) (
  input  logic              rd_en,
  input  logic [N_IN-1:0]   in_vec,
  input  logic [N_IN-1:0]   row_en,
  output logic [2*N_IN-1:0] wl
);
  always_comb begin
    for (int unsigned k = 0; k < N_IN; k++) begin
      wl[2*k]   = rd_en & row_en[k] &  in_vec[k];
      wl[2*k+1] = rd_en & row_en[k] & ~in_vec[k];
    end
  end
endmodule
