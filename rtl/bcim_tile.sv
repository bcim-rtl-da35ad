// bcim_tile -- one memristor crossbar with its periphery.
//
// Data path: input_buffer -> wl_driver -> xnor_crossbar -> one sense_amp
// per column, with sa_ref_gen deriving the reference levels from the
// number of inputs mapped on a column.  Each column computes, for its
// weight vector w and the buffered input x,
//   res[c][i] = popcount(XNOR(x, w_c)) > ref_i
// where ref_(NREF-1)/2 = vec_size/2 is the sign threshold and the others
// are auxiliary references used to merge split vectors.  All columns
// work in parallel; the references are shared by the whole tile.
//
// Interface: physical crossbar rows are programmed one per cycle
// (row 2k = weight bit of input k, row 2k+1 = its complement; a position
// with both cells 0 contributes nothing).  Buffer operations follow
// input_buffer.  Inputs at positions >= n_active are not driven.  rd_en,
// cmp_en and sel come from bcim_ctrl: bitlines are sampled in the rd_en
// cycle, each cmp_en cycle fills result slot sel, res is valid the cycle
// after the last compare.
//
// Parallel evaluation of all columns and the per-column sense amplifier
// follow the paper; interfaces and timing are this design's choices.
module bcim_tile #(
  parameter int unsigned N_IN  = 512,
  parameter int unsigned COLS  = 512,
  parameter int unsigned NREF  = 3,
  parameter int unsigned BUS_W = 32,
  localparam int unsigned ROWS  = 2 * N_IN,
  localparam int unsigned CNT_W = $clog2(N_IN + 1),
  localparam int unsigned SB_W  = $clog2(N_IN + 1),
  localparam int unsigned NW    = (N_IN + BUS_W - 1) / BUS_W,
  localparam int unsigned AW    = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned SEL_W = (NREF > 1) ? $clog2(NREF) : 1
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // configuration
  input  logic [SB_W-1:0]           n_active,
  input  logic [CNT_W-1:0]          vec_size,
  input  logic [CNT_W-1:0]          aux_x,
  input  logic [SB_W-1:0]           slot_bits,
  input  logic [SB_W-1:0]           nslots,
  // weight programming
  input  logic                      prog_en,
  input  logic [$clog2(ROWS)-1:0]   prog_row,
  input  logic [COLS-1:0]           prog_data,
  // input buffer
  input  logic                      clear,
  input  logic                      wr_en,
  input  logic [AW-1:0]             wr_addr,
  input  logic [BUS_W-1:0]          wr_data,
  input  logic                      col_en,
  input  logic [BUS_W-1:0]          col_data,
  input  logic                      col_last,
  output logic                      shifted,
  // evaluation
  input  logic                      rd_en,
  input  logic                      cmp_en,
  input  logic [SEL_W-1:0]          sel,
  output logic [COLS-1:0][NREF-1:0] res
);
  logic [N_IN-1:0]            vec, row_en;
  logic [ROWS-1:0]            wl;
  logic [COLS-1:0][CNT_W-1:0] bl_level;
  logic [NREF-1:0][CNT_W-1:0] refs;
  logic [CNT_W-1:0]           ref_level;

  input_buffer #(.N_IN(N_IN), .BUS_W(BUS_W)) u_buf (
    .clk, .rst_n, .slot_bits, .nslots, .clear,
    .wr_en, .wr_addr, .wr_data, .col_en, .col_data, .col_last,
    .vec, .shifted
  );

  always_comb begin
    for (int unsigned k = 0; k < N_IN; k++)
      row_en[k] = k < 32'(n_active);
  end

  wl_driver #(.N_IN(N_IN)) u_wl (
    .rd_en, .in_vec(vec), .row_en, .wl
  );

  xnor_crossbar #(.ROWS(ROWS), .COLS(COLS), .CNT_W(CNT_W)) u_xbar (
    .clk, .rst_n, .prog_en, .prog_row, .prog_data, .rd_en, .wl, .bl_level
  );

  sa_ref_gen #(.NREF(NREF), .CNT_W(CNT_W)) u_ref (
    .vec_size, .aux_x, .refs
  );

  assign ref_level = refs[sel];

  for (genvar c = 0; c < COLS; c++) begin : g_sa
    logic q_unused, qn_unused;
    sense_amp #(.NREF(NREF), .CNT_W(CNT_W)) u_sa (
      .clk, .rst_n, .en(cmp_en), .sel,
      .level(bl_level[c]), .ref_level,
      .q(q_unused), .qn(qn_unused), .res(res[c])
    );
  end
endmodule
