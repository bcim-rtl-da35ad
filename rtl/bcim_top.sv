// bcim_top -- BCIM binary-neural-network layer engine.
//
// NTILES crossbars (tiles) of N_IN inputs x COLS columns work side by side.
// Column c of every tile belongs to output neuron c; a weight vector longer
// than N_IN is split into cfg.nparts parts, part p programmed into tile p
// and its inputs loaded into tile p's buffer.  One evaluation reads all
// tiles at once, compares every bitline with cfg.nref references (one per
// cycle), merges the parts of each column with the cascading function
// cfg.fn (cascade_unit) and yields COLS activation bits, which leave on the
// 32-bit output bus.  For a convolution the kernels of the output channels
// sit in different columns, and the input buffer of tile 0 slides the
// window by streaming only new columns (input_buffer); with an extra slot,
// two neighbouring windows are computed in one read (their kernels
// programmed into two column groups, the unused slot of each as zero
// cells).
//
// Ports:
//   cfg, n_active[t], vec_size[t]   layer configuration, static per layer
//   prog_*                          program one physical row of one tile
//   in_*                            input bus, valid/ready, kind in_kind_e,
//                                   in_tile selects the buffer, in_addr the
//                                   word (IN_WORD), in_last ends a column
//                                   (IN_COL)
//   start / start_ready / busy      evaluate the current buffers
//   col_shifted[t]                  tile t's buffer took a new column
//   act_valid / act                 activations, one-cycle pulse
//   out_*                           output bus, valid/ready, ceil(
//                                   cfg.ncols_out/32) words per evaluation
// Timing: counting the cycle in which start is accepted as cycle 0, the
// crossbars are read in cycle 1, compared in cycles 2 .. nref+1, cascaded
// in cycle nref+2; act_valid and the first output word appear in cycle
// nref+3 (4 cycles with one reference, 6 with three).  The
// input bus is stalled (in_ready low) while an evaluation runs, and a new
// start waits for the output bus to drain.
//
// The crossbar size, bus width, parallel column evaluation, sense-amplifier
// references, cascading functions and window buffer follow the paper; the
// bus protocols, configuration ports, NTILES = 3 and the cycle sequence are
// this design's choices.
module bcim_top
  import bcim_pkg::*;
#(
  parameter int unsigned N_IN   = XBAR_INPUTS,
  parameter int unsigned COLS   = XBAR_COLS,
  parameter int unsigned NTILES = NTILES_DEF,
  parameter int unsigned NREF   = NREF_MAX,
  parameter int unsigned BUS_W  = BUS_WIDTH,
  localparam int unsigned ROWS  = 2 * N_IN,
  localparam int unsigned CNT_W = $clog2(N_IN + 1),
  localparam int unsigned NW    = (N_IN + BUS_W - 1) / BUS_W,
  localparam int unsigned AW    = (NW > 1) ? $clog2(NW) : 1,
  localparam int unsigned TW    = (NTILES > 1) ? $clog2(NTILES) : 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  layer_cfg_t                  cfg,
  input  logic [NTILES-1:0][15:0]     n_active,
  input  logic [NTILES-1:0][15:0]     vec_size,
  // weight programming
  input  logic                        prog_en,
  input  logic [TW-1:0]               prog_tile,
  input  logic [$clog2(ROWS)-1:0]     prog_row,
  input  logic [COLS-1:0]             prog_data,
  // input bus
  input  logic                        in_valid,
  output logic                        in_ready,
  input  in_kind_e                    in_kind,
  input  logic [TW-1:0]               in_tile,
  input  logic [AW-1:0]               in_addr,
  input  logic [BUS_W-1:0]            in_data,
  input  logic                        in_last,
  // evaluation
  input  logic                        start,
  output logic                        start_ready,
  output logic                        busy,
  output logic [NTILES-1:0]           col_shifted,
  output logic                        act_valid,
  output logic [COLS-1:0]             act,
  // output bus
  output logic                        out_valid,
  input  logic                        out_ready,
  output logic [BUS_W-1:0]            out_data,
  output logic                        out_last
);
  localparam int unsigned SEL_W = (NREF > 1) ? $clog2(NREF) : 1;
  localparam int unsigned NR_W  = $clog2(NREF + 1);
  localparam int unsigned NP_W  = $clog2(NTILES + 1);
  localparam int unsigned NB_W  = $clog2(COLS + 1);

  logic                                   rd_en, cmp_en, casc_en, pk_busy;
  logic [SEL_W-1:0]                       sel;
  logic [NTILES-1:0][COLS-1:0][NREF-1:0]  res;
  logic [COLS-1:0]                        act_c;
  logic                                   in_fire;

  assign in_ready = !busy;
  assign in_fire  = in_valid && in_ready;

  bcim_ctrl #(.NREF(NREF)) u_ctrl (
    .clk, .rst_n, .start, .nref(NR_W'(cfg.nref)), .pk_busy,
    .start_ready, .busy, .rd_en, .cmp_en, .sel, .casc_en
  );

  for (genvar t = 0; t < NTILES; t++) begin : g_tile
    logic sel_t;
    assign sel_t = in_fire && (32'(in_tile) == t);
    bcim_tile #(.N_IN(N_IN), .COLS(COLS), .NREF(NREF), .BUS_W(BUS_W)) u_tile (
      .clk, .rst_n,
      .n_active  (CNT_W'(n_active[t])),
      .vec_size  (CNT_W'(vec_size[t])),
      .aux_x     (CNT_W'(cfg.aux_x)),
      .slot_bits (CNT_W'(cfg.slot_bits)),
      .nslots    (CNT_W'(cfg.nslots)),
      .prog_en   (prog_en && (32'(prog_tile) == t)),
      .prog_row, .prog_data,
      .clear     (sel_t && in_kind == IN_CLEAR),
      .wr_en     (sel_t && in_kind == IN_WORD),
      .wr_addr   (in_addr),
      .wr_data   (in_data),
      .col_en    (sel_t && in_kind == IN_COL),
      .col_data  (in_data),
      .col_last  (in_last),
      .shifted   (col_shifted[t]),
      .rd_en, .cmp_en, .sel,
      .res       (res[t])
    );
  end

  for (genvar c = 0; c < COLS; c++) begin : g_casc
    logic [NTILES-1:0][NREF-1:0] res_c;
    for (genvar t = 0; t < NTILES; t++) begin : g_r
      assign res_c[t] = res[t][c];
    end
    cascade_unit #(.NPARTS(NTILES), .NREF(NREF)) u_casc (
      .fn(cfg.fn), .nparts(NP_W'(cfg.nparts)), .res(res_c), .act(act_c[c])
    );
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      act_valid <= 1'b0;
      act       <= '0;
    end else begin
      act_valid <= casc_en;
      if (casc_en) act <= act_c;
    end
  end

  act_packer #(.COLS(COLS), .BUS_W(BUS_W)) u_pack (
    .clk, .rst_n, .load(casc_en), .act(act_c), .nbits(NB_W'(cfg.ncols_out)),
    .busy(pk_busy), .out_valid, .out_ready, .out_data, .out_last
  );

  // A weight vector must not span more parts than there are tiles.
  assert property (@(posedge clk) disable iff (!rst_n)
                   start |-> (32'(cfg.nparts) >= 1 && 32'(cfg.nparts) <= NTILES));
endmodule
