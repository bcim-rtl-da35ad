// xnor_crossbar -- behavioural model of the 1T1R memristor crossbar.
//
// This is a behavioural model of an analog part, not logic that would be
// synthesised as such.  Each cell is a bit: 1 = low-resistance state (LRS,
// conducts), 0 = high-resistance state (HRS).  A read applies the wordlines
// and each bitline sinks the current of its conducting cells; the model
// represents that current as the integer count of active LRS cells on the
// bitline (ideal devices: no variation, no IR drop).  With the differential
// cell pair and wordline driver of wl_driver this count is
// popcount(XNOR(x, w)) over the column.  A position whose two cells are both
// HRS never contributes (used for the spare window column).
//
// Interface: prog_en writes physical row prog_row with prog_data (one row per
// cycle; memristors are non-volatile and have no reset).  rd_en samples the
// bitlines: bl_level is valid the cycle after rd_en and holds until the next
// read.  Timing and programming interface are this design's choices.
module xnor_crossbar #(
  parameter int unsigned ROWS  = 1024,
  parameter int unsigned COLS  = 512,
  parameter int unsigned CNT_W = 10
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       prog_en,
  input  logic [$clog2(ROWS)-1:0]    prog_row,
  input  logic [COLS-1:0]            prog_data,
  input  logic                       rd_en,
  input  logic [ROWS-1:0]            wl,
  output logic [COLS-1:0][CNT_W-1:0] bl_level
);
  // Column-major storage: colv[c][r] is the cell of row r on bitline c.
  logic [COLS-1:0][ROWS-1:0] colv;

  always_ff @(posedge clk) begin
    if (prog_en)
      for (int unsigned c = 0; c < COLS; c++) colv[c][prog_row] <= prog_data[c];
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      bl_level <= '0;
    end else if (rd_en) begin
      for (int unsigned c = 0; c < COLS; c++)
        bl_level[c] <= CNT_W'($countones(wl & colv[c]));
    end
  end
endmodule
